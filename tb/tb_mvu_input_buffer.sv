// tb_mvu_input_buffer -- fills the buffer with random words, reads every
// location back several times (as the neuron fold does), then overwrites
// part of it and checks that only the written words changed.
module tb_mvu_input_buffer;
  localparam int W = 16, D = 12;
  int checks = 0, failures = 0;
  logic aclk = 0, we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];

  mvu_input_buffer #(.WIDTH(W), .DEPTH(D)) dut (.aclk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 aclk = ~aclk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(int a, logic [W-1:0] d);
    @(negedge aclk);
    we = 1; waddr = 4'(a); wdata = d;
    model[a] = d;
    @(negedge aclk);
    we = 0;
  endtask

  task automatic check_all();
    for (int a = 0; a < D; a++) begin
      raddr = 4'(a);
      #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d got %h exp %h", a, rdata, model[a]); end
    end
  endtask

  initial begin
    for (int a = 0; a < D; a++) write_word(a, W'($urandom));
    repeat (3) check_all();
    for (int a = 0; a < D; a += 3) write_word(a, W'($urandom));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
