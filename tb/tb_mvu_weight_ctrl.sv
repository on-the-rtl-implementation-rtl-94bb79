// tb_mvu_weight_ctrl -- connects the weight control unit (DEPTH = 5) to a
// memory model whose word at address a is a itself, read with one cycle of
// latency, and consumes words at random. The consumed sequence must be
// 0, 1, 2, 3, 4, 0, ... with no word skipped or repeated, wmem_valid must
// rise one cycle after reset and stay high, and with wmem_ready held high a
// new word must be delivered every cycle.
module tb_mvu_weight_ctrl;
  localparam int D = 5;
  int checks = 0, failures = 0, taken = 0;
  logic aclk = 0, aresetn = 0, wmem_ready = 0, wmem_valid;
  logic [2:0] wmem_addr, mem_out;

  mvu_weight_ctrl #(.DEPTH(D)) dut (.aclk, .aresetn, .wmem_ready, .wmem_valid, .wmem_addr);

  always #5 aclk = ~aclk;
  always @(posedge aclk) mem_out <= wmem_addr;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge aclk);
    aresetn = 1;
    @(negedge aclk);
    checks++;
    if (wmem_valid !== 1'b1) begin failures++; $display("valid not raised after reset"); end
    for (int k = 0; k < 300; k++) begin
      wmem_ready = (k < 40) ? 1'b1 : ($urandom % 2 == 0);
      #1;
      checks++;
      if (!wmem_valid) begin failures++; $display("valid dropped"); end
      if (wmem_ready) begin
        checks++;
        if (int'(mem_out) != taken % D) begin failures++; $display("word %0d got %0d", taken, mem_out); end
        taken++;
      end
      @(negedge aclk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
