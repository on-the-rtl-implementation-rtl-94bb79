// tb_mvu_accumulator -- drives random en/first/din sequences and compares
// acc_next every cycle with a running sum kept in the testbench.
module tb_mvu_accumulator;
  int checks = 0, failures = 0;
  logic aclk = 0, aresetn = 0, en = 0, first = 0;
  logic signed [7:0]  din = 0;
  logic signed [15:0] acc_next;
  int model = 0;

  mvu_accumulator #(.IN_W(8), .ACC_W(16)) dut (.aclk, .aresetn, .en, .first, .din, .acc_next);

  always #5 aclk = ~aclk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    @(posedge aclk);
    for (int k = 0; k < 500; k++) begin
      int exp_v;
      en    <= ($urandom % 4) != 0;
      first <= (k == 0) || (($urandom % 6) == 0);
      din   <= 8'($urandom);
      #1;
      exp_v = (first ? 0 : model) + int'(din);
      checks++;
      if (int'(acc_next) != exp_v) begin
        failures++;
        $display("cycle %0d: got %0d exp %0d", k, acc_next, exp_v);
      end
      @(posedge aclk);
      if (en) model = exp_v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
