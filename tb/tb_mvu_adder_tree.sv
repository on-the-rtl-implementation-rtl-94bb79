// tb_mvu_adder_tree -- random check of the adder tree for a power-of-two
// and an odd number of signed operands, including all-minimum and
// all-maximum operand sets, against a sum formed in the testbench.
module tb_mvu_adder_tree;
  int checks = 0, failures = 0;
  logic [16*8-1:0] in16;
  logic signed [12:0] sum16;
  logic [5*6-1:0] in5;
  logic signed [9:0] sum5;

  mvu_adder_tree #(.N(16), .IN_W(8)) u16 (.in_flat(in16), .sum(sum16));
  mvu_adder_tree #(.N(5),  .IN_W(6)) u5  (.in_flat(in5),  .sum(sum5));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      int e16, e5;
      for (int i = 0; i < 16; i++)
        in16[i*8 +: 8] = (k == 0) ? 8'h80 : (k == 1) ? 8'h7f : 8'($urandom);
      for (int i = 0; i < 5; i++)
        in5[i*6 +: 6] = (k == 0) ? 6'h20 : (k == 1) ? 6'h1f : 6'($urandom);
      #1;
      e16 = 0; e5 = 0;
      for (int i = 0; i < 16; i++) e16 += int'(signed'(in16[i*8 +: 8]));
      for (int i = 0; i < 5; i++)  e5  += int'(signed'(in5[i*6 +: 6]));
      checks += 2;
      if (int'(sum16) != e16) begin failures++; $display("N16 got %0d exp %0d", sum16, e16); end
      if (int'(sum5) != e5)   begin failures++; $display("N5 got %0d exp %0d", sum5, e5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
