// tb_mvu_popcount -- random and corner-case check of the pop count against
// a bit-by-bit count made in the testbench.
module tb_mvu_popcount;
  int checks = 0, failures = 0;
  logic [15:0] bits;
  logic [4:0]  count;
  logic [6:0]  bits7;
  logic [2:0]  count7;

  mvu_popcount #(.N(16)) u16 (.bits(bits), .count(count));
  mvu_popcount #(.N(7))  u7  (.bits(bits7), .count(count7));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      int e16, e7;
      bits  = (k == 0) ? 16'hffff : (k == 1) ? 16'h0 : 16'($urandom);
      bits7 = (k == 0) ? 7'h7f : 7'($urandom);
      #1;
      e16 = 0; e7 = 0;
      for (int i = 0; i < 16; i++) if (bits[i]) e16++;
      for (int i = 0; i < 7; i++)  if (bits7[i]) e7++;
      checks += 2;
      if (int'(count) != e16) begin failures++; $display("N16 %h got %0d exp %0d", bits, count, e16); end
      if (int'(count7) != e7) begin failures++; $display("N7 %h got %0d exp %0d", bits7, count7, e7); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
