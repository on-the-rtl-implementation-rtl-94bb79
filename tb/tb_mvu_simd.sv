// tb_mvu_simd -- exhaustive check of the three SIMD lane circuits.
// For every input/weight pair the XNOR lane must give 1 exactly when the
// bits agree, the binary-weight lane +x for w=1 and -x for w=0, and the
// standard lane the signed product, all worked out here from the operands.
module tb_mvu_simd;
  import mvu_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] x;
  logic [3:0] w;
  logic signed [1:0] p_xnor;
  logic signed [4:0] p_bin;
  logic signed [7:0] p_std;

  mvu_simd #(.SIMD_TYPE(SIMD_XNOR),   .IN_W(1), .W_W(1)) u_x (.in_x(x[0:0]), .in_w(w[0:0]), .prod(p_xnor));
  mvu_simd #(.SIMD_TYPE(SIMD_BINWGT), .IN_W(4), .W_W(1)) u_b (.in_x(x), .in_w(w[0:0]), .prod(p_bin));
  mvu_simd #(.SIMD_TYPE(SIMD_STD),    .IN_W(4), .W_W(4)) u_s (.in_x(x), .in_w(w), .prod(p_std));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin
        int xs, ws, exp_x, exp_b, exp_s;
        x = 4'(i); w = 4'(j);
        #1;
        xs = (i >= 8) ? i - 16 : i;
        ws = (j >= 8) ? j - 16 : j;
        exp_x = ((i % 2) == (j % 2)) ? 1 : 0;
        exp_b = (j % 2 == 1) ? xs : -xs;
        exp_s = xs * ws;
        checks += 3;
        if (int'(p_xnor) != exp_x) begin failures++; $display("XNOR x=%0d w=%0d got %0d", i, j, p_xnor); end
        if (int'(p_bin)  != exp_b) begin failures++; $display("BIN x=%0d w=%0d got %0d exp %0d", xs, j, p_bin, exp_b); end
        if (int'(p_std)  != exp_s) begin failures++; $display("STD x=%0d w=%0d got %0d exp %0d", xs, ws, p_std, exp_s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
