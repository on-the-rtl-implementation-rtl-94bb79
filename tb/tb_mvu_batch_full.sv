// tb_mvu_batch_full -- the MVU batch unit at its default size (I_c = 16,
// K_d = 4, O_c = 16, PE = SIMD = 16, 4-bit signed inputs and weights,
// standard lanes, weights from rtl/mvu_weights.hex) processing one whole
// layer: a 16 x 16 input map convolved with 4 x 4 kernels at stride one
// gives 13 x 13 = 169 output positions, i.e. 169 input vectors of 256
// elements. The image holds W[r][c] = (3r + 5c + r*c + 1) mod 16 read as a
// signed 4-bit number; the reference is computed from that formula.
// Checks: every output channel of every vector; the first output appears
// SF = 16 cycles after the first input word is taken; the stall-free layer
// takes 169 * 16 cycles (one compute cycle per clock). A further 20
// vectors run under random input gaps and back-pressure.
module tb_mvu_batch_full;
  localparam int MW = 256, MH = 16, PE = 16, SIMD = 16, SF = 16, OUT_W = 16;
  localparam int NV_LAYER = 169, NV = NV_LAYER + 20;
  int checks = 0, failures = 0;
  logic aclk = 0, aresetn = 0;
  logic in_valid = 0, out_ready, out_valid, in_ready = 0;
  logic [SIMD*4-1:0]   in_data;
  logic [PE*OUT_W-1:0] out_data;
  int X [NV][MW];
  int in_idx = 0, out_idx = 0, cycle = 0, t_first = -1, t_out1 = -1, t_layer = -1;
  bit stalls = 0;

  mvu_batch dut (.aclk, .aresetn, .in_valid, .in_data, .out_ready, .out_valid, .out_data, .in_ready);

  always #5 aclk = ~aclk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wgt(int r, int c);
    int b = (3*r + 5*c + r*c + 1) % 16;
    return (b >= 8) ? b - 16 : b;
  endfunction

  always_comb begin
    in_data = '0;
    if (in_idx < NV * SF)
      for (int s = 0; s < SIMD; s++) in_data[s*4 +: 4] = 4'(X[in_idx / SF][(in_idx % SF) * SIMD + s]);
  end

  always @(posedge aclk) begin
    cycle <= cycle + 1;
    if (aresetn) begin
      if (in_valid && out_ready) begin
        if (t_first < 0) t_first <= cycle;
        in_idx <= in_idx + 1;
      end
      if (out_valid && t_out1 < 0) t_out1 <= cycle;
      if (out_valid && in_ready) begin
        for (int p = 0; p < PE; p++) begin
          int e;
          logic signed [OUT_W-1:0] o;
          e = 0;
          o = out_data[p*OUT_W +: OUT_W];
          for (int c = 0; c < MW; c++) e += wgt(p, c) * X[out_idx][c];
          checks++;
          if (int'(o) != e) begin
            failures++;
            $display("vector %0d channel %0d got %0d exp %0d", out_idx, p, o, e);
          end
        end
        out_idx <= out_idx + 1;
        if (out_idx + 1 == NV_LAYER) t_layer <= cycle;
      end
    end
  end

  always @(negedge aclk) begin
    in_valid <= (in_idx < NV * SF) && (!stalls || ($urandom % 3 != 0));
    in_ready <= !stalls || ($urandom % 5 < 2);
  end

  initial begin
    for (int v = 0; v < NV; v++) for (int c = 0; c < MW; c++) X[v][c] = int'($urandom % 16) - 8;
    repeat (3) @(posedge aclk);
    aresetn = 1;
    wait (out_idx == NV_LAYER);
    checks += 2;
    if (t_out1 - t_first != SF) begin
      failures++; $display("first output after %0d cycles, expected %0d", t_out1 - t_first, SF);
    end
    if (t_layer - t_first != NV_LAYER * SF) begin
      failures++; $display("layer took %0d cycles, expected %0d", t_layer - t_first, NV_LAYER * SF);
    end
    $display("layer of %0d vectors: %0d cycles", NV_LAYER, t_layer - t_first);
    stalls = 1;
    wait (out_idx == NV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
