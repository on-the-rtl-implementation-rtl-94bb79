// tb_mvu_stream -- the stream unit on the 4 x 4 example (PE = 2, SIMD = 2,
// so SF = 2 words per vector and NF = 2 passes), 4-bit signed standard
// lanes. The weight stream is modelled here: a random matrix, served one
// word per PE in fold order, with random gaps in wmem_valid. Inputs arrive
// with random gaps and the consumer applies random back-pressure. Every
// output word is compared with W*x computed in the testbench. A first
// phase without any stall must finish V vectors in V*SF*NF cycles
// (initiation interval one).
module tb_mvu_stream;
  import mvu_pkg::*;
  localparam int MW = 4, MH = 4, PE = 2, SIMD = 2, SF = 2, NF = 2, D = 4;
  localparam int NV = 60, NV_FAST = 6;
  int checks = 0, failures = 0;
  logic aclk = 0, aresetn = 0;
  logic in_valid = 0, out_ready, wmem_valid = 0, wmem_ready, out_valid, in_ready = 0;
  logic [SIMD*4-1:0] in_data = 0;
  logic [SIMD*4-1:0] wmem_out [PE];
  logic [PE*16-1:0] out_data;
  int W [MH][MW];
  int X [NV][MW];
  int waddr = 0, in_idx = 0, out_idx = 0;
  bit stalls = 0;
  int t_first = -1, t_last = -1, cycle = 0;

  mvu_stream #(.SIMD_TYPE(SIMD_STD), .MATRIXW(MW), .MATRIXH(MH), .PE(PE), .SIMD(SIMD),
               .IN_W(4), .W_W(4), .OUT_W(16), .OUT_FIFO_DEPTH(2)) dut (
    .aclk, .aresetn, .in_valid, .in_data, .out_ready, .wmem_valid, .wmem_out, .wmem_ready,
    .out_valid, .out_data, .in_ready);

  always #5 aclk = ~aclk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired in=%0d out=%0d waddr=%0d st=%0d sf=%0d nf=%0d fifo_full=%0d ov=%0d ir=%0d iv=%0d wv=%0d", in_idx, out_idx, waddr, dut.state, dut.sf, dut.u_ctrl.nf, dut.fifo_full, out_valid, in_ready, in_valid, wmem_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Weight stream: word waddr = nf*SF + sf, PE p gets row nf*PE+p.
  always_comb begin
    for (int p = 0; p < PE; p++)
      for (int s = 0; s < SIMD; s++)
        wmem_out[p][s*4 +: 4] = 4'(W[(waddr / SF) * PE + p][(waddr % SF) * SIMD + s]);
  end
  always_comb begin
    in_data = '0;
    if (in_idx < NV * SF)
      for (int s = 0; s < SIMD; s++) in_data[s*4 +: 4] = 4'(X[in_idx / SF][(in_idx % SF) * SIMD + s]);
  end

  always @(posedge aclk) begin
    cycle <= cycle + 1;
    if (aresetn) begin
      if (wmem_valid && wmem_ready) waddr <= (waddr + 1) % D;
      if (in_valid && out_ready) begin
        if (t_first < 0) t_first <= cycle;
        in_idx <= in_idx + 1;
      end
      if (out_valid && in_ready) begin
        int v, nf;
        v = out_idx / NF; nf = out_idx % NF;
        for (int p = 0; p < PE; p++) begin
          int e;
          logic signed [15:0] o;
          e = 0;
          o = out_data[p*16 +: 16];
          for (int c = 0; c < MW; c++) e += W[nf*PE + p][c] * X[v][c];
          checks++;
          if (int'(o) != e) begin
            failures++;
            $display("vector %0d row %0d got %0d exp %0d", v, nf*PE+p, o, e);
          end
        end
        out_idx <= out_idx + 1;
        if (out_idx + 1 == NV_FAST * NF) t_last <= cycle;
      end
    end
  end

  always @(negedge aclk) begin
    in_valid   <= (in_idx < NV * SF) && (!stalls || ($urandom % 3 != 0));
    in_ready   <= !stalls || ($urandom % 3 != 0);
    wmem_valid <= aresetn && (!stalls || ($urandom % 6 != 0));
  end

  initial begin
    for (int r = 0; r < MH; r++) for (int c = 0; c < MW; c++) W[r][c] = int'($urandom % 16) - 8;
    for (int v = 0; v < NV; v++) for (int c = 0; c < MW; c++) X[v][c] = int'($urandom % 16) - 8;
    repeat (2) @(posedge aclk);
    aresetn = 1;
    wait (out_idx == NV_FAST * NF);
    checks++;
    if (t_last - t_first != NV_FAST * D) begin
      failures++; $display("no-stall phase took %0d cycles, expected %0d", t_last - t_first, NV_FAST * D);
    end
    stalls = 1;
    wait (out_idx == NV * NF);
    repeat (5) @(posedge aclk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
