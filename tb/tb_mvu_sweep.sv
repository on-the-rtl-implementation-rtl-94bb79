// tb_mvu_sweep -- one build from each of the six parameter sweeps used to
// evaluate the MVU (4 x 4 kernels, 64 input and 64 output channels unless
// swept). Each sweep varies one parameter; this test bench takes one point
// of each and rotates through the three lane types:
//   A: input channels swept, PE = SIMD = 2; here 8 channels, XNOR lanes
//      (1-bit): 64 x 128 matrix, SF = 64, NF = 32, D_MEM = 2048;
//   B: input map size swept, PE = SIMD = 32; binary weights, 4-bit inputs:
//      64 x 1024, SF = 32, NF = 2, D_MEM = 64 (the map size only sets how
//      many vectors arrive);
//   C: output channels swept, PE = SIMD = 2; here 16 channels, 4-bit:
//      16 x 1024, SF = 512, NF = 8, D_MEM = 4096;
//   D: kernel size swept, PE = SIMD = 32; here 3 x 3, 4-bit:
//      64 x 576, SF = 18, NF = 2, D_MEM = 36;
//   E: PE swept with SIMD = 64; here PE = 16, XNOR: 64 x 1024, SF = 16,
//      NF = 4, D_MEM = 64;
//   F: SIMD swept with PE = 64; here SIMD = 16, 4-bit: 64 x 1024, SF = 64,
//      NF = 1, D_MEM = 64.
// The harness writes the weights W[r][c] = (3r + 5c + r*c + 1) mod 2^W_W
// into the memories itself, checks every output, checks that the stall-free
// vectors cost D_MEM cycles each, then repeats under random stalls.
module tb_mvu_sweep;
  import mvu_pkg::*;
  localparam int N = 6;
  logic aclk = 0, aresetn = 0;
  int checks = 0, failures = 0;
  logic done [N];
  int ch [N], f [N];
  int ev [N][10];

  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_XNOR), .KDIM(4), .IFM_CH(8), .OFM_CH(64), .PE(2), .SIMD(2),
                         .IN_W(1), .W_W(1), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(3), .NV_FAST(1), .LOAD_WEIGHTS(1'b1)) h_a (
    .aclk, .aresetn, .done(done[0]), .checks(ch[0]), .failures(f[0]), .ev(ev[0]));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_BINWGT), .KDIM(4), .IFM_CH(64), .OFM_CH(64), .PE(32), .SIMD(32),
                         .IN_W(4), .W_W(1), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(12), .NV_FAST(4), .LOAD_WEIGHTS(1'b1)) h_b (
    .aclk, .aresetn, .done(done[1]), .checks(ch[1]), .failures(f[1]), .ev(ev[1]));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(4), .IFM_CH(64), .OFM_CH(16), .PE(2), .SIMD(2),
                         .IN_W(4), .W_W(4), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(2), .NV_FAST(1), .LOAD_WEIGHTS(1'b1)) h_c (
    .aclk, .aresetn, .done(done[2]), .checks(ch[2]), .failures(f[2]), .ev(ev[2]));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(3), .IFM_CH(64), .OFM_CH(64), .PE(32), .SIMD(32),
                         .IN_W(4), .W_W(4), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(20), .NV_FAST(5), .LOAD_WEIGHTS(1'b1)) h_d (
    .aclk, .aresetn, .done(done[3]), .checks(ch[3]), .failures(f[3]), .ev(ev[3]));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_XNOR), .KDIM(4), .IFM_CH(64), .OFM_CH(64), .PE(16), .SIMD(64),
                         .IN_W(1), .W_W(1), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(12), .NV_FAST(4), .LOAD_WEIGHTS(1'b1)) h_e (
    .aclk, .aresetn, .done(done[4]), .checks(ch[4]), .failures(f[4]), .ev(ev[4]));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(4), .IFM_CH(64), .OFM_CH(64), .PE(64), .SIMD(16),
                         .IN_W(4), .W_W(4), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(12), .NV_FAST(4), .LOAD_WEIGHTS(1'b1)) h_f (
    .aclk, .aresetn, .done(done[5]), .checks(ch[5]), .failures(f[5]), .ev(ev[5]));

  always #5 aclk = ~aclk;

  function automatic int sum(input int a [N]);
    int s;
    s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(ch), sum(f) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge aclk);
    aresetn = 1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    checks = sum(ch);
    failures = sum(f);
    // Every folded build reuses its buffered input over NF > 1 passes.
    foreach (ev[i]) if (i != 5) begin
      checks++;
      if (ev[i][6] == 0) begin failures++; $display("build %0d: buffer never reused", i); end
    end
    foreach (ch[i]) $display("build %0d: %0d checks, %0d failures", i, ch[i], f[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
