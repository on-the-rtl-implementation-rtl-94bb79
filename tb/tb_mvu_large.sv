// tb_mvu_large -- the larger-design configurations with growing input
// channel count (16 x 16 input map, 4 x 4 kernel, 16 output channels,
// 4-bit signed inputs and weights, standard lanes, PE = SIMD = 16):
//   I_c = 32: 16 x 512 matrix, SF = 32, D_MEM = 32, a whole layer of
//     13 x 13 = 169 vectors (100 without stalls, then 69 with random
//     input gaps and back-pressure);
//   I_c = 64: 16 x 1024 matrix, SF = 64, D_MEM = 64, a whole layer of 169
//     vectors (100 without stalls, then 69 with stalls). Its weight image
//     is written into the memories by the harness, not read from a file.
// (I_c = 16 is the default build, run by tb_mvu_batch_full.) Weights
// follow W[r][c] = (3r + 5c + r*c + 1) mod 16. Each harness checks every
// output and that a stall-free run costs D_MEM cycles per vector.
module tb_mvu_large;
  import mvu_pkg::*;
  logic aclk = 0, aresetn = 0;
  int checks = 0, failures = 0;
  logic done_a, done_b;
  int ch_a, ch_b, f_a, f_b;
  int ev_a [10], ev_b [10];

  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(4), .IFM_CH(32), .OFM_CH(16), .PE(16), .SIMD(16),
                         .IN_W(4), .W_W(4), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_cfg1.hex"), .NV(169), .NV_FAST(100)) h_cfg1 (
    .aclk, .aresetn, .done(done_a), .checks(ch_a), .failures(f_a), .ev(ev_a));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(4), .IFM_CH(64), .OFM_CH(16), .PE(16), .SIMD(16),
                         .IN_W(4), .W_W(4), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(169), .NV_FAST(100),
                         .LOAD_WEIGHTS(1'b1)) h_cfg2 (
    .aclk, .aresetn, .done(done_b), .checks(ch_b), .failures(f_b), .ev(ev_b));

  always #5 aclk = ~aclk;

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b, f_a + f_b + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge aclk);
    aresetn = 1;
    wait (done_a && done_b);
    checks = ch_a + ch_b;
    failures = f_a + f_b;
    $display("I_c = 32: %0d checks, I_c = 64: %0d checks", ch_a, ch_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
