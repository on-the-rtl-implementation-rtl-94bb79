// tb_mvu_nid -- layers of the network-intrusion-detection MLP evaluated in
// the paper, each as its own MVU batch unit with 2-bit signed inputs and
// weights and standard lanes:
//   layers 1 and 2 (same shape): 64 inputs, 64 outputs, PE = 16, SIMD = 32,
//     so SF = 2, NF = 4 and D_MEM = 8 cycles per input vector;
//   layer 3: 64 inputs, 1 output, PE = 1, SIMD = 8, so SF = 8, NF = 1,
//     D_MEM = 8.
//   layer 0: 600 inputs, 64 outputs, PE = 64, SIMD = 50, so SF = 12,
//     NF = 1, D_MEM = 12. Its weight image (76,800 bits) is written into
//     the memories by the harness rather than read from a file.
// Weights follow W[r][c] = (3r + 5c + r*c + 1) mod 4. Each harness checks
// every output and that a stall-free run costs D_MEM cycles per vector,
// then repeats under random stalls.
module tb_mvu_nid;
  import mvu_pkg::*;
  logic aclk = 0, aresetn = 0;
  int checks = 0, failures = 0;
  logic done_a, done_b;
  int ch_a, ch_b, f_a, f_b;
  int ev_a [10], ev_b [10];

  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(1), .IFM_CH(64), .OFM_CH(64), .PE(16), .SIMD(32),
                         .IN_W(2), .W_W(2), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_nid_l12.hex"), .NV(60), .NV_FAST(10)) h_l12 (
    .aclk, .aresetn, .done(done_a), .checks(ch_a), .failures(f_a), .ev(ev_a));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(1), .IFM_CH(64), .OFM_CH(1), .PE(1), .SIMD(8),
                         .IN_W(2), .W_W(2), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_nid_l3.hex"), .NV(60), .NV_FAST(10)) h_l3 (
    .aclk, .aresetn, .done(done_b), .checks(ch_b), .failures(f_b), .ev(ev_b));

  logic done_c;
  int ch_c, f_c;
  int ev_c [10];
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(1), .IFM_CH(600), .OFM_CH(64), .PE(64), .SIMD(50),
                         .IN_W(2), .W_W(2), .OUT_W(16), .OUT_FIFO_DEPTH(4),
                         .WEIGHT_FILE("tb/w_zero.hex"), .NV(40), .NV_FAST(10),
                         .LOAD_WEIGHTS(1'b1)) h_l0 (
    .aclk, .aresetn, .done(done_c), .checks(ch_c), .failures(f_c), .ev(ev_c));

  always #5 aclk = ~aclk;

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b + ch_c, f_a + f_b + f_c + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge aclk);
    aresetn = 1;
    wait (done_a && done_b && done_c);
    checks = ch_a + ch_b + ch_c;
    failures = f_a + f_b + f_c;
    // Layers 1/2 reuse the buffered input over NF = 4 passes.
    checks++;
    if (ev_a[6] == 0) begin failures++; $display("layer 1/2: buffer never reused"); end
    $display("layer 0: %0d checks, layer 1/2: %0d checks, layer 3: %0d checks", ch_c, ch_a, ch_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
