// tb_mvu_batch -- end-to-end test of the MVU batch unit for all three SIMD
// lane types: a 8 x 16 layer (K_d = 2, I_c = 4, O_c = 8) folded onto PE = 2
// and SIMD = 4, so SF = 4 words per vector, NF = 4 passes and D_MEM = 16
// weight words per PE. Each harness checks every output, the cycle count
// of a stall-free run, and counts the design's mechanisms; this module adds
// up the counts over the three units and fails any mechanism that never
// happened. Two further units cover the extremes of folding: fully
// parallel (2 x 16 on PE = 2, SIMD = 16, one cycle per vector) and fully
// serial (2 x 4 on PE = SIMD = 1, eight cycles per vector).
module tb_mvu_batch;
  import mvu_pkg::*;
  logic aclk = 0, aresetn = 0;
  int checks = 0, failures = 0;
  logic done_s, done_b, done_x;
  int ch_s, ch_b, ch_x, f_s, f_b, f_x;
  int ev_s [10], ev_b [10], ev_x [10];
  string ev_name [10] = '{"Idle->Write", "Idle->Read", "Write->Idle", "Write->Read", "Read->Idle",
                          "Read->Write", "input buffer reuse", "back-pressure",
                          "compute into FIFO under back-pressure", "output FIFO full"};

  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .IN_W(4), .W_W(4), .WEIGHT_FILE("tb/w_small_std.hex")) h_s (
    .aclk, .aresetn, .done(done_s), .checks(ch_s), .failures(f_s), .ev(ev_s));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_BINWGT), .IN_W(4), .W_W(1), .WEIGHT_FILE("tb/w_small_bin.hex")) h_b (
    .aclk, .aresetn, .done(done_b), .checks(ch_b), .failures(f_b), .ev(ev_b));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_XNOR), .IN_W(1), .W_W(1), .WEIGHT_FILE("tb/w_small_bin.hex")) h_x (
    .aclk, .aresetn, .done(done_x), .checks(ch_x), .failures(f_x), .ev(ev_x));

  // The two extremes of folding: fully parallel (one row per PE, all
  // columns at once: SF = NF = D_MEM = 1) and fully serial (PE = SIMD = 1).
  logic done_p, done_r;
  int ch_p, ch_r, f_p, f_r;
  int ev_p [10], ev_r [10];
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(1), .IFM_CH(16), .OFM_CH(2), .PE(2), .SIMD(16),
                         .WEIGHT_FILE("tb/w_parallel.hex")) h_p (
    .aclk, .aresetn, .done(done_p), .checks(ch_p), .failures(f_p), .ev(ev_p));
  tb_mvu_batch_harness #(.SIMD_TYPE(SIMD_STD), .KDIM(1), .IFM_CH(4), .OFM_CH(2), .PE(1), .SIMD(1),
                         .WEIGHT_FILE("tb/w_serial.hex")) h_r (
    .aclk, .aresetn, .done(done_r), .checks(ch_r), .failures(f_r), .ev(ev_r));

  always #5 aclk = ~aclk;

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ch_s + ch_b + ch_x, f_s + f_b + f_x + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge aclk);
    aresetn = 1;
    wait (done_s && done_b && done_x && done_p && done_r);
    checks = ch_s + ch_b + ch_x + ch_p + ch_r;
    failures = f_s + f_b + f_x + f_p + f_r;
    for (int i = 0; i < 10; i++) begin
      int n;
      n = ev_s[i] + ev_b[i] + ev_x[i] + ev_p[i] + ev_r[i];
      $display("%-40s %0d", ev_name[i], n);
      checks++;
      if (n == 0) begin failures++; $display("mechanism never exercised: %s", ev_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
