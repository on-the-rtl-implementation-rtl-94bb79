// tb_mvu_pe -- checks a PE of each lane type (SIMD = 4) over random rows.
// Each row is SF = 3 words; the PE output on the row's last word must equal
// the dot product of the row computed here, with the lane arithmetic
// (XNOR/+-1/signed multiply) written out independently. Idle cycles with
// en low are mixed in and must not disturb the accumulation.
module tb_mvu_pe;
  import mvu_pkg::*;
  localparam int S = 4, SF = 3;
  int checks = 0, failures = 0;
  logic aclk = 0, aresetn = 0, en = 0, first = 0;
  logic [S*4-1:0] vec4, wgt4;
  logic [S-1:0]   vec1, wgt1;
  logic signed [15:0] out_s, out_b, out_x;

  mvu_pe #(.SIMD_TYPE(SIMD_STD),    .SIMD(S), .IN_W(4), .W_W(4), .OUT_W(16)) u_s (
    .aclk, .aresetn, .en, .first, .in_vec(vec4), .in_wgt(wgt4), .out(out_s));
  mvu_pe #(.SIMD_TYPE(SIMD_BINWGT), .SIMD(S), .IN_W(4), .W_W(1), .OUT_W(16)) u_b (
    .aclk, .aresetn, .en, .first, .in_vec(vec4), .in_wgt(wgt1), .out(out_b));
  mvu_pe #(.SIMD_TYPE(SIMD_XNOR),   .SIMD(S), .IN_W(1), .W_W(1), .OUT_W(16)) u_x (
    .aclk, .aresetn, .en, .first, .in_vec(vec1), .in_wgt(wgt1), .out(out_x));

  always #5 aclk = ~aclk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    for (int row = 0; row < 200; row++) begin
      int es, eb, ex;
      es = 0; eb = 0; ex = 0;
      for (int f = 0; f < SF; f++) begin
        while (($urandom % 4) == 0) begin
          @(negedge aclk);
          en = 0; vec4 = 16'($urandom); wgt4 = 16'($urandom); vec1 = 4'($urandom); wgt1 = 4'($urandom);
        end
        @(negedge aclk);
        en = 1; first = (f == 0);
        vec4 = 16'($urandom); wgt4 = 16'($urandom); vec1 = 4'($urandom); wgt1 = 4'($urandom);
        for (int s = 0; s < S; s++) begin
          int xv, wv;
          xv = int'(signed'(vec4[s*4 +: 4]));
          wv = int'(signed'(wgt4[s*4 +: 4]));
          es += xv * wv;
          eb += wgt1[s] ? xv : -xv;
          ex += (vec1[s] == wgt1[s]) ? 1 : 0;
        end
        if (f == SF - 1) begin
          #1;
          checks += 3;
          if (int'(out_s) != es) begin failures++; $display("row %0d STD got %0d exp %0d", row, out_s, es); end
          if (int'(out_b) != eb) begin failures++; $display("row %0d BIN got %0d exp %0d", row, out_b, eb); end
          if (int'(out_x) != ex) begin failures++; $display("row %0d XNOR got %0d exp %0d", row, out_x, ex); end
        end
      end
    end
    @(negedge aclk);
    en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
