// tb_mvu_weight_mem -- loads the weight image of a small layer (16 x 8
// matrix, PE = 2, SIMD = 4, 4-bit weights) into the memory of PE 1 and of
// PE 0 and reads every address in random order. The expected word is built
// from the image's defining formula W[r][c] = (3r + 5c + r*c + 1) mod 16,
// row r = nf*PE + p, column c = sf*SIMD + s, and must appear one clock edge
// after the address.
module tb_mvu_weight_mem;
  localparam int PE = 2, SIMD = 4, WW = 4, SF = 4, NF = 4, D = 16;
  int checks = 0, failures = 0;
  logic aclk = 0;
  logic [3:0] raddr = 0;
  logic [15:0] rdata0, rdata1;

  mvu_weight_mem #(.WIDTH(SIMD*WW), .DEPTH(D), .PE_IDX(0), .NUM_PE(PE),
                   .INIT_FILE("tb/w_small_std.hex")) u0 (.aclk, .raddr, .rdata(rdata0));
  mvu_weight_mem #(.WIDTH(SIMD*WW), .DEPTH(D), .PE_IDX(1), .NUM_PE(PE),
                   .INIT_FILE("tb/w_small_std.hex")) u1 (.aclk, .raddr, .rdata(rdata1));

  always #5 aclk = ~aclk;

  function automatic logic [15:0] expected(int p, int a);
    logic [15:0] w = '0;
    int nf = a / SF, sf = a % SF;
    for (int s = 0; s < SIMD; s++) begin
      int r = nf * PE + p, c = sf * SIMD + s;
      w[s*WW +: WW] = 4'((3*r + 5*c + r*c + 1) % 16);
    end
    return w;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 64; k++) begin
      int a = (k < D) ? k : int'($urandom % D);
      @(negedge aclk);
      raddr = 4'(a);
      @(negedge aclk);
      checks += 2;
      if (rdata0 !== expected(0, a)) begin failures++; $display("PE0 addr %0d got %h exp %h", a, rdata0, expected(0, a)); end
      if (rdata1 !== expected(1, a)) begin failures++; $display("PE1 addr %0d got %h exp %h", a, rdata1, expected(1, a)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
