// tb_mvu_batch_harness -- drives one MVU batch unit end to end and checks
// it. Used by tb_mvu_batch, once per SIMD lane type.
//
// The weight image read by the DUT follows W[r][c] = (3r + 5c + r*c + 1)
// mod 2^W_W (raw bits). With LOAD_WEIGHTS set the harness writes that image
// itself into every PE's weight memory through hierarchical references,
// one time unit after start (after the memories' own file load, well
// before reset ends), so a layer of any size needs no data file;
// WEIGHT_FILE then only has to name an existing image. The harness
// evaluates the same formula to build its reference, decoding the bits as the lane type defines them (XNOR: 0 = -1,
// 1 = +1, result = number of agreeing bits; binary weights: -x / +x;
// standard: signed product). NV random input vectors are streamed in.
// The first NV_FAST go without any stall and must take exactly
// NV_FAST*D_MEM cycles from first input to last output (initiation
// interval one); the rest see random input gaps and random back-pressure.
// Every output word is compared with the reference. The harness also
// counts how often each mechanism of the design occurred: each transition
// of the FSM, buffer reuse (steps in the reading phase), back-pressure,
// computation continuing into the output FIFO during back-pressure, the
// FIFO filling up, and input starvation.
module tb_mvu_batch_harness
  import mvu_pkg::*;
#(
  parameter simd_type_e SIMD_TYPE = SIMD_STD,
  parameter int KDIM = 2, IFM_CH = 4, OFM_CH = 8, PE = 2, SIMD = 4,
  parameter int IN_W = 4, W_W = 4, OUT_W = 16, OUT_FIFO_DEPTH = 2,
  parameter string WEIGHT_FILE = "tb/w_small_std.hex",
  parameter int NV = 40, NV_FAST = 4,
  parameter bit LOAD_WEIGHTS = 1'b0
) (
  input  logic aclk,
  input  logic aresetn,
  output logic done,
  output int   checks,
  output int   failures,
  output int   ev [10]
);
  localparam int MW = KDIM * KDIM * IFM_CH, MH = OFM_CH;
  localparam int SF = MW / SIMD, NF = MH / PE, D = SF * NF;
  // Event indices.
  localparam int E_I2W = 0, E_I2R = 1, E_W2I = 2, E_W2R = 3, E_R2I = 4, E_R2W = 5,
                 E_REUSE = 6, E_BACKP = 7, E_ABSORB = 8, E_FULL = 9;

  logic in_valid = 0, out_ready, out_valid, in_ready = 0;
  logic [SIMD*IN_W-1:0] in_data;
  logic [PE*OUT_W-1:0]  out_data;
  int X [NV][MW];
  int in_idx = 0, out_idx = 0, cycle = 0, t_first = -1, t_last = -1;
  bit stalls = 0;
  stream_state_e st_q = ST_IDLE;

  mvu_batch #(.SIMD_TYPE(SIMD_TYPE), .KDIM(KDIM), .IFM_CH(IFM_CH), .OFM_CH(OFM_CH), .PE(PE),
              .SIMD(SIMD), .IN_W(IN_W), .W_W(W_W), .OUT_W(OUT_W),
              .OUT_FIFO_DEPTH(OUT_FIFO_DEPTH), .WEIGHT_FILE(WEIGHT_FILE)) dut (
    .aclk, .aresetn, .in_valid, .in_data, .out_ready, .out_valid, .out_data, .in_ready);

  function automatic int weight_bits(int r, int c);
    return (3*r + 5*c + r*c + 1) % (1 << W_W);
  endfunction

  if (LOAD_WEIGHTS) begin : g_load
    for (genvar p = 0; p < PE; p++) begin : g_pe
      initial begin
        logic [SIMD*W_W-1:0] word;
        #1;
        for (int a = 0; a < D; a++) begin
          word = '0;
          for (int s = 0; s < SIMD; s++)
            word[s*W_W +: W_W] = W_W'(weight_bits((a / SF) * PE + p, (a % SF) * SIMD + s));
          dut.g_wmem[p].u_wmem.mem[a] = word;
        end
      end
    end
  end

  function automatic int lane(int xb, int wb);
    case (SIMD_TYPE)
      SIMD_XNOR:   return (xb == wb) ? 1 : 0;
      SIMD_BINWGT: return (wb % 2 == 1) ? ((xb >= (1 << (IN_W-1))) ? xb - (1 << IN_W) : xb)
                                        : -((xb >= (1 << (IN_W-1))) ? xb - (1 << IN_W) : xb);
      default: return ((xb >= (1 << (IN_W-1))) ? xb - (1 << IN_W) : xb) *
                      ((wb >= (1 << (W_W-1))) ? wb - (1 << W_W) : wb);
    endcase
  endfunction

  always_comb begin
    in_data = '0;
    if (in_idx < NV * SF)
      for (int s = 0; s < SIMD; s++) in_data[s*IN_W +: IN_W] = IN_W'(X[in_idx / SF][(in_idx % SF) * SIMD + s]);
  end

  always @(posedge aclk) begin
    cycle <= cycle + 1;
    if (aresetn) begin
      st_q <= dut.u_stream.state;
      case ({st_q, dut.u_stream.state})
        {ST_IDLE, ST_WRITE}:  ev[E_I2W]++;
        {ST_IDLE, ST_READ}:   ev[E_I2R]++;
        {ST_WRITE, ST_IDLE}:  ev[E_W2I]++;
        {ST_WRITE, ST_READ}:  ev[E_W2R]++;
        {ST_READ, ST_IDLE}:   ev[E_R2I]++;
        {ST_READ, ST_WRITE}:  ev[E_R2W]++;
        default: ;
      endcase
      if (dut.u_stream.step && dut.u_stream.rd_buf) ev[E_REUSE]++;
      if (out_valid && !in_ready) ev[E_BACKP]++;
      if (dut.u_stream.step && out_valid && !in_ready) ev[E_ABSORB]++;
      if (dut.u_stream.fifo_full) ev[E_FULL]++;
      if (in_valid && out_ready) begin
        if (t_first < 0) t_first <= cycle;
        in_idx <= in_idx + 1;
      end
      if (out_valid && in_ready) begin
        int v, nf;
        v = out_idx / NF; nf = out_idx % NF;
        for (int p = 0; p < PE; p++) begin
          int e;
          logic signed [OUT_W-1:0] o;
          e = 0;
          o = out_data[p*OUT_W +: OUT_W];
          for (int c = 0; c < MW; c++) e += lane(X[v][c], weight_bits(nf*PE + p, c));
          checks++;
          if (int'(o) != e) begin
            failures++;
            $display("[type %0d] vector %0d row %0d got %0d exp %0d", SIMD_TYPE, v, nf*PE+p, o, e);
          end
        end
        out_idx <= out_idx + 1;
        if (out_idx + 1 == NV_FAST * NF) t_last <= cycle;
      end
    end
  end

  always @(negedge aclk) begin
    in_valid <= (in_idx < NV * SF) && (!stalls || ($urandom % 3 != 0));
    in_ready <= !stalls || ($urandom % 5 < 2);
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    foreach (ev[i]) ev[i] = 0;
    for (int v = 0; v < NV; v++) for (int c = 0; c < MW; c++) X[v][c] = int'($urandom % (1 << IN_W));
    wait (aresetn);
    wait (out_idx == NV_FAST * NF);
    checks++;
    if (t_last - t_first != NV_FAST * D) begin
      failures++;
      $display("[type %0d] no-stall phase took %0d cycles, expected %0d", SIMD_TYPE, t_last - t_first, NV_FAST * D);
    end
    stalls = 1;
    wait (out_idx == NV * NF);
    repeat (5) @(posedge aclk);
    checks++;
    if (out_valid) begin failures++; $display("[type %0d] extra output", SIMD_TYPE); end
    done = 1;
  end
endmodule
