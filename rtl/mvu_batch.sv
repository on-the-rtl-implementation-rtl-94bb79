// mvu_batch -- matrix vector unit (MVU), batch unit: the top of the design.
//
// One fully connected or (im2col-lowered) convolutional layer of a quantised
// neural network: each input vector of K_d^2*I_c elements is multiplied by a
// fixed O_c x K_d^2*I_c weight matrix, giving O_c outputs. The batch unit
// holds one weight memory per PE, a control unit that streams weight words
// out of them, and the matrix vector stream unit that does the arithmetic,
// as in the paper's block diagram.
//
// Defaults are the paper's larger design, configuration #0 of its
// larger-design table: I_c = 16, K_d = 4, O_c = 16, 4-bit inputs and
// weights, PE = 16, SIMD = 16, standard (multiplier) lanes. That gives a
// 16 x 256 matrix, SF = 16 input words per vector, NF = 1, D_MEM = 16.
// OUT_W = 16 is this design's choice: it holds any sum of 256 products of
// two 4-bit signed numbers.
//
// Interface: aclk, aresetn (asynchronous, active low) and two AXI-Stream
// ports named as in the paper's figure --
//   slave : in_valid, in_data[SIMD*IN_W], out_ready (TREADY to upstream)
//   master: out_valid, out_data[PE*OUT_W], in_ready (TREADY from downstream)
// Element s of input word sf is vector element sf*SIMD+s; PE p's field of
// output word nf is output channel nf*PE+p (signed).
// Throughput: one compute cycle per clock whenever data and space allow,
// D_MEM = SF*NF cycles per vector; the first output appears SF cycles
// after the first input word is taken.
module mvu_batch
  import mvu_pkg::*;
#(
  parameter simd_type_e SIMD_TYPE = SIMD_STD,
  parameter int unsigned KDIM    = 4,
  parameter int unsigned IFM_CH  = 16,
  parameter int unsigned OFM_CH  = 16,
  parameter int unsigned PE      = 16,
  parameter int unsigned SIMD    = 16,
  parameter int unsigned IN_W    = 4,
  parameter int unsigned W_W     = 4,
  parameter int unsigned OUT_W   = 16,
  parameter int unsigned OUT_FIFO_DEPTH = 4,
  parameter string       WEIGHT_FILE    = "rtl/mvu_weights.hex"
) (
  input  logic                 aclk,
  input  logic                 aresetn,
  input  logic                 in_valid,
  input  logic [SIMD*IN_W-1:0] in_data,
  output logic                 out_ready,
  output logic                 out_valid,
  output logic [PE*OUT_W-1:0]  out_data,
  input  logic                 in_ready
);

  localparam int unsigned MATRIXW = KDIM * KDIM * IFM_CH;
  localparam int unsigned MATRIXH = OFM_CH;
  localparam int unsigned D_MEM   = (MATRIXW * MATRIXH) / (SIMD * PE);
  localparam int unsigned AW      = (D_MEM > 1) ? $clog2(D_MEM) : 1;

  logic                wmem_valid, wmem_ready;
  logic [AW-1:0]       wmem_addr;
  logic [SIMD*W_W-1:0] wmem_out [PE];

  mvu_weight_ctrl #(.DEPTH(D_MEM)) u_wctrl (
    .aclk, .aresetn, .wmem_ready, .wmem_valid, .wmem_addr);

  for (genvar p = 0; p < PE; p++) begin : g_wmem
    mvu_weight_mem #(.WIDTH(SIMD*W_W), .DEPTH(D_MEM), .PE_IDX(p), .NUM_PE(PE),
                     .INIT_FILE(WEIGHT_FILE)) u_wmem (
      .aclk, .raddr(wmem_addr), .rdata(wmem_out[p]));
  end

  mvu_stream #(.SIMD_TYPE(SIMD_TYPE), .MATRIXW(MATRIXW), .MATRIXH(MATRIXH), .PE(PE),
               .SIMD(SIMD), .IN_W(IN_W), .W_W(W_W), .OUT_W(OUT_W),
               .OUT_FIFO_DEPTH(OUT_FIFO_DEPTH)) u_stream (
    .aclk, .aresetn, .in_valid, .in_data, .out_ready, .wmem_valid, .wmem_out,
    .wmem_ready, .out_valid, .out_data, .in_ready);

endmodule
