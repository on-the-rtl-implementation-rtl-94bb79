// mvu_stream -- matrix vector stream unit.
//
// Computes out = W * x for a MATRIXH x MATRIXW weight matrix W that arrives
// as a stream of weight words, one per PE per cycle, and input vectors x that
// arrive over AXI-Stream, SIMD elements per word. The unit holds PE
// processing elements of SIMD lanes each, the control FSM, the input buffer
// and a small output FIFO, as in the paper. The matrix is folded: SF =
// MATRIXW/SIMD words per vector (synapse fold) and NF = MATRIXH/PE groups of
// rows (neuron fold); each vector costs SF*NF compute cycles and yields NF
// output words.
//
// Order of work: for nf = 0..NF-1, for sf = 0..SF-1, PE p multiplies input
// word sf by its weight word (row nf*PE+p, columns sf*SIMD..sf*SIMD+SIMD-1)
// and accumulates. After sf = SF-1 the PEs hold rows nf*PE..nf*PE+PE-1 and
// these are written into the output FIFO as one word.
//
// Interface (names as in the paper's block diagram):
//   in_valid, in_data[SIMD*IN_W], out_ready : AXI-Stream slave; out_ready is
//       the TREADY this unit gives upstream. Element s of a word is at
//       [s*IN_W +: IN_W] and is vector element sf*SIMD+s.
//   out_valid, out_data[PE*OUT_W], in_ready : AXI-Stream master; in_ready is
//       the TREADY of the next layer. Output of PE p (row nf*PE+p) is at
//       [p*OUT_W +: OUT_W], signed.
//   wmem_valid, wmem_out, wmem_ready : weight stream from the batch unit;
//       wmem_out[p] holds SIMD weights for PE p, weight s at [s*W_W +: W_W].
//       A word is consumed in every cycle with wmem_valid && wmem_ready.
// Timing: an output word is visible on out_data the cycle after the compute
// cycle that finished it.
module mvu_stream
  import mvu_pkg::*;
#(
  parameter simd_type_e SIMD_TYPE = SIMD_STD,
  parameter int unsigned MATRIXW  = 256,
  parameter int unsigned MATRIXH  = 16,
  parameter int unsigned PE       = 16,
  parameter int unsigned SIMD     = 16,
  parameter int unsigned IN_W     = 4,
  parameter int unsigned W_W      = 4,
  parameter int unsigned OUT_W    = 16,
  parameter int unsigned OUT_FIFO_DEPTH = 4
) (
  input  logic                    aclk,
  input  logic                    aresetn,
  input  logic                    in_valid,
  input  logic [SIMD*IN_W-1:0]    in_data,
  output logic                    out_ready,
  input  logic                    wmem_valid,
  input  logic [SIMD*W_W-1:0]     wmem_out [PE],
  output logic                    wmem_ready,
  output logic                    out_valid,
  output logic [PE*OUT_W-1:0]     out_data,
  input  logic                    in_ready
);

  localparam int unsigned SF   = MATRIXW / SIMD;
  localparam int unsigned NF   = MATRIXH / PE;
  localparam int unsigned SF_W = (SF > 1) ? $clog2(SF) : 1;

  logic               step, wr_step, rd_buf, first, last, comp_done, fifo_full;
  logic [SF_W-1:0]    sf;
  stream_state_e      state;
  logic [SIMD*IN_W-1:0] buf_rdata, pe_in;
  logic [PE*OUT_W-1:0]  pe_out;

  mvu_stream_ctrl #(.SF(SF), .NF(NF)) u_ctrl (
    .aclk, .aresetn, .in_valid, .out_ready, .fifo_full, .wmem_valid,
    .step, .wr_step, .rd_buf, .sf, .first, .last, .comp_done, .state);

  mvu_input_buffer #(.WIDTH(SIMD*IN_W), .DEPTH(SF)) u_inbuf (
    .aclk, .we(wr_step), .waddr(sf), .wdata(in_data), .raddr(sf), .rdata(buf_rdata));

  // The first pass uses the stream directly; later passes reuse the buffer.
  assign pe_in      = rd_buf ? buf_rdata : in_data;
  assign wmem_ready = step;

  for (genvar p = 0; p < PE; p++) begin : g_pe
    logic signed [OUT_W-1:0] acc;
    mvu_pe #(.SIMD_TYPE(SIMD_TYPE), .SIMD(SIMD), .IN_W(IN_W), .W_W(W_W), .OUT_W(OUT_W)) u_pe (
      .aclk, .aresetn, .en(step), .first, .in_vec(pe_in), .in_wgt(wmem_out[p]), .out(acc));
    assign pe_out[p*OUT_W +: OUT_W] = acc;
  end

  mvu_out_fifo #(.WIDTH(PE*OUT_W), .DEPTH(OUT_FIFO_DEPTH)) u_fifo (
    .aclk, .aresetn, .push(step && last), .din(pe_out), .full(fifo_full),
    .in_ready, .out_valid, .out_data);

  // AXI-Stream: a valid output must stay valid and stable until taken.
  a_axis_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    (out_valid && !in_ready) |=> (out_valid && $stable(out_data)));

  // Nothing is taken from upstream while the buffered vector is reused, and
  // a vector completes only on the last word of a pass.
  a_read_no_accept: assert property (@(posedge aclk) disable iff (!aresetn)
    (state == ST_READ) |-> !out_ready);
  a_done_on_last: assert property (@(posedge aclk) disable iff (!aresetn)
    comp_done |-> (step && last));

  initial begin
    assert (MATRIXW % SIMD == 0) else $error("MATRIXW must be a multiple of SIMD");
    assert (MATRIXH % PE == 0)   else $error("MATRIXH must be a multiple of PE");
  end

endmodule
