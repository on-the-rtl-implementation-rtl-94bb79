// mvu_pe -- processing element (hardware neuron) of the MVU.
//
// A PE holds SIMD lanes (mvu_simd) that each multiply one input element by
// one weight, a reduction of the lane outputs -- a pop count for XNOR lanes,
// an adder tree for the other two lane types -- and an accumulator that adds
// the reductions of successive cycles until a whole weight-matrix row has
// been seen. This structure is the paper's (Fig. 2 and Fig. 4).
//
// Interface: in_vec holds input element s at [s*IN_W +: IN_W], in_wgt holds
// weight s at [s*W_W +: W_W]. With en high the cycle's products are added
// into the accumulator (restarted when first is high). out is the running
// dot product including this cycle's products; it is combinational, so on a
// row's last cycle it already holds the row's result. Initiation interval
// one: a new pair of vectors can be taken every cycle.
module mvu_pe
  import mvu_pkg::*;
#(
  parameter simd_type_e SIMD_TYPE = SIMD_STD,
  parameter int unsigned SIMD  = 16,
  parameter int unsigned IN_W  = 4,
  parameter int unsigned W_W   = 4,
  parameter int unsigned OUT_W = 16
) (
  input  logic                    aclk,
  input  logic                    aresetn,
  input  logic                    en,
  input  logic                    first,
  input  logic [SIMD*IN_W-1:0]    in_vec,
  input  logic [SIMD*W_W-1:0]     in_wgt,
  output logic signed [OUT_W-1:0] out
);

  localparam int unsigned PROD_W = prod_width(SIMD_TYPE, IN_W, W_W);
  localparam int unsigned SUM_W  = (SIMD_TYPE == SIMD_XNOR) ? $clog2(SIMD + 1) + 1
                                                            : PROD_W + $clog2(SIMD) + 1;

  logic [SIMD*PROD_W-1:0]  prods;
  logic signed [SUM_W-1:0] lane_sum;

  for (genvar s = 0; s < SIMD; s++) begin : g_lane
    mvu_simd #(.SIMD_TYPE(SIMD_TYPE), .IN_W(IN_W), .W_W(W_W), .PROD_W(PROD_W)) u_simd (
      .in_x(in_vec[s*IN_W +: IN_W]),
      .in_w(in_wgt[s*W_W +: W_W]),
      .prod(prods[s*PROD_W +: PROD_W]));
  end

  if (SIMD_TYPE == SIMD_XNOR) begin : g_popcount
    logic [SIMD-1:0]           ones;
    logic [$clog2(SIMD+1)-1:0] count;
    for (genvar s = 0; s < SIMD; s++) begin : g_bit
      assign ones[s] = prods[s*PROD_W];
    end
    mvu_popcount #(.N(SIMD)) u_popcount (.bits(ones), .count(count));
    assign lane_sum = SUM_W'({1'b0, count});
  end else begin : g_adder_tree
    mvu_adder_tree #(.N(SIMD), .IN_W(PROD_W), .OUT_W(SUM_W)) u_tree (
      .in_flat(prods), .sum(lane_sum));
  end

  mvu_accumulator #(.IN_W(SUM_W), .ACC_W(OUT_W)) u_acc (
    .aclk, .aresetn, .en, .first, .din(lane_sum), .acc_next(out));

endmodule
