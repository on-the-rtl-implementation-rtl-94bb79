// mvu_simd -- one SIMD lane (hardware synapse) of a processing element.
//
// The lane forms the product of one input-vector element and one weight.
// Three circuits are available, chosen at elaboration time by SIMD_TYPE:
//   SIMD_XNOR   : x and w are single bits standing for -1 (0) and +1 (1);
//                 the product is XNOR(x, w), a 1 meaning "+1". The PE counts
//                 these ones with a pop count.
//   SIMD_BINWGT : x is a signed IN_W-bit number, w a single bit; a 2:1
//                 multiplexer selected by w passes -x (w = 0) or +x (w = 1).
//   SIMD_STD    : x and w are signed IN_W- and W_W-bit numbers multiplied.
// The three circuits, and the 0 -> -1 / 1 -> +1 reading of binary values,
// follow the paper. Treating multi-bit inputs and weights as two's
// complement signed numbers is this design's choice.
//
// Interface: purely combinational, in_x/in_w in, prod out (signed, PROD_W
// bits; for XNOR prod is 0 or 1).
module mvu_simd
  import mvu_pkg::*;
#(
  parameter simd_type_e SIMD_TYPE = SIMD_STD,
  parameter int unsigned IN_W   = 4,
  parameter int unsigned W_W    = 4,
  parameter int unsigned PROD_W = prod_width(SIMD_TYPE, IN_W, W_W)
) (
  input  logic [IN_W-1:0]          in_x,
  input  logic [W_W-1:0]           in_w,
  output logic signed [PROD_W-1:0] prod
);

  if (SIMD_TYPE == SIMD_XNOR) begin : g_xnor
    assign prod = PROD_W'({1'b0, ~(in_x[0] ^ in_w[0])});
  end else if (SIMD_TYPE == SIMD_BINWGT) begin : g_binwgt
    logic signed [PROD_W-1:0] x_ext;
    assign x_ext = PROD_W'(signed'(in_x));
    assign prod  = in_w[0] ? x_ext : -x_ext;
  end else begin : g_std
    assign prod = PROD_W'(signed'(in_x) * signed'(in_w));
  end

endmodule
