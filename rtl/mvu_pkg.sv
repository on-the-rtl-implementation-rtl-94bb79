// mvu_pkg -- types shared by the matrix-vector unit (MVU).
//
// simd_type_e selects which of the three synapse (SIMD lane) circuits the
// processing elements are built from:
//   SIMD_XNOR   : 1-bit inputs and 1-bit weights, XNOR then pop count
//   SIMD_BINWGT : arbitrary-precision inputs, 1-bit weights read as -1 / +1,
//                 a multiplexer choosing x or -x, then an adder tree
//   SIMD_STD    : arbitrary-precision inputs and weights, a multiplier, then
//                 an adder tree
// stream_state_e names the three states of the stream unit's control FSM.
// prod_width() gives the width of one lane's signed product for a lane type.
// The three lane types and the three FSM states are those of the published
// MVU design; the encodings and the product widths (which follow from
// treating multi-bit operands as two's complement) are this design's.
package mvu_pkg;

  typedef enum logic [1:0] {
    SIMD_XNOR   = 2'd0,
    SIMD_BINWGT = 2'd1,
    SIMD_STD    = 2'd2
  } simd_type_e;

  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_WRITE = 2'd1,
    ST_READ  = 2'd2
  } stream_state_e;

  // Width of the signed product of one lane.
  //   XNOR   : 0 or 1, held as a 2-bit signed number
  //   BINWGT : -x or +x of a signed IN_W-bit input needs IN_W+1 bits
  //   STD    : signed IN_W x signed W_W product needs IN_W+W_W bits
  function automatic int prod_width(simd_type_e t, int in_w, int w_w);
    case (t)
      SIMD_XNOR:   return 2;
      SIMD_BINWGT: return in_w + 1;
      default:     return in_w + w_w;
    endcase
  endfunction

endpackage
