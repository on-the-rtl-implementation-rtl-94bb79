// mvu_popcount -- pop count of the XNOR lane outputs of one PE.
//
// Counts the ones among N single-bit inputs; with XNOR lanes this is the
// number of lanes whose binary product is +1. The paper names a pop count
// as the reduction for XNOR lanes; a plain counting loop (left to synthesis
// to map) is this design's choice of circuit.
//
// Interface: combinational, bits[N-1:0] in, count out (clog2(N+1) bits).
module mvu_popcount #(
  parameter int unsigned N     = 16,
  parameter int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]     bits,
  output logic [CNT_W-1:0] count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + CNT_W'(bits[i]);
  end

endmodule
