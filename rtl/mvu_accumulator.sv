// mvu_accumulator -- accumulates the per-cycle sums of one PE.
//
// In a folded MVU a PE sees a matrix row SIMD columns at a time, so the
// partial dot products of SF = MATRIXW/SIMD consecutive compute cycles must
// be added. When en is high the register takes acc_next = (first ? 0 : acc)
// + din, where first marks the first cycle of a row. acc_next is also
// driven out, so that on the last cycle of a row the complete dot product is
// available in the same cycle (the stream unit stores it in its output FIFO)
// and no extra cycle is spent per row. The accumulator itself follows the
// paper (Fig. 4); restarting it with a "first" flag rather than a clear
// cycle is this design's choice.
//
// Interface: aclk, aresetn (asynchronous, active low), en, first, din
// (signed IN_W bits), acc_next (signed ACC_W bits, combinational).
module mvu_accumulator #(
  parameter int unsigned IN_W  = 13,
  parameter int unsigned ACC_W = 16
) (
  input  logic                    aclk,
  input  logic                    aresetn,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [IN_W-1:0]  din,
  output logic signed [ACC_W-1:0] acc_next
);

  logic signed [ACC_W-1:0] acc_q;

  assign acc_next = (first ? ACC_W'(0) : acc_q) + ACC_W'(din);

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn)  acc_q <= '0;
    else if (en)   acc_q <= acc_next;
  end

endmodule
