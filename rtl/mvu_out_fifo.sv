// mvu_out_fifo -- small output FIFO of the stream unit.
//
// When the next layer applies back-pressure the PEs need not stop at once:
// finished output words are parked here and computation goes on until the
// FIFO is full. This decouples the bursts of PE outputs from the rate at
// which the next layer takes them. The FIFO itself is the paper's idea; its
// depth (DEPTH, default 4) and organisation (circular register array with
// read and write pointers and an occupancy count) are this design's choices.
//
// Interface: push/din on the write side (push must not be high while full);
// AXI-Stream master on the read side: out_valid, out_data, and in_ready from
// the consumer. A word leaves when out_valid && in_ready. out_data is taken
// straight from the array (no output register). A word pushed at a clock
// edge is visible on out_data from the next cycle.
module mvu_out_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             aclk,
  input  logic             aresetn,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             in_ready,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             pop;

  assign full      = (count == (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign pop       = out_valid && in_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge aclk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // Writing into a full FIFO would lose a result.
  a_no_overflow: assert property (@(posedge aclk) disable iff (!aresetn) !(push && full));

endmodule
