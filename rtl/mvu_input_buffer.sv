// mvu_input_buffer -- holds one input vector for reuse across the neuron fold.
//
// While an input vector streams in (SIMD elements per word, SF = MATRIXW/SIMD
// words), every word is written at its position within the vector. When the
// weight matrix has more rows than PEs, the same vector is then read back
// NF = MATRIXH/PE - 1 more times, once for each further group of PE rows.
// Its depth, K_d^2 * I_c / SIMD words, is the paper's; a simple register
// array with one synchronous write port and one asynchronous read port
// (the shape of a LUT RAM) is this design's choice.
//
// Interface: aclk, we, waddr, wdata (written at the clock edge); raddr ->
// rdata combinationally in the same cycle.
module mvu_input_buffer #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             aclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge aclk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
