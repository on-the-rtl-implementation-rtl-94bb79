// mvu_weight_mem -- burned-in weight memory of one PE.
//
// Each PE has its own memory of D_MEM = K_d^2*I_c*O_c/(SIMD*PE) words of
// SIMD*W_W bits (depth and width as in the paper). Word nf*SF+sf holds the
// SIMD weights PE p needs on the compute cycle (nf, sf): row nf*PE+p,
// columns sf*SIMD .. sf*SIMD+SIMD-1, weight s at bits [s*W_W +: W_W].
// The contents are fixed when the design is built. They come from INIT_FILE,
// a $readmemh image shared by all PEs: word a of PE p is line p*DEPTH+a.
// The single shared file and the synchronous (registered) read, which maps
// onto block RAM or LUT RAM alike, are this design's choices.
//
// Interface: aclk, raddr; rdata = mem[raddr] one clock edge later.
module mvu_weight_mem #(
  parameter int unsigned WIDTH  = 64,
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned PE_IDX = 0,
  parameter int unsigned NUM_PE = 16,
  parameter string       INIT_FILE = "rtl/mvu_weights.hex",
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             aclk,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    logic [WIDTH-1:0] image [NUM_PE*DEPTH];
    $readmemh(INIT_FILE, image);
    for (int a = 0; a < DEPTH; a++) mem[a] = image[PE_IDX*DEPTH + a];
  end

  always_ff @(posedge aclk) rdata <= mem[raddr];

endmodule
