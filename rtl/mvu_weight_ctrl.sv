// mvu_weight_ctrl -- control unit of the MVU batch unit.
//
// Sequences the reads of the weight memories so that the stream unit sees
// one weight word per PE on every compute cycle, in address order
// 0, 1, ..., D_MEM-1, 0, ... (the order in which the stream unit walks the
// folded matrix). The memories have a registered read, so this unit keeps
// a word on their outputs at all times and presents the address of the
// next word one cycle ahead: when the stream unit takes the current word
// (wmem_valid && wmem_ready) the next address is issued in the same cycle,
// so consecutive words follow back to back. wmem_valid rises one cycle
// after reset, once the first word has been read. The paper gives this
// unit's role and its signal names; the look-ahead addressing is this
// design's choice.
//
// Interface: wmem_addr (to every weight memory, ceil(log2 D_MEM) bits),
// wmem_valid (to the stream unit), wmem_ready (from the stream unit).
module mvu_weight_ctrl #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          aclk,
  input  logic          aresetn,
  input  logic          wmem_ready,
  output logic          wmem_valid,
  output logic [AW-1:0] wmem_addr
);

  logic [AW-1:0] addr_q;

  always_comb begin
    if (!wmem_valid)     wmem_addr = '0;
    else if (wmem_ready) wmem_addr = (addr_q == AW'(DEPTH - 1)) ? '0 : addr_q + 1'b1;
    else                 wmem_addr = addr_q;
  end

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn) begin
      addr_q     <= '0;
      wmem_valid <= 1'b0;
    end else begin
      addr_q     <= wmem_addr;
      wmem_valid <= 1'b1;
    end
  end

endmodule
