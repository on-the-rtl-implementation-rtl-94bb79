// mvu_stream_ctrl -- control unit of the MVU stream unit.
//
// A three-state Mealy machine (Idle, Write, Read) that paces the compute
// cycles of the PEs against the input stream, the output side and the weight
// stream, and that drives the input buffer.
//
// One input vector is SF words; the weight matrix has NF groups of PE rows.
// The PEs work through the vector NF times, SF cycles each. On the first
// pass (writing phase) every word comes from the input stream, is handed to
// the PEs and is written into the input buffer. After the last word the
// buffer is full (INP_BUF_FULL) and the remaining NF-1 passes read it back
// (reading phase). COMP_DONE marks the cycle that completes the last pass.
//
// Transitions, as drawn in the paper's state diagram:
//   Idle  -> Write : TVALID & TREADY          (a word is taken this cycle)
//   Idle  -> Read  : TREADY & INP_BUF_FULL    (a buffered word is used)
//   Write -> Idle  : !TVALID | !TREADY
//   Write -> Read  : TREADY & INP_BUF_FULL
//   Read  -> Idle  : !TREADY | COMP_DONE
//   Read  -> Write : TVALID & COMP_DONE
// The paper does not define TREADY for this machine beyond "back-pressure".
// Here TREADY is "a compute cycle may happen": the output FIFO is not full
// and the weight memories present a valid word. TVALID is the upstream
// in_valid. When COMP_DONE and TVALID are both true Read goes to Write,
// otherwise to Idle; a buffered step taken in Idle or Write that itself
// completes the vector leaves the machine the same way. Actions belong to the transitions (Mealy), so the PEs
// compute in every cycle whose conditions hold: initiation interval one, and
// SF*NF cycles per input vector with no gap between vectors.
//
// Interface: out_ready is the AXI TREADY given upstream; it does not depend
// on in_valid. step is high on every compute cycle; wr_step on those that
// take a word from the stream (the same cycle writes it into the buffer at
// sf); rd_buf selects the buffer as the PEs' input. first/last mark the
// first and last word of a pass, comp_done the last cycle of a vector.
module mvu_stream_ctrl
  import mvu_pkg::*;
#(
  parameter int unsigned SF   = 16,
  parameter int unsigned NF   = 1,
  parameter int unsigned SF_W = (SF > 1) ? $clog2(SF) : 1,
  parameter int unsigned NF_W = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic            aclk,
  input  logic            aresetn,
  input  logic            in_valid,
  output logic            out_ready,
  input  logic            fifo_full,
  input  logic            wmem_valid,
  output logic            step,
  output logic            wr_step,
  output logic            rd_buf,
  output logic [SF_W-1:0] sf,
  output logic            first,
  output logic            last,
  output logic            comp_done,
  output stream_state_e   state
);

  stream_state_e   state_d;
  logic [NF_W-1:0] nf;
  logic            tready, inp_buf_full, rd_step, last_nf;

  assign tready       = !fifo_full && wmem_valid;
  assign inp_buf_full = (nf != '0);
  assign last_nf      = (nf == NF_W'(NF - 1));
  assign first        = (sf == '0);
  assign last         = (sf == SF_W'(SF - 1));
  assign step         = wr_step || rd_step;
  assign comp_done    = step && last && last_nf;
  assign rd_buf       = inp_buf_full;
  assign out_ready    = (state != ST_READ) && !inp_buf_full && tready;

  // State after a buffered step: Read unless the step completes the vector
  // (COMP_DONE), in which case Write if input is waiting, else Idle.
  stream_state_e done_next;
  assign done_next = !(last && last_nf) ? ST_READ : (in_valid ? ST_WRITE : ST_IDLE);

  always_comb begin
    state_d = state;
    wr_step = 1'b0;
    rd_step = 1'b0;
    case (state)
      ST_IDLE: begin
        if (!inp_buf_full && in_valid && tready) begin
          wr_step = 1'b1;
          state_d = ST_WRITE;
        end else if (inp_buf_full && tready) begin
          rd_step = 1'b1;
          state_d = done_next;
        end
      end
      ST_WRITE: begin
        if (inp_buf_full) begin
          if (tready) begin
            rd_step = 1'b1;
            state_d = done_next;
          end else begin
            state_d = ST_IDLE;
          end
        end else if (in_valid && tready) begin
          wr_step = 1'b1;
        end else begin
          state_d = ST_IDLE;
        end
      end
      ST_READ: begin
        if (!tready) begin
          state_d = ST_IDLE;
        end else begin
          rd_step = 1'b1;
          state_d = done_next;
        end
      end
      default: state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge aclk or negedge aresetn) begin
    if (!aresetn) begin
      state <= ST_IDLE;
      sf    <= '0;
      nf    <= '0;
    end else begin
      state <= state_d;
      if (step) begin
        sf <= last ? '0 : sf + 1'b1;
        if (last) nf <= last_nf ? '0 : nf + 1'b1;
      end
    end
  end

  // The reading phase only exists while the buffer holds a vector.
  a_read_needs_buffer: assert property (@(posedge aclk) disable iff (!aresetn)
    (state == ST_READ) |-> inp_buf_full);
  // A word is accepted from upstream only during the writing phase.
  a_write_phase: assert property (@(posedge aclk) disable iff (!aresetn)
    wr_step |-> (!inp_buf_full && in_valid && out_ready));

endmodule
