// tb_mvu_stream_ctrl -- checks the stream unit's FSM (SF = 3, NF = 2, and a
// second instance with NF = 1) under random in_valid, fifo_full and
// wmem_valid. Against a model kept in the testbench it checks, every cycle:
//  * a compute step happens exactly when it may (initiation interval one):
//    the output side and weights are ready, and during the first pass an
//    input word is valid;
//  * the word position sf, the pass, first/last, the buffer select and
//    out_ready follow the fold order;
//  * the next state is the one the state diagram gives: Write after taking
//    a word, Read after a buffered step that does not end the vector, after
//    the vector's last step Write if input is waiting and Idle otherwise,
//    and Idle after a cycle without a step.
// It counts each transition of the diagram and fails if one never occurs.
module tb_mvu_stream_ctrl;
  import mvu_pkg::*;
  int checks = 0, failures = 0;
  logic aclk = 0, aresetn = 0;
  logic in_valid = 0, fifo_full = 0, wmem_valid = 0;
  int trans [3][3];

  always #5 aclk = ~aclk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DUT with NF = 2 (buffer reuse) and one with NF = 1 (no reading phase).
  logic out_ready2, step2, wr2, rdb2, first2, last2, done2;
  logic [1:0] sf2;
  stream_state_e st2;
  mvu_stream_ctrl #(.SF(3), .NF(2)) dut2 (
    .aclk, .aresetn, .in_valid, .out_ready(out_ready2), .fifo_full, .wmem_valid,
    .step(step2), .wr_step(wr2), .rd_buf(rdb2), .sf(sf2), .first(first2), .last(last2),
    .comp_done(done2), .state(st2));

  logic out_ready1, step1, wr1, rdb1, first1, last1, done1;
  logic [1:0] sf1;
  stream_state_e st1;
  mvu_stream_ctrl #(.SF(3), .NF(1)) dut1 (
    .aclk, .aresetn, .in_valid, .out_ready(out_ready1), .fifo_full, .wmem_valid,
    .step(step1), .wr_step(wr1), .rd_buf(rdb1), .sf(sf1), .first(first1), .last(last1),
    .comp_done(done1), .state(st1));

  // Model state per instance: position in the fold.
  int m_sf [2], m_nf [2];
  stream_state_e exp_state [2];

  task automatic check_one(int idx, int nfold, logic ordy, logic stp, logic wr, logic rdb,
                           logic [1:0] sfv, logic fst, logic lst, logic dn, stream_state_e st);
    logic tready, exp_step, exp_done;
    tready   = !fifo_full && wmem_valid;
    exp_step = tready && (m_nf[idx] != 0 || in_valid);
    exp_done = exp_step && m_sf[idx] == 2 && m_nf[idx] == nfold - 1;
    checks++;
    if (st !== exp_state[idx]) begin
      failures++; $display("[NF=%0d] state %s expected %s", nfold, st.name(), exp_state[idx].name());
    end
    checks++;
    if (stp !== exp_step || wr !== (exp_step && m_nf[idx] == 0) || rdb !== (m_nf[idx] != 0)
        || int'(sfv) != m_sf[idx] || fst !== (m_sf[idx] == 0) || lst !== (m_sf[idx] == 2)
        || dn !== exp_done || ordy !== (tready && m_nf[idx] == 0)) begin
      failures++;
      $display("[NF=%0d] step=%0d/%0d wr=%0d rdb=%0d sf=%0d/%0d ordy=%0d done=%0d", nfold, stp, exp_step,
               wr, rdb, sfv, m_sf[idx], ordy, dn);
    end
    // Next state from the state diagram.
    if (!exp_step)                exp_state[idx] = ST_IDLE;
    else if (m_nf[idx] == 0 && !exp_done) exp_state[idx] = ST_WRITE;
    else if (!exp_done)           exp_state[idx] = ST_READ;
    else if (nfold == 1)          exp_state[idx] = ST_WRITE;
    else                          exp_state[idx] = in_valid ? ST_WRITE : ST_IDLE;
    if (idx == 1) trans[st][exp_state[idx]]++;
    if (exp_step) begin
      if (m_sf[idx] == 2) begin
        m_sf[idx] = 0;
        m_nf[idx] = (m_nf[idx] == nfold - 1) ? 0 : m_nf[idx] + 1;
      end else m_sf[idx]++;
    end
  endtask

  initial begin
    m_sf = '{0, 0}; m_nf = '{0, 0};
    exp_state = '{ST_IDLE, ST_IDLE};
    repeat (2) @(posedge aclk);
    aresetn = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge aclk);
      // Phases: free running, then random stalls of each kind.
      in_valid   = (k < 200) ? 1'b1 : ($urandom % 4 != 0);
      fifo_full  = (k < 200) ? 1'b0 : ($urandom % 5 == 0);
      wmem_valid = (k < 200) ? 1'b1 : ($urandom % 8 != 0);
      #1;
      check_one(0, 1, out_ready1, step1, wr1, rdb1, sf1, first1, last1, done1, st1);
      check_one(1, 2, out_ready2, step2, wr2, rdb2, sf2, first2, last2, done2, st2);
    end
    // Every transition of the diagram (and each self loop) must have occurred.
    foreach (trans[a, b]) begin
      if (a == int'(ST_IDLE) && b == int'(ST_IDLE)) continue;
      if (a == int'(ST_WRITE) && b == int'(ST_WRITE)) continue;
      checks++;
      if (trans[a][b] == 0) begin failures++; $display("transition %0d->%0d never seen", a, b); end
      else $display("transition %0d->%0d seen %0d times", a, b, trans[a][b]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
