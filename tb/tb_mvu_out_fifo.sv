// tb_mvu_out_fifo -- pushes a numbered sequence of words whenever the FIFO
// is not full while the consumer takes them at random; checks that every
// word comes out once and in order, that full is raised at DEPTH words,
// and that out_valid/out_data hold while the consumer stalls.
module tb_mvu_out_fifo;
  localparam int W = 12, D = 4, N = 400;
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0;
  logic aclk = 0, aresetn = 0, push = 0, in_ready = 0;
  logic [W-1:0] din = 0, out_data;
  logic full, out_valid;
  int occupancy = 0;

  mvu_out_fifo #(.WIDTH(W), .DEPTH(D)) dut (.aclk, .aresetn, .push, .din, .full,
                                            .in_ready, .out_valid, .out_data);

  always #5 aclk = ~aclk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge aclk);
    aresetn = 1;
    while (got < N) begin
      @(negedge aclk);
      checks++;
      if (full !== (occupancy == D) || out_valid !== (occupancy != 0)) begin
        failures++; $display("flags: full=%0d valid=%0d occupancy=%0d", full, out_valid, occupancy);
      end
      if (full) full_seen++;
      push = !full && sent < N && ($urandom % 3 != 0);
      din  = W'(sent * 7 + 1);
      in_ready = (got > 200) ? ($urandom % 4 != 0) : ($urandom % 3 == 0);
      #1;
      if (out_valid && in_ready) begin
        checks++;
        if (out_data !== W'(got * 7 + 1)) begin failures++; $display("word %0d got %h", got, out_data); end
        got++;
        occupancy--;
      end
      if (push) begin sent++; occupancy++; end
      @(posedge aclk);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FIFO never became full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
