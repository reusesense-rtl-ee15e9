// tb_state_history_table: writes bundles of up to four states with
// increasing sequence numbers (wrapping), retires in order, squashes at a
// random live entry and checks the returned state and the live count
// against a queue model.
// The queue model is this test's own; indexing by sequence number and
// truncation at the squashed entry follow the described recovery.

module tb_state_history_table;
  import rs_pkg::*;
  localparam int DEPTH = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, sq_valid; logic [3:0] wr_valid; gen_state_t [3:0] wr_state; seq_t wr_seq, sq_seq;
  logic [2:0] retire; gen_state_t rd_state; logic [7:0] count;
  gen_state_t q [$]; seq_t qs [$];
  seq_t next_seq;
  int checks = 0, failures = 0, nsq = 0;

  state_history_table #(.DEPTH(DEPTH)) dut (.*);

  function automatic gen_state_t rnd_state(seq_t s);
    gen_state_t x;
    x = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    x.seq = s;
    return x;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; sq_valid = 0; wr_valid = '0; wr_state = '0; retire = '0; sq_seq = '0; next_seq = 8'd250;
    wr_seq = next_seq;
    repeat (2) @(negedge clk); rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int t = 0; t < 3000; t++) begin
      int nw, nr;
      nw = $urandom_range(0, 4);
      if (q.size() + nw > DEPTH - 4) nw = 0;
      nr = $urandom_range(0, 4); if (nr > q.size()) nr = q.size();
      wr_seq = next_seq; wr_valid = '0;
      for (int i = 0; i < nw; i++) begin wr_valid[i] = 1; wr_state[i] = rnd_state(next_seq + seq_t'(i)); end
      retire = 3'(nr);
      if ($urandom_range(0, 40) == 0 && q.size() > nr + 1) begin
        int k; k = $urandom_range(nr, q.size() - 1);
        sq_valid = 1; sq_seq = qs[k];
        #1;
        checks++;
        if (rd_state != q[k]) begin failures++; $display("FAIL squash read seq %0d", qs[k]); end
        while (q.size() > k) begin void'(q.pop_back()); void'(qs.pop_back()); end
        next_seq = sq_seq; nsq++;
      end else begin
        for (int i = 0; i < nw; i++) begin q.push_back(wr_state[i]); qs.push_back(next_seq + seq_t'(i)); end
        next_seq = next_seq + seq_t'(nw);
      end
      for (int i = 0; i < nr; i++) begin void'(q.pop_front()); void'(qs.pop_front()); end
      @(negedge clk);
      sq_valid = 0; wr_valid = '0; retire = '0;
      checks++;
      if (int'(count) != q.size()) begin failures++; $display("FAIL count %0d exp %0d", count, q.size()); end
    end
    checks++; if (nsq == 0) begin failures++; $display("FAIL no squash"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
