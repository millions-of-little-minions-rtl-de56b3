// tb_switch_queues -- random traffic into the output queues against a FIFO model.
// Four inputs send random frames to random outputs (sometimes to a port that
// does not exist) while outputs drain at random.  A model of the arbiter and
// the FIFOs predicts which inputs are accepted, which frames are dropped when
// a queue is full, the order and contents of the frames that leave, the
// byte/frame occupancy counters and the drop and transmit events.  It fails if
// tail drop, contention (in_ready low) or discards never happened.
module tb_switch_queues;
  import tpp_pkg::*;

  localparam int NP = 4, D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid = 0, in_ready, out_valid, out_ready = 0, drop_valid, tx_valid;
  pkt_t [NP-1:0] in_pkt, out_pkt;
  logic [NP-1:0][7:0] in_dst = 0;
  logic [NP-1:0][WORD_W-1:0] q_bytes, q_pkts;
  logic [NP-1:0][LEN_W-1:0] drop_len, tx_len;

  switch_queues #(.NPORTS(NP), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  pkt_t mq [NP][$];
  int rr [NP];
  int n_drop = 0, n_stall = 0, n_disc = 0, n_tx = 0;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    in_pkt = '0;
    for (int q = 0; q < NP; q++) rr[q] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      bit exp_rdy [NP];
      int bytes;
      @(negedge clk);
      for (int i = 0; i < NP; i++) begin
        in_valid[i] = $urandom_range(0, 1);
        in_dst[i] = ($urandom_range(0, 19) == 0) ? 8'(NP + $urandom_range(0, 3)) : 8'($urandom_range(0, NP - 1));
        in_pkt[i].len = 16'($urandom_range(60, 1500));
        for (int b = 0; b < 8; b++) in_pkt[i].bytes[b] = 8'($urandom);
      end
      // phases: fill (slow drain), then drain
      for (int q = 0; q < NP; q++) out_ready[q] = ((cyc / 500) % 2) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 5) == 0);
      #1;
      // model: occupancy and head before the edge
      for (int q = 0; q < NP; q++) begin
        bytes = 0;
        foreach (mq[q][j]) bytes += int'(mq[q][j].len);
        chk(q_pkts[q] == 32'(mq[q].size()), $sformatf("q_pkts %0d: %0d vs %0d", q, q_pkts[q], mq[q].size()));
        chk(q_bytes[q] == 32'(bytes), "q_bytes");
        chk(out_valid[q] == (mq[q].size() != 0), "out_valid");
        if (mq[q].size() != 0) chk(out_pkt[q] == mq[q][0], "FIFO order and contents");
        chk(tx_valid[q] == (out_valid[q] && out_ready[q]), "tx event");
      end
      for (int i = 0; i < NP; i++) exp_rdy[i] = 0;
      for (int q = 0; q < NP; q++) begin
        int got, i;
        got = -1;
        for (int o = 0; o < NP; o++) begin
          i = (rr[q] + o) % NP;
          if (got < 0 && in_valid[i] && in_dst[i] == q) got = i;
        end
        chk(drop_valid[q] == (got >= 0 && mq[q].size() == D), "drop event");
        if (got >= 0) begin
          exp_rdy[got] = 1;
          rr[q] = (got + 1) % NP;
          if (mq[q].size() == D) begin n_drop++; chk(drop_len[q] == in_pkt[got].len, "drop length"); end
        end
        if (tx_valid[q]) begin void'(mq[q].pop_front()); n_tx++; end
        if (got >= 0 && !(drop_valid[q])) mq[q].push_back(in_pkt[got]);
      end
      for (int i = 0; i < NP; i++) begin
        if (in_valid[i] && in_dst[i] >= NP) begin exp_rdy[i] = 1; n_disc++; end
        if (in_valid[i] && !exp_rdy[i]) n_stall++;
        if (in_valid[i]) chk(in_ready[i] == exp_rdy[i], $sformatf("in_ready %0d cyc %0d v=%b rdy=%b dst=%h", i, cyc, in_valid, in_ready, in_dst));
      end
    end
    chk(n_drop > 10 && n_stall > 100 && n_disc > 50 && n_tx > 1000, "mechanisms exercised");
    $display("drops=%0d stalls=%0d discards=%0d tx=%0d", n_drop, n_stall, n_disc, n_tx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
