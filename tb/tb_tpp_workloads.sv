// tb_tpp_workloads -- the example programs of the TPP applications, run on the full switch.
// One switch at its default parameters plays every hop of a path: the bench
// feeds a frame's output back in as the next hop's input and changes the
// switch ID between hops.  Programs:
//   micro-burst  PUSH switch ID, output port, queue occupancy (stack mode)
//   RCP* collect PUSH switch ID, queue size, RX utilization, App0, App1
//   RCP* update  CSTORE App0 (version), STORE App1 (rate), hop mode 3 words/hop
//   NetSight     PUSH switch ID, matched entry, input port
//   CONGA*       PUSH link ID, TX utilization, TX bytes
//   sketch       PUSH switch ID, output port
//   clock        LOAD the cycle counter of each of the four stages
// Each checks the values collected per hop against what the bench set up, and
// that words past the ten visible ones stay untouched.  The clock program
// checks the 2-cycle per-stage latency.
module tb_tpp_workloads;
  import tpp_pkg::*;
  import tb_tpp_util::*;

  localparam int NP = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] cfg_switch_id = 32'h100, cfg_version = 32'd1;
  logic cfg_wr_en = 1;
  logic [NP-1:0] in_valid = 0, in_ready, out_valid, out_ready = '1;
  pkt_t [NP-1:0] in_pkt, out_pkt;
  meta_t [NP-1:0] in_meta;

  tpp_switch dut (.*);
  always #5 clk = ~clk;

  pkt_t rxq [NP][$];
  always @(posedge clk)
    if (rst_n)
      for (int q = 0; q < NP; q++)
        if (out_valid[q] && out_ready[q]) rxq[q].push_back(out_pkt[q]);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int p, pkt_t pk, int dst, int entry);
    @(negedge clk);
    in_valid[p] = 1; in_pkt[p] = pk;
    in_meta[p].out_port = 8'(dst); in_meta[p].entry_id = 16'(entry);
    do @(posedge clk); while (!in_ready[p]);
    #1; in_valid[p] = 0;
  endtask

  task automatic hop(int p, int dst, int entry, inout pkt_t pk);
    int t;
    send(p, pk, dst, entry);
    t = 0;
    while (rxq[dst].size() == 0 && t < 500) begin @(posedge clk); t++; end
    chk(rxq[dst].size() != 0, "frame delivered");
    if (rxq[dst].size() != 0) pk = rxq[dst].pop_front();
  endtask

  instr_t ins [MAX_INSTR];
  logic [31:0] pm [16];
  task automatic clear_prog();
    for (int k = 0; k < MAX_INSTR; k++) ins[k] = '0;
    for (int w = 0; w < 16; w++) pm[w] = 32'hEEEE_0000 + 32'(w);
  endtask

  initial begin
    pkt_t p;
    in_pkt = '0; in_meta = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // ---- micro-burst: 5 hops x 3 words = 15 words, 10 visible
    // hold three frames in queue 2 so that the occupancy is not zero
    out_ready[2] = 0;
    for (int n = 0; n < 3; n++) send(0, mk_plain(500), 2, 0);
    clear_prog();
    ins[0] = I(OP_PUSH, A_SWITCH_ID); ins[1] = I(OP_PUSH, A_OUT_PORT); ins[2] = I(OP_PUSH, A_QUEUE_OCC);
    p = mk_tpp(0, MODE_STACK, 0, 0, ins, 3, pm, 15);
    cfg_switch_id = 32'h101;
    send(1, p, 2, 0);
    repeat (20) @(posedge clk);
    out_ready[2] = 1;
    repeat (20) @(posedge clk);
    chk(rxq[2].size() == 4, "three plain frames and the TPP");
    // frames from different input ports keep no mutual order: find the TPP;
    // the queue occupancy it recorded is the plain frames queued ahead of it
    begin
      int pos;
      pos = -1;
      foreach (rxq[2][n]) if (rxq[2][n].bytes[13] == 8'h66) pos = n;
      chk(pos >= 1, "TPP found in queue 2 behind queued frames");
      if (pos >= 0) p = rxq[2][pos];
      rxq[2].delete();
      chk(pm_word(p, 0, 3, 0) == 32'h101 && pm_word(p, 0, 3, 1) == 2, "micro-burst hop 1 ID/port");
      chk(pm_word(p, 0, 3, 2) == 32'(500 * pos), $sformatf("micro-burst hop 1 queue bytes %0d, %0d frames ahead", pm_word(p, 0, 3, 2), pos));
    end
    for (int h = 2; h <= 5; h++) begin
      cfg_switch_id = 32'h100 + 32'(h);
      hop(h % NP, (h + 1) % NP, 0, p);
    end
    for (int h = 2; h <= 3; h++)
      chk(pm_word(p, 0, 3, 3 * (h - 1)) == 32'h100 + 32'(h) &&
          pm_word(p, 0, 3, 3 * (h - 1) + 1) == 32'((h + 1) % NP) &&
          pm_word(p, 0, 3, 3 * (h - 1) + 2) == 0, $sformatf("micro-burst hop %0d", h));
    chk(pm_word(p, 0, 3, 9) == 32'h104, "hop 4 first word is the tenth visible word");
    for (int w = 10; w < 15; w++) chk(pm_word(p, 0, 3, w) == 32'hEEEE_0000 + 32'(w), "words past the tenth untouched");
    chk(hop_field(p, 0) == 8'd60, "stack pointer after 15 pushes");

    // ---- RCP* update, then collect, on two hops (links 1 and 3)
    clear_prog();
    ins[0] = I(OP_CSTORE, A_LINK_APP0, 0, 1); ins[1] = I(OP_STORE, A_LINK_APP1, 2);
    pm[0] = 0; pm[1] = 1; pm[2] = 32'd9000;   // hop 1: V=0 -> 1, rate 9000
    pm[3] = 0; pm[4] = 1; pm[5] = 32'd7000;   // hop 2
    p = mk_tpp(1, MODE_HOP, 0, 3, ins, 2, pm, 6);
    cfg_switch_id = 32'h201; hop(0, 1, 0, p);
    cfg_switch_id = 32'h202; hop(1, 3, 0, p);
    chk(pm_word(p, 1, 2, 0) == 1 && pm_word(p, 1, 2, 3) == 1, "RCP update: both versions advanced");
    // a stale update (version 0 again) must fail and leave the rate
    pm[5] = 32'd1;
    p = mk_tpp(1, MODE_HOP, 0, 3, ins, 2, pm, 6);
    hop(0, 1, 0, p);
    chk(pm_word(p, 1, 2, 0) == 1, "stale RCP update returns the current version");
    clear_prog();
    ins[0] = I(OP_PUSH, A_SWITCH_ID); ins[1] = I(OP_PUSH, A_LINK_QBYTES); ins[2] = I(OP_PUSH, A_LINK_RX_UTIL);
    ins[3] = I(OP_PUSH, A_LINK_APP0); ins[4] = I(OP_PUSH, A_LINK_APP1);
    p = mk_tpp(1, MODE_STACK, 0, 0, ins, 5, pm, 10);
    cfg_switch_id = 32'h201; hop(2, 1, 0, p);
    cfg_switch_id = 32'h202; hop(0, 3, 0, p);
    chk(pm_word(p, 1, 5, 0) == 32'h201 && pm_word(p, 1, 5, 3) == 1 && pm_word(p, 1, 5, 4) == 9000, "RCP collect hop 1");
    chk(pm_word(p, 1, 5, 5) == 32'h202 && pm_word(p, 1, 5, 8) == 1 && pm_word(p, 1, 5, 9) == 7000, "RCP collect hop 2");

    // ---- NetSight: switch, matched entry, input port; 3 hops fit
    clear_prog();
    ins[0] = I(OP_PUSH, A_SWITCH_ID); ins[1] = I(OP_PUSH, A_ENTRY_ID); ins[2] = I(OP_PUSH, A_IN_PORT);
    p = mk_tpp(0, MODE_STACK, 0, 0, ins, 3, pm, 9);
    for (int h = 0; h < 3; h++) begin
      cfg_switch_id = 32'h300 + 32'(h);
      hop(h, (h + 2) % NP, 40 + h, p);
    end
    for (int h = 0; h < 3; h++)
      chk(pm_word(p, 0, 3, 3*h) == 32'h300 + 32'(h) && pm_word(p, 0, 3, 3*h + 1) == 32'(40 + h) &&
          pm_word(p, 0, 3, 3*h + 2) == 32'(h), $sformatf("NetSight hop %0d", h));

    // ---- CONGA*: link ID, TX utilization, TX bytes on link 1
    begin
      logic [31:0] txb;
      clear_prog();
      ins[0] = I(OP_PUSH, A_LINK_ID); ins[1] = I(OP_PUSH, A_LINK_TX_UTIL); ins[2] = I(OP_PUSH, A_LINK_TX_BYTES);
      txb = dut.u_link.L[1].tx_bytes;
      p = mk_tpp(1, MODE_STACK, 0, 0, ins, 3, pm, 3);
      hop(0, 1, 0, p);
      chk(pm_word(p, 1, 3, 0) == 1 && pm_word(p, 1, 3, 2) == txb, "CONGA link ID and TX bytes");
    end

    // ---- sketch: switch ID and output port; 5 hops x 2 words = 10 words fit
    clear_prog();
    ins[0] = I(OP_PUSH, A_SWITCH_ID); ins[1] = I(OP_PUSH, A_OUT_PORT);
    p = mk_tpp(1, MODE_STACK, 0, 0, ins, 2, pm, 10);
    for (int h = 0; h < 5; h++) begin
      cfg_switch_id = 32'h500 + 32'(h);
      hop(h % NP, (h + 1) % NP, 0, p);
    end
    for (int h = 0; h < 5; h++)
      chk(pm_word(p, 1, 2, 2*h) == 32'h500 + 32'(h) && pm_word(p, 1, 2, 2*h + 1) == 32'((h + 1) % NP), $sformatf("sketch hop %0d", h));

    // ---- clock of every stage: consecutive stages 2 cycles apart
    clear_prog();
    for (int s = 0; s < 4; s++) ins[s] = I(OP_LOAD, stage_base(s) + 16'h8, s);
    p = mk_tpp(0, MODE_STACK, 0, 0, ins, 4, pm, 4);
    hop(3, 0, 0, p);
    for (int s = 0; s < 3; s++)
      chk(pm_word(p, 0, 4, s + 1) - pm_word(p, 0, 4, s) == 2,
          $sformatf("stage %0d to %0d: %0d cycles", s, s + 1, pm_word(p, 0, 4, s + 1) - pm_word(p, 0, 4, s)));

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
