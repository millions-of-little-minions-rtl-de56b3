// tb_tpp_switch -- end-to-end test of the whole switch at its default parameters.
// Four ports, four TCPU stages per port, shared link registers and output
// queues.  The bench plays the end-hosts and the forwarding logic (it supplies
// the output port with every frame) and runs the scenarios below, checking the
// frames that come out.  It also counts, through the hierarchy, how often each
// mechanism actually happened and fails if any count stays at zero:
//   passthrough     ordinary frames leave unchanged
//   parse_eth/udp   TPPs found through both parse paths (ethertype / UDP port)
//   multi_hop       a hop-mode TPP crosses the switch twice
//   port_write      a TPP rewrites its own output port
//   wr_disabled     writes suppressed while the switch disallows them
//   sram_stall      cycles a stage spends waiting on its SRAM
//   lock_wait       cycles a pipeline waits for the link-register grant
//   cstore_ok/fail  conditional stores that succeed / fail (RCP*-style update)
//   cexec_fail      conditional execution that stops a program
//   q_drop          frames dropped at a full output queue
//   q_contention    cycles a pipeline waits because another one uses its queue
//   util_update     link utilization published after a measurement period
module tb_tpp_switch;
  import tpp_pkg::*;
  import tb_tpp_util::*;

  localparam int NP = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] cfg_switch_id = 32'h5A17_0001, cfg_version = 32'd7;
  logic cfg_wr_en = 1;
  logic [NP-1:0] in_valid = 0, in_ready, out_valid, out_ready = '1;
  pkt_t [NP-1:0] in_pkt, out_pkt;
  meta_t [NP-1:0] in_meta;

  tpp_switch dut (.*);
  always #5 clk = ~clk;   // stands for the 160 MHz clock; only cycles matter

  // ---------------------------------------------------------------- counters
  int c_pass = 0, c_eth = 0, c_udp = 0, c_hop = 0, c_portw = 0, c_wrdis = 0;
  int c_sram = 0, c_lock = 0, c_cs_ok = 0, c_cs_fail = 0, c_cexec = 0;
  int c_drop = 0, c_cont = 0, c_util = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) begin
      if (dut.x_req[p] && !dut.x_gnt[p]) c_lock++;
      if (dut.pl_valid[p] && !dut.pl_ready[p]) c_cont++;
      if (dut.drop_valid[p]) c_drop++;
    end
  end
  // stage states 1 (read) and 3 (write) are SRAM waits
  for (genvar p = 0; p < NP; p++) begin : g_mon
    for (genvar s = 0; s < 4; s++) begin : g_s
      always @(posedge clk)
        if (rst_n && (int'(dut.g_port[p].u_pl.g_stage[s].u_stage.state) == 1 ||
                      int'(dut.g_port[p].u_pl.g_stage[s].u_stage.state) == 3)) c_sram++;
    end
  end

  // ---------------------------------------------------------------- output capture
  pkt_t rxq [NP][$];
  always @(posedge clk)
    if (rst_n)
      for (int q = 0; q < NP; q++)
        if (out_valid[q] && out_ready[q]) rxq[q].push_back(out_pkt[q]);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int p, pkt_t pk, int dst);
    @(negedge clk);
    in_valid[p] = 1; in_pkt[p] = pk;
    in_meta[p].in_port = 8'hEE;      // overwritten by the switch
    in_meta[p].out_port = 8'(dst);
    in_meta[p].entry_id = 16'(100 + dst);
    do @(posedge clk); while (!in_ready[p]);
    #1; in_valid[p] = 0;
  endtask

  task automatic recv(int q, output pkt_t pk, output bit ok);
    int t;
    t = 0;
    while (rxq[q].size() == 0 && t < 500) begin @(posedge clk); t++; end
    ok = rxq[q].size() != 0;
    if (ok) pk = rxq[q].pop_front(); else pk = '0;
  endtask

  task automatic xfer(int p, pkt_t pk, int dst, output pkt_t o, output bit ok);
    send(p, pk, dst);
    recv(dst, o, ok);
  endtask

  function automatic bit queues_empty();
    for (int q = 0; q < NP; q++) if (rxq[q].size() != 0) return 0;
    return 1;
  endfunction

  instr_t ins [MAX_INSTR];
  logic [31:0] pm [16];
  task automatic clear_prog();
    for (int k = 0; k < MAX_INSTR; k++) ins[k] = '0;
    for (int w = 0; w < 16; w++) pm[w] = 32'h0;
  endtask

  // read one link register of link 'l' through a TPP (PUSH into word 0)
  task automatic read_link(int l, logic [15:0] a, output logic [31:0] v);
    pkt_t o; bit ok;
    clear_prog();
    ins[0] = I(OP_PUSH, a);
    xfer(0, mk_tpp(1, MODE_STACK, 0, 0, ins, 1, pm, 2), l, o, ok);
    chk(ok, "read_link frame arrives");
    v = pm_word(o, 1, 1, 0);
  endtask

  initial begin
    pkt_t p, o, o2;
    bit ok, ok2;
    logic [31:0] v;
    in_pkt = '0; in_meta = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // 1. ordinary frames pass unchanged, on every port pair
    for (int i = 0; i < NP; i++) for (int j = 0; j < NP; j++) begin
      p = mk_plain($urandom_range(64, 1500));
      xfer(i, p, j, o, ok);
      chk(ok && o == p, $sformatf("plain frame %0d->%0d unchanged", i, j));
      if (ok && o == p) c_pass++;
    end

    // 2. both parse paths; the paper's first example (switch, ports, queue)
    for (int sa = 0; sa < 2; sa++) begin
      clear_prog();
      ins[0] = I(OP_PUSH, A_SWITCH_ID); ins[1] = I(OP_PUSH, A_IN_PORT);
      ins[2] = I(OP_PUSH, A_OUT_PORT);  ins[3] = I(OP_PUSH, A_ENTRY_ID);
      ins[4] = I(OP_PUSH, A_QUEUE_OCC);
      xfer(2, mk_tpp(sa, MODE_STACK, 0, 0, ins, 5, pm, 8), 1, o, ok);
      chk(ok && pm_word(o, sa, 5, 0) == cfg_switch_id, "switch ID");
      chk(ok && pm_word(o, sa, 5, 1) == 2 && pm_word(o, sa, 5, 2) == 1, "ports");
      chk(ok && pm_word(o, sa, 5, 3) == 101, "matched entry");
      chk(ok && pm_word(o, sa, 5, 4) == 0, "queue empty");
      chk(ok && hop_field(o, sa) == 8'd20, "stack pointer advanced by 5 words");
      if (ok && pm_word(o, sa, 5, 0) == cfg_switch_id) begin
        if (sa) c_udp++; else c_eth++;
      end
    end

    // 3. multi-hop: hop mode, 3 words per hop, the frame crosses the switch twice
    clear_prog();
    ins[0] = I(OP_PUSH, A_SWITCH_ID); ins[1] = I(OP_PUSH, A_IN_PORT);
    ins[2] = I(OP_PUSH, A_LINK_TX_PKTS);
    xfer(0, mk_tpp(0, MODE_HOP, 0, 3, ins, 3, pm, 6), 3, o, ok);
    cfg_switch_id = 32'h5A17_0002;
    xfer(3, o, 1, o2, ok2);
    chk(ok && ok2 && hop_field(o2, 0) == 8'd2, "hop number 2");
    chk(ok2 && pm_word(o2, 0, 3, 0) == 32'h5A17_0001 && pm_word(o2, 0, 3, 1) == 0, "hop 1 record");
    chk(ok2 && pm_word(o2, 0, 3, 3) == 32'h5A17_0002 && pm_word(o2, 0, 3, 4) == 3, "hop 2 record");
    if (ok2 && pm_word(o2, 0, 3, 3) == 32'h5A17_0002) c_hop++;
    cfg_switch_id = 32'h5A17_0001;

    // 4. a TPP rewrites its own output port (STORE to 0xB002)
    clear_prog();
    pm[0] = 32'd3;
    ins[0] = I(OP_STORE, A_OUT_PORT, 0);
    send(1, mk_tpp(1, MODE_STACK, 0, 0, ins, 1, pm, 1), 0);
    recv(3, o, ok);
    chk(ok && rxq[0].size() == 0, "frame redirected from port 0 to port 3");
    if (ok) c_portw++;

    // 5. SRAM read/write: stage 2 SRAM word 0x10 and a register; the SRAM is
    //    not reset, so first note the neighbouring word 0x11
    clear_prog();
    ins[0] = I(OP_LOAD, stage_base(1) + 16'h811, 0);
    xfer(0, mk_tpp(0, MODE_STACK, 0, 0, ins, 1, pm, 1), 2, o, ok);
    v = pm_word(o, 0, 1, 0);
    clear_prog();
    pm[0] = 32'hCAFE_F00D; pm[1] = 32'h1234;
    ins[0] = I(OP_STORE, stage_base(1) + 16'h810, 0);
    ins[1] = I(OP_STORE, stage_base(3) + 16'h5, 1);
    xfer(0, mk_tpp(0, MODE_STACK, 0, 0, ins, 2, pm, 2), 2, o, ok);
    clear_prog();
    ins[0] = I(OP_LOAD, stage_base(1) + 16'h810, 0);
    ins[1] = I(OP_LOAD, stage_base(3) + 16'h5, 1);
    ins[2] = I(OP_LOAD, stage_base(1) + 16'h811, 2);
    xfer(0, mk_tpp(0, MODE_STACK, 0, 0, ins, 3, pm, 3), 2, o, ok);
    chk(ok && pm_word(o, 0, 3, 0) == 32'hCAFE_F00D && pm_word(o, 0, 3, 1) == 32'h1234, "SRAM and register written and read back");
    chk(ok && pm_word(o, 0, 3, 2) == v, "neighbouring SRAM word untouched");

    // 6. writes disabled: the same stores change nothing, the port stays
    cfg_wr_en = 0;
    clear_prog();
    pm[0] = 32'h1; pm[1] = 32'h2;
    ins[0] = I(OP_STORE, stage_base(1) + 16'h810, 0);
    ins[1] = I(OP_STORE, A_OUT_PORT, 1);
    xfer(0, mk_tpp(0, MODE_STACK, 0, 0, ins, 2, pm, 2), 3, o, ok);
    chk(ok, "write-disabled TPP keeps its output port");
    cfg_wr_en = 1;
    clear_prog();
    ins[0] = I(OP_LOAD, stage_base(1) + 16'h810, 0);
    xfer(0, mk_tpp(0, MODE_STACK, 0, 0, ins, 1, pm, 1), 2, o, ok);
    chk(ok && pm_word(o, 0, 1, 0) == 32'hCAFE_F00D, "write-disabled store suppressed");
    if (ok && pm_word(o, 0, 1, 0) == 32'hCAFE_F00D) c_wrdis++;

    // 7. RCP*-style update of link 2's AppSpecific registers:
    //    CSTORE [App0], [expected version], [new version]; STORE [App1], [rate]
    for (int round = 0; round < 2; round++) begin
      clear_prog();
      pm[0] = 32'd0; pm[1] = 32'd1; pm[2] = 32'd5000 + 32'(round);
      ins[0] = I(OP_CSTORE, A_LINK_APP0, 0, 1);
      ins[1] = I(OP_STORE, A_LINK_APP1, 2);
      xfer(1, mk_tpp(1, MODE_STACK, 0, 0, ins, 2, pm, 3), 2, o, ok);
      if (round == 0) begin
        chk(ok && pm_word(o, 1, 2, 0) == 1, "CSTORE succeeds on the expected version");
        if (ok && pm_word(o, 1, 2, 0) == 1) c_cs_ok++;
      end else begin
        chk(ok && pm_word(o, 1, 2, 0) == 1, "failed CSTORE returns the current version");
        if (ok && pm_word(o, 1, 2, 0) == 1) c_cs_fail++;
      end
    end
    read_link(2, A_LINK_APP0, v); chk(v == 1, "App0 holds version 1");
    read_link(2, A_LINK_APP1, v); chk(v == 5000, "App1 written only by the successful round");

    // 8. CEXEC: a program that only runs on one particular switch
    for (int round = 0; round < 2; round++) begin
      clear_prog();
      pm[0] = 32'hFFFF_FFFF; pm[1] = (round == 0) ? cfg_switch_id : 32'hDEAD_BEEF;
      ins[0] = I(OP_CEXEC, A_SWITCH_ID, 0, 1);
      ins[1] = I(OP_LOAD, A_IN_PORT, 2);
      pm[2] = 32'h77;
      xfer(3, mk_tpp(0, MODE_STACK, 0, 0, ins, 2, pm, 3), 0, o, ok);
      if (round == 0) chk(ok && pm_word(o, 0, 2, 2) == 3, "CEXEC match runs the rest");
      else begin
        chk(ok && pm_word(o, 0, 2, 2) == 32'h77, "CEXEC mismatch stops the program");
        if (ok && pm_word(o, 0, 2, 2) == 32'h77) c_cexec++;
      end
    end

    // 9. concurrent CSTOREs from all four ports on the same link register:
    //    exactly one sees the expected version 1 and moves it to 2
    begin
      int winners, got [NP];
      winners = 0;
      clear_prog();
      pm[0] = 32'd1; pm[1] = 32'd2;
      ins[0] = I(OP_CSTORE, A_LINK_APP0, 0, 1);
      @(negedge clk);
      for (int i = 0; i < NP; i++) begin
        in_valid[i] = 1; in_pkt[i] = mk_tpp(1, MODE_STACK, 0, 0, ins, 1, pm, 2);
        in_meta[i].out_port = 8'd2;
      end
      @(posedge clk); #1;
      chk(in_ready == '1, "all four accepted together");
      in_valid = '0;
      repeat (40) @(posedge clk);
      chk(rxq[2].size() == NP, "four CSTORE frames delivered");
      for (int i = 0; i < NP && rxq[2].size() != 0; i++) begin
        o = rxq[2].pop_front();
        if (pm_word(o, 1, 1, 0) == 2) winners++;
      end
      chk(winners == NP, "winner reads back the new value, losers see it too");
      read_link(2, A_LINK_APP0, v); chk(v == 2, "one atomic update: version 2");
    end

    // 10. SRAM contention inside a stage: five SRAM loads in one stage
    clear_prog();
    for (int k = 0; k < MAX_INSTR; k++) ins[k] = I(OP_LOAD, stage_base(0) + 16'h800 + 16'(k * 4), k);
    xfer(0, mk_tpp(0, MODE_STACK, 0, 0, ins, 5, pm, 5), 1, o, ok);
    chk(ok, "five SRAM loads complete");

    // 11. queue contention: ports 0 and 1 send to port 3 in the same cycle
    @(negedge clk);
    for (int i = 0; i < 2; i++) begin
      in_valid[i] = 1; in_pkt[i] = mk_plain(100 + i); in_meta[i].out_port = 8'd3;
    end
    @(posedge clk); #1; in_valid = '0;
    repeat (30) @(posedge clk);
    chk(rxq[3].size() == 2, "both contending frames delivered");
    rxq[3].delete();

    // 12. overflow: port 1 stops draining; 24 frames fill its 16-entry queue,
    //     then a TPP reads the occupancy and the drop counter
    out_ready[1] = 0;
    for (int n = 0; n < 24; n++) send(n % 3 == 0 ? 0 : 2, mk_plain(200), 1);
    repeat (20) @(posedge clk);
    out_ready[1] = 1;
    repeat (40) @(posedge clk);
    chk(rxq[1].size() == 16, $sformatf("16 of 24 frames kept, got %0d", rxq[1].size()));
    rxq[1].delete();
    read_link(1, A_LINK_DROP_PKTS, v); chk(v == 8, $sformatf("8 drops counted, got %0d", v));
    read_link(1, A_LINK_TX_PKTS, v); chk(v > 16, "transmit counter");

    // 13. utilization: wait for the end of the first measurement period
    begin
      int t;
      t = 0;
      while (dut.u_link.tick != 0 && t < 200000) begin @(posedge clk); t++; end
      @(posedge clk);
      read_link(1, A_LINK_TX_UTIL, v);
      chk(v > 3000, $sformatf("transmit utilization of link 1 published: %0d bytes", v));
      if (v > 3000) c_util++;
    end

    repeat (20) @(posedge clk);
    chk(queues_empty(), "no stray frames");

    $display("passthrough=%0d parse_eth=%0d parse_udp=%0d multi_hop=%0d port_write=%0d wr_disabled=%0d",
             c_pass, c_eth, c_udp, c_hop, c_portw, c_wrdis);
    $display("sram_stall=%0d lock_wait=%0d cstore_ok=%0d cstore_fail=%0d cexec_fail=%0d q_drop=%0d q_contention=%0d util_update=%0d",
             c_sram, c_lock, c_cs_ok, c_cs_fail, c_cexec, c_drop, c_cont, c_util);
    chk(c_pass > 0, "mechanism passthrough happened");
    chk(c_eth > 0 && c_udp > 0, "mechanism both parse paths happened");
    chk(c_hop > 0, "mechanism multi-hop happened");
    chk(c_portw > 0, "mechanism output-port write happened");
    chk(c_wrdis > 0, "mechanism write-disable happened");
    chk(c_sram > 0, "mechanism SRAM stall happened");
    chk(c_lock > 0, "mechanism link-lock wait happened");
    chk(c_cs_ok > 0 && c_cs_fail > 0, "mechanism CSTORE success and failure happened");
    chk(c_cexec > 0, "mechanism CEXEC failure happened");
    chk(c_drop > 0, "mechanism queue drop happened");
    chk(c_cont > 0, "mechanism queue contention happened");
    chk(c_util > 0, "mechanism utilization update happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
