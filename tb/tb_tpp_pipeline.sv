// tb_tpp_pipeline -- one port's pipeline end to end, at the default four stages.
// Runs the paper's PUSH/POP example (output port, input port, a stage-1
// register, POP into a stage-3 register), feeds a hop-addressed TPP through
// twice to play two hops, checks ordinary frames pass unchanged, and measures
// the latency (1 + 2*NSTAGES cycles) and the back-to-back rate (one frame every
// 2 cycles for register-only TPPs).  Expected values are derived here.
module tb_tpp_pipeline;
  import tpp_pkg::*;
  import tb_tpp_util::*;

  localparam int NST = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] cfg_switch_id = 32'h0000_0AB1, cfg_version = 32'd3;
  logic cfg_wr_en = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_is_tpp;
  pkt_t in_pkt, out_pkt;
  meta_t in_meta, out_meta;
  logic ext_req, ext_gnt;
  logic [7:0] ext_port;
  logic [MAX_INSTR-1:0][ADDR_W-1:0] ext_addr;
  logic [MAX_INSTR-1:0][WORD_W-1:0] ext_rdata, ext_wdata;
  logic [MAX_INSTR-1:0] ext_we;

  tpp_pipeline #(.NSTAGES(NST)) dut (.*);
  always #5 clk = ~clk;
  assign ext_gnt = ext_req;
  always_comb for (int k = 0; k < MAX_INSTR; k++) ext_rdata[k] = {16'(ext_port), ext_addr[k]};

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input pkt_t p, input meta_t m, output pkt_t o, output meta_t om, output int lat);
    @(negedge clk); in_valid = 1; in_pkt = p; in_meta = m;
    do @(posedge clk); while (!in_ready);
    #1; in_valid = 0; lat = 1;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    o = out_pkt; om = out_meta;
    @(posedge clk); #1;
  endtask

  initial begin
    instr_t ins [MAX_INSTR];
    logic [31:0] pm [16];
    pkt_t p, o;
    meta_t m, om;
    int lat;
    m.in_port = 8'd1; m.out_port = 8'd2; m.entry_id = 16'd77;
    for (int w = 0; w < 16; w++) pm[w] = 32'hFFFF_0000 + 32'(w);
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;

    // set stage-1 register 1 to 0x99 (STORE from packet memory word 0)
    ins[0] = I(OP_STORE, 16'h1001, 0);
    pm[0] = 32'h99;
    p = mk_tpp(0, 0, 0, 0, ins, 1, pm, 4);
    run(p, m, o, om, lat);
    chk(lat == 1 + 2 * NST, $sformatf("latency %0d, expected %0d", lat, 1 + 2 * NST));

    // the paper's example, stack mode starting at SP 0
    ins[0] = I(OP_PUSH, A_OUT_PORT); ins[1] = I(OP_PUSH, A_IN_PORT);
    ins[2] = I(OP_PUSH, 16'h1001);   ins[3] = I(OP_POP, 16'h3003);
    ins[4] = I(OP_PUSH, A_LINK_TX_BYTES);
    for (int w = 0; w < 16; w++) pm[w] = 32'h0;
    p = mk_tpp(1, MODE_STACK, 0, 0, ins, 5, pm, 6);
    run(p, m, o, om, lat);
    chk(pm_word(o, 1, 5, 0) == 32'd2, "PUSH output port");
    chk(pm_word(o, 1, 5, 1) == 32'd1, "PUSH input port");
    // the last PUSH lands where the POP took its word from: word 2
    chk(pm_word(o, 1, 5, 2) == {16'd2, A_LINK_TX_BYTES}, "PUSH after POP reuses the word");
    chk(hop_field(o, 1) == 8'd12, "SP = 3 pushes - 1 pop + 1 push = 3 words = 12 bytes");
    chk(om.out_port == 8'd2 && om.entry_id == 16'd77, "metadata out");
    // POP wrote stage-3 register 3 with the value pushed just before (0x99)
    ins[0] = I(OP_LOAD, 16'h3003, 0);
    p = mk_tpp(0, 0, 0, 0, ins, 1, pm, 2);
    run(p, m, o, om, lat);
    chk(pm_word(o, 0, 1, 0) == 32'h99, "POP stored into stage-3 register");

    // two hops in hop mode, 2 words per hop
    ins[0] = I(OP_LOAD, A_SWITCH_ID, 0); ins[1] = I(OP_LOAD, A_IN_PORT, 1);
    for (int w = 0; w < 16; w++) pm[w] = 32'h0;
    p = mk_tpp(0, MODE_HOP, 0, 2, ins, 2, pm, 6);
    run(p, m, o, om, lat);
    chk(pm_word(o, 0, 2, 0) == 32'hAB1 && pm_word(o, 0, 2, 1) == 32'd1 && hop_field(o, 0) == 8'd1, "hop 1");
    cfg_switch_id = 32'hAB2; m.in_port = 8'd3;
    run(o, m, o, om, lat);
    chk(pm_word(o, 0, 2, 0) == 32'hAB1 && pm_word(o, 0, 2, 1) == 32'd1, "hop 1 kept");
    chk(pm_word(o, 0, 2, 2) == 32'hAB2 && pm_word(o, 0, 2, 3) == 32'd3 && hop_field(o, 0) == 8'd2, "hop 2");

    // an ordinary frame passes unchanged
    p = mk_plain(200);
    run(p, m, o, om, lat);
    chk(o == p, "ordinary frame unchanged");

    // back-to-back register-only TPPs: one every 2 cycles
    begin
      int t0, n;
      ins[0] = I(OP_PUSH, A_IN_PORT);
      p = mk_tpp(0, 0, 0, 0, ins, 1, pm, 2);
      n = 0;
      @(negedge clk); in_valid = 1; in_pkt = p;
      t0 = 0;
      for (int c = 0; c < 60; c++) begin
        @(posedge clk); #1;
        if (out_valid) n++;
      end
      in_valid = 0;
      chk(n >= 25 && n <= 30, $sformatf("rate one per 2 cycles: %0d in 60", n));
      repeat (20) @(posedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
