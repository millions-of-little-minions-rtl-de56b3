// tb_tpp_stage -- checks one TCPU stage: every instruction kind, the halting
// rules of CSTORE and CEXEC, the write enable, the SRAM stall and the wait for
// the shared link registers, and the 2-cycle latency of a register-only TPP.
// The stage is built as the only stage of its pipeline (first and last at
// once) so that every address window is present.  Expected results are worked
// out here from the instruction semantics.  A small model of the shared link
// registers (AppSpecific_0) answers the ext_* port.
module tb_tpp_stage;
  import tpp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] cfg_switch_id = 32'h5157_0001, cfg_version = 32'd7;
  logic cfg_wr_en = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  phv_t in_phv, out_phv;
  logic ext_req, ext_gnt;
  logic [MAX_INSTR-1:0][ADDR_W-1:0] ext_addr;
  logic [MAX_INSTR-1:0][WORD_W-1:0] ext_rdata, ext_wdata;
  logic [MAX_INSTR-1:0] ext_we;
  logic [31:0] app0 = 32'd40;
  int gnt_delay = 0, req_cycles = 0;

  tpp_stage #(.STAGE(0), .NSTAGES(1)) dut (.*);
  always #5 clk = ~clk;

  // link register model
  always_comb for (int k = 0; k < MAX_INSTR; k++) ext_rdata[k] = (ext_addr[k] == A_LINK_APP0) ? app0 : 32'hE0E0_0000 | 32'(ext_addr[k]);
  assign ext_gnt = ext_req && (req_cycles >= gnt_delay);
  always @(posedge clk) begin
    req_cycles <= ext_req ? req_cycles + 1 : 0;
    for (int k = 0; k < MAX_INSTR; k++) if (ext_we[k] && ext_addr[k] == A_LINK_APP0) app0 <= ext_wdata[k];
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic uop_t U(opcode_e op, logic [15:0] addr, int pa = 0, int pb = 0);
    uop_t u;
    u.valid = 1; u.op = op; u.addr = addr; u.a_ok = 1; u.pa = PIDX_W'(pa); u.b_ok = 1; u.pb = PIDX_W'(pb);
    return u;
  endfunction

  function automatic phv_t P(uop_t u0, uop_t u1 = '0, uop_t u2 = '0, uop_t u3 = '0, uop_t u4 = '0);
    phv_t p;
    p = '0;
    p.is_tpp = 1; p.n_pmem = PMEM_WORDS; p.n_instr = 5;
    p.uop[0] = u0; p.uop[1] = u1; p.uop[2] = u2; p.uop[3] = u3; p.uop[4] = u4;
    p.halt_idx = IIDX_W'(MAX_INSTR);
    p.meta.in_port = 8'd2; p.meta.out_port = 8'd3; p.meta.entry_id = 16'h0BAD;
    for (int w = 0; w < PMEM_WORDS; w++) p.pmem[w] = 32'h1000 + 32'(w);
    return p;
  endfunction

  // send one packet, return it and the cycles from acceptance to out_valid
  task automatic run(input phv_t p, output phv_t o, output int lat);
    @(negedge clk); in_valid = 1; in_phv = p;
    do @(posedge clk); while (!in_ready);
    #1; in_valid = 0; lat = 1;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    o = out_phv;
    @(posedge clk); #1;
  endtask

  initial begin
    phv_t o, p;
    int lat;
    logic [31:0] clk0;
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;

    // 1. registers: STORE r0 <- pm[0]; then LOAD r0 -> pm[1], metadata reads
    run(P(U(OP_STORE, 16'h1000, 0)), o, lat);
    chk(lat == 2, $sformatf("register-only latency 2, got %0d", lat));
    p = P(U(OP_LOAD, 16'h1000, 1), U(OP_LOAD, A_SWITCH_ID, 2), U(OP_LOAD, A_IN_PORT, 3),
          U(OP_LOAD, A_ENTRY_ID, 4), U(OP_LOAD, 16'h1008, 5));
    clk0 = dut.stage_clock;
    run(p, o, lat);
    chk(o.pmem[1] == 32'h1000, "LOAD register");
    chk(o.pmem[2] == cfg_switch_id, "LOAD switch ID");
    chk(o.pmem[3] == 32'd2 && o.pmem[4] == 32'h0BAD, "LOAD input port / entry");
    chk(o.pmem[5] - clk0 < 6 && o.pmem[5] != 0, "LOAD stage clock");
    chk(o.pmem[0] == 32'h1000 && o.pmem[6] == 32'h1006, "untouched words");

    // 2. SRAM: two writes into one line, then read both: stall cycles
    p = P(U(OP_STORE, 16'h1805, 0), U(OP_STORE, 16'h1806, 1));
    p.pmem[0] = 32'hAAAA_0005; p.pmem[1] = 32'hBBBB_0006;
    run(p, o, lat);
    chk(lat == 2 + 2, $sformatf("two SRAM writes: latency 4, got %0d", lat));
    run(P(U(OP_LOAD, 16'h1805, 7), U(OP_LOAD, 16'h1806, 8)), o, lat);
    chk(o.pmem[7] == 32'hAAAA_0005 && o.pmem[8] == 32'hBBBB_0006, "SRAM read back");
    chk(lat == 2 + 2 + 1, $sformatf("two SRAM reads: latency 5, got %0d", lat));

    // 3. CSTORE success on SRAM word 0x1805: old=pm[0], new=pm[1]; then a LOAD runs
    p = P(U(OP_CSTORE, 16'h1805, 0, 1), U(OP_LOAD, A_SWITCH_VER, 2));
    p.pmem[0] = 32'hAAAA_0005; p.pmem[1] = 32'h0000_0077;
    run(p, o, lat);
    chk(o.pmem[0] == 32'h77 && o.pmem[2] == 32'd7 && o.halt_idx == 3'(MAX_INSTR), "CSTORE success");
    chk(lat == 2 + 1 + 1 + 1, $sformatf("CSTORE on SRAM: read+exec+write, latency 5, got %0d", lat));
    run(P(U(OP_LOAD, 16'h1805, 3)), o, lat);
    chk(o.pmem[3] == 32'h77, "CSTORE wrote SRAM");

    // 4. CSTORE failure: returns current value, halts later instructions only
    p = P(U(OP_LOAD, A_IN_PORT, 5), U(OP_CSTORE, 16'h1805, 0, 1), U(OP_STORE, 16'h1001, 2));
    p.pmem[0] = 32'h1; p.pmem[1] = 32'h2;
    run(p, o, lat);
    chk(o.pmem[5] == 32'd2, "instruction before a failed CSTORE runs");
    chk(o.pmem[0] == 32'h77 && o.halt_idx == 3'd1, "failed CSTORE returns value, halt_idx=1");
    run(P(U(OP_LOAD, 16'h1001, 4)), o, lat);
    chk(o.pmem[4] != 32'h1002 && o.pmem[4] == 32'h0, "STORE after failed CSTORE skipped");

    // 5. CEXEC: (switch ID & mask) == value
    p = P(U(OP_CEXEC, A_SWITCH_ID, 0, 1), U(OP_LOAD, A_IN_PORT, 2));
    p.pmem[0] = 32'hFFFF_0000; p.pmem[1] = 32'h5157_0000;
    run(p, o, lat);
    chk(o.pmem[2] == 32'd2 && o.halt_idx == 3'(MAX_INSTR), "CEXEC pass");
    p.pmem[1] = 32'h5158_0000;
    run(p, o, lat);
    chk(o.pmem[2] == 32'h1002 && o.halt_idx == 3'd0, "CEXEC fail halts");

    // 6. halt from an earlier stage: only instructions before it run
    p = P(U(OP_LOAD, A_IN_PORT, 0), U(OP_LOAD, A_IN_PORT, 1), U(OP_LOAD, A_IN_PORT, 2));
    p.halt_idx = 3'd0;
    run(p, o, lat);
    chk(o.pmem[1] == 32'h1001 && o.pmem[2] == 32'h1002, "earlier halt honoured");
    p.halt_idx = 3'd1; p.uop[0] = U(OP_LOAD, A_IN_PORT, 0);
    run(p, o, lat);
    chk(o.pmem[0] == 32'd2 && o.pmem[2] == 32'h1002, "instruction before earlier halt runs");

    // 7. unmapped address and missing operand: not executed
    p = P(U(OP_LOAD, 16'h7000, 0), U(OP_LOAD, 16'h2000, 1), U(OP_LOAD, A_IN_PORT, 2));
    p.uop[2].a_ok = 0;
    run(p, o, lat);
    chk(o.pmem[0] == 32'h1000 && o.pmem[1] == 32'h1001 && o.pmem[2] == 32'h1002, "unmapped / missing not executed");

    // 8. administrator disables writes
    cfg_wr_en = 0;
    run(P(U(OP_STORE, 16'h1002, 4)), o, lat);
    cfg_wr_en = 1;
    run(P(U(OP_LOAD, 16'h1002, 0)), o, lat);
    chk(o.pmem[0] == 32'h0, "write disabled");

    // 9. output port overwrite
    p = P(U(OP_STORE, A_OUT_PORT, 0), U(OP_LOAD, A_OUT_PORT, 1));
    p.pmem[0] = 32'd1;
    run(p, o, lat);
    chk(o.meta.out_port == 8'd1 && o.pmem[1] == 32'd3, "output port written (read sees old)");

    // 10. link register CSTORE waits for the grant
    gnt_delay = 3;
    p = P(U(OP_CSTORE, A_LINK_APP0, 0, 1), U(OP_LOAD, A_LINK_RX_BYTES, 2), U(OP_LOAD, A_QUEUE_OCC, 3));
    p.pmem[0] = 32'd40; p.pmem[1] = 32'd41;
    run(p, o, lat);
    chk(app0 == 32'd41 && o.pmem[0] == 32'd41, "link CSTORE");
    chk(o.pmem[2] == (32'hE0E0_0000 | 32'(A_LINK_RX_BYTES)) && o.pmem[3] == (32'hE0E0_0000 | 32'(A_QUEUE_OCC)), "link/queue reads");
    chk(lat == 2 + 3, $sformatf("stall for grant: latency 5, got %0d", lat));
    gnt_delay = 0;
    run(P(U(OP_LOAD, A_LINK_APP0, 0)), o, lat);
    chk(lat == 2 && o.pmem[0] == 32'd41, "link read needs no grant");

    // 11. back-pressure holds the packet
    out_ready = 0;
    @(negedge clk); in_valid = 1; in_phv = P(U(OP_LOAD, A_IN_PORT, 0));
    @(posedge clk); #1; in_valid = 0;
    repeat (5) @(posedge clk); #1;
    chk(out_valid && out_phv.pmem[0] == 32'd2 && !in_ready, "held while not ready");
    out_ready = 1;
    @(posedge clk); #1;
    chk(!out_valid, "released");

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
