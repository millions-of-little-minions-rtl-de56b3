// tb_tpp_rewrite -- checks that packet memory and the hop/SP field go back into
// the frame at the right bytes (big-endian), for both TPP placements, and that
// ordinary frames and all other bytes are left alone.
module tb_tpp_rewrite;
  import tpp_pkg::*;
  import tb_tpp_util::*;

  int checks = 0, failures = 0;
  phv_t phv;
  pkt_t pkt;

  tpp_rewrite dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    instr_t ins [MAX_INSTR];
    logic [31:0] pm [16];
    for (int t = 0; t < 100; t++) begin
      bit sa; int ni, np;
      sa = t[0]; ni = int'($urandom_range(0, MAX_INSTR)); np = int'($urandom_range(1, PMEM_WORDS));
      for (int k = 0; k < MAX_INSTR; k++) ins[k] = I(OP_PUSH, 16'($urandom));
      for (int w = 0; w < 16; w++) pm[w] = $urandom;
      phv = '0;
      phv.pkt = mk_tpp(sa, 0, 4, 0, ins, ni, pm, np);
      phv.is_tpp = 1; phv.tpp_off = 8'(tpp_offset(sa)); phv.n_instr = IIDX_W'(ni);
      phv.n_pmem = (PIDX_W+1)'(np); phv.new_hop_sp = 8'(8 + t);
      for (int w = 0; w < PMEM_WORDS; w++) phv.pmem[w] = 32'hA5000000 + 32'(w * 256 + t);
      #1;
      chk(hop_field(pkt, sa) == 8'(8 + t), "hop/SP field");
      for (int w = 0; w < np; w++) chk(pm_word(pkt, sa, ni, w) == 32'hA5000000 + 32'(w * 256 + t), "pmem word");
      if (np < PMEM_WORDS)
        chk(pm_word(pkt, sa, ni, np) == pm_word(phv.pkt, sa, ni, np), "word past packet memory untouched");
      for (int b = 0; b < tpp_offset(sa) + 3; b++) chk(pkt.bytes[b] == phv.pkt.bytes[b], "bytes before field 4");
      chk(pkt.len == phv.pkt.len, "length unchanged");
    end
    phv.is_tpp = 0; #1;
    chk(pkt == phv.pkt, "ordinary frame unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
