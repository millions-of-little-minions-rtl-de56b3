// tb_tpp_xlate -- checks the PUSH/POP to LOAD/STORE translation.
// Directed cases (the PUSH, PUSH, PUSH, POP example in hop and stack mode,
// stack overflow and underflow, hop-relative operands) and random programs
// compared with a reference walk written here.
module tb_tpp_xlate;
  import tpp_pkg::*;
  import tb_tpp_util::*;

  int checks = 0, failures = 0;
  tpp_hdr_t               hdr;
  logic [IIDX_W-1:0]      n_instr;
  instr_t [MAX_INSTR-1:0] instr;
  logic [PIDX_W:0]        n_pmem;
  uop_t [MAX_INSTR-1:0]   uop;
  logic [7:0]             new_hop_sp;

  tpp_xlate dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic chk_uop(int k, opcode_e op, bit aok, int pa);
    chk(uop[k].valid && uop[k].op == op && uop[k].a_ok == aok && (!aok || int'(uop[k].pa) == pa),
        $sformatf("uop %0d: op %0d a_ok %0d pa %0d", k, uop[k].op, uop[k].a_ok, uop[k].pa));
  endtask

  initial begin
    hdr = '0;
    // hop mode, hop 0: PUSH,PUSH,PUSH,POP -> LOAD 0, LOAD 1, LOAD 2, STORE 2
    hdr.mode = MODE_HOP; hdr.hop_sp = 8'd0; hdr.hop_len = 8'd4; n_pmem = 10; n_instr = 4;
    instr[0] = I(OP_PUSH, 16'hB003); instr[1] = I(OP_PUSH, 16'hB001);
    instr[2] = I(OP_PUSH, 16'h1000); instr[3] = I(OP_POP, 16'h3000); instr[4] = '0;
    #1;
    chk_uop(0, OP_LOAD, 1, 0); chk_uop(1, OP_LOAD, 1, 1); chk_uop(2, OP_LOAD, 1, 2); chk_uop(3, OP_STORE, 1, 2);
    chk(!uop[4].valid, "slot 4 empty");
    chk(new_hop_sp == 8'd1, "hop number advances");
    // the same at hop 2 with 4 words per hop: base 8
    hdr.hop_sp = 8'd2; #1;
    chk_uop(0, OP_LOAD, 1, 8); chk_uop(1, OP_LOAD, 1, 9); chk_uop(2, OP_LOAD, 0, 0); chk_uop(3, OP_STORE, 0, 0);
    chk(new_hop_sp == 8'd3, "hop number advances to 3");
    // hop addressing of LOAD/CSTORE operands: base + offset
    hdr.hop_sp = 8'd1; hdr.hop_len = 8'd3; n_instr = 2;
    instr[0] = I(OP_CSTORE, 16'hC006, 0, 1); instr[1] = I(OP_STORE, 16'hC007, 2); #1;
    chk(uop[0].op == OP_CSTORE && uop[0].pa == 3 && uop[0].pb == 4 && uop[0].a_ok && uop[0].b_ok, "CSTORE hop operands");
    chk(uop[1].op == OP_STORE && uop[1].pa == 5, "STORE hop operand");
    // stack mode: SP in bytes
    hdr.mode = MODE_STACK; hdr.hop_sp = 8'd4; n_instr = 4;
    instr[0] = I(OP_PUSH, 16'hA000); instr[1] = I(OP_PUSH, 16'hB001);
    instr[2] = I(OP_PUSH, 16'hB000); instr[3] = I(OP_POP, 16'h1001); #1;
    chk_uop(0, OP_LOAD, 1, 1); chk_uop(1, OP_LOAD, 1, 2); chk_uop(2, OP_LOAD, 1, 3); chk_uop(3, OP_STORE, 1, 3);
    chk(new_hop_sp == 8'd12, "SP = 4 + 4*(3-1)");
    // stack overflow: the third PUSH falls off the end of 3 words
    n_pmem = 3; #1;
    chk_uop(1, OP_LOAD, 1, 2); chk_uop(2, OP_LOAD, 0, 0);
    // underflow: POP at SP 0
    hdr.hop_sp = 8'd0; n_instr = 1; instr[0] = I(OP_POP, 16'h1000); #1;
    chk(uop[0].op == OP_STORE && !uop[0].a_ok, "POP underflow not executable");
    // random programs against a reference walk
    for (int t = 0; t < 300; t++) begin
      int sp, base, exp_a;
      bit hop;
      hop = t[0];
      hdr.mode = hop ? MODE_HOP : MODE_STACK;
      hdr.hop_sp = 8'($urandom_range(0, 4) * (hop ? 1 : 4));
      hdr.hop_len = 8'($urandom_range(1, 4));
      n_pmem = (PIDX_W+1)'($urandom_range(0, PMEM_WORDS));
      n_instr = IIDX_W'($urandom_range(0, MAX_INSTR));
      for (int k = 0; k < MAX_INSTR; k++)
        instr[k] = I(opcode_e'($urandom_range(1, 6)), 16'($urandom), int'($urandom_range(0, 12)), int'($urandom_range(0, 12)));
      #1;
      base = hop ? int'(hdr.hop_sp) * int'(hdr.hop_len) : 0;
      sp = hop ? 0 : int'(hdr.hop_sp) / 4;
      for (int k = 0; k < MAX_INSTR; k++) begin
        if (k >= int'(n_instr)) begin chk(!uop[k].valid, "unused slot"); continue; end
        case (instr[k].op)
          OP_PUSH: begin exp_a = base + sp; sp++; chk(uop[k].op == OP_LOAD, "PUSH->LOAD"); end
          OP_POP:  begin sp--; exp_a = base + sp; chk(uop[k].op == OP_STORE, "POP->STORE"); end
          default: begin exp_a = base + int'(instr[k].off_a); chk(uop[k].op == instr[k].op, "op kept"); end
        endcase
        chk(uop[k].a_ok == (exp_a >= 0 && exp_a < int'(n_pmem)), "a_ok");
        if (uop[k].a_ok) chk(int'(uop[k].pa) == exp_a, "pa");
      end
      chk(new_hop_sp == (hop ? hdr.hop_sp + 1 : 8'(sp * 4)), "new hop/sp");
    end
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
