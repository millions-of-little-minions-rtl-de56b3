// tpp_xlate -- turns PUSH/POP into LOAD/STORE with fixed packet-memory addresses.
//
// The packet-memory word touched by every PUSH and POP is known as soon as the
// instructions are parsed, so the instructions can be rewritten into
// position-independent LOAD/STORE operations that the distributed stages may
// execute in any order while the packet still ends up with its values in
// program order.  Walking the instructions in program order:
//   PUSH X  -> LOAD  X, word[sp]; sp = sp + 1
//   POP  X  -> sp = sp - 1; STORE X, word[sp]
// so PUSH, PUSH, PUSH, POP becomes LOAD hop[0], LOAD hop[1], LOAD hop[2],
// STORE hop[2].
//
// Addressing (header field 3):
//   stack mode: sp starts at header field 4 / 4 (the stack pointer counts bytes
//               and moves by 4 per word); LOAD/STORE/CSTORE/CEXEC operands are
//               absolute word numbers; the header gets the new stack pointer.
//   hop mode:   the hop's area starts at base = hop * per-hop-length (fields 4
//               and 5); all operands are base + offset, and PUSH/POP start at
//               offset 0 of the hop's area; the header gets hop + 1.
// An operand outside the visible packet memory is flagged not-ok and the
// instruction that needs it is not executed.
//
// Interface: combinational.  Paper: the translation, the hop formula and the
// byte-counting stack pointer.  Own choices: that PUSH/POP in hop mode count
// from the hop's base, that LOAD/STORE in stack mode are absolute, and that the
// stack pointer moves for every PUSH/POP whether or not it later executes.
module tpp_xlate
  import tpp_pkg::*;
(
  input  tpp_hdr_t               hdr,
  input  logic [IIDX_W-1:0]      n_instr,
  input  instr_t [MAX_INSTR-1:0] instr,
  input  logic [PIDX_W:0]        n_pmem,
  output uop_t [MAX_INSTR-1:0]   uop,
  output logic [7:0]             new_hop_sp
);

  logic signed [19:0] sp, base, ia, ib;  // word indices; may go negative before the range check
  logic hop_mode;

  always_comb begin
    hop_mode = (hdr.mode == MODE_HOP);
    base     = hop_mode ? 20'(int'(hdr.hop_sp) * int'(hdr.hop_len)) : '0;
    sp       = hop_mode ? '0 : 20'(int'(hdr.hop_sp) / 4);
    for (int k = 0; k < MAX_INSTR; k++) begin
      uop[k]       = '0;
      uop[k].addr  = instr[k].addr;
      uop[k].valid = (k < int'(n_instr)) && (instr[k].op != OP_NOP);
      ia = base + 20'(instr[k].off_a);
      ib = base + 20'(instr[k].off_b);
      if (k < int'(n_instr)) begin
      unique case (instr[k].op)
        OP_PUSH: begin
          uop[k].op = OP_LOAD;
          ia        = base + sp;
          sp        = sp + 1;
        end
        OP_POP: begin
          uop[k].op = OP_STORE;
          sp        = sp - 1;
          ia        = base + sp;
        end
        OP_LOAD, OP_STORE, OP_CSTORE, OP_CEXEC: uop[k].op = instr[k].op;
        default: begin
          uop[k].op    = OP_NOP;
          uop[k].valid = 1'b0;
        end
      endcase
      end else begin
        uop[k].op = OP_NOP;
      end
      uop[k].a_ok = (ia >= 0) && (ia < 20'(n_pmem));
      uop[k].b_ok = (ib >= 0) && (ib < 20'(n_pmem));
      uop[k].pa   = uop[k].a_ok ? PIDX_W'(ia) : '0;
      uop[k].pb   = uop[k].b_ok ? PIDX_W'(ib) : '0;
    end
    new_hop_sp = hop_mode ? hdr.hop_sp + 8'd1 : 8'(sp << 2);
  end

endmodule
