// tcpu_exec_unit -- one TCPU execution unit: executes a single TPP instruction.
//
// Each stage has one of these per instruction slot.  The stage's memory-mapped
// decode supplies the current value of the switch location the instruction
// names (sw_rdata) and the two packet-memory operands (pm_a, pm_b); the unit
// answers with what to write where, in the same cycle:
//   LOAD   : packet[a] <- switch
//   STORE  : switch    <- packet[a]
//   CSTORE : if switch == packet[a] then switch <- packet[b] (success);
//            packet[a] <- the switch value after the attempt;
//            a failed CSTORE stops all later instructions (fail = 1)
//   CEXEC  : fail = ((switch & packet[a]) != packet[b]); a failure stops all
//            later instructions
// When en is low (instruction not mapped to this stage, an operand missing, or
// an earlier conditional failed) it does nothing and never fails.
//
// Interface: combinational.  pm_we writes operand a's word (the only packet word
// any instruction writes).  Semantics follow the paper's CSTORE pseudo-code and
// CEXEC description; mask in operand a and value in operand b is this design's
// choice of where CEXEC keeps them.
module tcpu_exec_unit
  import tpp_pkg::*;
(
  input  logic              en,
  input  opcode_e           op,
  input  logic [WORD_W-1:0] sw_rdata,
  input  logic [WORD_W-1:0] pm_a,
  input  logic [WORD_W-1:0] pm_b,
  output logic              sw_we,
  output logic [WORD_W-1:0] sw_wdata,
  output logic              pm_we,
  output logic [WORD_W-1:0] pm_wdata,
  output logic              fail
);

  always_comb begin
    sw_we    = 1'b0;
    sw_wdata = pm_a;
    pm_we    = 1'b0;
    pm_wdata = sw_rdata;
    fail     = 1'b0;
    if (en) begin
      unique case (op)
        OP_LOAD: pm_we = 1'b1;
        OP_STORE: sw_we = 1'b1;
        OP_CSTORE: begin
          pm_we = 1'b1;
          if (sw_rdata == pm_a) begin
            sw_we    = 1'b1;
            sw_wdata = pm_b;
            pm_wdata = pm_b;
          end else begin
            fail = 1'b1;
          end
        end
        OP_CEXEC: fail = ((sw_rdata & pm_a) != pm_b);
        default: ;
      endcase
    end
  end

endmodule
