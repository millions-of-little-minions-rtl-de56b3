// tb_tcpu_exec_unit -- checks one execution unit against the instruction semantics.
// Random operands for LOAD, STORE, CSTORE (matching and not) and CEXEC (passing
// and not), plus en low, each compared with expected outputs computed here.
module tb_tcpu_exec_unit;
  import tpp_pkg::*;

  int checks = 0, failures = 0;
  logic        en;
  opcode_e     op;
  logic [31:0] sw_rdata, pm_a, pm_b, sw_wdata, pm_wdata;
  logic        sw_we, pm_we, fail;

  tcpu_exec_unit dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s op=%0d", what, op); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      en = (t % 8) != 7;
      op = opcode_e'(t % 7);
      sw_rdata = $urandom; pm_a = $urandom; pm_b = $urandom;
      if (t % 3 == 0) pm_a = sw_rdata;                               // CSTORE match
      if (t % 5 == 0) begin pm_a = 32'h0000_FF00; pm_b = sw_rdata & pm_a; end // CEXEC pass
      #1;
      if (!en || op == OP_NOP || op == OP_PUSH || op == OP_POP) begin
        chk(!sw_we && !pm_we && !fail, "idle");
      end else begin
        case (op)
          OP_LOAD:  chk(pm_we && pm_wdata == sw_rdata && !sw_we && !fail, "LOAD");
          OP_STORE: chk(sw_we && sw_wdata == pm_a && !pm_we && !fail, "STORE");
          OP_CSTORE:
            if (sw_rdata == pm_a) chk(sw_we && sw_wdata == pm_b && pm_we && pm_wdata == pm_b && !fail, "CSTORE ok");
            else chk(!sw_we && pm_we && pm_wdata == sw_rdata && fail, "CSTORE fail");
          OP_CEXEC: chk(!sw_we && !pm_we && fail == ((sw_rdata & pm_a) != pm_b), "CEXEC");
          default: ;
        endcase
      end
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
