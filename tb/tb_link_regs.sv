// tb_link_regs -- random traffic events against a reference model of the link registers.
// Drives random receive/transmit/drop events and queue occupancies, and random
// read and write requests from four pipelines, then checks: every read address
// returns the model's value, writes land only in AppSpecific_0/1 and only for
// the granted pipeline, at most one grant per cycle and only to a requester,
// the grant rotates (no requester waits more than NPORTS cycles), and the
// utilization registers hold the bytes of the last completed period.  The
// measurement period is shortened to 50 cycles so that many periods pass.
module tb_link_regs;
  import tpp_pkg::*;

  localparam int NP = 4, PER = 50;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] rx_valid = 0, tx_valid = 0, drop_valid = 0, req = 0, gnt;
  logic [NP-1:0][LEN_W-1:0] rx_len = 0, tx_len = 0, drop_len = 0;
  logic [NP-1:0][WORD_W-1:0] q_bytes = 0, q_pkts = 0;
  logic [NP-1:0][7:0] link = 0;
  logic [NP-1:0][MAX_INSTR-1:0][ADDR_W-1:0] addr = 0;
  logic [NP-1:0][MAX_INSTR-1:0][WORD_W-1:0] rdata, wdata = 0;
  logic [NP-1:0][MAX_INSTR-1:0] we = 0;

  link_regs #(.NPORTS(NP), .UTIL_PERIOD(PER)) dut (.*);
  always #5 clk = ~clk;

  // reference model
  logic [31:0] m_rxb [NP], m_rxp [NP], m_txb [NP], m_txp [NP], m_db [NP], m_dp [NP];
  logic [31:0] m_rxa [NP], m_txa [NP], m_rxu [NP], m_txu [NP], m_a0 [NP], m_a1 [NP];
  int tick = 1;  // the DUT counts one idle edge before the first stimulus
  int wait_c [NP];

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] model_rd(int l, logic [15:0] a);
    if (l >= NP) return 0;
    case (a)
      A_QUEUE_OCC, A_LINK_QBYTES: return q_bytes[l];
      A_QUEUE_PKTS: return q_pkts[l];
      A_LINK_ID: return 32'(l);
      A_LINK_RX_UTIL: return m_rxu[l];
      A_LINK_RX_BYTES: return m_rxb[l];
      A_LINK_TX_UTIL: return m_txu[l];
      A_LINK_TX_BYTES: return m_txb[l];
      A_LINK_APP0: return m_a0[l];
      A_LINK_APP1: return m_a1[l];
      A_LINK_RX_PKTS: return m_rxp[l];
      A_LINK_TX_PKTS: return m_txp[l];
      A_LINK_DROP_BYTES: return m_db[l];
      A_LINK_DROP_PKTS: return m_dp[l];
      default: return 0;
    endcase
  endfunction

  int grants = 0, app_writes = 0, util_nonzero = 0;

  initial begin
    for (int n = 0; n < NP; n++) begin
      m_rxb[n] = 0; m_rxp[n] = 0; m_txb[n] = 0; m_txp[n] = 0; m_db[n] = 0; m_dp[n] = 0;
      m_rxa[n] = 0; m_txa[n] = 0; m_rxu[n] = 0; m_txu[n] = 0; m_a0[n] = 0; m_a1[n] = 0;
      wait_c[n] = 0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // drive random stimulus
      @(negedge clk);
      for (int n = 0; n < NP; n++) begin
        rx_valid[n] = $urandom_range(0, 2) == 0; rx_len[n] = 16'($urandom_range(64, 1500));
        tx_valid[n] = $urandom_range(0, 2) == 0; tx_len[n] = 16'($urandom_range(64, 1500));
        drop_valid[n] = $urandom_range(0, 9) == 0; drop_len[n] = 16'($urandom_range(64, 1500));
        q_bytes[n] = $urandom; q_pkts[n] = $urandom_range(0, 16);
        req[n] = $urandom_range(0, 1);
        link[n] = 8'($urandom_range(0, NP));  // sometimes a nonexistent link
        for (int k = 0; k < MAX_INSTR; k++) begin
          addr[n][k] = ($urandom_range(0, 5) == 0) ? 16'hB000 + 16'($urandom_range(0, 4))
                                                   : 16'hC000 + 16'($urandom_range(0, 13));
          we[n][k] = $urandom_range(0, 1);
          wdata[n][k] = $urandom;
        end
      end
      #1;
      // reads and arbitration
      chk($onehot0(gnt), "at most one grant");
      chk((gnt & ~req) == 0, "grant only to a requester");
      for (int n = 0; n < NP; n++) begin
        for (int k = 0; k < MAX_INSTR; k++)
          chk(rdata[n][k] == model_rd(int'(link[n]), addr[n][k]),
              $sformatf("read port %0d addr %h link %0d: %h vs %h", n, addr[n][k], link[n], rdata[n][k], model_rd(int'(link[n]), addr[n][k])));
      end
      // model update for this edge
      for (int n = 0; n < NP; n++) begin
        if (gnt[n]) begin
          grants++;
          if (link[n] < NP)
            for (int k = 0; k < MAX_INSTR; k++) if (we[n][k]) begin
              if (addr[n][k] == A_LINK_APP0) begin m_a0[link[n]] = wdata[n][k]; app_writes++; end
              if (addr[n][k] == A_LINK_APP1) begin m_a1[link[n]] = wdata[n][k]; app_writes++; end
            end
        end
        if (req[n] && !gnt[n]) wait_c[n]++; else wait_c[n] = 0;
        chk(wait_c[n] < NP, "round robin: no requester waits NPORTS cycles");
      end
      for (int n = 0; n < NP; n++) begin
        logic [31:0] ra, ta;
        ra = m_rxa[n] + (rx_valid[n] ? 32'(rx_len[n]) : 0);
        ta = m_txa[n] + (tx_valid[n] ? 32'(tx_len[n]) : 0);
        if (rx_valid[n]) begin m_rxb[n] += 32'(rx_len[n]); m_rxp[n]++; end
        if (tx_valid[n]) begin m_txb[n] += 32'(tx_len[n]); m_txp[n]++; end
        if (drop_valid[n]) begin m_db[n] += 32'(drop_len[n]); m_dp[n]++; end
        if (tick == PER - 1) begin
          m_rxu[n] = ra; m_txu[n] = ta; m_rxa[n] = 0; m_txa[n] = 0;
          if (ra != 0) util_nonzero++;
        end else begin m_rxa[n] = ra; m_txa[n] = ta; end
      end
      tick = (tick == PER - 1) ? 0 : tick + 1;
    end
    chk(grants > 1000 && app_writes > 500 && util_nonzero > 50, "mechanisms exercised");
    $display("grants=%0d app_writes=%0d util_periods=%0d", grants, app_writes, util_nonzero);
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
