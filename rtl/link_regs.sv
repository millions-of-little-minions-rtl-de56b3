// link_regs -- per-link statistics and application registers shared by all port pipelines.
//
// For every link (switch port) it keeps receive, transmit and drop counters in
// bytes and packets, the link utilization (bytes received / transmitted during
// the last completed measurement period of UTIL_PERIOD cycles; the period is
// one millisecond at the prototype's 160 MHz), and two read-write registers,
// AppSpecific_0 and AppSpecific_1, that end-hosts use for their own per-link
// state (RCP* keeps a version number and a fair-share rate there).  It also
// relays the byte and packet occupancy of each output queue.
//
// Each port pipeline's last stage has an access port: link number, one address
// per instruction slot, combinational read data, and write strobes.  Reads are
// always served.  Writes (only the two AppSpecific registers are writable)
// need a grant: a stage raises req while it holds a TPP that writes a link
// register, and a round-robin arbiter grants one pipeline per cycle.  The
// granted stage reads, compares and writes in that one cycle, so a CSTORE on a
// link register is atomic with respect to every other pipeline.
//
// Timing: reads combinational, writes and counters update at the clock edge.
// Paper: the per-port statistics and AppSpecific registers, utilization updated
// every millisecond.  Own choices: counter widths (32 bits, wrapping), the
// arbiter, utilization in bytes per period, and the addresses (see tpp_pkg).
// Lint note: the reset is used asynchronously by the flip-flops and
// synchronously by the 'disable iff' of the assertions; the latter is not
// logic, so the resulting mixed-reset warning does not describe a circuit.
module link_regs
  import tpp_pkg::*;
#(
  parameter int unsigned NPORTS      = 4,
  parameter int unsigned UTIL_PERIOD = 160000
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // events
  input  logic [NPORTS-1:0]                             rx_valid,
  input  logic [NPORTS-1:0][LEN_W-1:0]                  rx_len,
  input  logic [NPORTS-1:0]                             tx_valid,
  input  logic [NPORTS-1:0][LEN_W-1:0]                  tx_len,
  input  logic [NPORTS-1:0]                             drop_valid,
  input  logic [NPORTS-1:0][LEN_W-1:0]                  drop_len,
  input  logic [NPORTS-1:0][WORD_W-1:0]                 q_bytes,
  input  logic [NPORTS-1:0][WORD_W-1:0]                 q_pkts,
  // access ports, one per pipeline
  input  logic [NPORTS-1:0]                             req,
  output logic [NPORTS-1:0]                             gnt,
  input  logic [NPORTS-1:0][7:0]                        link,
  input  logic [NPORTS-1:0][MAX_INSTR-1:0][ADDR_W-1:0]  addr,
  output logic [NPORTS-1:0][MAX_INSTR-1:0][WORD_W-1:0]  rdata,
  input  logic [NPORTS-1:0][MAX_INSTR-1:0]              we,
  input  logic [NPORTS-1:0][MAX_INSTR-1:0][WORD_W-1:0]  wdata
);

  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  typedef struct packed {
    logic [WORD_W-1:0] rx_bytes, rx_pkts, tx_bytes, tx_pkts, drop_bytes, drop_pkts;
    logic [WORD_W-1:0] rx_acc, tx_acc, rx_util, tx_util, app0, app1;
  } link_t;

  link_t [NPORTS-1:0]  L;
  logic  [31:0]        tick;
  logic  [PW-1:0]      rr;

  // ------------------------------------------------------------- arbiter
  always_comb begin
    int unsigned i;
    gnt = '0;
    for (int unsigned o = 0; o < NPORTS; o++) begin
      i = (int'(rr) + o) % NPORTS;
      if (req[i] && gnt == '0) gnt[i] = 1'b1;
    end
  end

  // ------------------------------------------------------------- reads
  function automatic logic [WORD_W-1:0] rd(input logic [7:0] l, input logic [ADDR_W-1:0] a,
                                           input link_t [NPORTS-1:0] s,
                                           input logic [NPORTS-1:0][WORD_W-1:0] qb,
                                           input logic [NPORTS-1:0][WORD_W-1:0] qp);
    if (int'(l) >= NPORTS) return '0;
    unique case (a)
      A_QUEUE_OCC, A_LINK_QBYTES: return qb[l[PW-1:0]];
      A_QUEUE_PKTS:      return qp[l[PW-1:0]];
      A_LINK_ID:         return WORD_W'(l);
      A_LINK_RX_UTIL:    return s[l[PW-1:0]].rx_util;
      A_LINK_RX_BYTES:   return s[l[PW-1:0]].rx_bytes;
      A_LINK_TX_UTIL:    return s[l[PW-1:0]].tx_util;
      A_LINK_TX_BYTES:   return s[l[PW-1:0]].tx_bytes;
      A_LINK_APP0:       return s[l[PW-1:0]].app0;
      A_LINK_APP1:       return s[l[PW-1:0]].app1;
      A_LINK_RX_PKTS:    return s[l[PW-1:0]].rx_pkts;
      A_LINK_TX_PKTS:    return s[l[PW-1:0]].tx_pkts;
      A_LINK_DROP_BYTES: return s[l[PW-1:0]].drop_bytes;
      A_LINK_DROP_PKTS:  return s[l[PW-1:0]].drop_pkts;
      default:           return '0;
    endcase
  endfunction

  always_comb
    for (int p = 0; p < NPORTS; p++)
      for (int k = 0; k < MAX_INSTR; k++)
        rdata[p][k] = rd(link[p], addr[p][k], L, q_bytes, q_pkts);

  // ------------------------------------------------------------- updates
  logic period_end;
  assign period_end = (tick == UTIL_PERIOD - 1);

  // accumulators including this cycle's bytes
  logic [NPORTS-1:0][WORD_W-1:0] rxa, txa;
  always_comb
    for (int n = 0; n < NPORTS; n++) begin
      rxa[n] = L[n].rx_acc + (rx_valid[n] ? WORD_W'(rx_len[n]) : '0);
      txa[n] = L[n].tx_acc + (tx_valid[n] ? WORD_W'(tx_len[n]) : '0);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      L    <= '0;
      tick <= '0;
      rr   <= '0;
    end else begin
      tick <= period_end ? '0 : tick + 1;
      for (int p = 0; p < NPORTS; p++) begin
        if (gnt[p]) rr <= PW'((p + 1) % NPORTS);
      end
      for (int n = 0; n < NPORTS; n++) begin
        if (rx_valid[n]) begin
          L[n].rx_bytes <= L[n].rx_bytes + WORD_W'(rx_len[n]);
          L[n].rx_pkts  <= L[n].rx_pkts + 1;
        end
        if (tx_valid[n]) begin
          L[n].tx_bytes <= L[n].tx_bytes + WORD_W'(tx_len[n]);
          L[n].tx_pkts  <= L[n].tx_pkts + 1;
        end
        if (drop_valid[n]) begin
          L[n].drop_bytes <= L[n].drop_bytes + WORD_W'(drop_len[n]);
          L[n].drop_pkts  <= L[n].drop_pkts + 1;
        end
        if (period_end) begin
          L[n].rx_util <= rxa[n];
          L[n].tx_util <= txa[n];
          L[n].rx_acc  <= '0;
          L[n].tx_acc  <= '0;
        end else begin
          L[n].rx_acc <= rxa[n];
          L[n].tx_acc <= txa[n];
        end
      end
      // writes from the granted pipeline, in instruction order
      for (int p = 0; p < NPORTS; p++) begin
        if (gnt[p] && int'(link[p]) < NPORTS) begin
          for (int k = 0; k < MAX_INSTR; k++) begin
            if (we[p][k] && addr[p][k] == A_LINK_APP0) L[link[p][PW-1:0]].app0 <= wdata[p][k];
            if (we[p][k] && addr[p][k] == A_LINK_APP1) L[link[p][PW-1:0]].app1 <= wdata[p][k];
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);

endmodule
