// switch_queues -- the switch memory: one output queue per port.
//
// Frames leaving the port pipelines are written into the FIFO of their output
// port.  Each output queue accepts one frame per cycle; when several pipelines
// target the same queue in one cycle, a rotating-priority arbiter picks one and
// the others wait (in_ready low).  A frame that finds its queue full is taken
// and dropped (tail drop), and the drop is reported for the drop counters.  A
// frame whose output port does not exist is taken and discarded.  Each queue
// reports its occupancy in bytes and in frames; this is the queue occupancy
// that a TPP reads at address 0xB000 while the frame passes the last stage.
// Frames leave through a valid/ready port per output; a transmit event is
// reported whenever a frame leaves.
//
// Timing: a frame written at an edge can leave from the next cycle.
// Paper: the switch memory block between ingress and egress and the per-queue
// occupancy statistic.  Own choices: FIFO depth, tail drop, the arbiter, and
// that only the header window of each frame is stored.
// Lint note: the reset is used asynchronously by the flip-flops and
// synchronously by the 'disable iff' of the assertions; the latter is not
// logic, so the resulting mixed-reset warning does not describe a circuit.
module switch_queues
  import tpp_pkg::*;
#(
  parameter int unsigned NPORTS = 4,
  parameter int unsigned DEPTH  = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NPORTS-1:0]                 in_valid,
  output logic [NPORTS-1:0]                 in_ready,
  input  pkt_t [NPORTS-1:0]                 in_pkt,
  input  logic [NPORTS-1:0][7:0]            in_dst,
  output logic [NPORTS-1:0]                 out_valid,
  input  logic [NPORTS-1:0]                 out_ready,
  output pkt_t [NPORTS-1:0]                 out_pkt,
  output logic [NPORTS-1:0][WORD_W-1:0]     q_bytes,
  output logic [NPORTS-1:0][WORD_W-1:0]     q_pkts,
  output logic [NPORTS-1:0]                 drop_valid,
  output logic [NPORTS-1:0][LEN_W-1:0]      drop_len,
  output logic [NPORTS-1:0]                 tx_valid,
  output logic [NPORTS-1:0][LEN_W-1:0]      tx_len
);

  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;
  localparam int unsigned AW = $clog2(DEPTH);

  pkt_t              mem [NPORTS][DEPTH];
  logic [AW-1:0]     wp [NPORTS], rp [NPORTS];
  logic [AW:0]       cnt [NPORTS];
  logic [PW-1:0]     rr [NPORTS];

  logic [NPORTS-1:0]         enq;      // per output queue: a frame is written/dropped
  logic [NPORTS-1:0][PW-1:0] enq_src;
  logic [NPORTS-1:0]         full;

  always_comb begin
    int unsigned i;
    enq      = '0;
    enq_src  = '0;
    in_ready = '0;
    for (int q = 0; q < NPORTS; q++) begin
      full[q] = (cnt[q] == (AW+1)'(DEPTH));
      for (int o = 0; o < NPORTS; o++) begin
        i = (int'(rr[q]) + o) % NPORTS;
        if (!enq[q] && in_valid[i] && int'(in_dst[i]) == q) begin
          enq[q]     = 1'b1;
          enq_src[q] = PW'(i);
          in_ready[i] = 1'b1;
        end
      end
    end
    for (int i2 = 0; i2 < NPORTS; i2++)
      if (int'(in_dst[i2]) >= NPORTS) in_ready[i2] = 1'b1;  // no such port: discard
    for (int q = 0; q < NPORTS; q++) begin
      out_valid[q]  = (cnt[q] != '0);
      out_pkt[q]    = mem[q][rp[q]];
      tx_valid[q]   = out_valid[q] && out_ready[q];
      tx_len[q]     = out_pkt[q].len;
      drop_valid[q] = enq[q] && full[q];
      drop_len[q]   = in_pkt[enq_src[q]].len;
    end
  end

  always_ff @(posedge clk) begin
    for (int q = 0; q < NPORTS; q++)
      if (enq[q] && !full[q]) mem[q][wp[q]] <= in_pkt[enq_src[q]];
  end

  logic [NPORTS-1:0] do_w, do_r;  // enqueue / dequeue this cycle
  always_comb
    for (int q = 0; q < NPORTS; q++) begin
      do_w[q] = enq[q] && !full[q];
      do_r[q] = tx_valid[q];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NPORTS; q++) begin
        wp[q] <= '0; rp[q] <= '0; cnt[q] <= '0; rr[q] <= '0;
      end
      q_bytes <= '0;
      q_pkts  <= '0;
    end else begin
      for (int q = 0; q < NPORTS; q++) begin
        if (enq[q]) rr[q] <= PW'((int'(enq_src[q]) + 1) % NPORTS);
        if (do_w[q]) wp[q] <= AW'((int'(wp[q]) + 1) % DEPTH);
        if (do_r[q]) rp[q] <= AW'((int'(rp[q]) + 1) % DEPTH);
        cnt[q]     <= cnt[q] + (AW+1)'(do_w[q]) - (AW+1)'(do_r[q]);
        q_pkts[q]  <= q_pkts[q] + WORD_W'(do_w[q]) - WORD_W'(do_r[q]);
        q_bytes[q] <= q_bytes[q] + (do_w[q] ? WORD_W'(in_pkt[enq_src[q]].len) : '0)
                                 - (do_r[q] ? WORD_W'(out_pkt[q].len) : '0);
      end
    end
  end

  for (genvar q = 0; q < NPORTS; q++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) cnt[q] <= (AW+1)'(DEPTH));
  end

endmodule
