// tpp_switch -- a four-port switch datapath that executes tiny packet programs.
//
// Every input port has its own TPP pipeline (parser, NSTAGES match-action
// stages each with a TCPU slice, 64 kbit SRAM and 8 registers, and a rewrite
// step).  Frames then enter the switch memory, one output queue per port, and
// leave on their output port.  The pipelines' last stages share one block of
// link statistics and per-link application registers, which also relays the
// occupancy of every output queue, so a TPP crossing any input port can read or
// update the state of the link it leaves on.
//
// What the switch does not decide itself: the forwarding decision (output port
// and matched flow entry) arrives with each frame on in_meta, as it would from
// the router's lookup tables; a TPP may overwrite the output port.  Switch ID,
// version and the administrator's write enable come from the control plane.
//
// Interface: per input port valid/ready + frame header window + metadata; per
// output port valid/ready + frame.  Frames are carried as a header window of
// HDR_BYTES bytes plus the full length; payload beyond the window is not
// modelled.  Timing: a register-only TPP spends 1 + 2*NSTAGES cycles in its
// pipeline, then at least one cycle in its queue.
// Paper: four ports, a four-stage TPP pipeline at each port (16 stages, 1 Mbit
// of SRAM and 128 registers in all), the queue between ingress and egress.
// Own choices: carrying headers only, tail-drop queues of QDEPTH frames, and
// the shared-link arbitration.
module tpp_switch
  import tpp_pkg::*;
#(
  parameter int unsigned NPORTS      = 4,
  parameter int unsigned NSTAGES     = 4,
  parameter int unsigned SRAM_DEPTH  = 512,
  parameter int unsigned QDEPTH      = 16,
  parameter int unsigned UTIL_PERIOD = 160000
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [WORD_W-1:0]             cfg_switch_id,
  input  logic [WORD_W-1:0]             cfg_version,
  input  logic                          cfg_wr_en,
  input  logic [NPORTS-1:0]             in_valid,
  output logic [NPORTS-1:0]             in_ready,
  input  pkt_t [NPORTS-1:0]             in_pkt,
  input  meta_t [NPORTS-1:0]            in_meta,
  output logic [NPORTS-1:0]             out_valid,
  input  logic [NPORTS-1:0]             out_ready,
  output pkt_t [NPORTS-1:0]             out_pkt
);

  logic [NPORTS-1:0]                              pl_valid, pl_ready, pl_tpp;
  pkt_t [NPORTS-1:0]                              pl_pkt;
  meta_t [NPORTS-1:0]                             pl_meta, in_meta_p;
  logic [NPORTS-1:0]                              x_req, x_gnt;
  logic [NPORTS-1:0][7:0]                         x_link, pl_dst;
  logic [NPORTS-1:0][MAX_INSTR-1:0][ADDR_W-1:0]   x_addr;
  logic [NPORTS-1:0][MAX_INSTR-1:0][WORD_W-1:0]   x_rdata, x_wdata;
  logic [NPORTS-1:0][MAX_INSTR-1:0]               x_we;
  logic [NPORTS-1:0]                              rx_valid;
  logic [NPORTS-1:0][LEN_W-1:0]                   rx_len;

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    always_comb begin
      in_meta_p[p]         = in_meta[p];
      in_meta_p[p].in_port = 8'(p);    // the port a frame arrives on is known here
    end
    assign rx_valid[p] = in_valid[p] && in_ready[p];
    assign rx_len[p]   = in_pkt[p].len;
    assign pl_dst[p]   = pl_meta[p].out_port;

    tpp_pipeline #(.NSTAGES(NSTAGES), .SRAM_DEPTH(SRAM_DEPTH)) u_pl (
      .clk, .rst_n, .cfg_switch_id, .cfg_version, .cfg_wr_en,
      .in_valid(in_valid[p]), .in_ready(in_ready[p]), .in_pkt(in_pkt[p]), .in_meta(in_meta_p[p]),
      .out_valid(pl_valid[p]), .out_ready(pl_ready[p]), .out_pkt(pl_pkt[p]),
      .out_meta(pl_meta[p]), .out_is_tpp(pl_tpp[p]),
      .ext_req(x_req[p]), .ext_gnt(x_gnt[p]), .ext_port(x_link[p]), .ext_addr(x_addr[p]),
      .ext_rdata(x_rdata[p]), .ext_we(x_we[p]), .ext_wdata(x_wdata[p])
    );
  end

  logic [NPORTS-1:0][WORD_W-1:0] q_bytes, q_pkts;
  logic [NPORTS-1:0]             drop_valid, tx_valid;
  logic [NPORTS-1:0][LEN_W-1:0]  drop_len, tx_len;

  switch_queues #(.NPORTS(NPORTS), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(pl_valid), .in_ready(pl_ready), .in_pkt(pl_pkt), .in_dst(pl_dst),
    .out_valid, .out_ready, .out_pkt,
    .q_bytes, .q_pkts, .drop_valid, .drop_len, .tx_valid, .tx_len
  );

  link_regs #(.NPORTS(NPORTS), .UTIL_PERIOD(UTIL_PERIOD)) u_link (
    .clk, .rst_n,
    .rx_valid, .rx_len, .tx_valid, .tx_len, .drop_valid, .drop_len, .q_bytes, .q_pkts,
    .req(x_req), .gnt(x_gnt), .link(x_link), .addr(x_addr), .rdata(x_rdata),
    .we(x_we), .wdata(x_wdata)
  );

endmodule
