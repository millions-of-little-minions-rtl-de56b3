// tpp_pipeline -- one port's TPP-capable pipeline: parser, NSTAGES TCPU stages, rewrite.
//
// A frame enters with the forwarding decision for it (output port, matched
// flow entry) and its input port.  The parser finds a TPP, the PUSH/POP
// translation fixes every instruction's packet-memory word, and the result is
// registered into a packet header vector (one cycle).  The vector then visits
// the stages in order; each executes the instructions whose addresses it owns.
// The last stage also reaches the shared link registers and the output-queue
// occupancy through the ext_* port.  At the end the packet memory and the new
// hop number / stack pointer are written back into the frame, and the frame
// leaves with its (possibly TPP-overwritten) output port.
//
// Interface: valid/ready in and out; in_accept pulses when a frame is taken
// (for receive statistics).  Latency for a TPP that touches only registers and
// metadata: 1 + 2*NSTAGES cycles from acceptance to out_valid.  Frames stay in
// order.  Paper: a four-stage pipeline at each port of the prototype, each stage
// with its own SRAM and 8 registers.  Own choice: the entry register and the
// valid/ready hand-off between stages.
module tpp_pipeline
  import tpp_pkg::*;
#(
  parameter int unsigned NSTAGES    = 4,
  parameter int unsigned SRAM_DEPTH = 512
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [WORD_W-1:0]                 cfg_switch_id,
  input  logic [WORD_W-1:0]                 cfg_version,
  input  logic                              cfg_wr_en,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  pkt_t                              in_pkt,
  input  meta_t                             in_meta,
  output logic                              out_valid,
  input  logic                              out_ready,
  output pkt_t                              out_pkt,
  output meta_t                             out_meta,
  output logic                              out_is_tpp,
  output logic                              ext_req,
  input  logic                              ext_gnt,
  output logic [7:0]                        ext_port,
  output logic [MAX_INSTR-1:0][ADDR_W-1:0]  ext_addr,
  input  logic [MAX_INSTR-1:0][WORD_W-1:0]  ext_rdata,
  output logic [MAX_INSTR-1:0]              ext_we,
  output logic [MAX_INSTR-1:0][WORD_W-1:0]  ext_wdata
);

  // ---------------------------------------------------------- parse + translate
  logic                              p_is_tpp;
  logic [7:0]                        p_off;
  tpp_hdr_t                          p_hdr;
  logic [31:0]                       p_app_id;
  logic [IIDX_W-1:0]                 p_n_instr;
  instr_t [MAX_INSTR-1:0]            p_instr;
  logic [PIDX_W:0]                   p_n_pmem;
  logic [PMEM_WORDS-1:0][WORD_W-1:0] p_pmem;
  logic [15:0]                       p_proto;
  uop_t [MAX_INSTR-1:0]              x_uop;
  logic [7:0]                        x_hop_sp;

  tpp_parser u_parse (
    .pkt(in_pkt), .is_tpp(p_is_tpp), .tpp_off(p_off), .hdr(p_hdr), .app_id(p_app_id),
    .n_instr(p_n_instr), .instr(p_instr), .n_pmem(p_n_pmem), .pmem(p_pmem), .encap_proto(p_proto)
  );

  tpp_xlate u_xlate (
    .hdr(p_hdr), .n_instr(p_n_instr), .instr(p_instr), .n_pmem(p_n_pmem),
    .uop(x_uop), .new_hop_sp(x_hop_sp)
  );

  phv_t  p_phv;
  always_comb begin
    p_phv            = '0;
    p_phv.pkt        = in_pkt;
    p_phv.meta       = in_meta;
    p_phv.is_tpp     = p_is_tpp;
    p_phv.tpp_off    = p_off;
    p_phv.hdr        = p_hdr;
    p_phv.n_instr    = p_n_instr;
    p_phv.n_pmem     = p_n_pmem;
    p_phv.uop        = p_is_tpp ? x_uop : '0;
    p_phv.pmem       = p_pmem;
    p_phv.new_hop_sp = x_hop_sp;
    p_phv.halt_idx   = IIDX_W'(MAX_INSTR);
  end

  // ---------------------------------------------------------- entry register
  logic [NSTAGES:0] v, r;
  phv_t             phv [NSTAGES+1];

  assign in_ready = !v[0] || r[0];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v[0]   <= 1'b0;
      phv[0] <= '0;
    end else if (in_ready) begin
      v[0] <= in_valid;
      if (in_valid) phv[0] <= p_phv;
    end
  end

  // ---------------------------------------------------------- stages
  logic [NSTAGES-1:0]                              s_req;
  logic [NSTAGES-1:0][MAX_INSTR-1:0][ADDR_W-1:0]   s_addr;
  logic [NSTAGES-1:0][MAX_INSTR-1:0]               s_we;
  logic [NSTAGES-1:0][MAX_INSTR-1:0][WORD_W-1:0]   s_wdata;

  for (genvar s = 0; s < NSTAGES; s++) begin : g_stage
    tpp_stage #(.STAGE(s), .NSTAGES(NSTAGES), .SRAM_DEPTH(SRAM_DEPTH)) u_stage (
      .clk, .rst_n, .cfg_switch_id, .cfg_version, .cfg_wr_en,
      .in_valid(v[s]), .in_ready(r[s]), .in_phv(phv[s]),
      .out_valid(v[s+1]), .out_ready(r[s+1]), .out_phv(phv[s+1]),
      .ext_req(s_req[s]), .ext_gnt((s == NSTAGES - 1) ? ext_gnt : 1'b0),
      .ext_addr(s_addr[s]), .ext_rdata(ext_rdata), .ext_we(s_we[s]), .ext_wdata(s_wdata[s])
    );
  end

  assign ext_req   = s_req[NSTAGES-1];
  assign ext_addr  = s_addr[NSTAGES-1];
  assign ext_we    = s_we[NSTAGES-1];
  assign ext_wdata = s_wdata[NSTAGES-1];
  assign ext_port  = phv[NSTAGES-1].meta.out_port;

  // ---------------------------------------------------------- rewrite
  tpp_rewrite u_rw (.phv(phv[NSTAGES]), .pkt(out_pkt));
  assign out_valid    = v[NSTAGES];
  assign r[NSTAGES]   = out_ready;
  assign out_meta     = phv[NSTAGES].meta;
  assign out_is_tpp   = phv[NSTAGES].is_tpp;

endmodule
