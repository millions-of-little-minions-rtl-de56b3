// tpp_stage -- the TCPU slice of one match-action stage.
//
// The TCPU is not one processor: every stage carries a copy of it that can
// reach only that stage's own memory (its SRAM and register file) and the
// packet's header vector.  Every instruction names one switch address; the
// stage's memory-mapped decode (MMIO) decides whether that address lives here.
// An instruction whose address lives in no stage is never executed, which is
// how a TPP fails gracefully on a switch that lacks a statistic.
//
// What lives where (see tpp_pkg for the numbers):
//   every stage s : registers at ((s+1)<<12)+0..7, stage clock at +8,
//                   SRAM words at +0x800..+0xFFF (2048 x 32 bit)
//   first stage   : switch ID, switch version, input port, matched entry
//   last stage    : output port (writable: a TPP write overrides the forwarding
//                   decision), and, through the ext_* port, the shared link
//                   statistics, link application registers and the occupancy
//                   of the packet's output queue
//
// One execution unit per instruction slot works in parallel.  Instruction k
// runs only if no earlier conditional (CSTORE/CEXEC) failed, in an earlier
// stage (halt_idx) or in this one; a failure here lowers halt_idx for the
// stages that follow.  Packet-memory writes are applied in program order.
// Within a stage the units read the memory as it was when the packet arrived:
// as in the paper's execution model, the end-host keeps read-after-write and
// write-after-write pairs out of a TPP.
//
// Timing (valid/ready on both sides, one packet in the stage at a time):
//   cycle 0  packet accepted
//   RD       one cycle per SRAM-mapped LOAD/CSTORE/CEXEC to issue its read on
//            the single SRAM port, plus one cycle for the last read to return
//   EX       one cycle: all units execute, registers/metadata/link writes commit;
//            waits here while the shared link registers are granted elsewhere
//            (only when a TPP writes a link register)
//   WR       one cycle per SRAM write (STORE, successful CSTORE)
//   OUT      out_valid; the next packet may be accepted in the cycle it leaves
// A packet touching only registers/metadata leaves 2 cycles after it entered,
// the per-stage latency measured on the paper's NetFPGA prototype; SRAM
// accesses stall the stage for the extra cycles above.
// Own choices: this FSM, the address map, the lock for link-register writes,
// and that writes to read-only locations are not executed.
// Lint note: the reset is used asynchronously by the flip-flops and
// synchronously by the 'disable iff' of the assertions; the latter is not
// logic, so the resulting mixed-reset warning does not describe a circuit.
module tpp_stage
  import tpp_pkg::*;
#(
  parameter int unsigned STAGE      = 0,
  parameter int unsigned NSTAGES    = 4,
  parameter int unsigned NREGS      = 8,
  parameter int unsigned SRAM_DEPTH = 512,   // lines of 128 bits: 64 kbit
  parameter int unsigned SRAM_WIDTH = 128
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // configuration from the control plane
  input  logic [WORD_W-1:0]                  cfg_switch_id,
  input  logic [WORD_W-1:0]                  cfg_version,
  input  logic                               cfg_wr_en,     // 0: TPP writes disabled
  // packet in
  input  logic                               in_valid,
  output logic                               in_ready,
  input  phv_t                               in_phv,
  // packet out
  output logic                               out_valid,
  input  logic                               out_ready,
  output phv_t                               out_phv,
  // shared link / queue registers (used by the last stage only)
  output logic                               ext_req,
  input  logic                               ext_gnt,
  output logic [MAX_INSTR-1:0][ADDR_W-1:0]   ext_addr,
  input  logic [MAX_INSTR-1:0][WORD_W-1:0]   ext_rdata,
  output logic [MAX_INSTR-1:0]               ext_we,
  output logic [MAX_INSTR-1:0][WORD_W-1:0]   ext_wdata
);

  localparam int unsigned LANES  = SRAM_WIDTH / WORD_W;
  localparam int unsigned SWORDS = SRAM_DEPTH * LANES;
  localparam int unsigned LA_W   = $clog2(SRAM_DEPTH);
  localparam int unsigned LN_W   = (LANES > 1) ? $clog2(LANES) : 1;
  localparam bit IS_FIRST = (STAGE == 0);
  localparam bit IS_LAST  = (STAGE == NSTAGES - 1);

  initial begin
    assert (NSTAGES <= MAX_STAGES && STAGE < NSTAGES);
    assert (SWORDS <= 2048 && NREGS <= 8);
  end

  typedef enum logic [3:0] {
    K_NONE, K_REG, K_CLK, K_SRAM, K_SWID, K_SWVER, K_INPORT, K_ENTRY, K_OUTPORT, K_EXT
  } kind_e;

  function automatic kind_e decode(input logic [ADDR_W-1:0] a);
    kind_e k;
    k = K_NONE;
    if (a[15:12] == 4'(STAGE + 1)) begin
      if (a[11]) k = (int'(a[10:0]) < SWORDS) ? K_SRAM : K_NONE;
      else if (int'(a[10:0]) < NREGS) k = K_REG;
      else if (a[10:0] == 11'd8) k = K_CLK;
    end
    if (IS_FIRST) begin
      if (a == A_SWITCH_ID)  k = K_SWID;
      if (a == A_SWITCH_VER) k = K_SWVER;
      if (a == A_IN_PORT)    k = K_INPORT;
      if (a == A_ENTRY_ID)   k = K_ENTRY;
    end
    if (IS_LAST) begin
      if (a == A_OUT_PORT) k = K_OUTPORT;
      if (is_ext_addr(a))  k = K_EXT;
    end
    return k;
  endfunction

  function automatic logic writable(input kind_e k, input logic [ADDR_W-1:0] a);
    return (k == K_REG) || (k == K_SRAM) || (k == K_OUTPORT) ||
           (k == K_EXT && (a == A_LINK_APP0 || a == A_LINK_APP1));
  endfunction

  // can this instruction execute here (ignoring earlier conditionals)?
  function automatic logic uop_ok(input uop_t u, input logic wr_en);
    kind_e k;
    logic  need_b;
    k      = decode(u.addr);
    need_b = (u.op == OP_CSTORE) || (u.op == OP_CEXEC);
    return u.valid && (u.op != OP_NOP) && (k != K_NONE) && u.a_ok && (!need_b || u.b_ok) &&
           (!is_write_op(u.op) || (wr_en && writable(k, u.addr)));
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_RD, S_EX, S_WR, S_OUT} state_e;
  state_e state;

  phv_t                               cur;
  logic [MAX_INSTR-1:0]               rd_pend, wr_pend;
  logic [MAX_INSTR-1:0][WORD_W-1:0]   sval, wval;
  logic                               issued_q;
  logic [IIDX_W-1:0]                  idx_q;

  // ------------------------------------------------------ decode of `cur`
  kind_e [MAX_INSTR-1:0]             kind;
  logic  [MAX_INSTR-1:0]             ok, en, fail, need_lock;
  logic  [MAX_INSTR-1:0][WORD_W-1:0] sw_rdata, sw_wdata, pm_wdata;
  logic  [MAX_INSTR-1:0]             sw_we, pm_we;
  logic  [MAX_INSTR:0]               halted;   // halted[k]: instruction k may not run

  logic [NREGS-1:0][WORD_W-1:0] rf_q;
  logic [WORD_W-1:0]            stage_clock;

  always_comb begin
    for (int k = 0; k < MAX_INSTR; k++) begin
      kind[k]      = decode(cur.uop[k].addr);
      ok[k]        = uop_ok(cur.uop[k], cfg_wr_en);
      need_lock[k] = ok[k] && kind[k] == K_EXT && is_write_op(cur.uop[k].op);
      ext_addr[k]  = cur.uop[k].addr;
      unique case (kind[k])
        K_REG:     sw_rdata[k] = rf_q[cur.uop[k].addr[$clog2(NREGS)-1:0]];
        K_CLK:     sw_rdata[k] = stage_clock;
        K_SRAM:    sw_rdata[k] = sval[k];
        K_SWID:    sw_rdata[k] = cfg_switch_id;
        K_SWVER:   sw_rdata[k] = cfg_version;
        K_INPORT:  sw_rdata[k] = WORD_W'(cur.meta.in_port);
        K_ENTRY:   sw_rdata[k] = WORD_W'(cur.meta.entry_id);
        K_OUTPORT: sw_rdata[k] = WORD_W'(cur.meta.out_port);
        K_EXT:     sw_rdata[k] = ext_rdata[k];
        default:   sw_rdata[k] = '0;
      endcase
    end
  end

  for (genvar k = 0; k < MAX_INSTR; k++) begin : g_eu
    assign halted[k+1] = halted[k] || fail[k] || (int'(cur.halt_idx) <= k);
    assign en[k]       = ok[k] && !halted[k];
    tcpu_exec_unit u_eu (
      .en       (en[k]),
      .op       (cur.uop[k].op),
      .sw_rdata (sw_rdata[k]),
      .pm_a     (cur.pmem[cur.uop[k].pa]),
      .pm_b     (cur.pmem[cur.uop[k].pb]),
      .sw_we    (sw_we[k]),
      .sw_wdata (sw_wdata[k]),
      .pm_we    (pm_we[k]),
      .pm_wdata (pm_wdata[k]),
      .fail     (fail[k])
    );
  end
  assign halted[0] = 1'b0;

  logic go;   // EX commits this cycle
  assign ext_req = (state == S_EX) && (|need_lock);
  assign go      = (state == S_EX) && (!(|need_lock) || ext_gnt);

  // ----------------------------------------------------- register file
  logic [MAX_INSTR-1:0]                     rf_we, sram_we;
  logic [MAX_INSTR-1:0][$clog2(NREGS)-1:0]  rf_waddr;
  always_comb begin
    for (int k = 0; k < MAX_INSTR; k++) begin
      rf_we[k]     = go && sw_we[k] && kind[k] == K_REG;
      sram_we[k]   = sw_we[k] && kind[k] == K_SRAM;
      rf_waddr[k]  = cur.uop[k].addr[$clog2(NREGS)-1:0];
      ext_we[k]    = go && sw_we[k] && kind[k] == K_EXT;
      ext_wdata[k] = sw_wdata[k];
    end
  end

  stage_regfile #(.NREGS(NREGS), .NWP(MAX_INSTR), .W(WORD_W)) u_rf (
    .clk, .rst_n, .we(rf_we), .waddr(rf_waddr), .wdata(sw_wdata), .q(rf_q), .clock(stage_clock)
  );

  // ------------------------------------------------------------- SRAM
  logic                  sr_en, sr_we;
  logic [LA_W-1:0]       sr_addr;
  logic [LANES-1:0]      sr_lane_we;
  logic [SRAM_WIDTH-1:0] sr_wdata, sr_rdata;
  logic [IIDX_W-1:0]     rd_sel, wr_sel;

  function automatic logic [IIDX_W-1:0] lowest(input logic [MAX_INSTR-1:0] m);
    for (int k = MAX_INSTR - 1; k >= 0; k--) if (m[k]) lowest = IIDX_W'(k);
    if (m == '0) lowest = '0;
  endfunction

  function automatic logic [LN_W-1:0] lane_of(input logic [ADDR_W-1:0] a);
    return (LANES > 1) ? LN_W'(a[10:0] % LANES) : '0;
  endfunction

  always_comb begin
    rd_sel     = lowest(rd_pend);
    wr_sel     = lowest(wr_pend);
    sr_en      = 1'b0;
    sr_we      = 1'b0;
    sr_addr    = '0;
    sr_lane_we = '0;
    sr_wdata   = {LANES{wval[wr_sel]}};
    if (state == S_RD && rd_pend != '0) begin
      sr_en   = 1'b1;
      sr_addr = LA_W'(cur.uop[rd_sel].addr[10:0] / LANES);
    end else if (state == S_WR && wr_pend != '0) begin
      sr_en      = 1'b1;
      sr_we      = 1'b1;
      sr_addr    = LA_W'(cur.uop[wr_sel].addr[10:0] / LANES);
      sr_lane_we = LANES'(1) << lane_of(cur.uop[wr_sel].addr);
    end
  end

  stage_sram #(.DEPTH(SRAM_DEPTH), .WIDTH(SRAM_WIDTH), .LANES(LANES)) u_sram (
    .clk, .en(sr_en), .we(sr_we), .addr(sr_addr), .lane_we(sr_lane_we),
    .wdata(sr_wdata), .rdata(sr_rdata)
  );

  // ------------------------------------------------------ SRAM reads needed by a new packet
  logic [MAX_INSTR-1:0] in_rd;
  always_comb
    for (int k = 0; k < MAX_INSTR; k++)
      in_rd[k] = uop_ok(in_phv.uop[k], cfg_wr_en) && decode(in_phv.uop[k].addr) == K_SRAM &&
                 in_phv.uop[k].op != OP_STORE;   // a STORE needs no read

  // ----------------------------------------------------------- control
  assign in_ready  = (state == S_IDLE) || (state == S_OUT && out_ready);
  assign out_valid = (state == S_OUT);
  assign out_phv   = cur;

  phv_t nxt;   // cur after execution
  always_comb begin
    nxt = cur;
    for (int k = 0; k < MAX_INSTR; k++) begin
      if (pm_we[k]) nxt.pmem[cur.uop[k].pa] = pm_wdata[k];
      if (sw_we[k] && kind[k] == K_OUTPORT) nxt.meta.out_port = sw_wdata[k][7:0];
    end
    for (int k = MAX_INSTR - 1; k >= 0; k--)
      if (fail[k] && IIDX_W'(k) < nxt.halt_idx) nxt.halt_idx = IIDX_W'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      rd_pend  <= '0;
      wr_pend  <= '0;
      sval     <= '0;
      wval     <= '0;
      issued_q <= 1'b0;
      idx_q    <= '0;
    end else begin
      issued_q <= 1'b0;
      if (issued_q)
        sval[idx_q] <= sr_rdata[int'(lane_of(cur.uop[idx_q].addr)) * WORD_W +: WORD_W];
      unique case (state)
        S_IDLE, S_OUT: begin
          if (in_valid && in_ready) begin
            cur     <= in_phv;
            rd_pend <= in_rd;
            state   <= (in_rd != '0) ? S_RD : S_EX;
          end else if (state == S_OUT && out_ready) begin
            state <= S_IDLE;
          end
        end
        S_RD: begin
          if (rd_pend != '0) begin
            issued_q         <= 1'b1;
            idx_q            <= rd_sel;
            rd_pend[rd_sel]  <= 1'b0;
          end else begin
            state <= S_EX;
          end
        end
        S_EX: begin
          if (go) begin
            cur <= nxt;
            wr_pend <= sram_we;
            wval    <= sw_wdata;
            state <= (|sram_we) ? S_WR : S_OUT;
          end
        end
        S_WR: begin
          if (wr_pend != '0) wr_pend[wr_sel] <= 1'b0;
          if ((wr_pend & ~(MAX_INSTR'(1) << wr_sel)) == '0) state <= S_OUT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a presented packet stays put until taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_phv));
  // the shared link registers are written only while granted
  assert property (@(posedge clk) disable iff (!rst_n) (|ext_we) |-> (ext_gnt || !(|need_lock)));

endmodule
