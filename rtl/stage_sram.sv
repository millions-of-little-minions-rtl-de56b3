// stage_sram -- a match-action stage's local SRAM: single port, 128 bits wide.
//
// One access per cycle, read or write.  A read presents addr with en=1, we=0
// and returns the line on rdata at the next clock edge (one-cycle latency).  A
// write presents en=1, we=1 and a mask of 32-bit lanes; only the enabled lanes
// change.  rdata holds its value between reads.  Contents are not reset; the
// control plane is expected to initialise what it uses.
//
// Default size: 512 lines x 128 bits = 64 kbit, the prototype's per-stage block
// RAM, single-ported and 128 bits wide with a one-cycle latency as in the paper.
// The 32-bit lane write mask is this design's choice (TPP words are 32 bits).
module stage_sram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 128,
  parameter int unsigned LANES = 4
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [LANES-1:0]         lane_we,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  localparam int unsigned LW = WIDTH / LANES;

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int l = 0; l < LANES; l++)
          if (lane_we[l]) mem[addr][l*LW +: LW] <= wdata[l*LW +: LW];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
