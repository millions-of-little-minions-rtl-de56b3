// stage_regfile -- a match-action stage's register file and stage clock.
//
// NREGS 32-bit registers that TPP instructions read and write.  All registers
// are visible at once on q (the stage's crossbar picks the one each execution
// unit names); NWP write ports, one per execution unit, update them at the clock
// edge, and a higher-numbered port wins when two write the same register in the
// same cycle (later instruction in program order).  A free-running cycle counter
// (clock) is readable at every stage, so a TPP can time-stamp each stage.
// Registers and clock reset to zero.
//
// Paper: 8 registers at each stage, a stage clock that TPPs read.  Own choices:
// reset values and the write-port priority.
module stage_regfile #(
  parameter int unsigned NREGS = 8,
  parameter int unsigned NWP   = 5,
  parameter int unsigned W     = 32
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NWP-1:0]                      we,
  input  logic [NWP-1:0][$clog2(NREGS)-1:0]   waddr,
  input  logic [NWP-1:0][W-1:0]               wdata,
  output logic [NREGS-1:0][W-1:0]             q,
  output logic [W-1:0]                        clock
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      clock <= '0;
    end else begin
      clock <= clock + 1'b1;
      for (int p = 0; p < NWP; p++)
        if (we[p]) q[waddr[p]] <= wdata[p];
    end
  end

endmodule
