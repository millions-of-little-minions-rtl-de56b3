// tb_stage_sram -- checks the single-port SRAM: lane writes, one-cycle reads.
// Writes random lanes of random lines, keeps a shadow copy, and reads every
// touched line back, checking data appears exactly one edge after the read.
module tb_stage_sram;
  localparam int DEPTH = 512, WIDTH = 128, LANES = 4;
  int checks = 0, failures = 0;
  logic clk = 0, en, we;
  logic [8:0] addr;
  logic [3:0] lane_we;
  logic [127:0] wdata, rdata;
  logic [127:0] shadow [DEPTH];
  bit written [DEPTH];

  stage_sram dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    en = 0; we = 0; addr = 0; lane_we = 0; wdata = 0;
    // full writes first so that every read line is defined
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'(a * 8); lane_we = 4'hF;
      wdata = {$urandom, $urandom, $urandom, $urandom};
      shadow[a * 8] = wdata; written[a * 8] = 1;
    end
    for (int t = 0; t < 400; t++) begin
      int a; a = int'($urandom_range(0, 63)) * 8;
      @(negedge clk);
      if (t % 2 == 0) begin
        en = 1; we = 1; addr = 9'(a); lane_we = 4'($urandom);
        wdata = {$urandom, $urandom, $urandom, $urandom};
        for (int l = 0; l < LANES; l++) if (lane_we[l]) shadow[a][l*32 +: 32] = wdata[l*32 +: 32];
      end else begin
        en = 1; we = 0; addr = 9'(a);
        @(posedge clk); #1;
        chk(rdata == shadow[a], $sformatf("read line %0d after one cycle", a));
        @(negedge clk); en = 0;
        @(posedge clk); #1;
        chk(rdata == shadow[a], "rdata holds when idle");
      end
    end
    // the top line
    @(negedge clk); en = 1; we = 1; addr = 9'(DEPTH - 1); lane_we = 4'hF; wdata = {4{32'hCAFEF00D}};
    @(negedge clk); we = 0;
    @(posedge clk); #1; chk(rdata == {4{32'hCAFEF00D}}, "last line");
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
