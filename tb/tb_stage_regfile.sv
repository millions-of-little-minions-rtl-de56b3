// tb_stage_regfile -- checks the 8-register file and the stage clock.
// Random writes through five ports (the higher port wins on a collision),
// compared with a shadow copy; the clock must count one per cycle from reset.
module tb_stage_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [4:0] we;
  logic [4:0][2:0] waddr;
  logic [4:0][31:0] wdata;
  logic [7:0][31:0] q;
  logic [31:0] clock;
  logic [7:0][31:0] shadow;

  stage_regfile dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] c0;
    we = 0; waddr = 0; wdata = 0; shadow = '0;
    repeat (2) @(posedge clk);
    #1; chk(q == '0 && clock == 0, "reset");
    @(negedge clk); rst_n = 1;
    @(posedge clk); #1; c0 = clock;
    repeat (10) @(posedge clk); #1;
    chk(clock == c0 + 10, "clock counts cycles");
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        we[p] = $urandom_range(0, 1); waddr[p] = 3'($urandom); wdata[p] = $urandom;
      end
      for (int p = 0; p < 5; p++) if (we[p]) shadow[waddr[p]] = wdata[p];
      @(posedge clk); #1;
      chk(q == shadow, "registers match shadow");
    end
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
