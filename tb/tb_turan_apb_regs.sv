// tb_turan_apb_regs: APB transfers against the register map: reset values,
// read-back of CTRL / ENTROPY / LINE, the one-cycle characterization start
// pulse, loading of the characterization result, STATUS bits, the r_random
// window (zeros while not valid, all 32 words while valid), the pop on the
// last word and the COUNT register.
module tb_turan_apb_regs;
  import turan_pkg::*;
  localparam int unsigned NL = 16, IW = 4, RB = 1024;
  int checks = 0, failures = 0, starts = 0, pops = 0;

  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0, pready;
  logic [APB_AW-1:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic cfg_enable, cfg_stall_mode, prof_start, rr_consume;
  logic [ENT_W-1:0] cfg_entropy, prof_entropy = '0;
  logic [IW-1:0] cfg_line, prof_line = '0;
  logic rr_valid = 0, prof_busy = 0, prof_done = 0;
  logic [RB-1:0] rr_data = '0;

  turan_apb_regs #(.NUM_LINES(NL), .RR_BITS(RB)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (prof_start) starts++;
    if (rr_consume) pops++;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL @%0t: %s", $time, s);
  endtask

  task automatic apb_write(input logic [APB_AW-1:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic apb_read(input logic [APB_AW-1:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic expect_rd(input logic [APB_AW-1:0] a, input logic [31:0] exp, input string what);
    logic [31:0] d;
    apb_read(a, d);
    checks++;
    if (d !== exp) fail($sformatf("%s: read %h expected %h", what, d, exp));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect_rd(REG_CTRL, 0, "CTRL after reset");
    expect_rd(REG_ENTROPY, 0, "ENTROPY after reset");
    apb_write(REG_CTRL, 32'h3);
    checks++; if (!cfg_enable || !cfg_stall_mode) fail("CTRL outputs");
    expect_rd(REG_CTRL, 32'h3, "CTRL read-back");
    apb_write(REG_CTRL, 32'h5);
    checks++; if (starts != 1) fail($sformatf("start pulses %0d", starts));
    expect_rd(REG_CTRL, 32'h1, "CTRL start bit reads 0");
    apb_write(REG_ENTROPY, 32'h0001_2345);
    apb_write(REG_LINE, 32'h0000_00AB);
    checks++; if (cfg_entropy !== ENT_W'(32'h1_2345) || cfg_line !== IW'(4'hB)) fail("ENTROPY/LINE outputs");
    expect_rd(REG_ENTROPY, 32'h0001_2345, "ENTROPY read-back");
    expect_rd(REG_LINE, 32'h0000_000B, "LINE read-back (masked)");
    // characterization result is loaded on completion
    prof_busy = 1;
    expect_rd(REG_STATUS, 32'h2, "STATUS busy");
    @(negedge clk); prof_busy = 0; prof_done = 1; prof_line = 4'h7; prof_entropy = ENT_W'(150 * 256);
    repeat (2) @(negedge clk);
    checks++; if (cfg_line !== 4'h7 || cfg_entropy !== ENT_W'(150 * 256)) fail("result not loaded");
    expect_rd(REG_STATUS, 32'h4, "STATUS done");
    apb_write(REG_ENTROPY, 32'd100);
    checks++; if (cfg_entropy !== ENT_W'(100)) fail("software override after load");
    // r_random window
    for (int w = 0; w < RB / 32; w++) rr_data[32*w +: 32] = $urandom;
    expect_rd(REG_RR_BASE, 0, "r_random hidden while not valid");
    apb_read(REG_RR_BASE + APB_AW'(4 * 31), d);
    checks++; if (pops != 0) fail("pop while not valid");
    for (int round = 0; round < 3; round++) begin
      rr_valid = 1;
      for (int w = 0; w < RB / 32; w++) begin
        expect_rd(REG_RR_BASE + APB_AW'(4 * w), rr_data[32*w +: 32], $sformatf("r_random word %0d", w));
        checks++;
        if (pops != round + (w == RB / 32 - 1 ? 1 : 0)) fail($sformatf("pop count %0d at word %0d", pops, w));
      end
      rr_valid = 0;
      expect_rd(REG_STATUS, 32'h4, "STATUS not valid");
    end
    expect_rd(REG_COUNT, 3, "COUNT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
