// tb_turan_ctrl: drives the generation engine with a testbench model of the
// data array and the drowsy bit of the entropy line.
//  - every read the engine issues must find the line drowsy and freshly
//    written with all ones; the model then returns a random word, and the
//    expected r_random is built from those words (slot i XOR-collects reads
//    i, i+2, ...);
//  - the number of reads per fill must be ceil(256 / r_entropy);
//  - with a free port a fill takes exactly 4 cycles per read after the
//    eviction is acknowledged (the paper's one cycle per step);
//  - with a randomly busy port the result is still right (idle-cycle
//    injection), and the eviction handshake and line reservation are kept.
module tb_turan_ctrl;
  import turan_pkg::*;
  localparam int unsigned NL = 16, LB = 32, RRL = 2, IW = 4;
  int checks = 0, failures = 0, deferrals = 0, folds = 0;

  logic clk = 0, rst_n = 0;
  logic cfg_enable = 0;
  logic [IW-1:0] cfg_line = '0;
  logic [ENT_W-1:0] cfg_entropy = '0;
  logic evict_req, evict_ack = 0, line_reserved;
  logic [IW-1:0] ent_line, dp_line;
  logic dp_req, dp_we, dp_gnt, dz_set, dz_clr, rr_valid, rr_consume = 0;
  logic [LB-1:0] dp_wdata, dp_rdata = '0;
  logic [RRL*LB-1:0] rr_data;
  logic [ENT_W-1:0] ent_acc;
  turan_state_e state;

  logic port_busy = 0;          // host uses the port this cycle
  logic drowsy = 0, written = 0;
  int   n_reads = 0;
  logic [RRL*LB-1:0] exp_rr = '0;

  turan_ctrl #(.NUM_LINES(NL), .LINE_BITS(LB), .RR_LINES(RRL)) dut (.*);

  assign dp_gnt = dp_req && !port_busy;

  always #5 clk = ~clk;

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL @%0t: %s", $time, s);
  endtask

  // data array and drowsy-bit model
  always @(posedge clk) begin
    if (dp_gnt) begin
      checks++;
      if (dp_line !== cfg_line) fail("access to a line other than the entropy line");
      if (!line_reserved)       fail("access while the line is not reserved");
      if (dp_we) begin
        if (dp_wdata !== '1) fail("write pattern is not all ones");
        if (drowsy)          fail("write while the line is drowsy");
        written <= 1'b1;
      end else begin
        logic [LB-1:0] r;
        if (!drowsy)  fail("read while the line is at nominal supply");
        if (!written) fail("read without a preceding all-ones write");
        r = LB'($urandom);
        dp_rdata <= r;
        exp_rr[(n_reads % RRL)*LB +: LB] ^= r;
        if (n_reads >= RRL) folds++;
        n_reads++;
        written <= 1'b0;
      end
    end
    if (dz_set) begin
      if (drowsy) fail("drowsy set twice");
      drowsy <= 1'b1;
    end
    if (dz_clr) drowsy <= 1'b0;
  end

  // one fill: returns the cycles from the eviction acknowledge to rr_valid
  task automatic fill(input int ent_bits_x256, input int ack_delay, input bit busy_port, output int cycles);
    int exp_reads;
    @(negedge clk);
    cfg_entropy = ENT_W'(ent_bits_x256);
    cfg_line    = IW'($urandom);
    n_reads = 0; exp_rr = '0;
    cfg_enable = 1;
    @(negedge clk);
    cfg_enable = 0;
    for (int i = 0; i < ack_delay; i++) begin
      checks++;
      if (!evict_req || !line_reserved) fail("eviction not requested while waiting");
      if (ent_line !== cfg_line) fail("evict line differs from configured line");
      @(negedge clk);
    end
    evict_ack = 1;
    @(negedge clk);
    evict_ack = 0;
    cycles = 0;   // step cycles completed before rr_valid is seen
    while (!rr_valid) begin
      port_busy = busy_port ? (($urandom % 2) == 0) : 1'b0;
      if (port_busy && dp_req) deferrals++;
      @(negedge clk);
      cycles++;
      if (cycles > 1000) begin fail("fill never completes"); break; end
    end
    port_busy = 0;
    exp_reads = (TARGET_ENT_BITS * 256 + ent_bits_x256 - 1) / ent_bits_x256;
    checks++;
    if (n_reads != exp_reads) fail($sformatf("reads per fill %0d, expected %0d", n_reads, exp_reads));
    checks++;
    if (rr_data !== exp_rr) fail("r_random content differs from the collected reads");
    checks++;
    if (line_reserved || drowsy) fail("line still reserved or drowsy after the fill");
    // hold while full
    repeat (3) @(negedge clk);
    checks++;
    if (!rr_valid || evict_req) fail("buffer not held while full");
    rr_consume = 1;
    @(negedge clk);
    rr_consume = 0;
    checks++;
    if (rr_valid || rr_data !== '0 || ent_acc !== '0) fail("buffer not cleared on consume");
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 128 bits per line: two reads, 4 cycles each
    fill(128 * 256, 3, 0, cyc);
    checks++;
    if (cyc != 8) fail($sformatf("two-read fill took %0d cycles, expected 8", cyc));
    // 300 bits per line: a single read fills the target
    fill(300 * 256, 1, 0, cyc);
    checks++;
    if (cyc != 4) fail($sformatf("one-read fill took %0d cycles, expected 4", cyc));
    // 100.5 bits per line: three reads, third one folds into slot 0
    fill(100 * 256 + 128, 0, 0, cyc);
    checks++;
    if (cyc != 12) fail($sformatf("three-read fill took %0d cycles, expected 12", cyc));
    // busy port: steps wait for idle cycles
    for (int k = 0; k < 20; k++) begin
      fill((40 + $urandom % 200) * 256 + $urandom % 256, $urandom % 4, 1, cyc);
    end
    checks++;
    if (deferrals == 0 || folds == 0) fail("port deferral or fold never exercised");
    $display("deferrals %0d folds %0d", deferrals, folds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
