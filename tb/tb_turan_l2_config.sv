// tb_turan_l2_config: the same design in the L2 configuration of the
// evaluation, a 256 KiB, 4-way cache with 64-byte lines (4096 lines of 512
// bits), with the default 1000 reads per line. The testbench plays the CPU
// and the host cache controller (evictions only, no other traffic):
//  - characterization over all 4096 lines must pick a line among those with
//    the most metastable cells of the array model and report an entropy
//    matching that count;
//  - four refills of r_random must each take 8 cycles after the eviction
//    acknowledge, and every bit must agree with the class of its cell
//    (always-failing cells read 0, stable cells read 1);
//  - consecutive buffers must differ.
module tb_turan_l2_config;
  import turan_pkg::*;
  localparam int unsigned NL = 4096, LB = LINE_BITS, IW = $clog2(NL);

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0, pready;
  logic [APB_AW-1:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic host_req = 0, host_we = 0, host_stall;
  logic [IW-1:0] host_line = '0, evict_line;
  logic [LB-1:0] host_wdata = '0, host_rdata;
  logic evict_req, evict_ack = 0, line_reserved;

  turan_l1d_top #(.NUM_LINES(NL)) dut (.*);

  always #5 clk = ~clk;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, s);
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

  // eviction handler: acknowledge one cycle after the request
  always @(negedge clk) evict_ack <= evict_req && !evict_ack;

  // cycles from the eviction acknowledge to a full buffer
  int since_ack = 0, fill_cycles = -1;
  always @(posedge clk) begin
    if (evict_ack) since_ack <= 0;
    else           since_ack <= since_ack + 1;
    if (dut.u_turan.state_q == TS_WAKE && dut.u_turan.acc_sum >= {1'b0, TARGET_ENT_FX})
      fill_cycles <= since_ack + 1;
  end

  function automatic int cls(input int l, input int c);
    return int'(dut.u_array.cell_class(l, c));
  endfunction

  initial begin
    #500ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [2*LB-1:0] rr, prev;
    int n, max_n, best, ent_q, best_n;

    repeat (3) @(negedge clk);
    rst_n = 1;

    apb_write(REG_CTRL, 32'h4);
    do apb_read(REG_STATUS, d); while (d[1]);
    apb_read(REG_LINE, d);    best  = int'(d);
    apb_read(REG_ENTROPY, d); ent_q = int'(d);
    max_n = 0; best_n = 0;
    for (int l = 0; l < NL; l++) begin
      n = 0;
      for (int c = 0; c < LB; c++) n += (cls(l, c) == 1);
      if (n > max_n) max_n = n;
      if (l == best) best_n = n;
    end
    $display("characterization of %0d lines: line %0d, entropy %0.2f bits, %0d metastable cells (array max %0d)",
             NL, best, real'(ent_q) / 256.0, best_n, max_n);
    checks++;
    if (best_n < max_n - 3) fail("chosen line is not among the highest-entropy lines");
    checks++;
    if (real'(ent_q) / 256.0 < 0.95 * real'(best_n) || real'(ent_q) / 256.0 > real'(best_n) + 1.0)
      fail("reported entropy does not match the line's metastable cells");

    apb_write(REG_CTRL, 32'h1);
    prev = '0;
    for (int k = 0; k < 4; k++) begin
      do apb_read(REG_STATUS, d); while (!d[0]);
      for (int w = 0; w < 2 * LB / 32; w++) begin
        apb_read(REG_RR_BASE + APB_AW'(4 * w), d);
        rr[32*w +: 32] = d;
      end
      checks++;
      if (fill_cycles != 8) fail($sformatf("fill took %0d cycles, expected 8", fill_cycles));
      for (int s = 0; s < 2; s++)
        for (int c = 0; c < LB; c++) begin
          checks++;
          if ((cls(best, c) == 0 && !rr[s*LB + c]) || (cls(best, c) == 2 && rr[s*LB + c]))
            fail($sformatf("slot %0d column %0d disagrees with the cell class", s, c));
        end
      checks++;
      if (rr == prev) fail("two consecutive buffers are equal");
      prev = rr;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
