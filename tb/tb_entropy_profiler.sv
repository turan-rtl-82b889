// tb_entropy_profiler: runs the characterization engine over 6 lines of 16
// cells with 16 reads per line, against a testbench data array in which
// cell b of line l returns 1 in exactly k[l][b] of the 16 drowsy reads. The
// expected line entropy is the floating-point sum of H(k/16); the engine
// must report the best line and its entropy (within 2 LSBs of 1/256 bit).
// The testbench also checks the access protocol: all-ones write at nominal
// supply, exactly N_READS reads per line, all while the line is drowsy, and
// the line woken afterwards. The port is randomly busy in the second run.
module tb_entropy_profiler;
  import turan_pkg::*;
  localparam int unsigned NL = 6, LB = 16, NR = 16, IW = 3;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [IW-1:0] best_line, dp_line, dz_line;
  logic [ENT_W-1:0] best_entropy;
  logic dp_req, dp_we, dp_gnt, dz_set, dz_clr;
  logic [LB-1:0] dp_wdata, dp_rdata = '0;
  logic port_busy = 0;

  int k [NL][LB];
  int reads_done [NL];
  logic drowsy [NL];
  logic written [NL];
  int rd_idx [NL];

  entropy_profiler #(.NUM_LINES(NL), .LINE_BITS(LB), .N_READS(NR)) dut (.*);

  assign dp_gnt = dp_req && !port_busy;
  always #5 clk = ~clk;

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL @%0t: %s", $time, s);
  endtask

  function automatic real h(input int c, input int n);
    real p, q, r;
    p = real'(c) / real'(n); q = 1.0 - p; r = 0.0;
    if (p > 0.0) r -= p * $ln(p) / $ln(2.0);
    if (q > 0.0) r -= q * $ln(q) / $ln(2.0);
    return r;
  endfunction

  always @(posedge clk) begin
    if (dp_gnt) begin
      if (dp_we) begin
        checks++;
        if (dp_wdata !== '1) fail("pattern is not all ones");
        if (drowsy[dp_line]) fail("write while drowsy");
        written[dp_line] <= 1'b1;
        rd_idx[dp_line]  <= 0;
      end else begin
        logic [LB-1:0] d;
        checks++;
        if (!drowsy[dp_line])  fail("read at nominal supply");
        if (!written[dp_line]) fail("read without all-ones write");
        for (int b = 0; b < LB; b++) d[b] = (rd_idx[dp_line] < k[dp_line][b]);
        dp_rdata <= d;
        rd_idx[dp_line] <= rd_idx[dp_line] + 1;
        reads_done[dp_line] <= reads_done[dp_line] + 1;
      end
    end
    if (dz_set) drowsy[dz_line] <= 1'b1;
    if (dz_clr) drowsy[dz_line] <= 1'b0;
  end

  task automatic run(input bit random_busy);
    real best, e;
    int bl, exp_q, cyc;
    for (int l = 0; l < NL; l++) begin
      reads_done[l] = 0; drowsy[l] = 0; written[l] = 0; rd_idx[l] = 0;
      for (int b = 0; b < LB; b++) k[l][b] = $urandom % (NR + 1);
    end
    best = -1.0; bl = 0;
    for (int l = 0; l < NL; l++) begin
      e = 0.0;
      for (int b = 0; b < LB; b++) e += h(k[l][b], NR);
      if (e > best + 0.05) begin best = e; bl = l; end
      else if (e > best) begin
        // too close to call at fixed point: nudge this line down
        k[l][0] = 0; k[l][1] = 0; k[l][2] = NR;
        l--; continue;
      end
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy || done) fail("busy/done wrong after start");
    cyc = 0;
    while (busy) begin
      port_busy = random_busy && (($urandom % 3) == 0);
      @(negedge clk);
      if (++cyc > 100000) begin fail("run never ends"); break; end
    end
    port_busy = 0;
    exp_q = int'(best * 256.0 + 0.5);
    checks++;
    if (!done) fail("done not raised");
    checks++;
    if (best_line !== IW'(bl)) fail($sformatf("best line %0d, expected %0d", best_line, bl));
    checks++;
    if (int'(best_entropy) > exp_q + 2 || int'(best_entropy) < exp_q - 2)
      fail($sformatf("best entropy %0d/256, expected %0d/256", best_entropy, exp_q));
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (reads_done[l] != NR) fail($sformatf("line %0d read %0d times", l, reads_done[l]));
      checks++;
      if (drowsy[l]) fail($sformatf("line %0d left drowsy", l));
    end
    $display("run: best line %0d entropy %0.3f bits (%0d cycles)", bl, best, cyc);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
