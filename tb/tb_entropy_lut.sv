// tb_entropy_lut: checks the per-cell entropy table against the Shannon
// formula evaluated in floating point, for every count 0..N_READS, at the
// default N_READS = 1000 and at a small N_READS = 16. Tolerance: 1 LSB.
module tb_entropy_lut;
  localparam int unsigned N1 = 1000, N2 = 16, HF = 12;
  int checks = 0, failures = 0;

  logic [$clog2(N1+1)-1:0] c1; logic [HF:0] h1;
  logic [$clog2(N2+1)-1:0] c2; logic [HF:0] h2;

  entropy_lut #(.N_READS(N1), .H_FRAC(HF)) dut1 (.cnt(c1), .h(h1));
  entropy_lut #(.N_READS(N2), .H_FRAC(HF)) dut2 (.cnt(c2), .h(h2));

  function automatic real href(input int c, input int n);
    real p, q, h;
    p = real'(c) / real'(n); q = 1.0 - p; h = 0.0;
    if (p > 0.0) h -= p * $ln(p) / $ln(2.0);
    if (q > 0.0) h -= q * $ln(q) / $ln(2.0);
    return h;
  endfunction

  task automatic check(input int got, input real exp_h, input string what);
    int e;
    e = int'(exp_h * real'(1 << HF) + 0.5);
    checks++;
    if (got > e + 1 || got < e - 1) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c <= N1; c++) begin
      c1 = c[$bits(c1)-1:0]; #1;
      check(int'(h1), href(c, N1), $sformatf("N=1000 c=%0d", c));
    end
    for (int c = 0; c <= N2; c++) begin
      c2 = c[$bits(c2)-1:0]; #1;
      check(int'(h2), href(c, N2), $sformatf("N=16 c=%0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
