// entropy_lut: Shannon entropy of one SRAM cell from its failure count.
//
// During characterization a cell is read N_READS times at the drowsy supply
// and the number of reads that returned 1 is counted. With p = cnt / N_READS,
// the cell's entropy is H = -p*log2(p) - (1-p)*log2(1-p), between 0 and 1
// bit. This module returns H as an unsigned fixed-point number with H_FRAC
// fractional bits (so 1 bit of entropy is 2**H_FRAC).
//
// The table is computed at elaboration with integer arithmetic only, from
//   H(c) = log2(N) - (c*log2(c) + (N-c)*log2(N-c)) / N,
// where log2 is evaluated in fixed point with 20 fractional bits by the
// repeated-squaring method, then rounded to H_FRAC bits. The formula is the
// paper's (Shannon entropy per cell); the table form and precision are this
// design's choice.
//
// Interface and timing. Combinational read-only table: h = H(cnt). Counts
// above N_READS return 0.
module entropy_lut #(
  parameter int unsigned N_READS = turan_pkg::PROFILE_READS,
  parameter int unsigned H_FRAC  = turan_pkg::CELL_H_FRAC,
  localparam int unsigned CNT_W  = $clog2(N_READS + 1),
  localparam int unsigned H_W    = H_FRAC + 1
) (
  input  logic [CNT_W-1:0] cnt,
  output logic [H_W-1:0]   h
);

  localparam int unsigned LF = 20;   // fractional bits of the log2 evaluation

  typedef logic [H_W-1:0] table_t [N_READS+1];

  // log2(x) in fixed point with LF fractional bits, x >= 1
  function automatic longint unsigned log2_fx(input longint unsigned x);
    longint unsigned m, frac;
    int unsigned ip;
    ip = 0;
    while ((x >> (ip + 1)) != 0) ip++;
    m = (x << 30) >> ip;              // mantissa in [1,2), 30 fractional bits
    frac = 0;
    for (int i = 1; i <= LF; i++) begin
      m = (m * m) >> 30;
      if (m >= (64'd1 << 31)) begin
        m = m >> 1;
        frac = frac | (64'd1 << (LF - i));
      end
    end
    return (longint'(ip) << LF) | frac;
  endfunction

  // x * log2(x), with 0 * log2(0) = 0
  function automatic longint unsigned xlog2x(input longint unsigned x);
    return (x == 0) ? 64'd0 : x * log2_fx(x);
  endfunction

  function automatic table_t build_table();
    table_t t;
    longint unsigned n, s, l2n, hq;
    n   = 64'(N_READS);
    l2n = log2_fx(n);
    for (int c = 0; c <= N_READS; c++) begin
      s = (xlog2x(longint'(c)) + xlog2x(n - longint'(c)) + n / 2) / n;
      hq = (s >= l2n) ? 64'd0 : (l2n - s);
      hq = (hq + (64'd1 << (LF - H_FRAC - 1))) >> (LF - H_FRAC);
      t[c] = H_W'(hq);
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_comb begin
    if (32'(cnt) <= N_READS) h = TABLE[cnt];
    else                     h = '0;
  end

endmodule
