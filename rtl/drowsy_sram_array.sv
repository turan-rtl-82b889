// drowsy_sram_array: behavioural model of a cache data array built from 6T
// SRAM cells whose lines can each be held at a nominal or a drowsy (lowered)
// supply. It is a simulation model, not synthesizable logic: the access
// failures it reproduces are an analog effect of the sense amplifiers.
//
// Function. One synchronous port reads or writes one whole line. A read of a
// line at nominal supply returns the stored data. A read of a line whose
// low_vdd bit is set suffers access failures: the bit lines of a cell that
// stores 1 do not develop enough differential voltage in the nominal access
// time, so the sense amplifier resolves it to 0 every time (a deterministic
// failure) or, for a metastable cell, to 0 or 1 with equal probability. Cells
// that store 0 read correctly. Access failures happen only in the sensing
// path, so the stored data is unchanged and the next nominal read is correct.
// Read failures (destructive flips) and hold failures are not modelled.
//
// Cell population. Every cell is given a fixed class by a hash of its line
// and column and the SEED parameter: metastable (the entropy source),
// always-failing, or stable. The share of metastable cells varies from line
// to line, between 0 and MAX_RAND_PCT percent, so that the characterization
// step has a best line to find. These percentages are this model's own
// choice; the paper reports per-32-bit-block entropies of up to about 9 bits.
//
// Interface and timing. en/we/line/wdata are sampled on the rising clock
// edge; rdata is valid from the following edge (one cycle read latency) and
// holds its value until the next read. low_vdd[i] is the supply select of
// line i (1 = drowsy) and is sampled together with a read. Writes store
// wdata whatever the supply. The array starts cleared to zero.
module drowsy_sram_array #(
  parameter int unsigned NUM_LINES    = turan_pkg::NUM_LINES,
  parameter int unsigned LINE_BITS    = turan_pkg::LINE_BITS,
  parameter int unsigned MAX_RAND_PCT = 40,   // largest metastable share of a line
  parameter int unsigned DET_PCT      = 20,   // always-failing share of every line
  parameter int unsigned SEED         = 32'h5eed_7a11,
  localparam int unsigned IDX_W       = $clog2(NUM_LINES)
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic                 we,
  input  logic [IDX_W-1:0]     line,
  input  logic [LINE_BITS-1:0] wdata,
  output logic [LINE_BITS-1:0] rdata,
  input  logic [NUM_LINES-1:0] low_vdd
);

  typedef enum logic [1:0] {CELL_STABLE, CELL_RANDOM, CELL_ALWAYS} cell_class_e;

  logic [LINE_BITS-1:0] mem [NUM_LINES];

  initial begin
    for (int i = 0; i < NUM_LINES; i++) mem[i] = '0;
    rdata = '0;
  end

  // 32-bit integer mixing function (xorshift-multiply), used only to give
  // each cell a reproducible class.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x ^ SEED;
    h = h ^ (h >> 16);
    h = h * 32'h7feb_352d;
    h = h ^ (h >> 15);
    h = h * 32'h846c_a68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int unsigned line_rand_pct(input int unsigned l);
    return mix32(32'(l) ^ 32'hA5A5_0000) % (MAX_RAND_PCT + 1);
  endfunction

  function automatic cell_class_e cell_class(input int unsigned l, input int unsigned c);
    int unsigned h;
    h = mix32((32'(l) << 12) ^ 32'(c)) % 100;
    if (h < line_rand_pct(l))                return CELL_RANDOM;
    else if (h < line_rand_pct(l) + DET_PCT) return CELL_ALWAYS;
    else                                     return CELL_STABLE;
  endfunction

  always @(posedge clk) begin
    if (en) begin
      if (we) begin
        mem[line] <= wdata;
      end else if (!low_vdd[line]) begin
        rdata <= mem[line];
      end else begin
        logic [LINE_BITS-1:0] sensed;
        sensed = mem[line];
        for (int c = 0; c < LINE_BITS; c++) begin
          if (sensed[c]) begin
            unique case (cell_class(int'(line), c))
              CELL_RANDOM: sensed[c] = 1'($urandom);
              CELL_ALWAYS: sensed[c] = 1'b0;
              default:     sensed[c] = 1'b1;
            endcase
          end
        end
        rdata <= sensed;
      end
    end
  end

endmodule
