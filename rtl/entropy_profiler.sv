// entropy_profiler: the one-time cache-line entropy characterization of
// TuRaN. It finds the cache line whose drowsy reads carry the most entropy
// and reports that line and its entropy, which become the entropy line and
// the r_entropy register of the generation engine.
//
// Operation. For every line in turn: write all ones at nominal supply, set
// the line drowsy, read it N_READS times while drowsy, counting per cell how
// many reads returned 1, and wake the line. Then the per-cell Shannon
// entropies H(count / N_READS) are looked up (entropy_lut) and summed over
// the line, one cell per cycle. A line whose sum is strictly larger than the
// best so far becomes the new best. After the last line, done is raised and
// best_line / best_entropy hold the result.
//
// What follows the paper: the data pattern (all ones, which gives the highest
// entropy), N_READS = 1000 reads per row, entropy per cell summed per row,
// and choosing the highest-entropy line. This design's own choices: doing the
// characterization in hardware (the paper's platform computed it in software
// from recorded bitstreams), the order write-then-drowsy of the cache
// integration (the FPGA method lowered the supply before writing), the
// serial evaluation, and the fixed-point formats.
//
// Interface and timing. A start pulse in idle begins a run; busy is high until
// the run ends; done is high from the end of a run until the next start. The
// data-array port is requested with dp_req and an access is issued in a
// cycle with dp_gnt; read data is taken from dp_rdata one cycle after the
// grant. Reads are pipelined, one per granted cycle. dz_set / dz_clr with
// dz_line drive the drowsy bits. A run takes about
// NUM_LINES * (N_READS + LINE_BITS + 6) cycles with an uncontended port.
// best_entropy has turan_pkg::ENT_FRAC fractional bits.
// dp_wdata is all ones at all times, the only pattern ever written, so it is
// a constant output.
module entropy_profiler
  import turan_pkg::ENT_W, turan_pkg::ENT_FRAC, turan_pkg::CELL_H_FRAC;
#(
  parameter int unsigned NUM_LINES = turan_pkg::NUM_LINES,
  parameter int unsigned LINE_BITS = turan_pkg::LINE_BITS,
  parameter int unsigned N_READS   = turan_pkg::PROFILE_READS,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [IDX_W-1:0]     best_line,
  output logic [ENT_W-1:0]     best_entropy,
  // data-array port
  output logic                 dp_req,
  output logic                 dp_we,
  output logic [IDX_W-1:0]     dp_line,
  output logic [LINE_BITS-1:0] dp_wdata,
  input  logic                 dp_gnt,
  input  logic [LINE_BITS-1:0] dp_rdata,
  // drowsy bits
  output logic                 dz_set,
  output logic                 dz_clr,
  output logic [IDX_W-1:0]     dz_line
);

  localparam int unsigned CNT_W = $clog2(N_READS + 1);
  localparam int unsigned H_W   = CELL_H_FRAC + 1;
  localparam int unsigned SUM_W = H_W + $clog2(LINE_BITS) + 1;
  localparam int unsigned BIT_W = $clog2(LINE_BITS);
  localparam int unsigned SHIFT = CELL_H_FRAC - ENT_FRAC;

  typedef enum logic [2:0] {
    PS_IDLE, PS_WRITE1, PS_DROWSY, PS_READ, PS_WAKE, PS_EVAL, PS_CMP
  } prof_state_e;

  prof_state_e          state_q;
  logic [IDX_W-1:0]     line_q, best_line_q;
  logic [ENT_W-1:0]     best_q;
  logic [CNT_W-1:0]     cnt_q [LINE_BITS];
  logic [CNT_W-1:0]     issued_q;
  logic                 pend_q;
  logic [BIT_W-1:0]     bit_q;
  logic [SUM_W-1:0]     sum_q;
  logic                 done_q;

  logic [H_W-1:0]       cell_h;
  logic [ENT_W-1:0]     line_ent;

  entropy_lut #(.N_READS(N_READS), .H_FRAC(CELL_H_FRAC)) u_lut (
    .cnt (cnt_q[bit_q]),
    .h   (cell_h)
  );

  // line entropy rounded to ENT_FRAC fractional bits
  assign line_ent = ENT_W'((sum_q + (SUM_W'(1) << (SHIFT - 1))) >> SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= PS_IDLE;
      line_q      <= '0;
      best_line_q <= '0;
      best_q      <= '0;
      issued_q    <= '0;
      pend_q      <= 1'b0;
      bit_q       <= '0;
      sum_q       <= '0;
      done_q      <= 1'b0;
      for (int b = 0; b < LINE_BITS; b++) cnt_q[b] <= '0;
    end else begin
      pend_q <= dp_req && dp_gnt && !dp_we;
      if (pend_q) begin
        for (int b = 0; b < LINE_BITS; b++) cnt_q[b] <= cnt_q[b] + CNT_W'(dp_rdata[b]);
      end
      unique case (state_q)
        PS_IDLE: if (start) begin
          line_q      <= '0;
          best_line_q <= '0;
          best_q      <= '0;
          done_q      <= 1'b0;
          state_q     <= PS_WRITE1;
        end
        PS_WRITE1: if (dp_gnt) begin
          issued_q <= '0;
          for (int b = 0; b < LINE_BITS; b++) cnt_q[b] <= '0;
          state_q  <= PS_DROWSY;
        end
        PS_DROWSY: state_q <= PS_READ;
        PS_READ: begin
          if (dp_req && dp_gnt) issued_q <= issued_q + 1'b1;
          if (32'(issued_q) == N_READS && !pend_q) state_q <= PS_WAKE;
        end
        PS_WAKE: begin
          bit_q   <= '0;
          sum_q   <= '0;
          state_q <= PS_EVAL;
        end
        PS_EVAL: begin
          sum_q <= sum_q + SUM_W'(cell_h);
          bit_q <= bit_q + 1'b1;
          if (32'(bit_q) == LINE_BITS - 1) state_q <= PS_CMP;
        end
        PS_CMP: begin
          if (line_ent > best_q) begin
            best_q      <= line_ent;
            best_line_q <= line_q;
          end
          if (32'(line_q) == NUM_LINES - 1) begin
            done_q  <= 1'b1;
            state_q <= PS_IDLE;
          end else begin
            line_q  <= line_q + 1'b1;
            state_q <= PS_WRITE1;
          end
        end
        default: state_q <= PS_IDLE;
      endcase
    end
  end

  always_comb begin
    dp_req   = (state_q == PS_WRITE1) || (state_q == PS_READ && 32'(issued_q) < N_READS);
    dp_we    = (state_q == PS_WRITE1);
    dp_line  = line_q;
    dp_wdata = '1;
    dz_set   = (state_q == PS_DROWSY);
    dz_clr   = (state_q == PS_WAKE);
    dz_line  = line_q;
  end

  assign busy         = (state_q != PS_IDLE);
  assign done         = done_q;
  assign best_line    = best_line_q;
  assign best_entropy = best_q;

endmodule
