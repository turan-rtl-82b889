// turan_ctrl: the TuRaN random-bitstream engine that sits in the cache
// controller. It turns one characterized cache line into a source of raw
// random bits and collects them in the random buffer r_random.
//
// Operation. When enabled and r_random is not full, the engine first asks the
// host cache controller to evict the entropy line (evict_req / evict_ack) and
// holds line_reserved high so that the host does not allocate into it while
// the buffer is being filled. It then repeats four one-cycle steps:
//   1. WRITE1: write all ones into the line at nominal supply,
//   2. DROWSY: set the line's drowsy bit (the line drops to the low supply),
//   3. READ:   read the line while it is drowsy; sense-amplifier access
//              failures turn some ones into random values,
//   4. WAKE:   clear the drowsy bit, and capture the 512-bit read result.
// Each captured line is XORed into the next 512-bit slot of r_random (slots
// are used in turn), and the entropy counter grows by r_entropy, the entropy
// the characterization step measured for this line. When the counter reaches
// 256 bits, r_random is marked valid, the line is released, and the engine
// waits until the buffer is consumed (rr_consume), which clears buffer and
// counter. With the paper's assumption of at least 128 bits of entropy per
// line, two line reads fill the 1024-bit buffer exactly.
//
// What follows the paper: the four steps, one cycle each when the port is
// free, the all-ones pattern, the 128-byte buffer, the r_entropy register
// value as the per-read entropy credit and the 256-bit target, evicting the
// entropy line to generate. This design's own choices: the evict handshake,
// the XOR into slots (which only matters when more than two reads are needed,
// i.e. r_entropy below 128 bits), the fixed-point entropy format, and reading
// the configuration (line, r_entropy) once at the start of every fill.
//
// Interface and timing. Steps 1 and 3 need the data-array port: the engine
// raises dp_req and moves on in the cycle dp_gnt is high. Read data arrives
// on dp_rdata one cycle after the read is granted, which is the WAKE cycle.
// Steps 2 and 4 use only the drowsy bits and never wait. rr_valid and rr_data
// are registered. A cfg_entropy of zero never fills the buffer.
// dp_wdata is all ones at all times, the only pattern ever written, so it is
// a constant output.
module turan_ctrl
  import turan_pkg::ENT_W, turan_pkg::TARGET_ENT_FX, turan_pkg::turan_state_e,
         turan_pkg::TS_IDLE, turan_pkg::TS_EVICT, turan_pkg::TS_WRITE1, turan_pkg::TS_DROWSY,
         turan_pkg::TS_READ, turan_pkg::TS_WAKE, turan_pkg::TS_FULL;
#(
  parameter int unsigned NUM_LINES  = turan_pkg::NUM_LINES,
  parameter int unsigned LINE_BITS  = turan_pkg::LINE_BITS,
  parameter int unsigned RR_LINES   = turan_pkg::RR_LINES,
  localparam int unsigned IDX_W     = $clog2(NUM_LINES),
  localparam int unsigned RR_W      = RR_LINES * LINE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_enable,
  input  logic [IDX_W-1:0]     cfg_line,
  input  logic [ENT_W-1:0]     cfg_entropy,   // r_entropy
  // host cache controller
  output logic                 evict_req,
  input  logic                 evict_ack,
  output logic                 line_reserved,
  output logic [IDX_W-1:0]     ent_line,
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
  // random buffer
  output logic                 rr_valid,
  output logic [RR_W-1:0]      rr_data,
  input  logic                 rr_consume,
  output logic [ENT_W-1:0]     ent_acc,
  output turan_state_e         state
);

  localparam int unsigned SLOT_W = (RR_LINES > 1) ? $clog2(RR_LINES) : 1;

  turan_state_e        state_q;
  logic [IDX_W-1:0]    line_q;
  logic [ENT_W-1:0]    credit_q;
  logic [ENT_W-1:0]    acc_q;
  logic [SLOT_W-1:0]   slot_q;
  logic [RR_W-1:0]     rr_q;

  // entropy after crediting one more read, saturated at the target
  logic [ENT_W:0]      acc_sum;
  assign acc_sum = {1'b0, acc_q} + {1'b0, credit_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= TS_IDLE;
      line_q   <= '0;
      credit_q <= '0;
      acc_q    <= '0;
      slot_q   <= '0;
      rr_q     <= '0;
    end else begin
      unique case (state_q)
        TS_IDLE: if (cfg_enable) begin
          line_q   <= cfg_line;
          credit_q <= cfg_entropy;
          state_q  <= TS_EVICT;
        end
        TS_EVICT:  if (evict_ack) state_q <= TS_WRITE1;
        TS_WRITE1: if (dp_gnt)    state_q <= TS_DROWSY;
        TS_DROWSY:                state_q <= TS_READ;
        TS_READ:   if (dp_gnt)    state_q <= TS_WAKE;
        TS_WAKE: begin
          rr_q[slot_q*LINE_BITS +: LINE_BITS] <= rr_q[slot_q*LINE_BITS +: LINE_BITS] ^ dp_rdata;
          slot_q <= (32'(slot_q) == RR_LINES - 1) ? '0 : slot_q + 1'b1;
          if (acc_sum >= {1'b0, TARGET_ENT_FX}) begin
            acc_q   <= TARGET_ENT_FX;
            state_q <= TS_FULL;
          end else begin
            acc_q   <= acc_sum[ENT_W-1:0];
            state_q <= TS_WRITE1;
          end
        end
        TS_FULL: if (rr_consume) begin
          rr_q    <= '0;
          acc_q   <= '0;
          slot_q  <= '0;
          state_q <= TS_IDLE;
        end
        default: state_q <= TS_IDLE;
      endcase
    end
  end

  always_comb begin
    evict_req     = (state_q == TS_EVICT);
    line_reserved = (state_q inside {TS_EVICT, TS_WRITE1, TS_DROWSY, TS_READ, TS_WAKE});
    ent_line      = line_q;
    dp_req        = (state_q == TS_WRITE1) || (state_q == TS_READ);
    dp_we         = (state_q == TS_WRITE1);
    dp_line       = line_q;
    dp_wdata      = '1;
    dz_set        = (state_q == TS_DROWSY);
    dz_clr        = (state_q == TS_WAKE);
  end

  assign rr_valid = (state_q == TS_FULL);
  assign rr_data  = rr_q;
  assign ent_acc  = acc_q;
  assign state    = state_q;

  // the buffer is only consumed when it is valid
  assert property (@(posedge clk) disable iff (!rst_n) rr_consume |-> rr_valid)
    else $error("turan_ctrl: r_random consumed while not valid");
  // the line is never left drowsy outside a read sequence
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == TS_DROWSY) |=> (state_q == TS_READ))
    else $error("turan_ctrl: drowsy step not followed by read");

endmodule
