// turan_pkg: constants and types shared by the TuRaN cache-integrated true
// random number generator.
//
// TuRaN harvests entropy from sense-amplifier access failures that occur when
// one cache line is read while its supply is lowered to the drowsy level.
// This package fixes the geometry of the host cache (a 32 KiB, 8-way L1 data
// cache with 64-byte lines), the size of the random buffer r_random
// (128 bytes, i.e. two lines), the 256-bit entropy target per random number,
// the fixed-point format used for entropy values, the step encoding of the
// generation sequence and the memory-mapped register map.
//
// The geometry, line size, buffer size and entropy target follow the paper.
// The fixed-point format (8 fractional bits) and the register map are this
// design's own choices.
package turan_pkg;

  // ---- host cache geometry (L1 data cache) --------------------------------
  localparam int unsigned L1D_SETS   = 64;            // 32 KiB / 64 B / 8 ways
  localparam int unsigned L1D_WAYS   = 8;
  localparam int unsigned NUM_LINES  = L1D_SETS * L1D_WAYS;
  localparam int unsigned LINE_BITS  = 512;           // 64-byte cache line

  // ---- random buffer -------------------------------------------------------
  localparam int unsigned RR_BITS    = 1024;          // 128-byte r_random
  localparam int unsigned RR_LINES   = RR_BITS / LINE_BITS;

  // ---- entropy fixed point -------------------------------------------------
  // Entropy values (r_entropy, the running total) are unsigned fixed point
  // with ENT_FRAC fractional bits. ENT_W holds up to 1024 bits of entropy.
  localparam int unsigned ENT_FRAC        = 8;
  localparam int unsigned ENT_W           = 19;
  localparam int unsigned TARGET_ENT_BITS = 256;
  localparam logic [ENT_W-1:0] TARGET_ENT_FX = ENT_W'(TARGET_ENT_BITS << ENT_FRAC);

  // ---- characterization ----------------------------------------------------
  localparam int unsigned PROFILE_READS = 1000;       // reads per line
  localparam int unsigned CELL_H_FRAC   = 12;         // per-cell entropy LSBs

  // ---- generation sequence -------------------------------------------------
  typedef enum logic [2:0] {
    TS_IDLE   = 3'd0,   // buffer consumed or generator disabled
    TS_EVICT  = 3'd1,   // wait for the host to evict the entropy line
    TS_WRITE1 = 3'd2,   // step 1: write all ones at nominal voltage
    TS_DROWSY = 3'd3,   // step 2: switch the line to the drowsy supply
    TS_READ   = 3'd4,   // step 3: read the line at the drowsy supply
    TS_WAKE   = 3'd5,   // step 4: back to nominal, capture the read data
    TS_FULL   = 3'd6    // r_random holds >= 256 bits of entropy
  } turan_state_e;

  // ---- register map (byte offsets, 32-bit registers) -----------------------
  localparam int unsigned APB_AW     = 8;
  localparam logic [APB_AW-1:0] REG_CTRL    = 8'h00; // [0] enable [1] stall mode [2] profile start (W1P)
  localparam logic [APB_AW-1:0] REG_STATUS  = 8'h04; // [0] rr_valid [1] profiling [2] profile done
  localparam logic [APB_AW-1:0] REG_ENTROPY = 8'h08; // r_entropy, ENT_FRAC fractional bits
  localparam logic [APB_AW-1:0] REG_LINE    = 8'h0C; // index of the entropy line
  localparam logic [APB_AW-1:0] REG_COUNT   = 8'h10; // 256-bit numbers produced so far
  localparam logic [APB_AW-1:0] REG_RR_BASE = 8'h80; // r_random words 0..31; reading word 31 pops

endpackage
