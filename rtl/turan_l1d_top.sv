// turan_l1d_top: TuRaN integrated into an L1 data cache.
//
// TuRaN is a true random number generator that uses a cache's own SRAM as
// its entropy source. Reading a line whose supply has been lowered below the
// safe level makes some sense amplifiers resolve metastably, so the read
// returns random values in those columns while the stored data is unharmed.
// This top connects the parts that make that work inside a cache:
//   - drowsy_sram_array: the cache data array (behavioural model) with a
//     supply select per line,
//   - drowsy_ctrl: the per-line drowsy bits (Drowsy Cache, without periodic
//     sleep and without word-line gating),
//   - entropy_profiler: the one-time search for the highest-entropy line,
//   - turan_ctrl: the four-step generation sequence and the 1024-bit buffer
//     r_random,
//   - dport_arb: idle-cycle injection of TuRaN accesses, or stall mode,
//   - turan_apb_regs: the software interface, through which the buffer is
//     read; the SHA-256 post-processing runs in software on the CPU.
// The tag array, replacement and miss handling of the cache belong to the
// host cache controller, outside this block: its data-array accesses enter
// through the host_* port, and it evicts the entropy line on request
// (evict_req / evict_line / evict_ack) and must not allocate into it while
// line_reserved is high.
//
// Coordination. A characterization start written by software is held pending
// until the generation engine is idle or holds a full buffer; the engine is
// then kept idle until characterization has finished, so the two never share
// the drowsy bits. When it finishes, its result is loaded into the ENTROPY
// and LINE registers.
//
// The set of parts, the Drowsy Cache basis, the idle-cycle use of the cache
// and the software read-out follow the paper; how they are wired (the
// arbitration order, the pending characterization request, the eviction
// handshake) is this design's own.
//
// Timing. Single clock, active-low asynchronous reset. A host access is
// served in a cycle with host_req high and host_stall low; its read data is
// on host_rdata one cycle later.
module turan_l1d_top #(
  parameter int unsigned NUM_LINES    = turan_pkg::NUM_LINES,
  parameter int unsigned LINE_BITS    = turan_pkg::LINE_BITS,
  parameter int unsigned N_READS      = turan_pkg::PROFILE_READS,
  parameter int unsigned MAX_RAND_PCT = 40,
  parameter int unsigned DET_PCT      = 20,
  localparam int unsigned IDX_W       = $clog2(NUM_LINES),
  localparam int unsigned AW          = turan_pkg::APB_AW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // APB slave
  input  logic                 psel,
  input  logic                 penable,
  input  logic                 pwrite,
  input  logic [AW-1:0]        paddr,
  input  logic [31:0]          pwdata,
  output logic [31:0]          prdata,
  output logic                 pready,
  // host cache controller: data-array port
  input  logic                 host_req,
  input  logic                 host_we,
  input  logic [IDX_W-1:0]     host_line,
  input  logic [LINE_BITS-1:0] host_wdata,
  output logic [LINE_BITS-1:0] host_rdata,
  output logic                 host_stall,
  // host cache controller: entropy-line eviction
  output logic                 evict_req,
  output logic [IDX_W-1:0]     evict_line,
  input  logic                 evict_ack,
  output logic                 line_reserved
);

  localparam int unsigned RR_BITS = turan_pkg::RR_LINES * LINE_BITS;
  localparam int unsigned EW      = turan_pkg::ENT_W;

  // configuration
  logic               cfg_enable, cfg_stall_mode, prof_start_req, rr_consume;
  logic [EW-1:0]      cfg_entropy;
  logic [IDX_W-1:0]   cfg_line;

  // generation engine
  logic               t_req, t_we, t_gnt, t_dz_set, t_dz_clr, rr_valid;
  logic [IDX_W-1:0]   t_line, ent_line;
  logic [LINE_BITS-1:0] t_wdata;
  logic [RR_BITS-1:0] rr_data;
  turan_pkg::turan_state_e t_state;

  // characterization engine
  logic               p_req, p_we, p_gnt, p_dz_set, p_dz_clr, prof_busy, prof_done;
  logic               prof_pending, prof_go, t_quiet;
  logic [IDX_W-1:0]   p_line, p_dz_line, prof_line;
  logic [LINE_BITS-1:0] p_wdata;
  logic [EW-1:0]      prof_entropy;

  // data array and drowsy bits
  logic               mem_en, mem_we, host_wake;
  logic [IDX_W-1:0]   mem_line;
  logic [LINE_BITS-1:0] mem_wdata, mem_rdata;
  logic [NUM_LINES-1:0] low_vdd;
  logic               dz_set, dz_clr;
  logic [IDX_W-1:0]   dz_set_line, dz_clr_line;

  turan_apb_regs #(.NUM_LINES(NUM_LINES), .RR_BITS(RR_BITS)) u_regs (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready,
    .cfg_enable, .cfg_stall_mode, .cfg_entropy, .cfg_line,
    .prof_start   (prof_start_req),
    .rr_consume,
    .rr_valid,
    .rr_data,
    .prof_busy    (prof_busy || prof_pending),
    .prof_done,
    .prof_line,
    .prof_entropy
  );

  // characterization waits until the generation engine is quiet
  assign t_quiet = (t_state == turan_pkg::TS_IDLE) || (t_state == turan_pkg::TS_FULL);
  assign prof_go = prof_pending && t_quiet && !prof_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              prof_pending <= 1'b0;
    else if (prof_start_req) prof_pending <= 1'b1;
    else if (prof_go)        prof_pending <= 1'b0;
  end

  entropy_profiler #(.NUM_LINES(NUM_LINES), .LINE_BITS(LINE_BITS), .N_READS(N_READS)) u_prof (
    .clk, .rst_n,
    .start        (prof_go),
    .busy         (prof_busy),
    .done         (prof_done),
    .best_line    (prof_line),
    .best_entropy (prof_entropy),
    .dp_req       (p_req),
    .dp_we        (p_we),
    .dp_line      (p_line),
    .dp_wdata     (p_wdata),
    .dp_gnt       (p_gnt),
    .dp_rdata     (mem_rdata),
    .dz_set       (p_dz_set),
    .dz_clr       (p_dz_clr),
    .dz_line      (p_dz_line)
  );

  turan_ctrl #(.NUM_LINES(NUM_LINES), .LINE_BITS(LINE_BITS), .RR_LINES(turan_pkg::RR_LINES)) u_turan (
    .clk, .rst_n,
    .cfg_enable   (cfg_enable && !prof_busy && !prof_pending),
    .cfg_line,
    .cfg_entropy,
    .evict_req,
    .evict_ack,
    .line_reserved,
    .ent_line,
    .dp_req       (t_req),
    .dp_we        (t_we),
    .dp_line      (t_line),
    .dp_wdata     (t_wdata),
    .dp_gnt       (t_gnt),
    .dp_rdata     (mem_rdata),
    .dz_set       (t_dz_set),
    .dz_clr       (t_dz_clr),
    .rr_valid,
    .rr_data,
    .rr_consume,
    .ent_acc      (),
    .state        (t_state)
  );

  assign evict_line = ent_line;

  dport_arb #(.NUM_LINES(NUM_LINES), .LINE_BITS(LINE_BITS)) u_arb (
    .stall_mode   (cfg_stall_mode),
    .host_req, .host_we, .host_line, .host_wdata, .host_wake, .host_stall,
    .t_req, .t_we, .t_line, .t_wdata, .t_gnt,
    .p_req, .p_we, .p_line, .p_wdata, .p_gnt,
    .mem_en, .mem_we, .mem_line, .mem_wdata
  );

  // drowsy-bit commands come from whichever engine is active
  assign dz_set      = prof_busy ? p_dz_set  : t_dz_set;
  assign dz_clr      = prof_busy ? p_dz_clr  : t_dz_clr;
  assign dz_set_line = prof_busy ? p_dz_line : ent_line;
  assign dz_clr_line = prof_busy ? p_dz_line : ent_line;

  drowsy_ctrl #(.NUM_LINES(NUM_LINES)) u_drowsy (
    .clk, .rst_n,
    .set_req     (dz_set),
    .set_line    (dz_set_line),
    .clr_req     (dz_clr),
    .clr_line    (dz_clr_line),
    .host_access (host_req),
    .host_line,
    .host_wake,
    .low_vdd
  );

  drowsy_sram_array #(
    .NUM_LINES(NUM_LINES), .LINE_BITS(LINE_BITS),
    .MAX_RAND_PCT(MAX_RAND_PCT), .DET_PCT(DET_PCT)
  ) u_array (
    .clk,
    .en      (mem_en),
    .we      (mem_we),
    .line    (mem_line),
    .wdata   (mem_wdata),
    .rdata   (mem_rdata),
    .low_vdd
  );

  assign host_rdata = mem_rdata;

  // the host never touches the entropy line while TuRaN holds it
  assert property (@(posedge clk) disable iff (!rst_n)
                   (line_reserved && !evict_req && host_req) |-> (host_line != ent_line))
    else $error("turan_l1d_top: host access to the reserved entropy line");

endmodule
