// dport_arb: arbitration of the cache data-array port between the host cache
// controller, the TuRaN generation engine and the entropy characterization
// engine.
//
// TuRaN fills the idle cycles of the cache: in the default policy a TuRaN
// step that needs the data array is granted only in a cycle in which the host
// does not access the array, so host requests are never delayed. In stall
// mode the cache controller instead stalls host requests while the TuRaN
// engine needs the port, trading host performance for random-number
// throughput. Characterization is a one-time step; while it runs it owns the
// port and the host is stalled. A host access to a drowsy line is not served
// in the cycle it wakes the line (host_wake), and the host retries.
//
// Both policies follow the paper; the fixed priorities and the one-cycle
// retry after a wake are this design's choices.
//
// Interface and timing. Purely combinational. Each requester drives req, we,
// line and wdata; a grant (or, for the host, a low host_stall) means the
// access is issued to the array in this cycle. Read data returns on the
// array's rdata one cycle later and is shared by all requesters.
module dport_arb #(
  parameter int unsigned NUM_LINES = turan_pkg::NUM_LINES,
  parameter int unsigned LINE_BITS = turan_pkg::LINE_BITS,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES)
) (
  input  logic                 stall_mode,
  // host cache controller
  input  logic                 host_req,
  input  logic                 host_we,
  input  logic [IDX_W-1:0]     host_line,
  input  logic [LINE_BITS-1:0] host_wdata,
  input  logic                 host_wake,
  output logic                 host_stall,
  // TuRaN generation engine
  input  logic                 t_req,
  input  logic                 t_we,
  input  logic [IDX_W-1:0]     t_line,
  input  logic [LINE_BITS-1:0] t_wdata,
  output logic                 t_gnt,
  // characterization engine
  input  logic                 p_req,
  input  logic                 p_we,
  input  logic [IDX_W-1:0]     p_line,
  input  logic [LINE_BITS-1:0] p_wdata,
  output logic                 p_gnt,
  // data array port
  output logic                 mem_en,
  output logic                 mem_we,
  output logic [IDX_W-1:0]     mem_line,
  output logic [LINE_BITS-1:0] mem_wdata
);

  logic host_gnt;

  always_comb begin
    p_gnt      = p_req;
    t_gnt      = t_req && !p_req && (stall_mode || !host_req);
    host_stall = host_req && (p_req || (stall_mode && t_req) || host_wake);
    host_gnt   = host_req && !host_stall;

    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_line  = host_line;
    mem_wdata = host_wdata;
    if (p_gnt) begin
      mem_en = 1'b1; mem_we = p_we; mem_line = p_line; mem_wdata = p_wdata;
    end else if (t_gnt) begin
      mem_en = 1'b1; mem_we = t_we; mem_line = t_line; mem_wdata = t_wdata;
    end else if (host_gnt) begin
      mem_en = 1'b1; mem_we = host_we;
    end
  end

  // at most one requester reaches the array per cycle
  always_comb begin
    assert ($countones({p_gnt, t_gnt, host_gnt}) <= 1)
      else $error("dport_arb: more than one grant");
  end

endmodule
