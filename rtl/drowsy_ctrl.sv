// drowsy_ctrl: per-line drowsy bits and supply select of a Drowsy Cache, as
// modified for TuRaN.
//
// A Drowsy Cache keeps one drowsy bit per line; the bit drives the line's
// voltage controller, which switches the line between the nominal and the
// low (drowsy) supply. When the host accesses a drowsy line, the line is
// switched back to nominal first. TuRaN changes two things, both reflected
// here: lines are never put to sleep periodically (there is no decay timer;
// only an explicit set request makes a line drowsy), and the word-line gating
// that blocks access to a drowsy line is removed, so the TuRaN engine can
// read a line while it is drowsy (that path does not go through host_access).
//
// Interface and timing. set_req/set_line and clr_req/clr_line update the bit
// of one line each on the rising clock edge; a set and a clear of the same
// line in one cycle are not allowed. host_access/host_line is a host access
// to the data array: if that line is drowsy, host_wake is raised in the same
// cycle (the host must retry; its request is not served that cycle) and the
// line is back at nominal supply from the next cycle. low_vdd is registered.
// Reset wakes every line.
module drowsy_ctrl #(
  parameter int unsigned NUM_LINES = turan_pkg::NUM_LINES,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 set_req,
  input  logic [IDX_W-1:0]     set_line,
  input  logic                 clr_req,
  input  logic [IDX_W-1:0]     clr_line,
  input  logic                 host_access,
  input  logic [IDX_W-1:0]     host_line,
  output logic                 host_wake,
  output logic [NUM_LINES-1:0] low_vdd
);

  logic [NUM_LINES-1:0] drowsy_q, drowsy_d;

  assign host_wake = host_access && drowsy_q[host_line];

  always_comb begin
    drowsy_d = drowsy_q;
    if (clr_req)   drowsy_d[clr_line]  = 1'b0;
    if (host_wake) drowsy_d[host_line] = 1'b0;
    if (set_req)   drowsy_d[set_line]  = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drowsy_q <= '0;
    else        drowsy_q <= drowsy_d;
  end

  assign low_vdd = drowsy_q;

  assert property (@(posedge clk) disable iff (!rst_n)
                   !(set_req && clr_req && set_line == clr_line))
    else $error("drowsy_ctrl: set and clear of the same line in one cycle");

endmodule
