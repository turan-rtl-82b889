// tb_drowsy_ctrl: random set / clear / host-access traffic on a 64-line
// drowsy-bit array, compared every cycle with a reference model kept in the
// testbench (set wins over a wake of the same line; a host access to a
// drowsy line raises host_wake and wakes it).
module tb_drowsy_ctrl;
  localparam int unsigned NL = 64, IW = 6;
  int checks = 0, failures = 0, wakes = 0;

  logic clk = 0, rst_n = 0;
  logic set_req, clr_req, host_access, host_wake;
  logic [IW-1:0] set_line, clr_line, host_line;
  logic [NL-1:0] low_vdd, ref_q;

  drowsy_ctrl #(.NUM_LINES(NL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_req = 0; clr_req = 0; host_access = 0;
    set_line = '0; clr_line = '0; host_line = '0; ref_q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (low_vdd !== ref_q) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: low_vdd %h expected %h", i, low_vdd, ref_q);
      end
      set_req     = ($urandom % 3) == 0;
      clr_req     = ($urandom % 4) == 0;
      host_access = ($urandom % 2) == 0;
      set_line    = IW'($urandom);
      clr_line    = IW'($urandom);
      host_line   = IW'($urandom);
      if (set_req && clr_req && set_line == clr_line) clr_req = 0;
      #1;
      checks++;
      if (host_wake !== (host_access && ref_q[host_line])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: host_wake %b", i, host_wake);
      end
      if (host_wake) wakes++;
      if (clr_req) ref_q[clr_line] = 1'b0;
      if (host_access && ref_q[host_line]) ref_q[host_line] = 1'b0;
      if (set_req) ref_q[set_line] = 1'b1;
    end
    // reset wakes every line
    rst_n = 0; #1;
    checks++;
    if (low_vdd !== '0) failures++;
    if (wakes == 0) begin failures++; $display("FAIL: no host wake exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
