// tb_dport_arb: random request patterns on all three requesters in both
// policies; grants, host stall and the selected array access are compared
// with the priority rules (characterization > stall-mode TuRaN > host >
// idle-cycle TuRaN; a waking host access is not served).
module tb_dport_arb;
  localparam int unsigned NL = 16, LB = 8, IW = 4;
  int checks = 0, failures = 0, n_idle_inject = 0, n_stall = 0, n_defer = 0;

  logic stall_mode, host_req, host_we, host_wake, host_stall;
  logic t_req, t_we, t_gnt, p_req, p_we, p_gnt, mem_en, mem_we;
  logic [IW-1:0] host_line, t_line, p_line, mem_line;
  logic [LB-1:0] host_wdata, t_wdata, p_wdata, mem_wdata;

  dport_arb #(.NUM_LINES(NL), .LINE_BITS(LB)) dut (.*);

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
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
    for (int i = 0; i < 3000; i++) begin
      logic e_p, e_t, e_h, e_stall, e_en, e_we;
      logic [IW-1:0] e_line; logic [LB-1:0] e_wd;
      stall_mode = 1'($urandom); host_req = 1'($urandom); host_we = 1'($urandom);
      host_wake = (($urandom % 5) == 0); t_req = 1'($urandom); t_we = 1'($urandom);
      p_req = (($urandom % 4) == 0); p_we = 1'($urandom);
      host_line = IW'($urandom); t_line = IW'($urandom); p_line = IW'($urandom);
      host_wdata = LB'($urandom); t_wdata = LB'($urandom); p_wdata = LB'($urandom);
      #1;
      e_p = p_req;
      e_t = !p_req && t_req && (stall_mode || !host_req);
      e_stall = host_req && (p_req || (stall_mode && t_req) || host_wake);
      e_h = host_req && !e_stall;
      e_en = e_p || e_t || e_h;
      e_we = e_p ? p_we : e_t ? t_we : host_we;
      e_line = e_p ? p_line : e_t ? t_line : host_line;
      e_wd = e_p ? p_wdata : e_t ? t_wdata : host_wdata;
      expect_eq(p_gnt, e_p, "p_gnt");
      expect_eq(t_gnt, e_t, "t_gnt");
      expect_eq(host_stall, e_stall, "host_stall");
      expect_eq(mem_en, e_en, "mem_en");
      if (e_en) begin
        expect_eq(mem_we, e_we, "mem_we");
        expect_eq(mem_line, e_line, "mem_line");
        expect_eq(mem_wdata, e_wd, "mem_wdata");
      end
      if (t_gnt && !host_req) n_idle_inject++;
      if (t_gnt && host_req) n_stall++;
      if (t_req && !t_gnt && host_req && !p_req) n_defer++;
    end
    if (n_idle_inject == 0 || n_stall == 0 || n_defer == 0) begin
      failures++; $display("FAIL: a policy case was never exercised");
    end
    $display("idle injections %0d, host stalls for TuRaN %0d, TuRaN deferrals %0d", n_idle_inject, n_stall, n_defer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
