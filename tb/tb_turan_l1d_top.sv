// tb_turan_l1d_top: end-to-end test of TuRaN in the L1 data cache, at the
// design's default sizes (512 lines of 512 bits, 1000 reads per line during
// characterization). The testbench plays the CPU (through the APB registers)
// and the host cache controller (data-array traffic and evictions).
//
// Sequence:
//  1. characterization, with host reads arriving (they must be stalled);
//     the chosen line must be among the lines with the most metastable
//     cells of the array model, and its reported entropy must match that
//     count;
//  2. generation of random buffers with the port free: 8 cycles from the
//     eviction acknowledge to a full buffer (two lines, four one-cycle steps
//     each); every bit must agree with the cell classes of the entropy line
//     (always-failing cells 0, stable cells 1);
//  3. generation under random host traffic, first with idle-cycle injection,
//     then in stall mode; host data in all other lines must stay intact;
//  4. a low r_entropy written by software, so that more than two reads are
//     XOR-collected per buffer;
//  5. a characterization request while the engine is filling, which must
//     wait for the engine.
// Each mechanism is counted and must occur at least once.
module tb_turan_l1d_top;
  import turan_pkg::*;
  localparam int unsigned NL = NUM_LINES, LB = LINE_BITS, IW = $clog2(NL);

  int checks = 0, failures = 0;
  // mechanism counters
  int m_profile = 0, m_prof_stall = 0, m_evict = 0, m_defer = 0, m_stall = 0;
  int m_fold = 0, m_pending = 0, m_full_hold = 0, m_buffers = 0;

  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0, pready;
  logic [APB_AW-1:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic host_req = 0, host_we = 0, host_stall;
  logic [IW-1:0] host_line = '0, evict_line;
  logic [LB-1:0] host_wdata = '0, host_rdata;
  logic evict_req, evict_ack = 0, line_reserved;

  turan_l1d_top dut (.*);

  always #5 clk = ~clk;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, s);
  endtask

  // ---------------------------------------------------------------- APB CPU
  task automatic apb_write(input logic [APB_AW-1:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic apb_read(input logic [APB_AW-1:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic read_buffer(output logic [2*LB-1:0] rr);
    logic [31:0] d;
    do apb_read(REG_STATUS, d); while (!d[0]);
    for (int w = 0; w < 2 * LB / 32; w++) begin
      apb_read(REG_RR_BASE + APB_AW'(4 * w), d);
      rr[32*w +: 32] = d;
    end
    m_buffers++;
  endtask

  // ------------------------------------------------------ host cache model
  logic [LB-1:0] shadow [NL];
  logic          valid  [NL];
  bit            host_on = 0, host_reads_only = 0;
  int            host_pct = 50;
  logic          rd_pend = 0;
  logic [IW-1:0] rd_line;

  initial for (int i = 0; i < NL; i++) valid[i] = 0;

  // issue / retire bookkeeping at the clock edge
  always @(posedge clk) begin
    rd_pend <= 1'b0;
    if (rd_pend && !host_reads_only) begin
      checks++;
      if (valid[rd_line] && host_rdata !== shadow[rd_line])
        fail($sformatf("host data of line %0d corrupted", rd_line));
    end
    if (host_req && !host_stall) begin
      if (host_we) begin shadow[host_line] <= host_wdata; valid[host_line] <= 1'b1; end
      else begin rd_pend <= 1'b1; rd_line <= host_line; end
    end
  end

  // request generation: a stalled request is held until served
  always @(negedge clk) begin
    if (host_req && host_stall) begin
      // hold
    end else if (host_on && ($urandom % 100) < host_pct) begin
      logic [IW-1:0] l;
      do l = IW'($urandom); while (l == evict_line && (line_reserved || dut.cfg_line == l));
      host_req   <= 1'b1;
      host_we    <= host_reads_only ? 1'b0 : (!valid[l] || ($urandom % 2) == 0);
      host_line  <= l;
      host_wdata <= {16{$urandom}};
    end else begin
      host_req <= 1'b0;
    end
  end

  // eviction handler: drop the line, acknowledge after 0..3 cycles
  initial begin
    forever begin
      @(negedge clk);
      if (evict_req && !evict_ack) begin
        repeat ($urandom % 4) @(negedge clk);
        valid[evict_line] = 0;
        evict_ack = 1;
        m_evict++;
        @(negedge clk);
        evict_ack = 0;
      end
    end
  end

  // mechanism monitors (observation of internal handshakes)
  int fill_start, fill_cycles = -1, reads_in_fill = 0;
  always @(posedge clk) begin
    if (dut.prof_busy && host_req && host_stall) m_prof_stall++;
    if (dut.t_req && !dut.t_gnt && host_req && !dut.cfg_stall_mode) m_defer++;
    if (dut.t_req && dut.t_gnt && host_req && dut.cfg_stall_mode) m_stall++;
    if (dut.prof_pending && !dut.prof_busy && !dut.t_quiet) m_pending++;
    if (dut.u_turan.state_q == TS_FULL && !dut.rr_consume) m_full_hold++;
    if (evict_ack) begin fill_start = 0; reads_in_fill = 0; end
    else fill_start++;
    if (dut.u_turan.state_q == TS_WAKE) begin
      reads_in_fill++;
      if (dut.u_turan.acc_sum >= {1'b0, TARGET_ENT_FX}) begin
        fill_cycles = fill_start;   // step cycles since the acknowledge
        if (reads_in_fill > 2) m_fold++;
      end
    end
  end

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cell class of the array model (0 stable, 1 metastable, 2 always fails)
  function automatic int cls(input int l, input int c);
    return int'(dut.u_array.cell_class(l, c));
  endfunction

  initial begin
    logic [31:0] d;
    logic [2*LB-1:0] rr, prev;
    int nrand [NL];
    int max_n, best, ent_q, n;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. characterization, with host reads that must be stalled
    host_reads_only = 1; host_on = 1; host_pct = 30;
    apb_write(REG_CTRL, 32'h4);
    do apb_read(REG_STATUS, d); while (d[1]);
    host_on = 0; host_reads_only = 0;
    repeat (3) @(negedge clk);
    m_profile++;
    checks++; if (!d[2]) fail("characterization done not reported");
    apb_read(REG_LINE, d);    best  = int'(d);
    apb_read(REG_ENTROPY, d); ent_q = int'(d);
    max_n = 0;
    for (int l = 0; l < NL; l++) begin
      nrand[l] = 0;
      for (int c = 0; c < LB; c++) nrand[l] += (cls(l, c) == 1);
      if (nrand[l] > max_n) max_n = nrand[l];
    end
    $display("characterization: line %0d, entropy %0.2f bits, %0d metastable cells (array max %0d)",
             best, real'(ent_q) / 256.0, nrand[best], max_n);
    checks++;
    if (nrand[best] < max_n - 3) fail("chosen line is not among the highest-entropy lines");
    checks++;
    if (real'(ent_q) / 256.0 < 0.95 * real'(nrand[best]) || real'(ent_q) / 256.0 > real'(nrand[best]) + 1.0)
      fail("reported entropy does not match the line's metastable cells");

    // ---- 2. generation, port free
    apb_write(REG_CTRL, 32'h1);
    prev = '0;
    for (int k = 0; k < 3; k++) begin
      read_buffer(rr);
      checks++;
      if (fill_cycles != 8) fail($sformatf("fill took %0d cycles, expected 8", fill_cycles));
      for (int s = 0; s < 2; s++)
        for (int c = 0; c < LB; c++) begin
          checks++;
          if ((cls(best, c) == 0 && !rr[s*LB + c]) || (cls(best, c) == 2 && rr[s*LB + c]))
            fail($sformatf("slot %0d column %0d disagrees with the cell class", s, c));
        end
      checks++;
      if (rr == prev) fail("two consecutive buffers are equal");
      prev = rr;
    end

    // ---- 3. host traffic: idle-cycle injection, then stall mode
    host_on = 1; host_pct = 70;
    for (int k = 0; k < 4; k++) read_buffer(rr);
    apb_write(REG_CTRL, 32'h3);
    for (int k = 0; k < 4; k++) read_buffer(rr);
    apb_write(REG_CTRL, 32'h1);

    // ---- 4. low r_entropy: 60 bits per read, five reads per buffer
    apb_write(REG_ENTROPY, 60 * 256);
    for (int k = 0; k < 2; k++) read_buffer(rr);
    checks++;
    if (dut.u_turan.credit_q != ENT_W'(60 * 256)) fail("software r_entropy not used");

    // ---- 5. characterization requested while the engine fills
    host_on = 0;
    @(negedge clk);
    while (dut.u_turan.state_q != TS_WRITE1) @(negedge clk);
    apb_write(REG_CTRL, 32'h5);
    do apb_read(REG_STATUS, d); while (d[1]);
    m_profile++;
    apb_read(REG_LINE, d);
    checks++;
    if (int'(d) != best) fail("second characterization chose a different line");
    read_buffer(rr);

    // ---- mechanism coverage
    $display("characterizations %0d, host stalls during characterization %0d, evictions %0d",
             m_profile, m_prof_stall, m_evict);
    $display("idle-cycle deferrals %0d, stall-mode host stalls %0d, fills with >2 reads %0d",
             m_defer, m_stall, m_fold);
    $display("characterization waits %0d, full-buffer hold cycles %0d, buffers read %0d",
             m_pending, m_full_hold, m_buffers);
    checks++; if (m_profile < 2)    fail("characterization not run twice");
    checks++; if (m_prof_stall == 0) fail("no host stall during characterization");
    checks++; if (m_evict == 0)     fail("no eviction");
    checks++; if (m_defer == 0)     fail("no idle-cycle deferral");
    checks++; if (m_stall == 0)     fail("no stall-mode host stall");
    checks++; if (m_fold == 0)      fail("no fill with more than two reads");
    checks++; if (m_pending == 0)   fail("characterization never waited for the engine");
    checks++; if (m_full_hold == 0) fail("full buffer never held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
