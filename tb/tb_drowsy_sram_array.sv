// tb_drowsy_sram_array: checks the behavioural data-array model.
//  - nominal-supply reads return exactly what was written, for every line;
//  - a drowsy read never turns a stored 0 into 1, and other (nominal) lines
//    read correctly meanwhile;
//  - over 100 drowsy reads of an all-ones line, columns fall into three
//    groups: always 1, always 0 (deterministic failure) and mixed; every
//    mixed column is near 50 % ones, and all three groups occur;
//  - after the drowsy reads the line reads back all ones at nominal supply
//    (access failures are not destructive).
module tb_drowsy_sram_array;
  localparam int unsigned NL = 8, LB = 64, IW = 3, NRD = 100;
  int checks = 0, failures = 0;
  int n_mixed = 0, n_zero = 0, n_one = 0;

  logic clk = 0, en = 0, we = 0;
  logic [IW-1:0] line = '0;
  logic [LB-1:0] wdata = '0, rdata;
  logic [NL-1:0] low_vdd = '0;
  logic [LB-1:0] shadow [NL];
  int ones [LB];

  drowsy_sram_array #(.NUM_LINES(NL), .LINE_BITS(LB), .MAX_RAND_PCT(40), .DET_PCT(20)) dut (.*);

  always #5 clk = ~clk;

  task automatic write(input int l, input logic [LB-1:0] d);
    @(negedge clk); en = 1; we = 1; line = IW'(l); wdata = d;
    @(negedge clk); en = 0; we = 0;
  endtask

  task automatic read(input int l, output logic [LB-1:0] d);
    @(negedge clk); en = 1; we = 0; line = IW'(l);
    @(negedge clk); en = 0; d = rdata;
  endtask

  task automatic expect_eq(input logic [LB-1:0] got, input logic [LB-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LB-1:0] d;
    for (int l = 0; l < NL; l++) begin
      shadow[l] = {$urandom, $urandom};
      write(l, shadow[l]);
    end
    for (int l = 0; l < NL; l++) begin
      read(l, d);
      expect_eq(d, shadow[l], $sformatf("nominal read line %0d", l));
    end
    // drowsy reads of a random pattern: stored zeros stay zero
    for (int l = 0; l < NL; l++) begin
      low_vdd[l] = 1'b1;
      for (int r = 0; r < 20; r++) begin
        read(l, d);
        expect_eq(d & ~shadow[l], '0, $sformatf("drowsy read line %0d sets a stored 0", l));
      end
      read((l + 1) % NL, d);
      expect_eq(d, shadow[(l + 1) % NL], "neighbour line at nominal supply");
      low_vdd[l] = 1'b0;
    end
    // all-ones pattern: classify columns over NRD drowsy reads
    for (int l = 0; l < NL; l++) begin
      write(l, '1);
      low_vdd[l] = 1'b1;
      for (int b = 0; b < LB; b++) ones[b] = 0;
      for (int r = 0; r < NRD; r++) begin
        read(l, d);
        for (int b = 0; b < LB; b++) ones[b] += int'(d[b]);
      end
      for (int b = 0; b < LB; b++) begin
        if (ones[b] == 0) n_zero++;
        else if (ones[b] == NRD) n_one++;
        else begin
          n_mixed++;
          checks++;
          if (ones[b] < 25 || ones[b] > 75) begin
            failures++;
            $display("FAIL line %0d column %0d: %0d ones of %0d", l, b, ones[b], NRD);
          end
        end
      end
      low_vdd[l] = 1'b0;
      read(l, d);
      expect_eq(d, '1, $sformatf("line %0d intact after drowsy reads", l));
    end
    checks++;
    if (n_mixed == 0 || n_zero == 0 || n_one == 0) begin
      failures++;
      $display("FAIL: column groups mixed=%0d always0=%0d always1=%0d", n_mixed, n_zero, n_one);
    end
    $display("columns: mixed=%0d always0=%0d always1=%0d", n_mixed, n_zero, n_one);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
