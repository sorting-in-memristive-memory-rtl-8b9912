`timescale 1ns/1ps
// tb_median_filter: checks the in-memory median filters, 3x3 and 5x5 windows,
// each in binary mode with 8-bit pixels and in unary mode with 256-bit
// thermometer bit-streams (value v = v ones in the low rows). All four filters
// get the same windows (the 3x3 filters use the first nine values): the
// diagram's example 1,8,4,6,3,5,9,2,7, all equal, rising, falling, alternating
// extremes, then random windows. The median read from the array is compared
// with a reference sort. Each run also checks the cycle count
// (NS x (1 + PC_B) + 2 x copies: 430 / 78 for 3x3, 1098 / 306 for 5x5), the
// step count (8 / 18) and the copy count (15 / 99).
module tb_median_filter;
  import imc_pkg::*;

  localparam int DW = 8, BL = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          start = 0, wr3 = 0, wr5 = 0;
  logic [4:0]    wr_idx = 0;
  logic [DW-1:0] wr_bin = 0;
  logic [BL-1:0] wr_un = 0;

  logic          busy [4], done [4];
  logic [DW-1:0] med3b, med5b;
  logic [BL-1:0] med3u, med5u;
  logic [31:0]   cyc [4];
  logic [15:0]   steps [4], copies [4];

  median_filter dut_3b (
    .clk, .rst_n, .start, .busy(busy[0]), .done(done[0]), .wr_en(wr3), .wr_idx,
    .wr_data(wr_bin), .med_data(med3b), .op_cycles(cyc[0]), .steps_done(steps[0]),
    .copies_done(copies[0]));
  median_filter #(.ROWS(BL), .MODE(MODE_UNARY)) dut_3u (
    .clk, .rst_n, .start, .busy(busy[1]), .done(done[1]), .wr_en(wr3), .wr_idx,
    .wr_data(wr_un), .med_data(med3u), .op_cycles(cyc[1]), .steps_done(steps[1]),
    .copies_done(copies[1]));
  median_filter5x5 dut_5b (
    .clk, .rst_n, .start, .busy(busy[2]), .done(done[2]), .wr_en(wr5), .wr_idx,
    .wr_data(wr_bin), .med_data(med5b), .op_cycles(cyc[2]), .steps_done(steps[2]),
    .copies_done(copies[2]));
  median_filter5x5 #(.ROWS(BL), .MODE(MODE_UNARY)) dut_5u (
    .clk, .rst_n, .start, .busy(busy[3]), .done(done[3]), .wr_en(wr5), .wr_idx,
    .wr_data(wr_un), .med_data(med5u), .op_cycles(cyc[3]), .steps_done(steps[3]),
    .copies_done(copies[3]));

  int checks = 0, failures = 0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int median_of(int v[25], int n);
    int s[25] = v, t;
    for (int a = 0; a < n; a++)
      for (int b = 0; b < n - 1 - a; b++)
        if (s[b] > s[b+1]) begin t = s[b]; s[b] = s[b+1]; s[b+1] = t; end
    return s[n/2];
  endfunction

  function automatic logic [BL-1:0] therm(int v);
    logic [BL-1:0] r = '0;
    for (int i = 0; i < BL; i++) r[i] = (i < v);
    return r;
  endfunction

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  localparam int WANT_CYC [4] = '{430, 78, 1098, 306};
  localparam int WANT_ST  [4] = '{8, 8, 18, 18};
  localparam int WANT_CP  [4] = '{15, 15, 99, 99};

  initial begin
    int v[25], m3, m5;
    int ex[9];
    ex = '{1, 8, 4, 6, 3, 5, 9, 2, 7};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 24; r++) begin
      for (int i = 0; i < 25; i++)
        case (r)
          0: v[i] = (i < 9) ? ex[i] : 20 + i;
          1: v[i] = 200;
          2: v[i] = 10 * i;
          3: v[i] = 250 - 7 * i;
          4: v[i] = (i % 2 == 0) ? 0 : 255;
          default: v[i] = int'($urandom_range(0, 255));
        endcase
      m3 = median_of(v, 9);
      m5 = median_of(v, 25);
      for (int i = 0; i < 25; i++) begin
        @(negedge clk);
        wr3 = (i < 9); wr5 = 1; wr_idx = 5'(i);
        wr_bin = DW'(v[i]); wr_un = therm(v[i]);
      end
      @(negedge clk);
      wr3 = 0; wr5 = 0; start = 1;
      @(negedge clk);
      start = 0;
      while (busy[0] || busy[1] || busy[2] || busy[3]) @(negedge clk);
      expect_eq($sformatf("3x3 binary median, round %0d", r), int'(med3b), m3);
      expect_eq($sformatf("3x3 unary median, round %0d", r), $countones(med3u), m3);
      checks++;
      if (med3u != therm(m3)) begin failures++; $display("FAIL 3x3 unary not a thermometer code"); end
      expect_eq($sformatf("5x5 binary median, round %0d", r), int'(med5b), m5);
      expect_eq($sformatf("5x5 unary median, round %0d", r), $countones(med5u), m5);
      checks++;
      if (med5u != therm(m5)) begin failures++; $display("FAIL 5x5 unary not a thermometer code"); end
      for (int d = 0; d < 4; d++) begin
        expect_eq($sformatf("cycles, filter %0d", d), int'(cyc[d]), WANT_CYC[d]);
        expect_eq($sformatf("steps, filter %0d", d), int'(steps[d]), WANT_ST[d]);
        expect_eq($sformatf("copies, filter %0d", d), int'(copies[d]), WANT_CP[d]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
