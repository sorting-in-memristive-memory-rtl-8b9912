`timescale 1ns/1ps
// tb_inmem_sort_top: end-to-end test of both in-memory sorters at the default
// sizes (8 inputs; 8-bit binary words; 256-bit unary streams).
// Each round writes random inputs into both arrays, starts both networks at the
// same time, waits for done and compares every output with a reference sort
// done here in the testbench. It also checks the run length against
//   PC_t = S*(1+PC_B) + 2*(S-1)*N/2  (S = 6 steps for N = 8)
// with PC_B = 4*8+17 = 49 (binary) and 5 (unary), i.e. 340 and 76 cycles, and
// counts the mechanisms the design has: sorting steps, inter-partition copies,
// CAS operations that swapped, and runs of both architectures overlapping.
// In the same rounds both 3x3 median filters get a window made of the round's
// eight binary inputs plus one more value, run concurrently with the sorters,
// and their medians are checked against the reference (430 cycles binary,
// 78 unary, 8 steps and 15 copies each). Both 5x5 filters get a 25-value
// window (the 3x3 window plus 16 more values) and are checked the same way
// (1098 / 306 cycles, 18 steps, 99 copies).
module tb_inmem_sort_top;
  import imc_pkg::*;

  localparam int N = 8, DW = 8, BL = 256;
  localparam int S = 6;
  localparam int ROUNDS = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bin_start = 0, bin_busy, bin_done, bin_wr_en = 0;
  logic [2:0] bin_wr_wire = 0, bin_rd_wire = 0;
  logic [DW-1:0] bin_wr_data = 0, bin_rd_data;
  logic [31:0] bin_cycles; logic [15:0] bin_steps, bin_copies;
  logic un_start = 0, un_busy, un_done, un_wr_en = 0;
  logic [2:0] un_wr_wire = 0, un_rd_wire = 0;
  logic [BL-1:0] un_wr_data = 0, un_rd_data;
  logic [31:0] un_cycles; logic [15:0] un_steps, un_copies;

  logic mb_start = 0, mb_busy, mb_done, mb_wr_en = 0;
  logic [3:0] mb_wr_idx = 0;
  logic [DW-1:0] mb_wr_data = 0, mb_med;
  logic [31:0] mb_cycles; logic [15:0] mb_steps, mb_copies;
  logic mu_start = 0, mu_busy, mu_done, mu_wr_en = 0;
  logic [3:0] mu_wr_idx = 0;
  logic [BL-1:0] mu_wr_data = 0, mu_med;
  logic [31:0] mu_cycles; logic [15:0] mu_steps, mu_copies;

  logic m5b_start = 0, m5b_busy, m5b_done, m5b_wr_en = 0;
  logic [4:0] m5b_wr_idx = 0;
  logic [DW-1:0] m5b_wr_data = 0, m5b_med;
  logic [31:0] m5b_cycles; logic [15:0] m5b_steps, m5b_copies;
  logic m5u_start = 0, m5u_busy, m5u_done, m5u_wr_en = 0;
  logic [4:0] m5u_wr_idx = 0;
  logic [BL-1:0] m5u_wr_data = 0, m5u_med;
  logic [31:0] m5u_cycles; logic [15:0] m5u_steps, m5u_copies;

  inmem_sort_top dut (.*);

  int checks = 0, failures = 0;
  int n_steps = 0, n_copies = 0, n_overlap = 0, n_swapped_inputs = 0, n_medians = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [BL-1:0] thermo(int v);
    logic [BL-1:0] s = '0;
    for (int i = 0; i < BL; i++) s[i] = (i < v);
    return s;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bv[N], uv[N], bs[N], us[N], mw[25], ms[25];
    int tmp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int r = 0; r < ROUNDS; r++) begin
      for (int i = 0; i < N; i++) begin
        bv[i] = (r == 0) ? (N - 1 - i) * 31 : int'($urandom_range(0, 255));
        uv[i] = (r == 1) ? 200 : int'($urandom_range(0, BL));
        if (r == 2) bv[i] = (i % 2) ? 255 : 0;
      end
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        bin_wr_en = 1; bin_wr_wire = 3'(i); bin_wr_data = DW'(bv[i]);
        un_wr_en = 1; un_wr_wire = 3'(i); un_wr_data = thermo(uv[i]);
      end
      for (int i = 0; i < 25; i++) begin
        mw[i] = (i < N) ? bv[i] : int'($urandom_range(0, 255));
        @(negedge clk);
        bin_wr_en = 0; un_wr_en = 0;
        mb_wr_en = (i < 9); mb_wr_idx = 4'(i); mb_wr_data = DW'(mw[i]);
        mu_wr_en = (i < 9); mu_wr_idx = 4'(i); mu_wr_data = thermo(mw[i]);
        m5b_wr_en = 1; m5b_wr_idx = 5'(i); m5b_wr_data = DW'(mw[i]);
        m5u_wr_en = 1; m5u_wr_idx = 5'(i); m5u_wr_data = thermo(mw[i]);
      end
      @(negedge clk);
      bin_wr_en = 0; un_wr_en = 0; mb_wr_en = 0; mu_wr_en = 0; m5b_wr_en = 0; m5u_wr_en = 0;
      bin_start = 1; un_start = 1; mb_start = 1; mu_start = 1; m5b_start = 1; m5u_start = 1;
      @(negedge clk);
      bin_start = 0; un_start = 0; mb_start = 0; mu_start = 0; m5b_start = 0; m5u_start = 0;
      fork
        begin
          wait (bin_done);
        end
        begin
          wait (un_done);
          if (bin_busy) n_overlap++;
        end
      join
      while (mb_busy || mu_busy || m5b_busy || m5u_busy) @(negedge clk);
      @(negedge clk);
      ms = mw;
      for (int a = 0; a < 25; a++)
        for (int b = 0; b < 24 - a; b++)
          if (ms[b] > ms[b+1]) begin tmp = ms[b]; ms[b] = ms[b+1]; ms[b+1] = tmp; end
      check(m5b_med == DW'(ms[12]), $sformatf("round %0d binary 5x5 median %0d, want %0d", r, m5b_med, ms[12]));
      check(m5u_med == thermo(ms[12]), $sformatf("round %0d unary 5x5 median %0d ones, want %0d", r,
                                                  $countones(m5u_med), ms[12]));
      check(m5b_cycles == 32'd1098 && m5u_cycles == 32'd306, $sformatf("5x5 median cycles %0d/%0d",
                                                                        m5b_cycles, m5u_cycles));
      check(m5b_steps == 16'd18 && m5u_steps == 16'd18 && m5b_copies == 16'd99 && m5u_copies == 16'd99,
            "5x5 median steps/copies");
      n_medians += 2;
      ms = mw;
      for (int a = 0; a < 9; a++)
        for (int b = 0; b < 8 - a; b++)
          if (ms[b] > ms[b+1]) begin tmp = ms[b]; ms[b] = ms[b+1]; ms[b+1] = tmp; end
      check(mb_med == DW'(ms[4]), $sformatf("round %0d binary median %0d, want %0d", r, mb_med, ms[4]));
      check(mu_med == thermo(ms[4]), $sformatf("round %0d unary median %0d ones, want %0d", r,
                                                $countones(mu_med), ms[4]));
      check(mb_cycles == 32'd430 && mu_cycles == 32'd78, $sformatf("median cycles %0d/%0d",
                                                                    mb_cycles, mu_cycles));
      check(mb_steps == 16'd8 && mu_steps == 16'd8 && mb_copies == 16'd15 && mu_copies == 16'd15,
            "median steps/copies");
      n_medians += 2;
      // reference
      bs = bv; us = uv;
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N - 1 - a; b++) begin
          if (bs[b] > bs[b+1]) begin tmp = bs[b]; bs[b] = bs[b+1]; bs[b+1] = tmp; end
          if (us[b] > us[b+1]) begin tmp = us[b]; us[b] = us[b+1]; us[b+1] = tmp; end
        end
      for (int i = 0; i < N - 1; i++) if (bv[i] > bv[i+1]) n_swapped_inputs++;
      for (int i = 0; i < N; i++) begin
        bin_rd_wire = 3'(i); un_rd_wire = 3'(i);
        #1;
        check(bin_rd_data == DW'(bs[i]),
              $sformatf("round %0d binary out %0d = %0d, want %0d", r, i, bin_rd_data, bs[i]));
        check(un_rd_data == thermo(us[i]),
              $sformatf("round %0d unary out %0d = %0d ones, want %0d", r, i,
                        $countones(un_rd_data), us[i]));
      end
      check(bin_cycles == 32'(S * (1 + 4 * DW + 17) + 2 * (S - 1) * N / 2),
            $sformatf("binary cycles %0d", bin_cycles));
      check(un_cycles == 32'(S * (1 + 5) + 2 * (S - 1) * N / 2),
            $sformatf("unary cycles %0d", un_cycles));
      check(bin_steps == 16'(S) && un_steps == 16'(S), "step count");
      check(bin_copies == 16'((S - 1) * N / 2) && un_copies == 16'((S - 1) * N / 2), "copy count");
      n_steps  += int'(bin_steps) + int'(un_steps);
      n_copies += int'(bin_copies) + int'(un_copies);
    end
    $display("mechanisms: steps=%0d copies=%0d out-of-order-inputs=%0d overlapped-runs=%0d medians=%0d",
             n_steps, n_copies, n_swapped_inputs, n_overlap, n_medians);
    check(n_medians > 0, "median filters ran");
    check(n_steps > 0, "sorting steps happened");
    check(n_copies > 0, "inter-partition copies happened");
    check(n_swapped_inputs > 0, "CAS swaps exercised");
    check(n_overlap > 0, "binary and unary runs overlapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
