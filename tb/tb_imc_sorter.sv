`timescale 1ns/1ps
// tb_imc_sorter: the binary sort system at its defaults (8 words of 8 bits).
// Ten rounds: reverse order, all equal, many duplicates, then random words.
// Checks each sorted output against a reference sort, the run length
// (6 steps x (1 + 49) + 5 x 4 copies x 2 = 340 cycles), the step count (6) and
// the copy count (20).
module tb_imc_sorter;
  import imc_pkg::*;

  localparam int N = 8, DW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, wr_en = 0;
  logic [2:0] wr_wire = 0, rd_wire = 0;
  logic [DW-1:0] wr_data = 0, rd_data;
  logic [31:0] op_cycles;
  logic [15:0] steps_done, copies_done;

  imc_sorter dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[N], s[N], tmp;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      for (int i = 0; i < N; i++)
        case (r)
          0: v[i] = 255 - 30 * i;
          1: v[i] = 77;
          2: v[i] = (i * 5) % 3;
          default: v[i] = int'($urandom_range(0, 255));
        endcase
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_en = 1; wr_wire = 3'(i); wr_data = DW'(v[i]);
      end
      @(negedge clk);
      wr_en = 0; start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      s = v;
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N - 1 - a; b++)
          if (s[b] > s[b+1]) begin tmp = s[b]; s[b] = s[b+1]; s[b+1] = tmp; end
      for (int i = 0; i < N; i++) begin
        rd_wire = 3'(i); #1;
        checks++;
        if (rd_data != DW'(s[i])) begin
          failures++; $display("FAIL round %0d out %0d: %0d want %0d", r, i, rd_data, s[i]);
        end
      end
      checks += 3;
      if (op_cycles != 340) begin failures++; $display("FAIL cycles %0d", op_cycles); end
      if (steps_done != 6) begin failures++; $display("FAIL steps %0d", steps_done); end
      if (copies_done != 20) begin failures++; $display("FAIL copies %0d", copies_done); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
