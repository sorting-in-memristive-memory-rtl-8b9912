`timescale 1ns/1ps
// bitonic_harness: drives one bitonic_ctrl + magic_crossbar pair through ROUNDS
// random sorts and checks the outputs against a reference sort and the run
// length against EXP_CYCLES. Used by tb_bitonic_ctrl for several network sizes.
module bitonic_harness
  import imc_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter int unsigned ROWS = 4,
  parameter sort_mode_e  MODE = MODE_BINARY,
  parameter int unsigned EXP_CYCLES = 0,
  parameter int unsigned ROUNDS = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned CPP = (MODE == MODE_UNARY) ? UN_CPP : BIN_CPP;
  localparam int unsigned COLS = N / 2 * CPP;
  localparam int unsigned VMAX = (MODE == MODE_UNARY) ? ROWS : (1 << ROWS) - 1;

  logic start = 0, busy, done;
  mop_t ops [N/2], ops_x [N/2];
  logic [$clog2(N)-1:0] ld_wire = 0, res_wire = 0;
  logic [15:0] ld_col, res_col, steps_done, copies_done;
  logic [31:0] op_cycles;
  logic wr_en = 0;
  logic [ROWS-1:0] wr_data = 0, rd_data;

  bitonic_ctrl #(.N(N), .ROWS(ROWS), .MODE(MODE)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .ops, .ld_wire, .ld_col, .res_wire, .res_col,
    .op_cycles, .steps_done, .copies_done);
  assign ops_x = ops;
  magic_crossbar #(.ROWS(ROWS), .COLS(COLS), .NSLOT(N/2)) u_xbar (
    .clk, .rst_n, .ops(ops_x), .wr_en, .wr_col(ld_col[$clog2(COLS)-1:0]), .wr_data,
    .rd_col(res_col[$clog2(COLS)-1:0]), .rd_data);

  function automatic logic [ROWS-1:0] enc(int v);
    logic [ROWS-1:0] s;
    if (MODE == MODE_UNARY) begin
      s = '0;
      for (int i = 0; i < ROWS; i++) s[i] = (i < v);
    end else s = ROWS'(v);
    return s;
  endfunction

  initial begin
    int v[N], srt[N], tmp;
    checks = 0; failures = 0; finished = 0;
    wait (rst_n);
    for (int r = 0; r < ROUNDS; r++) begin
      for (int i = 0; i < N; i++) v[i] = (r == 0) ? int'(VMAX) * (N - 1 - i) / (N - 1)
                                                  : int'($urandom_range(0, VMAX));
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_en = 1; ld_wire = $clog2(N)'(i); wr_data = enc(v[i]);
      end
      @(negedge clk);
      wr_en = 0; start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      srt = v;
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N - 1 - a; b++)
          if (srt[b] > srt[b+1]) begin tmp = srt[b]; srt[b] = srt[b+1]; srt[b+1] = tmp; end
      for (int i = 0; i < N; i++) begin
        res_wire = $clog2(N)'(i); #1;
        checks++;
        if (rd_data != enc(srt[i])) begin
          failures++;
          $display("FAIL N=%0d mode=%0d round %0d out %0d: got %h want %h", N, MODE, r, i,
                   rd_data, enc(srt[i]));
        end
      end
      checks++;
      if (op_cycles != EXP_CYCLES) begin
        failures++;
        $display("FAIL N=%0d mode=%0d: %0d cycles, want %0d", N, MODE, op_cycles, EXP_CYCLES);
      end
    end
    finished = 1;
  end
endmodule
