// median_filter5x5: the in-memory 5x5 median filter, i.e. median_filter with a
// 25-value window: 18 network steps on 13 partitions, median left in the array.
// Host port as in median_filter: write values 0..24 (wr_idx), pulse start, read
// med_data after done. Runs take 18 * (1 + PC_B) + 2 * 99 cycles: 1098 for
// 8-bit pixels (the default), 306 for unary bit-streams.
module median_filter5x5
  import imc_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter sort_mode_e  MODE = MODE_BINARY
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  input  logic            wr_en,
  input  logic [4:0]      wr_idx,
  input  logic [ROWS-1:0] wr_data,
  output logic [ROWS-1:0] med_data,
  output logic [31:0]     op_cycles,
  output logic [15:0]     steps_done,
  output logic [15:0]     copies_done
);

  median_filter #(.WIN(5), .ROWS(ROWS), .MODE(MODE)) u_filter (
    .clk, .rst_n, .start, .busy, .done, .wr_en, .wr_idx, .wr_data, .med_data,
    .op_cycles, .steps_done, .copies_done);

endmodule
