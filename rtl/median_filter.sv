// median_filter: one in-memory WIN x WIN median filter (WIN = 3: five
// partitions; WIN = 5: thirteen partitions), a crossbar driven by the median
// network controller. Binary mode (ROWS = pixel width, default 8 bits) or unary
// mode (ROWS = bit-stream length, e.g. 256).
//
// Usage: write the WIN*WIN window values through the host port (wr_en, wr_idx =
// 0..WIN*WIN-1, wr_data = one whole column), pulse `start`, wait for `done`; med_data
// then shows the median (combinational read of the column the controller
// names). The window order does not matter. Every compare, select and copy runs
// inside the array as MAGIC NOR/NOT micro-operations.
// Timing: done follows start after NS * (1 + PC_B) + 2 * copies cycles, with
// PC_B = 4*ROWS+17 (binary) or 5 (unary). 3x3: 8 steps, 15 copies, 430 cycles
// for 8-bit pixels, 78 for bit-streams. 5x5: 18 steps, 99 copies, 1098 and 306.
// Follows the paper: partitions working in parallel, eight (3x3) or eighteen
// (5x5) steps, copies between steps, median kept in the array. Own choices: the
// host port, the column map (17 or 9 columns per partition), the 5x5 partition
// count.
module median_filter
  import imc_pkg::*;
#(
  parameter int unsigned WIN  = 3,
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

  localparam int unsigned CPP  = (MODE == MODE_UNARY) ? UN_CPP : BIN_CPP;
  localparam int unsigned NP   = (WIN == 5) ? 13 : 5;
  localparam int unsigned COLS = NP * CPP;
  localparam int unsigned CW   = $clog2(COLS);

  mop_t        ops [NP];
  logic [15:0] ld_col, med_col;

  median_ctrl #(.WIN(WIN), .ROWS(ROWS), .MODE(MODE)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .ops,
    .ld_wire(wr_idx), .ld_col, .med_col,
    .op_cycles, .steps_done, .copies_done
  );

  magic_crossbar #(.ROWS(ROWS), .COLS(COLS), .NSLOT(NP)) u_xbar (
    .clk, .rst_n, .ops,
    .wr_en, .wr_col(ld_col[CW-1:0]), .wr_data,
    .rd_col(med_col[CW-1:0]), .rd_data(med_data)
  );

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wr_en);

endmodule
