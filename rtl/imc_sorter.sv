// imc_sorter: complete in-memory bitonic sort system, one crossbar plus its
// network controller, for binary words (MODE_BINARY, ROWS = data width) or for
// unary bit-streams (MODE_UNARY, ROWS = bit-stream length).
//
// The crossbar has ROWS rows and N/2 partitions of CPP columns (17 binary, 9
// unary). Usage: write the N inputs through the host port (wr_en, wr_wire,
// wr_data: one whole column per write), pulse `start`, wait for `done`, then read
// sorted output w (ascending, wire 0 = smallest) by setting rd_wire and sampling
// rd_data in the same cycle. No data leaves the array while it sorts: every step
// is a NOR/NOT/initialisation micro-operation inside the crossbar.
// Timing: done arrives PC_t = S*(1+PC_B) + 2*(S-1)*N/2 cycles after start, with
// PC_B = 4*ROWS+17 (binary) or 5 (unary). Host writes must not overlap a run.
// Follows the paper: the whole sort runs in the array, partitions work in
// parallel, results stay in memory. Own choices: the host port and column map.
module imc_sorter
  import imc_pkg::*;
#(
  parameter int unsigned N    = 8,
  parameter int unsigned ROWS = 8,
  parameter sort_mode_e  MODE = MODE_BINARY
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic                   wr_en,
  input  logic [$clog2(N)-1:0]   wr_wire,
  input  logic [ROWS-1:0]        wr_data,
  input  logic [$clog2(N)-1:0]   rd_wire,
  output logic [ROWS-1:0]        rd_data,
  output logic [31:0]            op_cycles,
  output logic [15:0]            steps_done,
  output logic [15:0]            copies_done
);

  localparam int unsigned CPP  = (MODE == MODE_UNARY) ? UN_CPP : BIN_CPP;
  localparam int unsigned COLS = N / 2 * CPP;
  localparam int unsigned CW   = $clog2(COLS);

  mop_t        ops [N/2];
  logic [15:0] ld_col, res_col;

  bitonic_ctrl #(.N(N), .ROWS(ROWS), .MODE(MODE)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .ops,
    .ld_wire(wr_wire), .ld_col,
    .res_wire(rd_wire), .res_col,
    .op_cycles, .steps_done, .copies_done
  );

  magic_crossbar #(.ROWS(ROWS), .COLS(COLS), .NSLOT(N/2)) u_xbar (
    .clk, .rst_n, .ops,
    .wr_en, .wr_col(ld_col[CW-1:0]), .wr_data,
    .rd_col(res_col[CW-1:0]), .rd_data
  );

  // The host may not write the array while the controller drives it.
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wr_en);

endmodule
