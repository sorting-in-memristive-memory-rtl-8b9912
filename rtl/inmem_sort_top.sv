// inmem_sort_top: the two in-memory sorting architectures side by side.
//
//  * Binary sorter: BIN_N words of BIN_DW bits, one word per crossbar column
//    (bit i in row i); each compare-and-swap is a NOR/NOT comparator followed by
//    two NOR multiplexers, all inside the array.
//  * Unary sorter: UN_N unary bit-streams of UN_BL bits (a value v is v ones
//    followed by zeros); each compare-and-swap is one bitwise AND (minimum) and
//    one bitwise OR (maximum) over all rows at once, five array cycles.
// Both are complete bitonic networks (imc_sorter). Next to them sit the sorting
// application: one 3x3 median filter (median_filter: nine window values in
// five partitions) and one 5x5 median filter (median_filter5x5: 25 values in
// 13 partitions) per representation, the median left in the array.
// Each of the six units has its own start/busy/done and host port; all can run
// at the same time. Defaults: 8-input networks with 8-bit data, i.e. 256-bit
// unary streams, the data width of the in-memory versus off-memory comparison
// and of the median filters. Binary-to-unary conversion is not part of the
// design: unary inputs are written as bit-streams.
module inmem_sort_top
  import imc_pkg::*;
#(
  parameter int unsigned BIN_N  = 8,
  parameter int unsigned BIN_DW = 8,
  parameter int unsigned UN_N   = 8,
  parameter int unsigned UN_BL  = 256,
  parameter int unsigned MED_DW = 8,
  parameter int unsigned MED_BL = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // binary sorter
  input  logic                     bin_start,
  output logic                     bin_busy,
  output logic                     bin_done,
  input  logic                     bin_wr_en,
  input  logic [$clog2(BIN_N)-1:0] bin_wr_wire,
  input  logic [BIN_DW-1:0]        bin_wr_data,
  input  logic [$clog2(BIN_N)-1:0] bin_rd_wire,
  output logic [BIN_DW-1:0]        bin_rd_data,
  output logic [31:0]              bin_cycles,
  output logic [15:0]              bin_steps,
  output logic [15:0]              bin_copies,
  // unary sorter
  input  logic                     un_start,
  output logic                     un_busy,
  output logic                     un_done,
  input  logic                     un_wr_en,
  input  logic [$clog2(UN_N)-1:0]  un_wr_wire,
  input  logic [UN_BL-1:0]         un_wr_data,
  input  logic [$clog2(UN_N)-1:0]  un_rd_wire,
  output logic [UN_BL-1:0]         un_rd_data,
  output logic [31:0]              un_cycles,
  output logic [15:0]              un_steps,
  output logic [15:0]              un_copies,
  // binary 3x3 median filter
  input  logic                     mb_start,
  output logic                     mb_busy,
  output logic                     mb_done,
  input  logic                     mb_wr_en,
  input  logic [3:0]               mb_wr_idx,
  input  logic [MED_DW-1:0]        mb_wr_data,
  output logic [MED_DW-1:0]        mb_med,
  output logic [31:0]              mb_cycles,
  output logic [15:0]              mb_steps,
  output logic [15:0]              mb_copies,
  // unary 3x3 median filter
  input  logic                     mu_start,
  output logic                     mu_busy,
  output logic                     mu_done,
  input  logic                     mu_wr_en,
  input  logic [3:0]               mu_wr_idx,
  input  logic [MED_BL-1:0]        mu_wr_data,
  output logic [MED_BL-1:0]        mu_med,
  output logic [31:0]              mu_cycles,
  output logic [15:0]              mu_steps,
  output logic [15:0]              mu_copies,
  // binary 5x5 median filter
  input  logic                     m5b_start,
  output logic                     m5b_busy,
  output logic                     m5b_done,
  input  logic                     m5b_wr_en,
  input  logic [4:0]               m5b_wr_idx,
  input  logic [MED_DW-1:0]        m5b_wr_data,
  output logic [MED_DW-1:0]        m5b_med,
  output logic [31:0]              m5b_cycles,
  output logic [15:0]              m5b_steps,
  output logic [15:0]              m5b_copies,
  // unary 5x5 median filter
  input  logic                     m5u_start,
  output logic                     m5u_busy,
  output logic                     m5u_done,
  input  logic                     m5u_wr_en,
  input  logic [4:0]               m5u_wr_idx,
  input  logic [MED_BL-1:0]        m5u_wr_data,
  output logic [MED_BL-1:0]        m5u_med,
  output logic [31:0]              m5u_cycles,
  output logic [15:0]              m5u_steps,
  output logic [15:0]              m5u_copies
);

  imc_sorter #(.N(BIN_N), .ROWS(BIN_DW), .MODE(MODE_BINARY)) u_bin (
    .clk, .rst_n, .start(bin_start), .busy(bin_busy), .done(bin_done),
    .wr_en(bin_wr_en), .wr_wire(bin_wr_wire), .wr_data(bin_wr_data),
    .rd_wire(bin_rd_wire), .rd_data(bin_rd_data),
    .op_cycles(bin_cycles), .steps_done(bin_steps), .copies_done(bin_copies)
  );

  imc_sorter #(.N(UN_N), .ROWS(UN_BL), .MODE(MODE_UNARY)) u_un (
    .clk, .rst_n, .start(un_start), .busy(un_busy), .done(un_done),
    .wr_en(un_wr_en), .wr_wire(un_wr_wire), .wr_data(un_wr_data),
    .rd_wire(un_rd_wire), .rd_data(un_rd_data),
    .op_cycles(un_cycles), .steps_done(un_steps), .copies_done(un_copies)
  );

  median_filter #(.ROWS(MED_DW), .MODE(MODE_BINARY)) u_med_bin (
    .clk, .rst_n, .start(mb_start), .busy(mb_busy), .done(mb_done),
    .wr_en(mb_wr_en), .wr_idx({1'b0, mb_wr_idx}), .wr_data(mb_wr_data), .med_data(mb_med),
    .op_cycles(mb_cycles), .steps_done(mb_steps), .copies_done(mb_copies)
  );

  median_filter #(.ROWS(MED_BL), .MODE(MODE_UNARY)) u_med_un (
    .clk, .rst_n, .start(mu_start), .busy(mu_busy), .done(mu_done),
    .wr_en(mu_wr_en), .wr_idx({1'b0, mu_wr_idx}), .wr_data(mu_wr_data), .med_data(mu_med),
    .op_cycles(mu_cycles), .steps_done(mu_steps), .copies_done(mu_copies)
  );

  median_filter5x5 #(.ROWS(MED_DW), .MODE(MODE_BINARY)) u_med5_bin (
    .clk, .rst_n, .start(m5b_start), .busy(m5b_busy), .done(m5b_done),
    .wr_en(m5b_wr_en), .wr_idx(m5b_wr_idx), .wr_data(m5b_wr_data), .med_data(m5b_med),
    .op_cycles(m5b_cycles), .steps_done(m5b_steps), .copies_done(m5b_copies)
  );

  median_filter5x5 #(.ROWS(MED_BL), .MODE(MODE_UNARY)) u_med5_un (
    .clk, .rst_n, .start(m5u_start), .busy(m5u_busy), .done(m5u_done),
    .wr_en(m5u_wr_en), .wr_idx(m5u_wr_idx), .wr_data(m5u_wr_data), .med_data(m5u_med),
    .op_cycles(m5u_cycles), .steps_done(m5u_steps), .copies_done(m5u_copies)
  );

endmodule
