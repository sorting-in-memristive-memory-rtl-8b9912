// imc_pkg: shared types and column map for in-array (MAGIC) sorting.
//
// A memristive crossbar computes by stateful logic: an output cell is first
// initialised to logic 1 (low-resistance state) and a NOR of one to four input
// cells can then only leave it at 1 or switch it to 0. Every operation the
// controllers issue is one micro-operation of type mop_t:
//   MOP_INIT   set a group of columns of one partition (all rows) to 1
//   MOP_ROWNOR NOR of one or two columns into a third, row-parallel over a row range
//              (one input = NOT; a copy is two NOTs, as in the paper)
//   MOP_COLNOT NOT inside one column, from one row to a range of other rows
// Column fields of an op leaving a sequencer are partition-local and may hold the
// symbolic codes COL_A/COL_B/COL_MAX/COL_MIN, which the network controller
// resolves per partition; ops reaching the crossbar carry absolute columns.
//
// The per-partition column map follows the IN1/IN2/MIN/MAX bookkeeping of the
// paper's 8-input example; the doubled output and input columns, the staging
// column and the work-column numbering are this design's own choice.
package imc_pkg;

  typedef enum logic [1:0] {
    MOP_NOP    = 2'd0,
    MOP_INIT   = 2'd1,
    MOP_ROWNOR = 2'd2,
    MOP_COLNOT = 2'd3
  } mop_kind_e;

  typedef struct packed {
    mop_kind_e   kind;
    logic        two_in;    // ROWNOR: 1 = NOR(src_a, src_b), 0 = NOT(src_a)
    logic [15:0] src_a;     // ROWNOR input column / COLNOT column
    logic [15:0] src_b;     // ROWNOR second input column
    logic [15:0] dst;       // ROWNOR output column / INIT base column of the partition
    logic [15:0] row_lo;    // first row written (inclusive)
    logic [15:0] row_hi;    // last row written (inclusive); row_lo > row_hi writes none
    logic [15:0] src_row;   // COLNOT input row
    logic [31:0] init_mask; // INIT: local columns of the partition set to 1
  } mop_t;

  localparam mop_t MOP_IDLE = '{kind: MOP_NOP, two_in: 1'b0, src_a: 16'd0, src_b: 16'd0,
                                dst: 16'd0, row_lo: 16'd1, row_hi: 16'd0, src_row: 16'd0,
                                init_mask: 32'd0};

  // Sorting-unit flavours.
  typedef enum logic {MODE_BINARY = 1'b0, MODE_UNARY = 1'b1} sort_mode_e;

  // Local column map of one partition.
  localparam int unsigned LC_MAX0 = 0;  // CAS outputs of even steps
  localparam int unsigned LC_MIN0 = 1;
  localparam int unsigned LC_MAX1 = 2;  // CAS outputs of odd steps
  localparam int unsigned LC_MIN1 = 3;
  localparam int unsigned LC_IN0  = 4;  // value copied in for even steps
  localparam int unsigned LC_IN1  = 5;  // value copied in for odd steps
  localparam int unsigned LC_TMP  = 6;  // staging cell of a two-NOT copy
  localparam int unsigned LC_WORK = 7;  // first work column of the sorting unit

  // Work columns of the binary sorting unit (comparator, then multiplexers).
  localparam int unsigned BC_NAB = 7;   // NOR(A,B)          | mux: ~A
  localparam int unsigned BC_LT  = 8;   // ~A & B per bit    | mux: ~B
  localparam int unsigned BC_GT  = 9;   // A & ~B per bit    | mux: P, R
  localparam int unsigned BC_CE  = 10;  // ripple chain, even rows | mux: Q, S
  localparam int unsigned BC_CO  = 11;  // ripple chain, odd rows  | mux: T, U
  localparam int unsigned BC_G1  = 12;  // chain value restored in the next row
  localparam int unsigned BC_X   = 13;  // NOR(gt, chain)
  localparam int unsigned BC_BC  = 14;  // broadcast staging
  localparam int unsigned BC_SGE = 15;  // A>=B in every row (select)
  localparam int unsigned BC_SLT = 16;  // A<B in every row (select)
  localparam int unsigned BIN_CPP = 17; // columns per partition, binary

  // Work columns of the unary sorting unit.
  localparam int unsigned UC_W0 = 7;    // ~A, later NOR(A,B)
  localparam int unsigned UC_W1 = 8;    // ~B
  localparam int unsigned UN_CPP = 9;   // columns per partition, unary

  // Symbolic local column codes resolved by the network controller.
  localparam logic [15:0] COL_A   = 16'hFFF0;
  localparam logic [15:0] COL_B   = 16'hFFF1;
  localparam logic [15:0] COL_MAX = 16'hFFF2;
  localparam logic [15:0] COL_MIN = 16'hFFF3;

  // Helpers for building ops.
  function automatic mop_t mop_nor(logic [15:0] a, logic [15:0] b, logic [15:0] d,
                                   int unsigned lo, int unsigned hi);
    mop_t m = MOP_IDLE;
    m.kind = MOP_ROWNOR; m.two_in = 1'b1; m.src_a = a; m.src_b = b; m.dst = d;
    m.row_lo = 16'(lo); m.row_hi = 16'(hi);
    return m;
  endfunction

  function automatic mop_t mop_not(logic [15:0] a, logic [15:0] d,
                                   int unsigned lo, int unsigned hi);
    mop_t m = MOP_IDLE;
    m.kind = MOP_ROWNOR; m.two_in = 1'b0; m.src_a = a; m.src_b = a; m.dst = d;
    m.row_lo = 16'(lo); m.row_hi = 16'(hi);
    return m;
  endfunction

  function automatic mop_t mop_colnot(logic [15:0] c, int unsigned srow,
                                      int unsigned lo, int unsigned hi);
    mop_t m = MOP_IDLE;
    m.kind = MOP_COLNOT; m.src_a = c; m.dst = c; m.src_row = 16'(srow);
    m.row_lo = 16'(lo); m.row_hi = 16'(hi);
    return m;
  endfunction

  function automatic mop_t mop_init(logic [31:0] mask);
    mop_t m = MOP_IDLE;
    m.kind = MOP_INIT; m.init_mask = mask;
    return m;
  endfunction

endpackage
