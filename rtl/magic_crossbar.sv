// magic_crossbar: behavioural model of a memristive crossbar that executes
// MAGIC stateful logic (kind: behavioural model of an analog array and its
// row/column voltage drivers; it models the logic function only, no energy,
// resistance or timing).
//
// Each cell holds one bit: low-resistance state = 1, high-resistance state = 0.
// Per clock cycle the array accepts NSLOT micro-operations (one per partition,
// plus the controller's cross-partition copies), all evaluated against the state
// at the start of the cycle:
//   MOP_INIT   cells of the columns dst+l (init_mask[l] = 1), all rows, become 1
//   MOP_ROWNOR for rows row_lo..row_hi: out &= ~(a | b)   (b ignored for NOT)
//   MOP_COLNOT in column src_a, for rows row_lo..row_hi: out &= ~cell[src_row]
// The "out &=" form is the MAGIC property that an output cell can only switch
// from 1 to 0; an output that was not initialised gives a wrong result, as in the
// real array. A host port writes one whole column (a stored word or bit-stream)
// and reads one column combinationally. Reset clears the array.
//
// Follows the paper: LRS = 1 / HRS = 0, output cells initialised to LRS before a
// NOR or NOT, NOR and NOT in both row and column direction. Own choices: the op
// encoding, at most two NOR inputs, the host port.
module magic_crossbar
  import imc_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 68,
  parameter int unsigned NSLOT = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mop_t                      ops [NSLOT],
  input  logic                      wr_en,
  input  logic [$clog2(COLS)-1:0]   wr_col,
  input  logic [ROWS-1:0]           wr_data,
  input  logic [$clog2(COLS)-1:0]   rd_col,
  output logic [ROWS-1:0]           rd_data
);

  localparam int unsigned CW = $clog2(COLS);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [ROWS-1:0] cells [COLS];
  logic [ROWS-1:0] cells_d [COLS];

  function automatic logic [ROWS-1:0] row_range(logic [15:0] lo, logic [15:0] hi);
    logic [ROWS-1:0] m;
    for (int unsigned r = 0; r < ROWS; r++)
      m[r] = (16'(r) >= lo) && (16'(r) <= hi);
    return m;
  endfunction

  always_comb begin
    cells_d = cells;
    for (int unsigned s = 0; s < NSLOT; s++) begin
      unique case (ops[s].kind)
        MOP_INIT: begin
          for (int unsigned l = 0; l < 32; l++)
            if (ops[s].init_mask[l] && (32'(ops[s].dst) + l < COLS))
              cells_d[CW'(32'(ops[s].dst) + l)] = '1;
        end
        MOP_ROWNOR: begin
          if (32'(ops[s].dst) < COLS && 32'(ops[s].src_a) < COLS && 32'(ops[s].src_b) < COLS)
            cells_d[CW'(ops[s].dst)] = cells_d[CW'(ops[s].dst)] &
              ~(row_range(ops[s].row_lo, ops[s].row_hi) &
                (cells[CW'(ops[s].src_a)] |
                 (ops[s].two_in ? cells[CW'(ops[s].src_b)] : '0)));
        end
        MOP_COLNOT: begin
          if (32'(ops[s].src_a) < COLS && 32'(ops[s].src_row) < ROWS)
            if (cells[CW'(ops[s].src_a)][RW'(ops[s].src_row)])
              cells_d[CW'(ops[s].src_a)] = cells_d[CW'(ops[s].src_a)] &
                ~row_range(ops[s].row_lo, ops[s].row_hi);
        end
        default: ;
      endcase
    end
    if (wr_en) cells_d[wr_col] = wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < COLS; c++) cells[c] <= '0;
    end else begin
      cells <= cells_d;
    end
  end

  assign rd_data = cells[rd_col];

endmodule
