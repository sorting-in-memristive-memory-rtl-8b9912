// binary_cas_seq: micro-operation sequencer of the in-memory binary sorting unit
// (compare-and-swap of two DW-bit words held in two columns, bit i in row i).
//
// After `start` it issues one op per cycle for PC_B = 4*DW+17 cycles, then
// pulses `done`. Columns in the ops are partition-local (imc_pkg map) with the
// symbolic operands COL_A, COL_B, COL_MAX, COL_MIN. The work columns must have
// been initialised to 1 by the step-initialisation cycle that precedes `start`.
//
// Comparator (4*DW+5 cycles), all NOR/NOT:
//   NAB = NOR(A,B); LT = NOR(NAB,A) = ~A&B; GT = NOR(NAB,B) = A&~B   (row parallel)
//   ge_0 = NOT(LT) in row 0; for bit i>0 the running result A[i-1:0]>=B[i-1:0]
//   is moved one row down by a column NOT plus a row NOT, and
//   ge_i = NOR(LT_i, NOR(GT_i, ge_{i-1})).  Rows alternate between two chain
//   columns so that no cell is written twice.
//   The final ge (row DW-1) is inverted and broadcast into all rows: SLT = A<B and
//   SGE = A>=B, the select lines of the multiplexers.
// Multiplexers (12 cycles, as in the paper: 2 initialisations + 10 operations):
//   init; ~A; ~B; P = NOR(~A,A<B); Q = NOR(~B,A>=B); T = NOR(P,Q); MAX = NOT T;
//   init P,Q,T; R = NOR(~A,A>=B); S = NOR(~B,A<B); U = NOR(R,S); MIN = NOT U.
// The multiplexer schedule, its column names P,Q,T,R,S,U and its cycle order
// follow the paper. The comparator is this design's own ripple NOR network: the
// paper's gate-level comparator is given only for 4 bits, so its cycle count
// (6*DW+15 per unit in the paper) is not reproduced; this unit takes 4*DW+17.
module binary_cas_seq
  import imc_pkg::*;
#(
  parameter int unsigned DW = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output mop_t op,
  output logic busy,
  output logic done
);

  localparam int unsigned PC_B = 4 * DW + 17;
  localparam int unsigned CW   = $clog2(PC_B + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        if (cnt == CW'(PC_B - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  function automatic logic [15:0] chain_col(int unsigned row);
    return (row % 2 == 1) ? 16'(BC_CO) : 16'(BC_CE);
  endfunction

  function automatic mop_t schedule(int unsigned c);
    mop_t m = MOP_IDLE;
    int unsigned i, ph, mx;
    if (c == 0)      m = mop_nor(COL_A, COL_B, 16'(BC_NAB), 0, DW - 1);
    else if (c == 1) m = mop_nor(16'(BC_NAB), COL_A, 16'(BC_LT), 0, DW - 1);
    else if (c == 2) m = mop_nor(16'(BC_NAB), COL_B, 16'(BC_GT), 0, DW - 1);
    else if (c == 3) m = mop_not(16'(BC_LT), chain_col(0), 0, 0);
    else if (c < 4 * DW) begin
      i  = (c - 4) / 4 + 1;
      ph = (c - 4) % 4;
      case (ph)
        0:       m = mop_colnot(chain_col(i - 1), i - 1, i, i);
        1:       m = mop_not(chain_col(i - 1), 16'(BC_G1), i, i);
        2:       m = mop_nor(16'(BC_GT), 16'(BC_G1), 16'(BC_X), i, i);
        default: m = mop_nor(16'(BC_LT), 16'(BC_X), chain_col(i), i, i);
      endcase
    end else if (c < 4 * DW + 5) begin
      case (c - 4 * DW)
        0:       m = mop_not(chain_col(DW - 1), 16'(BC_BC), DW - 1, DW - 1);
        1:       m = mop_colnot(16'(BC_BC), DW - 1, 0, DW - 2);
        2:       m = mop_not(16'(BC_BC), 16'(BC_SLT), 0, DW - 2);
        3:       m = mop_not(chain_col(DW - 1), 16'(BC_SLT), DW - 1, DW - 1);
        default: m = mop_not(16'(BC_SLT), 16'(BC_SGE), 0, DW - 1);
      endcase
    end else if (c < PC_B) begin
      mx = c - (4 * DW + 5);
      case (mx)
        0:  m = mop_init(32'h1F << BC_NAB);
        1:  m = mop_not(COL_A, 16'(BC_NAB), 0, DW - 1);
        2:  m = mop_not(COL_B, 16'(BC_LT), 0, DW - 1);
        3:  m = mop_nor(16'(BC_NAB), 16'(BC_SLT), 16'(BC_GT), 0, DW - 1);
        4:  m = mop_nor(16'(BC_LT), 16'(BC_SGE), 16'(BC_CE), 0, DW - 1);
        5:  m = mop_nor(16'(BC_GT), 16'(BC_CE), 16'(BC_CO), 0, DW - 1);
        6:  m = mop_not(16'(BC_CO), COL_MAX, 0, DW - 1);
        7:  m = mop_init(32'h7 << BC_GT);
        8:  m = mop_nor(16'(BC_NAB), 16'(BC_SGE), 16'(BC_GT), 0, DW - 1);
        9:  m = mop_nor(16'(BC_LT), 16'(BC_SLT), 16'(BC_CE), 0, DW - 1);
        10: m = mop_nor(16'(BC_GT), 16'(BC_CE), 16'(BC_CO), 0, DW - 1);
        default: m = mop_not(16'(BC_CO), COL_MIN, 0, DW - 1);
      endcase
    end
    return m;
  endfunction

  always_comb op = busy ? schedule(32'(cnt)) : MOP_IDLE;

endmodule
