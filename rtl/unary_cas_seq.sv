// unary_cas_seq: micro-operation sequencer of the in-memory unary sorting unit
// (compare-and-swap of two unary bit-streams of BL bits, bit i in row i).
//
// With unary (thermometer) streams, minimum = bitwise AND and maximum = bitwise
// OR, computed for all BL rows at once. After `start` it issues five ops, one
// per cycle, then pulses `done`:
//   1: W0 = NOT A     2: W1 = NOT B     3: MIN = NOR(W0,W1)  (= A AND B)
//   4: W0 = NOR(A,B)  (W0 reused)       5: MAX = NOT W0      (= A OR B)
// Reusing W0 in cycle 4 without a fresh initialisation is correct because
// ~A & ~(A|B) = ~(A|B). The step-initialisation cycle that precedes `start`
// must have set W0, W1 and the output columns to 1.
// Follows the paper: five operation cycles after one initialisation, inversion on
// two columns, AND as NOR of the inverses, OR as NOT of a NOR, reuse of the
// inverse columns. Own choice: the results go to separate MAX/MIN columns of the
// partition (the paper's drawing writes the maximum into a reused column).
module unary_cas_seq
  import imc_pkg::*;
#(
  parameter int unsigned BL = 256
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output mop_t op,
  output logic busy,
  output logic done
);

  localparam int unsigned PC_B = 5;

  logic [2:0] cnt;

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
        if (cnt == 3'(PC_B - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_comb begin
    op = MOP_IDLE;
    if (busy) begin
      case (cnt)
        3'd0:    op = mop_not(COL_A, 16'(UC_W0), 0, BL - 1);
        3'd1:    op = mop_not(COL_B, 16'(UC_W1), 0, BL - 1);
        3'd2:    op = mop_nor(16'(UC_W0), 16'(UC_W1), COL_MIN, 0, BL - 1);
        3'd3:    op = mop_nor(COL_A, COL_B, 16'(UC_W0), 0, BL - 1);
        default: op = mop_not(16'(UC_W0), COL_MAX, 0, BL - 1);
      endcase
    end
  end

endmodule
