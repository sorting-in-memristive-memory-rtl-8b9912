`timescale 1ns/1ps
// tb_binary_cas_seq: the binary sorting unit on a one-partition crossbar.
// The testbench plays the network controller: it initialises the partition,
// loads A and B, starts the sequencer and maps its symbolic columns (A, B, MAX,
// MIN) to fixed columns. DW = 4 is tested exhaustively (all 256 pairs) and must
// return max(A,B) and min(A,B); the unit must be busy for exactly 4*DW+17 = 33
// cycles and pulse done in the cycle after.
module tb_binary_cas_seq;
  import imc_pkg::*;

  localparam int DW = 4, CPP = BIN_CPP;
  localparam int C_A = LC_MAX1, C_B = LC_IN0, C_MX = LC_MAX0, C_MN = LC_MIN0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  mop_t seq_op, ops [1], tb_op;
  logic wr_en = 0;
  logic [4:0] wr_col = 0, rd_col = 0;
  logic [DW-1:0] wr_data = 0, rd_data;

  binary_cas_seq #(.DW(DW)) dut (.clk, .rst_n, .start, .op(seq_op), .busy, .done);
  magic_crossbar #(.ROWS(DW), .COLS(CPP), .NSLOT(1)) xbar (
    .clk, .rst_n, .ops, .wr_en, .wr_col, .wr_data, .rd_col, .rd_data);

  function automatic logic [15:0] map(logic [15:0] c);
    case (c)
      COL_A: return 16'(C_A);
      COL_B: return 16'(C_B);
      COL_MAX: return 16'(C_MX);
      COL_MIN: return 16'(C_MN);
      default: return c;
    endcase
  endfunction

  always_comb begin
    ops[0] = tb_op;
    if (busy) begin
      ops[0] = seq_op;
      if (seq_op.kind != MOP_INIT) begin
        ops[0].src_a = map(seq_op.src_a);
        ops[0].src_b = map(seq_op.src_b);
        ops[0].dst   = map(seq_op.dst);
      end
    end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy_cycles;
    tb_op = MOP_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 2**DW; a++)
      for (int b = 0; b < 2**DW; b++) begin
        @(negedge clk);
        tb_op = mop_init(32'((1 << CPP) - 1) & ~((32'd1 << C_A) | (32'd1 << C_B)));
        wr_en = 1; wr_col = 5'(C_A); wr_data = DW'(a);
        @(negedge clk);
        tb_op = MOP_IDLE;
        wr_col = 5'(C_B); wr_data = DW'(b);
        @(negedge clk);
        wr_en = 0; start = 1;
        @(negedge clk);
        start = 0;
        busy_cycles = 0;
        while (!done) begin
          if (busy) busy_cycles++;
          @(negedge clk);
        end
        checks++;
        if (busy_cycles != 4 * DW + 17) begin
          failures++; $display("FAIL: busy %0d cycles", busy_cycles);
        end
        rd_col = 5'(C_MX); #1;
        checks++;
        if (rd_data != DW'((a > b) ? a : b)) begin
          failures++; $display("FAIL: max(%0d,%0d) = %0d", a, b, rd_data);
        end
        rd_col = 5'(C_MN); #1;
        checks++;
        if (rd_data != DW'((a > b) ? b : a)) begin
          failures++; $display("FAIL: min(%0d,%0d) = %0d", a, b, rd_data);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
