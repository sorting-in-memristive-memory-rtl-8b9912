`timescale 1ns/1ps
// tb_magic_crossbar: random micro-operations against a bit-level reference.
// Drives two op slots per cycle with random INIT, row NOR/NOT and column NOT
// ops (plus occasional host writes) on an 8x12 array, keeps its own copy of the
// array updated by the MAGIC rule (output can only fall from 1 to 0, inputs
// sampled before the cycle), and compares every column after every cycle.
module tb_magic_crossbar;
  import imc_pkg::*;

  localparam int ROWS = 8, COLS = 12, NSLOT = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mop_t ops [NSLOT];
  logic wr_en = 0;
  logic [3:0] wr_col = 0, rd_col = 0;
  logic [ROWS-1:0] wr_data = 0, rd_data;

  magic_crossbar #(.ROWS(ROWS), .COLS(COLS), .NSLOT(NSLOT)) dut (.*);

  logic [ROWS-1:0] ref_q [COLS];
  int checks = 0, failures = 0;
  int n_init = 0, n_nor = 0, n_not = 0, n_col = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mop_t rand_op(int slot);
    mop_t m = MOP_IDLE;
    int k = $urandom_range(0, 9);
    int lo = $urandom_range(0, ROWS - 1), hi = $urandom_range(lo, ROWS - 1);
    // slot 0 writes columns 0..5, slot 1 writes columns 6..11 (disjoint outputs)
    int d = slot * 6 + int'($urandom_range(0, 5));
    if (k < 2) begin
      m = mop_init(32'($urandom_range(0, 63)));
      m.dst = 16'(slot * 6);
    end else if (k < 5) m = mop_nor(16'($urandom_range(0, COLS-1)), 16'($urandom_range(0, COLS-1)), 16'(d), lo, hi);
    else if (k < 7) m = mop_not(16'($urandom_range(0, COLS-1)), 16'(d), lo, hi);
    else if (k < 9) m = mop_colnot(16'(d), $urandom_range(0, ROWS-1), lo, hi);
    return m;
  endfunction

  initial begin
    logic [ROWS-1:0] old [COLS];
    ops[0] = MOP_IDLE; ops[1] = MOP_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < COLS; c++) ref_q[c] = '0;
    // directed: a NOT into an uninitialised (0) cell stays 0; after INIT it works
    @(negedge clk);
    wr_en = 1; wr_col = 0; wr_data = 8'b1010_0101;
    @(negedge clk);
    wr_en = 0; ops[0] = mop_not(16'd0, 16'd1, 0, 7);
    @(negedge clk);
    ops[0] = MOP_IDLE; rd_col = 1; #1;
    checks++; if (rd_data !== 8'h00) begin failures++; $display("FAIL: NOT into HRS cell"); end
    ops[0] = mop_init(32'h2);
    @(negedge clk);
    ops[0] = mop_not(16'd0, 16'd1, 0, 7);
    @(negedge clk);
    ops[0] = MOP_IDLE; #1;
    checks++; if (rd_data !== 8'b0101_1010) begin failures++; $display("FAIL: NOT after INIT %b", rd_data); end
    // random phase
    for (int c = 0; c < COLS; c++) begin rd_col = 4'(c); #1; ref_q[c] = rd_data; end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int s = 0; s < NSLOT; s++) ops[s] = rand_op(s);
      wr_en = ($urandom_range(0, 15) == 0);
      wr_col = 4'($urandom_range(0, COLS - 1));
      wr_data = ROWS'($urandom);
      old = ref_q;
      for (int s = 0; s < NSLOT; s++) begin
        case (ops[s].kind)
          MOP_INIT: begin
            n_init++;
            for (int l = 0; l < 32; l++)
              if (ops[s].init_mask[l] && int'(ops[s].dst) + l < COLS) ref_q[int'(ops[s].dst) + l] = '1;
          end
          MOP_ROWNOR: begin
            if (ops[s].two_in) n_nor++; else n_not++;
            for (int r = ops[s].row_lo; r <= ops[s].row_hi; r++) begin
              if (old[ops[s].src_a][r] | (ops[s].two_in & old[ops[s].src_b][r])) ref_q[ops[s].dst][r] = 1'b0;
            end
          end
          MOP_COLNOT: begin
            n_col++;
            for (int r = ops[s].row_lo; r <= ops[s].row_hi; r++)
              if (old[ops[s].src_a][ops[s].src_row]) ref_q[ops[s].src_a][r] = 1'b0;
          end
          default: ;
        endcase
      end
      if (wr_en) ref_q[wr_col] = wr_data;
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c++) begin
        rd_col = 4'(c); #0.1;
        checks++;
        if (rd_data !== ref_q[c]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d: %b want %b", t, c, rd_data, ref_q[c]);
        end
      end
    end
    $display("ops: init=%0d nor=%0d not=%0d colnot=%0d", n_init, n_nor, n_not, n_col);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
