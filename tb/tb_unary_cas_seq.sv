`timescale 1ns/1ps
// tb_unary_cas_seq: the unary sorting unit on a one-partition crossbar.
// The testbench plays the network controller (initialise, load A and B, start,
// map symbolic columns). All pairs of 16-bit unary streams (values 0..16) must
// give min = stream of min(a,b) and max = stream of max(a,b); 200 random
// (non-unary) pairs must give the bitwise AND and OR. The unit must be busy for
// exactly 5 cycles, the paper's operation-cycle count.
module tb_unary_cas_seq;
  import imc_pkg::*;

  localparam int BL = 16, CPP = UN_CPP;
  localparam int C_A = LC_MIN1, C_B = LC_IN0, C_MX = LC_MAX0, C_MN = LC_MIN0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  mop_t seq_op, ops [1], tb_op;
  logic wr_en = 0;
  logic [3:0] wr_col = 0, rd_col = 0;
  logic [BL-1:0] wr_data = 0, rd_data;

  unary_cas_seq #(.BL(BL)) dut (.clk, .rst_n, .start, .op(seq_op), .busy, .done);
  magic_crossbar #(.ROWS(BL), .COLS(CPP), .NSLOT(1)) xbar (
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

  function automatic logic [BL-1:0] thermo(int v);
    logic [BL-1:0] s = '0;
    for (int i = 0; i < BL; i++) s[i] = (i < v);
    return s;
  endfunction

  always_comb begin
    ops[0] = tb_op;
    if (busy) begin
      ops[0] = seq_op;
      ops[0].src_a = map(seq_op.src_a);
      ops[0].src_b = map(seq_op.src_b);
      ops[0].dst   = map(seq_op.dst);
    end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [BL-1:0] a, input logic [BL-1:0] b,
                     input logic [BL-1:0] want_max, input logic [BL-1:0] want_min);
    int busy_cycles;
    @(negedge clk);
    tb_op = mop_init(32'((1 << CPP) - 1) & ~((32'd1 << C_A) | (32'd1 << C_B)));
    wr_en = 1; wr_col = 4'(C_A); wr_data = a;
    @(negedge clk);
    tb_op = MOP_IDLE;
    wr_col = 4'(C_B); wr_data = b;
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
    if (busy_cycles != 5) begin failures++; $display("FAIL: busy %0d cycles", busy_cycles); end
    rd_col = 4'(C_MX); #1;
    checks++;
    if (rd_data != want_max) begin failures++; $display("FAIL: max %b want %b", rd_data, want_max); end
    rd_col = 4'(C_MN); #1;
    checks++;
    if (rd_data != want_min) begin failures++; $display("FAIL: min %b want %b", rd_data, want_min); end
  endtask

  initial begin
    logic [BL-1:0] x, y;
    tb_op = MOP_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a <= BL; a++)
      for (int b = 0; b <= BL; b++)
        run(thermo(a), thermo(b), thermo((a > b) ? a : b), thermo((a > b) ? b : a));
    for (int t = 0; t < 200; t++) begin
      x = BL'($urandom); y = BL'($urandom);
      run(x, y, x | y, x & y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
