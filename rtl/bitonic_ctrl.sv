// bitonic_ctrl: memory controller of a complete in-array bitonic sorting network.
//
// The crossbar is split into PARTS = N/2 partitions of CPP columns each; every
// partition holds the two values of one compare-and-swap (CAS) of the current
// step and runs the basic sorting unit on them, all partitions in parallel.
// Between two steps, each partition sends exactly one of its two results to the
// partition where the next step needs it (a copy = two NOTs, serialised, two
// cycles per copy) and keeps the other in place. The run therefore takes
//   PC_t = S*(1 + PC_B) + 2*(S-1)*N/2,   S = log2(N)*(log2(N)+1)/2
// cycles (one initialisation cycle per step, PC_B cycles of the sorting unit).
//
// Network: the bitonic variant of the paper's 8-input example, every CAS sends
// the minimum to the lower wire; stage k (k = 2,4..N) first pairs wire w with
// w ^ (k-1), then with w ^ (k/4), ..., w ^ 1. Wire 0 ends with the smallest value.
// Which wire stays: the two pairings of consecutive steps form 4-cycles of wires;
// in the next pair {x, x^m'} the wire x with parity(x & c) = 0 stays, where
// c = lowbit(m') if m has that bit, else lowbit(m') | lowbit(m). This always
// leaves exactly one stayer per current partition.
// Columns per step s (parity p = s mod 2): the CAS reads A from the output column
// of step s-1 where the staying value sits and B from IN[p]; it writes MAX[p] and
// MIN[p]; copies for step s+1 stage in TMP and land in IN[1-p].
//
// Interface: `start` (one cycle, while idle) runs the whole network; `done`
// pulses when the result is in the array. ops[p] is the op of partition p (slot 0
// also carries the copies); ld_wire -> ld_col gives the column where input wire
// w must be written before start; res_wire -> res_col the column that holds
// sorted output w (valid after done). op_cycles counts the cycles of the run.
// Follows the paper: partitions, N/2 parallel CAS per step, one copy per
// partition between steps, the cycle formula. Own choices: the network
// variant's wire ordering as described, the column map, and the copy staging.
module bitonic_ctrl
  import imc_pkg::*;
#(
  parameter int unsigned N    = 8,
  parameter int unsigned ROWS = 8,
  parameter sort_mode_e  MODE = MODE_BINARY
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output mop_t                     ops [N/2],
  input  logic [$clog2(N)-1:0]     ld_wire,
  output logic [15:0]              ld_col,
  input  logic [$clog2(N)-1:0]     res_wire,
  output logic [15:0]              res_col,
  output logic [31:0]              op_cycles,
  output logic [15:0]              steps_done,
  output logic [15:0]              copies_done
);

  localparam int unsigned PARTS = N / 2;
  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned S     = LOGN * (LOGN + 1) / 2;
  localparam int unsigned CPP   = (MODE == MODE_UNARY) ? UN_CPP : BIN_CPP;
  localparam int unsigned PC_B  = (MODE == MODE_UNARY) ? 5 : 4 * ROWS + 17;
  localparam int unsigned WW    = (LOGN > 0) ? LOGN : 1;
  localparam int unsigned PW    = (PARTS > 1) ? $clog2(PARTS) : 1;

  typedef enum logic [2:0] {ST_IDLE, ST_INIT, ST_CAS, ST_MOVE, ST_DONE} state_e;

  state_e           st;
  logic [7:0]       kk, jj;          // stage (1..LOGN) and sub-step of the current step
  logic             par;             // step parity
  logic [15:0]      cas_cnt;
  logic [WW-1:0]    mv;              // next pair being fed by a copy
  logic             mph;             // copy phase: 0 = NOT into TMP, 1 = NOT into IN
  logic [PW-1:0]    part_of [N];     // partition that holds each wire
  logic             a_is_max [PARTS];// staying value of partition sits in MAX (1) or MIN (0)
  logic             seq_start, seq_busy, seq_done;
  mop_t             seq_op;

  // ---------------------------------------------------------------- sequencer
  if (MODE == MODE_UNARY) begin : g_unary
    unary_cas_seq #(.BL(ROWS)) u_seq (
      .clk, .rst_n, .start(seq_start), .op(seq_op), .busy(seq_busy), .done(seq_done));
  end else begin : g_binary
    binary_cas_seq #(.DW(ROWS)) u_seq (
      .clk, .rst_n, .start(seq_start), .op(seq_op), .busy(seq_busy), .done(seq_done));
  end

  // ---------------------------------------------------------------- network maths
  function automatic logic [15:0] mask_of(logic [7:0] k, logic [7:0] j);
    return (j == 0) ? 16'((1 << k) - 1) : 16'(1 << (k - 1 - j));
  endfunction
  function automatic logic [7:0] hb_of(logic [7:0] k, logic [7:0] j);
    return k - 8'd1 - j;
  endfunction
  function automatic logic [15:0] lowbit(logic [15:0] v);
    return v & (~v + 16'd1);
  endfunction

  logic [7:0]  kk_n, jj_n;
  logic [15:0] m_cur, m_nxt, c_sel;
  logic [15:0] a_w, b_w, x_w, y_w;
  logic [15:0] cur_hi;

  always_comb begin
    if (jj + 8'd1 < kk) begin kk_n = kk; jj_n = jj + 8'd1; end
    else                begin kk_n = kk + 8'd1; jj_n = 8'd0; end
    m_cur  = mask_of(kk, jj);
    m_nxt  = mask_of(kk_n, jj_n);
    cur_hi = 16'(1 << hb_of(kk, jj));
    c_sel  = ((m_cur & lowbit(m_nxt)) != 0) ? lowbit(m_nxt) : (lowbit(m_nxt) | lowbit(m_cur));
    // lower wire of next pair `mv`: insert a 0 at the high bit of the next mask
    a_w = ((16'(mv) >> hb_of(kk_n, jj_n)) << (hb_of(kk_n, jj_n) + 8'd1)) |
          (16'(mv) & 16'((1 << hb_of(kk_n, jj_n)) - 1));
    b_w = a_w ^ m_nxt;
    if (^(a_w & c_sel) == 1'b0) begin x_w = a_w; y_w = b_w; end
    else                         begin x_w = b_w; y_w = a_w; end
  end

  // a wire whose index has the high bit of the current mask set got the maximum
  function automatic logic got_max(logic [15:0] w, logic [15:0] hi);
    return (w & hi) != 0;
  endfunction

  function automatic logic [15:0] max_col(logic p);
    return p ? 16'(LC_MAX1) : 16'(LC_MAX0);
  endfunction
  function automatic logic [15:0] min_col(logic p);
    return p ? 16'(LC_MIN1) : 16'(LC_MIN0);
  endfunction
  function automatic logic [15:0] in_col(logic p);
    return p ? 16'(LC_IN1) : 16'(LC_IN0);
  endfunction

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= ST_IDLE;
      kk          <= 8'd1;
      jj          <= 8'd0;
      par         <= 1'b0;
      cas_cnt     <= '0;
      mv          <= '0;
      mph         <= 1'b0;
      op_cycles   <= '0;
      steps_done  <= '0;
      copies_done <= '0;
      done        <= 1'b0;
      for (int unsigned w = 0; w < N; w++) part_of[w] <= PW'(w / 2);
      for (int unsigned p = 0; p < PARTS; p++) a_is_max[p] <= 1'b1;
    end else begin
      done <= 1'b0;
      if (st != ST_IDLE && st != ST_DONE) op_cycles <= op_cycles + 32'd1;
      unique case (st)
        ST_IDLE, ST_DONE: if (start) begin
          st          <= ST_INIT;
          kk          <= 8'd1;
          jj          <= 8'd0;
          par         <= 1'b0;
          op_cycles   <= '0;
          steps_done  <= '0;
          copies_done <= '0;
          for (int unsigned w = 0; w < N; w++) part_of[w] <= PW'(w / 2);
          for (int unsigned p = 0; p < PARTS; p++) a_is_max[p] <= 1'b1;
        end
        ST_INIT: begin
          st      <= ST_CAS;
          cas_cnt <= '0;
        end
        ST_CAS: begin
          cas_cnt <= cas_cnt + 16'd1;
          if (cas_cnt == 16'(PC_B - 1)) begin
            steps_done <= steps_done + 16'd1;
            if (steps_done == 16'(S - 1)) begin
              st   <= ST_DONE;
              done <= 1'b1;
            end else begin
              st  <= ST_MOVE;
              mv  <= '0;
              mph <= 1'b0;
            end
          end
        end
        ST_MOVE: begin
          mph <= ~mph;
          if (mph) begin
            copies_done        <= copies_done + 16'd1;
            part_of[y_w[WW-1:0]] <= part_of[x_w[WW-1:0]];
            a_is_max[part_of[x_w[WW-1:0]]] <= got_max(x_w, cur_hi);
            if (32'(mv) == PARTS - 1) begin
              st  <= ST_INIT;
              kk  <= kk_n;
              jj  <= jj_n;
              par <= ~par;
            end else begin
              mv <= mv + 1'b1;
            end
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  assign busy      = (st != ST_IDLE) && (st != ST_DONE);
  assign seq_start = (st == ST_INIT);

  // ---------------------------------------------------------------- op generation
  function automatic logic [15:0] resolve(logic [15:0] c, int unsigned p);
    logic [15:0] base = 16'(p * CPP);
    case (c)
      COL_A:   return base + (a_is_max[p] ? max_col(~par) : min_col(~par));
      COL_B:   return base + in_col(par);
      COL_MAX: return base + max_col(par);
      COL_MIN: return base + min_col(par);
      default: return base + c;
    endcase
  endfunction

  logic [31:0] step_init_mask;
  always_comb begin
    step_init_mask = 32'(((1 << CPP) - 1) & ~((1 << LC_WORK) - 1));
    step_init_mask[5'(max_col(par))] = 1'b1;
    step_init_mask[5'(min_col(par))] = 1'b1;
    step_init_mask[5'(in_col(~par))] = 1'b1;
    step_init_mask[LC_TMP]       = 1'b1;
  end

  logic [15:0] src_abs, dst_base;
  always_comb begin
    src_abs  = 16'(32'(part_of[y_w[WW-1:0]]) * CPP) +
               (got_max(y_w, cur_hi) ? max_col(par) : min_col(par));
    dst_base = 16'(32'(part_of[x_w[WW-1:0]]) * CPP);
  end

  always_comb begin
    for (int unsigned p = 0; p < PARTS; p++) begin
      ops[p] = MOP_IDLE;
      unique case (st)
        ST_INIT: begin
          ops[p]     = mop_init(step_init_mask);
          ops[p].dst = 16'(p * CPP);
        end
        ST_CAS: begin
          ops[p] = seq_op;
          if (seq_op.kind == MOP_INIT) ops[p].dst = 16'(p * CPP);
          else begin
            ops[p].src_a = resolve(seq_op.src_a, p);
            ops[p].src_b = resolve(seq_op.src_b, p);
            ops[p].dst   = resolve(seq_op.dst, p);
          end
        end
        ST_MOVE: if (p == 0) begin
          if (!mph) ops[p] = mop_not(src_abs, dst_base + 16'(LC_TMP), 0, ROWS - 1);
          else      ops[p] = mop_not(dst_base + 16'(LC_TMP), dst_base + in_col(~par),
                                     0, ROWS - 1);
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- host mapping
  always_comb begin
    ld_col  = 16'(32'(ld_wire >> 1) * CPP) + (ld_wire[0] ? 16'(LC_MAX1) : 16'(LC_IN0));
    res_col = 16'(32'(part_of[res_wire]) * CPP) +
              (got_max(16'(res_wire), cur_hi) ? max_col(par) : min_col(par));
  end

  // The sorting unit must finish exactly when the controller leaves the CAS phase.
  property p_seq_aligned;
    @(posedge clk) disable iff (!rst_n) seq_done |-> (st != ST_CAS);
  endproperty
  a_seq_aligned: assert property (p_seq_aligned);

endmodule
