// median_ctrl: memory controller of an in-array median filter over a WIN x WIN
// window (WIN = 3 or 5). It runs a fixed median-selection network of
// compare-and-swap (CAS) operations on the window values held in crossbar
// partitions, and leaves the median in a known column of the array.
//
// Networks (wire = window value, every CAS puts the minimum on its lower wire):
//   3x3: 9 wires, 19 CAS in 8 steps on 5 partitions A..E (index 0..4):
//     1: A(0,1) B(2,3) C(4,5) D(6,7)   2: A(0,2) B(1,3) C(4,6) D(5,7)
//     3: A(0,4) B(1,2) C(5,6) D(3,7)   4: B(1,5) C(2,6)   5: A(2,4) D(3,5)
//     6: A(3,4)   7: E(3,8)   8: E(4,8)                  -> median on wire 4
//   5x5: 25 wires, 104 CAS in 18 steps (at most 12 per step) on 13
//     partitions                                          -> median on wire 12
// The pairs and steps of both networks and the partition letters of the 3x3
// network follow the paper's two median diagrams; both networks were checked
// exhaustively over all 0/1 inputs. The 5x5 partition assignment is this
// design's own (the diagram uses 20 partitions A..T): each CAS goes to a
// partition that already holds one of its operands where possible, else to an
// empty partition.
//
// Data movement: every wire has a location (partition, local column 0..5).
// In a one-cycle preparation phase each active partition plans its step:
// an operand that is not yet in the partition is copied in (two NOTs through a
// staging column, two cycles per copy, copies serialised); the copy target and
// the two output columns are the first columns of the partition that hold no
// value still needed later (live = used by a later step, or the median). Only
// active partitions are initialised, so idle partitions keep their values.
// Cycles per run: NS * (1 + PC_B) + 2 * copies (15 copies for 3x3, 99 for 5x5).
//
// Interface: the host writes window value w to column ld_col (ld_wire = w)
// while idle; `start` runs the network; `done` pulses when the median sits in
// med_col. ops[p] is partition p's micro-operation (slot 0 also carries the
// copies). Own choices: column bookkeeping, copy order (partition order),
// loading values not used in step 1 into the last partition.
module median_ctrl
  import imc_pkg::*;
#(
  parameter int unsigned WIN  = 3,
  parameter int unsigned ROWS = 8,
  parameter sort_mode_e  MODE = MODE_BINARY,
  localparam int unsigned NP  = (WIN == 5) ? 13 : 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output mop_t        ops [NP],
  input  logic [4:0]  ld_wire,
  output logic [15:0] ld_col,
  output logic [15:0] med_col,
  output logic [31:0] op_cycles,
  output logic [15:0] steps_done,
  output logic [15:0] copies_done
);

  localparam int unsigned NW    = WIN * WIN;            // window values
  localparam int unsigned NS    = (WIN == 5) ? 18 : 8;  // network steps
  localparam int unsigned MED   = NW / 2;               // wire of the median
  localparam int unsigned CPP   = (MODE == MODE_UNARY) ? UN_CPP : BIN_CPP;
  localparam int unsigned PC_B  = (MODE == MODE_UNARY) ? 5 : 4 * ROWS + 17;
  localparam int unsigned WB    = $clog2(NW);           // wire index width
  localparam int unsigned PB    = $clog2(NP);           // partition index width
  localparam int unsigned QB    = $clog2(2 * NP);       // copy index width

  typedef struct packed {
    logic       act;
    logic [4:0] lo;
    logic [4:0] hi;
  } cas_t;

  // The networks, one entry per (window, step, partition).
  function automatic cas_t net(logic [4:0] s, logic [4:0] p);
    cas_t c = '{act: 1'b0, lo: 5'd0, hi: 5'd0};
    case ({WIN == 5, s, p})
      {1'b0, 5'd0, 5'd0}: c = '{1'b1, 5'd0, 5'd1};
      {1'b0, 5'd0, 5'd1}: c = '{1'b1, 5'd2, 5'd3};
      {1'b0, 5'd0, 5'd2}: c = '{1'b1, 5'd4, 5'd5};
      {1'b0, 5'd0, 5'd3}: c = '{1'b1, 5'd6, 5'd7};
      {1'b0, 5'd1, 5'd0}: c = '{1'b1, 5'd0, 5'd2};
      {1'b0, 5'd1, 5'd1}: c = '{1'b1, 5'd1, 5'd3};
      {1'b0, 5'd1, 5'd2}: c = '{1'b1, 5'd4, 5'd6};
      {1'b0, 5'd1, 5'd3}: c = '{1'b1, 5'd5, 5'd7};
      {1'b0, 5'd2, 5'd0}: c = '{1'b1, 5'd0, 5'd4};
      {1'b0, 5'd2, 5'd1}: c = '{1'b1, 5'd1, 5'd2};
      {1'b0, 5'd2, 5'd2}: c = '{1'b1, 5'd5, 5'd6};
      {1'b0, 5'd2, 5'd3}: c = '{1'b1, 5'd3, 5'd7};
      {1'b0, 5'd3, 5'd1}: c = '{1'b1, 5'd1, 5'd5};
      {1'b0, 5'd3, 5'd2}: c = '{1'b1, 5'd2, 5'd6};
      {1'b0, 5'd4, 5'd0}: c = '{1'b1, 5'd2, 5'd4};
      {1'b0, 5'd4, 5'd3}: c = '{1'b1, 5'd3, 5'd5};
      {1'b0, 5'd5, 5'd0}: c = '{1'b1, 5'd3, 5'd4};
      {1'b0, 5'd6, 5'd4}: c = '{1'b1, 5'd3, 5'd8};
      {1'b0, 5'd7, 5'd4}: c = '{1'b1, 5'd4, 5'd8};
      {1'b1, 5'd0, 5'd0}: c = '{1'b1, 5'd1, 5'd7};
      {1'b1, 5'd0, 5'd1}: c = '{1'b1, 5'd9, 5'd11};
      {1'b1, 5'd0, 5'd2}: c = '{1'b1, 5'd13, 5'd14};
      {1'b1, 5'd0, 5'd3}: c = '{1'b1, 5'd21, 5'd22};
      {1'b1, 5'd0, 5'd4}: c = '{1'b1, 5'd3, 5'd4};
      {1'b1, 5'd0, 5'd5}: c = '{1'b1, 5'd5, 5'd8};
      {1'b1, 5'd0, 5'd6}: c = '{1'b1, 5'd15, 5'd16};
      {1'b1, 5'd0, 5'd7}: c = '{1'b1, 5'd19, 5'd20};
      {1'b1, 5'd0, 5'd8}: c = '{1'b1, 5'd23, 5'd24};
      {1'b1, 5'd0, 5'd9}: c = '{1'b1, 5'd0, 5'd12};
      {1'b1, 5'd0, 5'd10}: c = '{1'b1, 5'd17, 5'd18};
      {1'b1, 5'd0, 5'd11}: c = '{1'b1, 5'd2, 5'd6};
      {1'b1, 5'd1, 5'd0}: c = '{1'b1, 5'd7, 5'd12};
      {1'b1, 5'd1, 5'd1}: c = '{1'b1, 5'd8, 5'd11};
      {1'b1, 5'd1, 5'd2}: c = '{1'b1, 5'd14, 5'd16};
      {1'b1, 5'd1, 5'd3}: c = '{1'b1, 5'd22, 5'd24};
      {1'b1, 5'd1, 5'd4}: c = '{1'b1, 5'd4, 5'd6};
      {1'b1, 5'd1, 5'd5}: c = '{1'b1, 5'd5, 5'd9};
      {1'b1, 5'd1, 5'd6}: c = '{1'b1, 5'd13, 5'd15};
      {1'b1, 5'd1, 5'd7}: c = '{1'b1, 5'd17, 5'd19};
      {1'b1, 5'd1, 5'd8}: c = '{1'b1, 5'd21, 5'd23};
      {1'b1, 5'd1, 5'd9}: c = '{1'b1, 5'd0, 5'd1};
      {1'b1, 5'd1, 5'd10}: c = '{1'b1, 5'd18, 5'd20};
      {1'b1, 5'd1, 5'd11}: c = '{1'b1, 5'd2, 5'd3};
      {1'b1, 5'd2, 5'd0}: c = '{1'b1, 5'd3, 5'd7};
      {1'b1, 5'd2, 5'd2}: c = '{1'b1, 5'd14, 5'd15};
      {1'b1, 5'd2, 5'd3}: c = '{1'b1, 5'd22, 5'd23};
      {1'b1, 5'd2, 5'd4}: c = '{1'b1, 5'd6, 5'd12};
      {1'b1, 5'd2, 5'd6}: c = '{1'b1, 5'd13, 5'd17};
      {1'b1, 5'd2, 5'd7}: c = '{1'b1, 5'd18, 5'd19};
      {1'b1, 5'd2, 5'd9}: c = '{1'b1, 5'd1, 5'd4};
      {1'b1, 5'd2, 5'd10}: c = '{1'b1, 5'd20, 5'd24};
      {1'b1, 5'd2, 5'd11}: c = '{1'b1, 5'd0, 5'd2};
      {1'b1, 5'd2, 5'd12}: c = '{1'b1, 5'd10, 5'd11};
      {1'b1, 5'd3, 5'd0}: c = '{1'b1, 5'd7, 5'd8};
      {1'b1, 5'd3, 5'd2}: c = '{1'b1, 5'd16, 5'd20};
      {1'b1, 5'd3, 5'd3}: c = '{1'b1, 5'd19, 5'd23};
      {1'b1, 5'd3, 5'd4}: c = '{1'b1, 5'd6, 5'd10};
      {1'b1, 5'd3, 5'd6}: c = '{1'b1, 5'd17, 5'd21};
      {1'b1, 5'd3, 5'd7}: c = '{1'b1, 5'd14, 5'd18};
      {1'b1, 5'd3, 5'd9}: c = '{1'b1, 5'd4, 5'd9};
      {1'b1, 5'd3, 5'd12}: c = '{1'b1, 5'd11, 5'd12};
      {1'b1, 5'd4, 5'd0}: c = '{1'b1, 5'd8, 5'd9};
      {1'b1, 5'd4, 5'd1}: c = '{1'b1, 5'd1, 5'd7};
      {1'b1, 5'd4, 5'd2}: c = '{1'b1, 5'd15, 5'd19};
      {1'b1, 5'd4, 5'd4}: c = '{1'b1, 5'd10, 5'd11};
      {1'b1, 5'd4, 5'd5}: c = '{1'b1, 5'd5, 5'd6};
      {1'b1, 5'd4, 5'd7}: c = '{1'b1, 5'd18, 5'd22};
      {1'b1, 5'd4, 5'd9}: c = '{1'b1, 5'd3, 5'd4};
      {1'b1, 5'd5, 5'd0}: c = '{1'b1, 5'd8, 5'd10};
      {1'b1, 5'd5, 5'd1}: c = '{1'b1, 5'd1, 5'd3};
      {1'b1, 5'd5, 5'd4}: c = '{1'b1, 5'd9, 5'd11};
      {1'b1, 5'd5, 5'd5}: c = '{1'b1, 5'd2, 5'd6};
      {1'b1, 5'd5, 5'd6}: c = '{1'b1, 5'd13, 5'd17};
      {1'b1, 5'd5, 5'd8}: c = '{1'b1, 5'd16, 5'd21};
      {1'b1, 5'd5, 5'd9}: c = '{1'b1, 5'd4, 5'd7};
      {1'b1, 5'd5, 5'd10}: c = '{1'b1, 5'd20, 5'd24};
      {1'b1, 5'd5, 5'd11}: c = '{1'b1, 5'd0, 5'd5};
      {1'b1, 5'd6, 5'd2}: c = '{1'b1, 5'd15, 5'd16};
      {1'b1, 5'd6, 5'd3}: c = '{1'b1, 5'd19, 5'd23};
      {1'b1, 5'd6, 5'd4}: c = '{1'b1, 5'd9, 5'd10};
      {1'b1, 5'd6, 5'd5}: c = '{1'b1, 5'd6, 5'd8};
      {1'b1, 5'd6, 5'd7}: c = '{1'b1, 5'd14, 5'd18};
      {1'b1, 5'd6, 5'd8}: c = '{1'b1, 5'd21, 5'd22};
      {1'b1, 5'd6, 5'd11}: c = '{1'b1, 5'd2, 5'd5};
      {1'b1, 5'd7, 5'd1}: c = '{1'b1, 5'd3, 5'd5};
      {1'b1, 5'd7, 5'd2}: c = '{1'b1, 5'd16, 5'd18};
      {1'b1, 5'd7, 5'd3}: c = '{1'b1, 5'd19, 5'd21};
      {1'b1, 5'd7, 5'd5}: c = '{1'b1, 5'd7, 5'd8};
      {1'b1, 5'd7, 5'd7}: c = '{1'b1, 5'd14, 5'd17};
      {1'b1, 5'd7, 5'd9}: c = '{1'b1, 5'd4, 5'd6};
      {1'b1, 5'd7, 5'd10}: c = '{1'b1, 5'd20, 5'd23};
      {1'b1, 5'd7, 5'd11}: c = '{1'b1, 5'd1, 5'd2};
      {1'b1, 5'd8, 5'd1}: c = '{1'b1, 5'd4, 5'd5};
      {1'b1, 5'd8, 5'd2}: c = '{1'b1, 5'd15, 5'd17};
      {1'b1, 5'd8, 5'd5}: c = '{1'b1, 5'd8, 5'd9};
      {1'b1, 5'd8, 5'd9}: c = '{1'b1, 5'd6, 5'd7};
      {1'b1, 5'd8, 5'd10}: c = '{1'b1, 5'd20, 5'd22};
      {1'b1, 5'd8, 5'd11}: c = '{1'b1, 5'd2, 5'd3};
      {1'b1, 5'd9, 5'd0}: c = '{1'b1, 5'd20, 5'd21};
      {1'b1, 5'd9, 5'd1}: c = '{1'b1, 5'd3, 5'd4};
      {1'b1, 5'd9, 5'd2}: c = '{1'b1, 5'd16, 5'd17};
      {1'b1, 5'd9, 5'd3}: c = '{1'b1, 5'd18, 5'd19};
      {1'b1, 5'd9, 5'd9}: c = '{1'b1, 5'd5, 5'd6};
      {1'b1, 5'd10, 5'd0}: c = '{1'b1, 5'd3, 5'd21};
      {1'b1, 5'd10, 5'd1}: c = '{1'b1, 5'd4, 5'd20};
      {1'b1, 5'd10, 5'd8}: c = '{1'b1, 5'd2, 5'd22};
      {1'b1, 5'd10, 5'd10}: c = '{1'b1, 5'd0, 5'd24};
      {1'b1, 5'd10, 5'd11}: c = '{1'b1, 5'd1, 5'd23};
      {1'b1, 5'd11, 5'd2}: c = '{1'b1, 5'd7, 5'd17};
      {1'b1, 5'd11, 5'd3}: c = '{1'b1, 5'd5, 5'd19};
      {1'b1, 5'd11, 5'd5}: c = '{1'b1, 5'd8, 5'd16};
      {1'b1, 5'd11, 5'd9}: c = '{1'b1, 5'd6, 5'd18};
      {1'b1, 5'd11, 5'd12}: c = '{1'b1, 5'd12, 5'd24};
      {1'b1, 5'd12, 5'd4}: c = '{1'b1, 5'd11, 5'd13};
      {1'b1, 5'd12, 5'd5}: c = '{1'b1, 5'd9, 5'd15};
      {1'b1, 5'd12, 5'd7}: c = '{1'b1, 5'd10, 5'd14};
      {1'b1, 5'd12, 5'd10}: c = '{1'b1, 5'd0, 5'd12};
      {1'b1, 5'd13, 5'd0}: c = '{1'b1, 5'd15, 5'd21};
      {1'b1, 5'd13, 5'd2}: c = '{1'b1, 5'd17, 5'd23};
      {1'b1, 5'd13, 5'd4}: c = '{1'b1, 5'd13, 5'd19};
      {1'b1, 5'd13, 5'd5}: c = '{1'b1, 5'd16, 5'd22};
      {1'b1, 5'd13, 5'd7}: c = '{1'b1, 5'd14, 5'd20};
      {1'b1, 5'd13, 5'd10}: c = '{1'b1, 5'd12, 5'd18};
      {1'b1, 5'd14, 5'd4}: c = '{1'b1, 5'd13, 5'd16};
      {1'b1, 5'd14, 5'd7}: c = '{1'b1, 5'd14, 5'd17};
      {1'b1, 5'd14, 5'd10}: c = '{1'b1, 5'd12, 5'd15};
      {1'b1, 5'd15, 5'd10}: c = '{1'b1, 5'd12, 5'd14};
      {1'b1, 5'd16, 5'd4}: c = '{1'b1, 5'd13, 5'd14};
      {1'b1, 5'd17, 5'd10}: c = '{1'b1, 5'd12, 5'd13};
      default: ;
    endcase
    return c;
  endfunction

  typedef struct packed {
    logic [4:0] p;
    logic [2:0] c;
  } loc_t;

  // Last step in which each wire is an operand (the median: NS, never dead).
  typedef logic [NW-1:0][4:0] wlast_t;
  function automatic wlast_t calc_last();
    wlast_t r = '0;
    for (int unsigned s = 0; s < NS; s++)
      for (int unsigned p = 0; p < NP; p++) begin
        cas_t c = net(5'(s), 5'(p));
        if (c.act) begin
          r[WB'(c.lo)] = 5'(s);
          r[WB'(c.hi)] = 5'(s);
        end
      end
    r[MED] = 5'(NS);
    return r;
  endfunction
  localparam wlast_t LAST = calc_last();

  // Load location: step-1 operands to IN0 (lower) / IN1 (upper) of their
  // partition, every other value to IN0 of the last partition.
  function automatic loc_t ld_loc(logic [4:0] w);
    loc_t r = '{p: 5'(NP - 1), c: 3'(LC_IN0)};
    for (int unsigned p = 0; p < NP; p++) begin
      cas_t c = net(5'd0, 5'(p));
      if (c.act && c.lo == w) r = '{p: 5'(p), c: 3'(LC_IN0)};
      if (c.act && c.hi == w) r = '{p: 5'(p), c: 3'(LC_IN1)};
    end
    return r;
  endfunction

  // Lowest set bit of a 6-bit free-column mask (6 = none).
  function automatic logic [2:0] first_free(logic [5:0] m);
    logic [2:0] r = 3'd6;
    for (int i = 5; i >= 0; i--) if (m[i]) r = 3'(i);
    return r;
  endfunction

  typedef enum logic [2:0] {ST_IDLE, ST_PREP, ST_MOVE, ST_CAS, ST_DONE} state_e;

  state_e          st;
  logic [4:0]      step;
  logic [15:0]     cas_cnt;
  logic            mph;             // copy phase: 0 = NOT into staging, 1 = NOT into target
  loc_t            loc [NW];        // where each wire's value is
  // per-partition plan of the current step, fixed in ST_PREP
  logic [2:0]      a_col [NP], b_col [NP], mn_col [NP], mx_col [NP], t2_col [NP];
  logic [2*NP-1:0] pend;            // copies still to do: bit 2p = lower operand, 2p+1 = upper
  logic            seq_start, seq_busy, seq_done;
  mop_t            seq_op;

  if (MODE == MODE_UNARY) begin : g_unary
    unary_cas_seq #(.BL(ROWS)) u_seq (
      .clk, .rst_n, .start(seq_start), .op(seq_op), .busy(seq_busy), .done(seq_done));
  end else begin : g_binary
    binary_cas_seq #(.DW(ROWS)) u_seq (
      .clk, .rst_n, .start(seq_start), .op(seq_op), .busy(seq_busy), .done(seq_done));
  end

  // ---------------------------------------------------------------- step plan
  cas_t            cur [NP];
  logic [5:0]      occ [NP];        // columns holding live values
  logic            p_nl [NP], p_nh [NP];
  logic [2:0]      p_dl [NP], p_dh [NP], p_mn [NP], p_mx [NP], p_t2 [NP];
  logic [2*NP-1:0] p_need;
  logic [31:0]     p_init_mask [NP];

  always_comb begin
    for (int unsigned p = 0; p < NP; p++) begin
      logic [5:0] fr;
      cur[p] = net(step, 5'(p));
      occ[p] = '0;
      for (int unsigned w = 0; w < NW; w++)
        if (loc[w].p == 5'(p) && LAST[w] >= step) occ[p][loc[w].c] = 1'b1;
      p_nl[p] = cur[p].act && (loc[WB'(cur[p].lo)].p != 5'(p));
      p_nh[p] = cur[p].act && (loc[WB'(cur[p].hi)].p != 5'(p));
      fr = ~occ[p];
      p_dl[p] = 3'd6; p_dh[p] = 3'd6; p_t2[p] = 3'(LC_TMP);
      if (p_nl[p]) begin p_dl[p] = first_free(fr); fr[p_dl[p]] = 1'b0; end
      if (p_nh[p]) begin p_dh[p] = first_free(fr); fr[p_dh[p]] = 1'b0; end
      p_mn[p] = first_free(fr); fr[p_mn[p]] = 1'b0;
      p_mx[p] = first_free(fr); fr[p_mx[p]] = 1'b0;
      if (p_nl[p] && p_nh[p]) p_t2[p] = first_free(fr);
      p_need[2*p]   = p_nl[p];
      p_need[2*p+1] = p_nh[p];
      p_init_mask[p] = 32'(((1 << CPP) - 1) & ~((1 << LC_WORK) - 1));
      p_init_mask[p] |= (32'(1) << p_mn[p]) | (32'(1) << p_mx[p]);
      if (p_nl[p]) p_init_mask[p] |= 32'(1) << p_dl[p];
      if (p_nh[p]) p_init_mask[p] |= 32'(1) << p_dh[p];
      if (p_nl[p] || p_nh[p]) p_init_mask[p] |= 32'(1) << LC_TMP;
      if (p_nl[p] && p_nh[p]) p_init_mask[p] |= 32'(1) << p_t2[p];
    end
  end

  // copy being done: lowest pending (partition, operand)
  logic [QB-1:0] mvi;
  logic [PB-1:0] mvp;
  logic       mvk;
  always_comb begin
    mvi = '0;
    for (int i = 2 * NP - 1; i >= 0; i--) if (pend[i]) mvi = QB'(i);
    mvp = mvi[QB-1:1];
    mvk = mvi[0];
  end
  logic [WB-1:0] mv_w;
  logic [2:0]  mv_dst, mv_stage;
  logic        last_copy;
  always_comb begin
    mv_w      = WB'(mvk ? cur[mvp].hi : cur[mvp].lo);
    mv_dst    = mvk ? b_col[mvp] : a_col[mvp];
    mv_stage  = mvk ? t2_col[mvp] : 3'(LC_TMP);
    last_copy = (pend & ~((2*NP)'(1) << mvi)) == '0;
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= ST_IDLE;
      step        <= '0;
      cas_cnt     <= '0;
      mph         <= 1'b0;
      pend        <= '0;
      op_cycles   <= '0;
      steps_done  <= '0;
      copies_done <= '0;
      done        <= 1'b0;
      for (int unsigned w = 0; w < NW; w++) loc[w] <= ld_loc(5'(w));
      for (int unsigned p = 0; p < NP; p++) begin
        a_col[p] <= '0; b_col[p] <= '0; mn_col[p] <= '0; mx_col[p] <= '0;
        t2_col[p] <= 3'(LC_TMP);
      end
    end else begin
      done <= 1'b0;
      if (st != ST_IDLE && st != ST_DONE) op_cycles <= op_cycles + 32'd1;
      unique case (st)
        ST_IDLE, ST_DONE: if (start) begin
          st          <= ST_PREP;
          step        <= '0;
          op_cycles   <= '0;
          steps_done  <= '0;
          copies_done <= '0;
          for (int unsigned w = 0; w < NW; w++) loc[w] <= ld_loc(5'(w));
        end
        ST_PREP: begin
          for (int unsigned p = 0; p < NP; p++) begin
            a_col[p]  <= p_nl[p] ? p_dl[p] : loc[WB'(cur[p].lo)].c;
            b_col[p]  <= p_nh[p] ? p_dh[p] : loc[WB'(cur[p].hi)].c;
            mn_col[p] <= p_mn[p];
            mx_col[p] <= p_mx[p];
            t2_col[p] <= p_t2[p];
          end
          pend    <= p_need;
          mph     <= 1'b0;
          cas_cnt <= '0;
          st      <= (p_need == '0) ? ST_CAS : ST_MOVE;
        end
        ST_MOVE: begin
          mph <= ~mph;
          if (mph) begin
            copies_done <= copies_done + 16'd1;
            loc[mv_w]   <= '{p: 5'(mvp), c: mv_dst};
            pend[mvi]   <= 1'b0;
            if (last_copy) begin
              st      <= ST_CAS;
              cas_cnt <= '0;
            end
          end
        end
        ST_CAS: begin
          cas_cnt <= cas_cnt + 16'd1;
          if (cas_cnt == 16'(PC_B - 1)) begin
            steps_done <= steps_done + 16'd1;
            for (int unsigned p = 0; p < NP; p++)
              if (cur[p].act) begin
                loc[WB'(cur[p].lo)] <= '{p: 5'(p), c: mn_col[p]};
                loc[WB'(cur[p].hi)] <= '{p: 5'(p), c: mx_col[p]};
              end
            if (step == 5'(NS - 1)) begin
              st   <= ST_DONE;
              done <= 1'b1;
            end else begin
              st   <= ST_PREP;
              step <= step + 5'd1;
            end
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  assign busy      = (st != ST_IDLE) && (st != ST_DONE);
  assign seq_start = (st == ST_MOVE && mph && last_copy) || (st == ST_PREP && p_need == '0);

  // ---------------------------------------------------------------- op generation
  function automatic logic [15:0] resolve(logic [15:0] c, int unsigned p);
    logic [15:0] base = 16'(p * CPP);
    case (c)
      COL_A:   return base + 16'(a_col[p]);
      COL_B:   return base + 16'(b_col[p]);
      COL_MAX: return base + 16'(mx_col[p]);
      COL_MIN: return base + 16'(mn_col[p]);
      default: return base + c;
    endcase
  endfunction

  logic [15:0] mv_src, mv_base;
  always_comb begin
    mv_src  = 16'(32'(loc[mv_w].p) * CPP) + 16'(loc[mv_w].c);
    mv_base = 16'(32'(mvp) * CPP);
  end

  always_comb begin
    for (int unsigned p = 0; p < NP; p++) begin
      ops[p] = MOP_IDLE;
      unique case (st)
        ST_PREP: if (cur[p].act) begin
          ops[p]     = mop_init(p_init_mask[p]);
          ops[p].dst = 16'(p * CPP);
        end
        ST_CAS: if (cur[p].act) begin
          ops[p] = seq_op;
          if (seq_op.kind == MOP_INIT) ops[p].dst = 16'(p * CPP);
          else begin
            ops[p].src_a = resolve(seq_op.src_a, p);
            ops[p].src_b = resolve(seq_op.src_b, p);
            ops[p].dst   = resolve(seq_op.dst, p);
          end
        end
        ST_MOVE: if (p == 0) begin
          if (!mph) ops[p] = mop_not(mv_src, mv_base + 16'(mv_stage), 0, ROWS - 1);
          else      ops[p] = mop_not(mv_base + 16'(mv_stage), mv_base + 16'(mv_dst),
                                     0, ROWS - 1);
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- host mapping
  loc_t ldl;
  always_comb begin
    ldl     = ld_loc(ld_wire);
    ld_col  = 16'(32'(ldl.p) * CPP) + 16'(ldl.c);
    med_col = 16'(32'(loc[MED].p) * CPP) + 16'(loc[MED].c);
  end

  // Every step's CAS ends exactly when the controller leaves the CAS phase,
  // and a partition never runs out of free columns.
  a_seq_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                  seq_done |-> (st != ST_CAS));
  for (genvar gp = 0; gp < NP; gp++) begin : g_room
    a_room: assert property (@(posedge clk) disable iff (!rst_n)
                             (st == ST_PREP && cur[gp].act) |-> (p_mx[gp] != 3'd6));
  end

endmodule
