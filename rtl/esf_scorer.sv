// esf_scorer: trace-based hypothesis scorer of one axis.
//
// After each bin, every pixel that is occupied in the newest occupancy
// vector is an anchor x0, and for each anchor all 2J+1 hypotheses
// j = -J .. +J are scored at once by 2J+1 esf_hyp_lane instances. Lane j
// follows the diagonal x0 - j*h back through the grid, one older bin per
// clock cycle, counting occupied cells R_j and in-bounds steps H_j. The lane
// results then go through the pipelined comparator tree (esf_cmp_tree), and
// the winner j* is reported if it clears the score threshold theta_s.
// Anchors are handled one at a time, lowest pixel first.
//
// Trace indexing. The grid is shifted before scoring, so its newest column
// (l = L-1) is the anchor's own bin and holds G[x0, L-1] = 1. Step h reads
// G[x0 - j*h, L-1-h] for h = 1 .. L-1, i.e. the L-1 older bins the grid
// holds. The paper writes the trace as G[x0 - j*h, L-h] for h = 1 .. L, which
// at h = 1 would read the anchor's own bin at another pixel; its incremental
// update equation, in which G[x0, L-1] is the newest bit on the trace, and
// its 4-bit step counter (H at most 15) both fit the indexing used here.
//
// Scores: a hypothesis with fewer than beta in-bounds steps is discarded.
// SCORE_RAW compares R_j directly and accepts the winner when R > theta_s;
// SCORE_NORM compares R_j*H_k against R_k*H_j and accepts the winner when
// R*L > theta_s*H (the division-free form of R/H > theta_s/L). Ties go to the
// smaller |j|.
//
// Timing (follows the paper's L + ceil(log2(2J+1)) cycles per pixel): one
// anchor occupies the scorer for exactly L + S cycles, S = ceil(log2(2J+1))
// tree stages; with L = 16 and J = 15 that is 21 cycles. Cycle 0 picks the
// anchor and loads the lanes, cycles 1 .. L-1 trace, cycle L hands the lane
// results to the tree, and the next anchor is loaded S cycles later, in the
// same cycle the tree delivers the winner. det_valid pulses for every anchor
// (det_hit tells whether the winner passed the threshold), one cycle after
// the tree output; done pulses with the last result of the bin, or one
// cycle after start if no pixel was occupied.
//
// start (a one-cycle pulse, given in the cycle the grid shifts) captures the
// new occupancy vector. The grid must not shift again before done, as the
// paper's prototype also assumes; if start arrives while busy, the scorer
// drops the unfinished bin, flushes the tree, pulses overrun and starts on
// the new vector. That recovery is this design's choice.
module esf_scorer #(
  parameter int unsigned N  = 240,
  parameter int unsigned L  = 16,
  parameter int unsigned J  = 15,
  parameter int unsigned XW = $clog2(N),
  parameter int unsigned RW = $clog2(L + 1),
  parameter int unsigned HW = $clog2(L),
  parameter int unsigned JW = $clog2(J + 1) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [N-1:0]             occ,
  input  logic [L-1:0]             grid [N],
  input  logic [4:0]               theta_s,
  input  logic [3:0]               beta,
  input  esf_pkg::esf_score_mode_e mode,
  output logic                     busy,
  output logic                     done,
  output logic                     overrun,
  output logic                     det_valid,
  output logic                     det_hit,
  output logic [XW-1:0]            det_x,
  output logic signed [JW-1:0]     det_j,
  output logic [RW-1:0]            det_r,
  output logic [HW-1:0]            det_h
);
  import esf_pkg::*;

  localparam int unsigned NL = 2 * J + 1;
  localparam int unsigned S  = (NL > 1) ? $clog2(NL) : 1;
  localparam int unsigned P  = L + S;               // cycles per anchor
  localparam int unsigned PW = $clog2(P + 1);
  localparam int unsigned CW = $clog2(L);

  typedef enum logic {IDLE, RUN} state_e;

  state_e          state;
  logic [N-1:0]    pending;
  logic [PW-1:0]   phase;
  logic [XW-1:0]   x_cur, x_next;
  logic            have_next;
  logic            lane_load, lane_step, tree_in;
  logic [CW-1:0]   col_idx;
  logic [N-1:0]    col;

  // Lowest pending anchor.
  always_comb begin
    x_next    = '0;
    have_next = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (pending[i]) begin
        x_next    = XW'(i);
        have_next = 1'b1;
      end
    end
  end

  assign lane_load = (state == RUN) && (phase == '0) && have_next && !start;
  assign lane_step = (state == RUN) && (phase != '0) && (phase < PW'(L));
  assign tree_in   = (state == RUN) && (phase == PW'(L));
  assign busy      = (state == RUN);

  // Column of the bin h = phase places older than the newest one.
  assign col_idx = CW'(L - 1) - CW'(phase);
  always_comb begin
    for (int x = 0; x < N; x++) col[x] = grid[x][col_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      pending <= '0;
      phase   <= '0;
      x_cur   <= '0;
      done    <= 1'b0;
      overrun <= 1'b0;
    end else begin
      done    <= 1'b0;
      overrun <= 1'b0;
      if (start) begin
        state   <= RUN;
        pending <= occ;
        phase   <= '0;
        overrun <= (state == RUN);
      end else if (state == RUN) begin
        if (phase == '0) begin
          if (have_next) begin
            x_cur            <= x_next;
            pending[x_next]  <= 1'b0;
            phase            <= PW'(1);
          end else begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end else if (phase == PW'(P - 1)) begin
          phase <= '0;
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end

  // Hypothesis lanes, leaf i holds j = i - J.
  logic                 leaf_ok [NL];
  logic [RW-1:0]        leaf_r  [NL];
  logic [HW-1:0]        leaf_h  [NL];
  logic signed [JW-1:0] leaf_j  [NL];

  for (genvar i = 0; i < NL; i++) begin : g_lane
    esf_hyp_lane #(
      .N(N), .L(L), .J_VAL(int'(i) - int'(J)), .XW(XW), .RW(RW), .HW(HW)
    ) u_lane (
      .clk, .rst_n,
      .load (lane_load),
      .x0   (x_next),
      .step (lane_step),
      .col  (col),
      .r    (leaf_r[i]),
      .h    (leaf_h[i])
    );
    assign leaf_j[i]  = JW'(int'(i) - int'(J));
    assign leaf_ok[i] = leaf_h[i] >= HW'(beta);
  end

  logic                 t_valid, w_ok;
  logic [XW-1:0]        t_tag;
  logic [RW-1:0]        w_r;
  logic [HW-1:0]        w_h;
  logic signed [JW-1:0] w_j;

  esf_cmp_tree #(.NL(NL), .RW(RW), .HW(HW), .JW(JW), .TAGW(XW)) u_tree (
    .clk, .rst_n,
    .mode,
    .flush    (start),
    .in_valid (tree_in),
    .in_tag   (x_cur),
    .leaf_ok, .leaf_r, .leaf_h, .leaf_j,
    .out_valid(t_valid),
    .out_tag  (t_tag),
    .win_ok   (w_ok),
    .win_r    (w_r),
    .win_h    (w_h),
    .win_j    (w_j)
  );

  // Score threshold: R > theta_s, or R*L > theta_s*H in the normalised mode.
  logic pass;
  always_comb begin
    if (mode == SCORE_RAW) pass = w_r > RW'(theta_s);
    else pass = (16'(w_r) * 16'(L)) > (16'(theta_s) * 16'(w_h));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      det_valid <= 1'b0;
      det_hit   <= 1'b0;
      det_x     <= '0;
      det_j     <= '0;
      det_r     <= '0;
      det_h     <= '0;
    end else begin
      det_valid <= t_valid && !start;
      det_hit   <= t_valid && !start && w_ok && pass;
      if (t_valid) begin
        det_x <= t_tag;
        det_j <= w_j;
        det_r <= w_r;
        det_h <= w_h;
      end
    end
  end
endmodule
