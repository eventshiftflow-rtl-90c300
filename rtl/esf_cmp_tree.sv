// esf_cmp_tree: pipelined arg-max over the hypothesis lanes.
//
// NL leaf entries (one per hypothesis, j = -J .. +J in leaf order) each
// carry a valid bit, a score R, a step count H and the hypothesis j. Each
// tree level compares neighbouring pairs and keeps the better one; an odd
// entry passes straight on. Every level ends in a register, so the tree has
// ceil(log2(NL)) stages and the winner of a leaf set appears that many
// cycles after in_valid; a new leaf set may enter every cycle. A tag (the
// pixel the leaves belong to) travels alongside. flush clears the valid bits
// of all stages.
//
// "a beats b" rules:
//   - an invalid entry never beats a valid one (invalid = fewer than beta
//     in-bounds steps, decided by the caller);
//   - mode SCORE_RAW: the higher R wins (raw popcount scorer);
//   - mode SCORE_NORM: a wins when R_a*H_b > R_b*H_a, the division-free form
//     of comparing R/H; the products are 8-bit for L = 16;
//   - on equal score the smaller |j| wins, biasing toward slower motion;
//   - if |j| is equal too (+j against -j), the entry on the lower leaf index
//     (the negative j) is kept. That last rule is this design's choice; the
//     others follow the paper.
module esf_cmp_tree #(
  parameter int unsigned NL   = 31,
  parameter int unsigned RW   = 5,
  parameter int unsigned HW   = 4,
  parameter int unsigned JW   = 6,
  parameter int unsigned TAGW = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  esf_pkg::esf_score_mode_e mode,
  input  logic                  flush,
  input  logic                  in_valid,
  input  logic [TAGW-1:0]       in_tag,
  input  logic                  leaf_ok [NL],
  input  logic [RW-1:0]         leaf_r  [NL],
  input  logic [HW-1:0]         leaf_h  [NL],
  input  logic signed [JW-1:0]  leaf_j  [NL],
  output logic                  out_valid,
  output logic [TAGW-1:0]       out_tag,
  output logic                  win_ok,
  output logic [RW-1:0]         win_r,
  output logic [HW-1:0]         win_h,
  output logic signed [JW-1:0]  win_j
);
  import esf_pkg::*;

  localparam int unsigned S = (NL > 1) ? $clog2(NL) : 1;

  typedef struct packed {
    logic                 ok;
    logic [RW-1:0]        r;
    logic [HW-1:0]        h;
    logic signed [JW-1:0] j;
  } ent_t;

  // Number of entries at tree level k (level 0 = leaves).
  function automatic int unsigned width_at(int unsigned k);
    int unsigned w = NL;
    for (int unsigned i = 0; i < k; i++) w = (w + 1) / 2;
    return w;
  endfunction

  function automatic logic [JW-1:0] absj(logic signed [JW-1:0] v);
    return (v < 0) ? JW'(-v) : JW'(v);
  endfunction

  // Does a beat b?
  function automatic logic beats(ent_t a, ent_t b, esf_pkg::esf_score_mode_e m);
    logic [RW+HW-1:0] pa, pb;
    if (!a.ok) return 1'b0;
    if (!b.ok) return 1'b1;
    if (m == esf_pkg::SCORE_RAW) begin
      pa = (RW+HW)'(a.r);
      pb = (RW+HW)'(b.r);
    end else begin
      pa = (RW+HW)'(a.r) * (RW+HW)'(b.h);
      pb = (RW+HW)'(b.r) * (RW+HW)'(a.h);
    end
    if (pa != pb) return pa > pb;
    return absj(a.j) < absj(b.j);
  endfunction

  // Level k of the tree lives in g_lvl[k]: level 0 is the leaves
  // (combinational), levels 1 .. S are registers.
  for (genvar k = 0; k <= S; k++) begin : g_lvl
    localparam int unsigned W = width_at(k);
    ent_t            e [W];
    logic            v;
    logic [TAGW-1:0] t;

    if (k == 0) begin : g_leaf
      always_comb begin
        for (int i = 0; i < NL; i++) begin
          e[i] = '{ok: leaf_ok[i], r: leaf_r[i], h: leaf_h[i], j: leaf_j[i]};
        end
        v = in_valid;
        t = in_tag;
      end
    end else begin : g_stage
      localparam int unsigned WIN = width_at(k - 1);
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          v <= 1'b0;
          t <= '0;
          for (int i = 0; i < W; i++) e[i] <= '0;
        end else begin
          v <= g_lvl[k-1].v && !flush;
          t <= g_lvl[k-1].t;
          for (int i = 0; i < W; i++) begin
            if (2*i + 1 >= WIN) begin
              e[i] <= g_lvl[k-1].e[2*i];
            end else begin
              e[i] <= beats(g_lvl[k-1].e[2*i+1], g_lvl[k-1].e[2*i], mode)
                      ? g_lvl[k-1].e[2*i+1] : g_lvl[k-1].e[2*i];
            end
          end
        end
      end
    end
  end

  assign out_valid = g_lvl[S].v;
  assign out_tag   = g_lvl[S].t;
  assign win_ok    = g_lvl[S].e[0].ok;
  assign win_r     = g_lvl[S].e[0].r;
  assign win_h     = g_lvl[S].e[0].h;
  assign win_j     = g_lvl[S].e[0].j;
endmodule
