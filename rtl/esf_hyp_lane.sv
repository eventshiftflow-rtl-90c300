// esf_hyp_lane: one velocity-hypothesis lane of the trace scorer.
//
// Hypothesis J_VAL says that the feature now seen at pixel x0 moved J_VAL
// pixels per time bin. The lane walks back along that diagonal of the
// occupancy grid: at step h (h = 1 .. L-1) it reads pixel x0 - J_VAL*h in the
// bin h places older than the newest one. The scorer drives that bin's column
// on col, so the lane only selects one bit of it.
//
// Inside, as the paper lists them: an index register loaded with x0 - J_VAL
// and decremented by J_VAL on every step; a bounds comparator 0 <= idx < N;
// an up-counter R (score, RW bits) that counts occupied cells; and a step
// counter H (HW bits) that counts in-bounds steps. A trace that leaves the
// sensor never re-enters it (the index moves monotonically), so once out of
// bounds the lane simply stops counting: that is the early termination.
//
// Timing: load (one cycle) starts a trace and clears R and H; each cycle with
// step high evaluates one step and updates R, H and the index on the clock
// edge. After L-1 steps, R and H are final and stay until the next load.
//
// The step range h = 1 .. L-1 over a grid whose newest column holds the
// anchor pixel itself is this design's reading of the paper's trace
// equation; see the scorer for why.
module esf_hyp_lane #(
  parameter int unsigned N     = 240,
  parameter int unsigned L     = 16,
  parameter int          J_VAL = 0,
  parameter int unsigned XW    = $clog2(N),
  parameter int unsigned RW    = $clog2(L + 1),
  parameter int unsigned HW    = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [XW-1:0] x0,
  input  logic          step,
  input  logic [N-1:0]  col,
  output logic [RW-1:0] r,
  output logic [HW-1:0] h
);
  // Index range: x0 - J*h with |J*h| < N*L keeps well inside IW bits.
  localparam int unsigned IW = XW + $clog2(L) + 2;

  logic signed [IW-1:0] idx;
  logic                 in_bounds;

  assign in_bounds = (idx >= 0) && (idx < IW'(N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      r   <= '0;
      h   <= '0;
    end else if (load) begin
      idx <= $signed(IW'(x0)) - IW'(J_VAL);
      r   <= '0;
      h   <= '0;
    end else if (step) begin
      idx <= idx - IW'(J_VAL);
      if (in_bounds) begin
        h <= h + 1'b1;
        if (col[idx[XW-1:0]]) r <= r + 1'b1;
      end
    end
  end
endmodule
