// esf_axis_pipeline: the complete motion pipeline of one sensor axis.
//
// The x axis and the y axis run two identical copies of this block; they
// share no state while scoring. Inside, in stream order:
//   esf_event_accum  counts events per pixel along the axis during a bin and
//                    thresholds the counts into an occupancy vector;
//   esf_occ_grid     shifts that vector into the L-bin occupancy grid;
//   esf_scorer       scores every occupied pixel of the new bin against the
//                    2J+1 velocity hypotheses and reports the winners.
//
// Timing: bin_done (from the shared bin timer) closes a bin. One cycle later
// occ_valid pulses with the new vector; on that edge the grid shifts and the
// scorer captures the vector. The scorer then emits one det_valid per
// occupied pixel, L + ceil(log2(2J+1)) cycles apart, and pulses done after
// the last. In the bin_done cycle the accumulator takes no event; the caller
// must hold events back then (ev_valid is ignored in that cycle).
module esf_axis_pipeline #(
  parameter int unsigned N     = 240,
  parameter int unsigned L     = 16,
  parameter int unsigned J     = 15,
  parameter int unsigned CNT_W = 8,
  parameter int unsigned CW    = 16,
  parameter int unsigned XW    = $clog2(N),
  parameter int unsigned RW    = $clog2(L + 1),
  parameter int unsigned HW    = $clog2(L),
  parameter int unsigned JW    = $clog2(J + 1) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ev_valid,
  input  logic [CW-1:0]            ev_coord,
  input  logic                     bin_done,
  input  logic [CNT_W-1:0]         theta_e,
  input  logic [4:0]               theta_s,
  input  logic [3:0]               beta,
  input  esf_pkg::esf_score_mode_e mode,
  output logic [N-1:0]             occ,
  output logic                     occ_valid,
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
  logic [L-1:0] grid [N];

  esf_event_accum #(.N(N), .CNT_W(CNT_W), .CW(CW)) u_accum (
    .clk, .rst_n,
    .ev_valid, .ev_coord, .bin_done, .theta_e,
    .occ, .occ_valid
  );

  esf_occ_grid #(.N(N), .L(L)) u_grid (
    .clk, .rst_n,
    .shift_en (occ_valid),
    .occ_in   (occ),
    .grid     (grid)
  );

  esf_scorer #(.N(N), .L(L), .J(J), .XW(XW), .RW(RW), .HW(HW), .JW(JW)) u_scorer (
    .clk, .rst_n,
    .start (occ_valid),
    .occ, .grid,
    .theta_s, .beta, .mode,
    .busy, .done, .overrun,
    .det_valid, .det_hit, .det_x, .det_j, .det_r, .det_h
  );
endmodule
