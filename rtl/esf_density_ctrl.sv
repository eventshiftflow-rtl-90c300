// esf_density_ctrl: adaptive time-bin length from occupancy density.
//
// After every bin the controller counts the occupied pixels of the new
// occupancy vector (a popcount) and compares the count with two constants:
// the 10 % and the 40 % marks of the N pixels, the density band in which the
// method works well. Below 10 % the bin is too short to gather enough events
// and dt is doubled; above 40 % the grid saturates and dt is halved. Both
// are shifts, clamped to [DT_MIN, DT_MAX]. After each change the controller
// waits HOLD_BINS further bins (the adaptation period) before it may change
// dt again, so the new length can settle. With adapt_en low dt stays at its
// the host's setting cfg_dt_init, which is also the starting point: dt
// follows cfg_dt_init until the first adjustment and the adapted value after
// it, until the next reset.
//
// Timing: occ and occ_valid come from the event accumulator; the decision is
// made in the occ_valid cycle and dt_cycles changes on the next clock edge,
// with a one-cycle adjust pulse (adj_up / adj_down). The bin timer picks the
// new length up at its next compare.
//
// The paper gives the mechanism (a popcount, two comparators, an adjustment
// period and the 10-40 % band). The factor of two per step, the clamp limits
// (5 ms and 50 ms, the typical range of dt) and the 8-bin adaptation period
// are this design's choices.
module esf_density_ctrl #(
  parameter int unsigned N         = 240,
  parameter int unsigned DT_W      = 32,
  parameter int unsigned DT_MIN    = esf_pkg::DT_MIN_CYCLES,
  parameter int unsigned DT_MAX    = esf_pkg::DT_MAX_CYCLES,
  parameter int unsigned HOLD_BINS = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [DT_W-1:0]      cfg_dt_init,
  input  logic                 adapt_en,
  input  logic [N-1:0]         occ,
  input  logic                 occ_valid,
  output logic [DT_W-1:0]      dt_cycles,
  output logic [$clog2(N+1)-1:0] density,
  output logic                 adj_up,
  output logic                 adj_down,
  output logic                 in_hold
);
  localparam int unsigned PW = $clog2(N+1);
  // density < 10 %  <=>  10*P < N   <=>  P < ceil(N/10)
  localparam int unsigned LO_TH = (N + 9) / 10;
  // density > 40 %  <=>  5*P > 2*N  <=>  P > floor(2N/5)
  localparam int unsigned HI_TH = (2 * N) / 5;
  localparam int unsigned HW = $clog2(HOLD_BINS + 1);

  logic [HW-1:0]   hold_cnt;
  logic [DT_W-1:0] dt_q;      // adapted bin length
  logic            dt_own;    // dt_q has been set by an adjustment
  logic too_low, too_high;

  assign dt_cycles = dt_own ? dt_q : cfg_dt_init;

  always_comb begin
    density = '0;
    for (int i = 0; i < N; i++) density = density + PW'(occ[i]);
    too_low  = density < PW'(LO_TH);
    too_high = density > PW'(HI_TH);
  end

  assign in_hold = hold_cnt != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dt_q      <= '0;
      dt_own    <= 1'b0;
      hold_cnt  <= '0;
      adj_up    <= 1'b0;
      adj_down  <= 1'b0;
    end else begin
      adj_up   <= 1'b0;
      adj_down <= 1'b0;
      if (occ_valid) begin
        if (in_hold) begin
          hold_cnt <= hold_cnt - 1'b1;
        end else if (adapt_en && too_low && dt_cycles < DT_W'(DT_MAX)) begin
          dt_q      <= ((dt_cycles << 1) > DT_W'(DT_MAX)) ? DT_W'(DT_MAX) : (dt_cycles << 1);
          dt_own    <= 1'b1;
          hold_cnt  <= HW'(HOLD_BINS);
          adj_up    <= 1'b1;
        end else if (adapt_en && too_high && dt_cycles > DT_W'(DT_MIN)) begin
          dt_q      <= ((dt_cycles >> 1) < DT_W'(DT_MIN)) ? DT_W'(DT_MIN) : (dt_cycles >> 1);
          dt_own    <= 1'b1;
          hold_cnt  <= HW'(HOLD_BINS);
          adj_down  <= 1'b1;
        end
      end
    end
  end
endmodule
