// esf_event_accum: per-pixel event counters of one axis and the threshold
// that turns them into a 1-bit occupancy vector.
//
// For the x axis the y coordinate and the polarity are dropped: every event
// adds one to the counter of its x pixel, whatever its row or sign (the y
// axis is the same block fed with y). N counters of CNT_W bits make a buffer
// that grows with the sensor's width, not with its area.
//
// Timing: while bin_done is low, an event with ev_valid high and a
// coordinate below N increments its counter; a coordinate at or above N is
// ignored. In the cycle bin_done is high, no event is taken (the caller
// stalls the event stream for that one cycle), every counter is compared
// against theta_e (occupied when count >= theta_e, Eq. 1 of the method) and
// all counters are cleared. The new vector appears on occ one cycle later,
// together with a one-cycle occ_valid pulse, and holds until the next bin.
//
// Counters saturate at their maximum instead of wrapping, so a very busy
// pixel still reads as occupied; saturation and the reset value of zero are
// this design's choices.
module esf_event_accum #(
  parameter int unsigned N     = 240,
  parameter int unsigned CNT_W = 8,
  parameter int unsigned CW    = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ev_valid,
  input  logic [CW-1:0]    ev_coord,
  input  logic             bin_done,
  input  logic [CNT_W-1:0] theta_e,
  output logic [N-1:0]     occ,
  output logic             occ_valid
);
  localparam int unsigned XW = (N > 1) ? $clog2(N) : 1;

  logic [CNT_W-1:0] cnt [N];
  logic [XW-1:0]    a;

  assign a = ev_coord[XW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) cnt[i] <= '0;
      occ       <= '0;
      occ_valid <= 1'b0;
    end else begin
      occ_valid <= bin_done;
      if (bin_done) begin
        for (int i = 0; i < N; i++) begin
          occ[i] <= cnt[i] >= theta_e;
          cnt[i] <= '0;
        end
      end else if (ev_valid && ev_coord < CW'(N)) begin
        if (cnt[a] != '1) cnt[a] <= cnt[a] + 1'b1;
      end
    end
  end
endmodule
