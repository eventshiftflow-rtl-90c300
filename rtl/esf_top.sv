// esf_top: two-axis EventShiftFlow motion-estimation core.
//
// Events (t, x, y, p) enter through a small FIFO. A free-running bin timer
// cuts time into bins of dt clock cycles. During a bin, the x pipeline counts
// events per column and the y pipeline per row; at the end of the bin each
// thresholds its counts into a 1-bit occupancy vector, shifts it into its
// L-bin occupancy grid and scores every occupied pixel against 2J+1 velocity
// hypotheses (pixels per bin). The density controller watches the x
// occupancy and, if enabled, doubles or halves dt to keep the density
// between 10 % and 40 %. The association block then pairs every x detection
// with the median y hypothesis of the rows that had events in that column,
// and two lookup tables turn both hypotheses into velocities.
//
//   ev_*        event input, valid/ready; a word moves when both are high.
//               The FIFO is stalled for one cycle at the end of each bin.
//   cfg         run-time settings (esf_pkg::esf_cfg_t), read continuously;
//               cfg.dt_init is the bin length until the first adaptation.
//   lut_*       host write port of the velocity tables (lut_wr_axis 0 = x,
//               1 = y); after reset each table returns j itself.
//   out_*       one word per x detection with the associated y motion:
//               column, median row, the two hypotheses, their table values
//               and the number of rows with events in that column.
//   xdet_*      the raw x-pipeline detections (every scored column, with
//               xdet_hit for those over threshold), for single-axis use.
//   status      current dt, last x density, adaptation pulses, overrun
//               pulses (a bin closed before scoring or association ended),
//               the bin-complete pulse and a bin counter.
//
// Timing per bin: bin_done; one cycle later both grids shift and scoring
// starts; each occupied pixel takes L + ceil(log2(2J+1)) cycles (21 at the
// paper's sizes) in its own axis; association starts when both axes are
// done and takes NY + 2J + 3 cycles per x detection.
//
// The structure follows the paper. The FIFO depth, the event layout, the
// handshake, the adaptation step and the way the association stores the
// per-column rows are this design's choices (see each block).
module esf_top #(
  parameter int unsigned NX         = 240,
  parameter int unsigned NY         = 180,
  parameter int unsigned L          = 16,
  parameter int unsigned J          = 15,
  parameter int unsigned CNT_W      = 8,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned DT_W       = 32,
  parameter int unsigned DT_MIN     = esf_pkg::DT_MIN_CYCLES,
  parameter int unsigned DT_MAX     = esf_pkg::DT_MAX_CYCLES,
  parameter int unsigned HOLD_BINS  = 8,
  parameter int unsigned VW         = 16,
  parameter int unsigned XW         = $clog2(NX),
  parameter int unsigned YW         = $clog2(NY),
  parameter int unsigned JW         = $clog2(J + 1) + 1,
  parameter int unsigned RW         = $clog2(L + 1),
  parameter int unsigned HW         = $clog2(L)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // event stream
  input  logic                  ev_valid,
  output logic                  ev_ready,
  input  esf_pkg::esf_event_t   ev_data,
  // configuration
  input  esf_pkg::esf_cfg_t     cfg,
  // velocity table write port
  input  logic                  lut_wr_en,
  input  logic                  lut_wr_axis,
  input  logic signed [JW-1:0]  lut_wr_j,
  input  logic [VW-1:0]         lut_wr_data,
  // 2D output
  output logic                  out_valid,
  output logic [XW-1:0]         out_x,
  output logic [YW-1:0]         out_y,
  output logic signed [JW-1:0]  out_jx,
  output logic                  out_jy_ok,
  output logic signed [JW-1:0]  out_jy,
  output logic [VW-1:0]         out_vx,
  output logic [VW-1:0]         out_vy,
  output logic [YW:0]           out_ny,
  // x-pipeline detections
  output logic                  xdet_valid,
  output logic                  xdet_hit,
  output logic [XW-1:0]         xdet_x,
  output logic signed [JW-1:0]  xdet_j,
  output logic [RW-1:0]         xdet_r,
  output logic [HW-1:0]         xdet_h,
  // status
  output logic [DT_W-1:0]       dt_cycles,
  output logic [$clog2(NX+1)-1:0] density,
  output logic                  adj_up,
  output logic                  adj_down,
  output logic                  bin_done,
  output logic [15:0]           bin_index,
  output logic                  overrun_x,
  output logic                  overrun_y,
  output logic                  overrun_assoc,
  output logic                  assoc_done
);
  import esf_pkg::*;

  // ------------------------------------------------------------- input FIFO
  esf_event_t f_data;
  logic       f_valid, f_ready, ev_take;

  esf_event_fifo #(.T(esf_event_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (ev_valid),
    .in_ready (ev_ready),
    .in_data  (ev_data),
    .out_valid(f_valid),
    .out_ready(f_ready),
    .out_data (f_data),
    .level    ()
  );

  assign f_ready = !bin_done;            // stall while the bin closes
  assign ev_take = f_valid && f_ready;

  // ------------------------------------------------------- bin timer, density
  logic [DT_W-1:0] bin_count;
  logic [NX-1:0]   occ_x;
  logic [NY-1:0]   occ_y;
  logic            occ_x_valid, occ_y_valid;

  esf_bin_timer #(.DT_W(DT_W)) u_timer (
    .clk, .rst_n,
    .dt_cycles,
    .bin_done,
    .count    (bin_count),
    .bin_index
  );

  esf_density_ctrl #(
    .N(NX), .DT_W(DT_W), .DT_MIN(DT_MIN), .DT_MAX(DT_MAX), .HOLD_BINS(HOLD_BINS)
  ) u_density (
    .clk, .rst_n,
    .cfg_dt_init (cfg.dt_init[DT_W-1:0]),
    .adapt_en    (cfg.adapt_en),
    .occ         (occ_x),
    .occ_valid   (occ_x_valid),
    .dt_cycles,
    .density,
    .adj_up,
    .adj_down,
    .in_hold     ()
  );

  // ------------------------------------------------------------ axis pipelines
  logic                 x_done, y_done;
  logic                 ydet_valid, ydet_hit;
  logic [YW-1:0]        ydet_y;
  logic signed [JW-1:0] ydet_j;

  esf_axis_pipeline #(
    .N(NX), .L(L), .J(J), .CNT_W(CNT_W), .CW(16), .XW(XW), .RW(RW), .HW(HW), .JW(JW)
  ) u_xpipe (
    .clk, .rst_n,
    .ev_valid (ev_take),
    .ev_coord (f_data.x),
    .bin_done,
    .theta_e  (cfg.theta_e),
    .theta_s  (cfg.theta_s),
    .beta     (cfg.beta),
    .mode     (cfg.mode),
    .occ      (occ_x),
    .occ_valid(occ_x_valid),
    .busy     (),
    .done     (x_done),
    .overrun  (overrun_x),
    .det_valid(xdet_valid),
    .det_hit  (xdet_hit),
    .det_x    (xdet_x),
    .det_j    (xdet_j),
    .det_r    (xdet_r),
    .det_h    (xdet_h)
  );

  esf_axis_pipeline #(
    .N(NY), .L(L), .J(J), .CNT_W(CNT_W), .CW(16), .XW(YW), .RW(RW), .HW(HW), .JW(JW)
  ) u_ypipe (
    .clk, .rst_n,
    .ev_valid (ev_take),
    .ev_coord ({1'b0, f_data.y}),
    .bin_done,
    .theta_e  (cfg.theta_e),
    .theta_s  (cfg.theta_s),
    .beta     (cfg.beta),
    .mode     (cfg.mode),
    .occ      (occ_y),
    .occ_valid(occ_y_valid),
    .busy     (),
    .done     (y_done),
    .overrun  (overrun_y),
    .det_valid(ydet_valid),
    .det_hit  (ydet_hit),
    .det_x    (ydet_y),
    .det_j    (ydet_j),
    .det_r    (),
    .det_h    ()
  );

  // -------------------------------------------------------------- association
  esf_y_assoc #(.NX(NX), .NY(NY), .J(J), .CW(16), .XW(XW), .YW(YW), .JW(JW)) u_assoc (
    .clk, .rst_n,
    .ev_valid (ev_take),
    .ev_x     (f_data.x),
    .ev_y     ({1'b0, f_data.y}),
    .bin_done,
    .xd_valid (xdet_valid),
    .xd_hit   (xdet_hit),
    .xd_x     (xdet_x),
    .xd_j     (xdet_j),
    .x_done,
    .yd_valid (ydet_valid),
    .yd_hit   (ydet_hit),
    .yd_y     (ydet_y),
    .yd_j     (ydet_j),
    .y_done,
    .out_valid,
    .out_x,
    .out_jx,
    .out_jy_ok,
    .out_jy,
    .out_y,
    .out_ny,
    .busy     (),
    .done     (assoc_done),
    .overrun  (overrun_assoc)
  );

  // ---------------------------------------------------------- velocity tables
  esf_vel_lut #(.J(J), .JW(JW), .VW(VW)) u_lut_x (
    .clk, .rst_n,
    .wr_en   (lut_wr_en && !lut_wr_axis),
    .wr_j    (lut_wr_j),
    .wr_data (lut_wr_data),
    .rd_j    (out_jx),
    .rd_data (out_vx)
  );

  esf_vel_lut #(.J(J), .JW(JW), .VW(VW)) u_lut_y (
    .clk, .rst_n,
    .wr_en   (lut_wr_en && lut_wr_axis),
    .wr_j    (lut_wr_j),
    .wr_data (lut_wr_data),
    .rd_j    (out_jy),
    .rd_data (out_vy)
  );

  // The y pipeline's occupancy is not used outside it; the density controller
  // follows the x axis only.
  logic unused_ok;
  assign unused_ok = ^{occ_y, occ_y_valid, bin_count, f_data.t, f_data.p};
endmodule
