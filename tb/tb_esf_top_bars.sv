// tb_esf_top_bars: the two-axis core at its default size (no parameter
// overridden) on a synthetic bar scene in the configuration used for
// synthetic data: raw popcount scoring with beta = L/2 = 8 and a score
// threshold of round(0.3 L) = 5. The bin length is set short (20,000 cycles)
// so that 18 bins simulate in seconds.
//
// Scene on the 240 x 180 sensor: three vertical bars, each 2 columns wide and
// 40 rows tall (rows 60 .. 99), moving +5, -3 and 0 pixels per bin in x. Every
// bar pixel fires 14 events per bin, so each bar column (560 events) and each
// bar row (6 columns x 14 = 84 events) reaches theta_e = 80. About 5 % of the
// events are uniform noise placed outside the bar columns; no noise column or
// row can reach the threshold.
//
// Checks once the grids hold a full history (bin 15 on):
//   - every scored x column is a bar column, passes the threshold and has
//     the bar's hypothesis with a full trace (R = H = 15);
//   - six x detections per bin;
//   - every 2D output is a bar column with the bar's j_x, j_y = 0 (the bars
//     do not move vertically), 40 rows with events, median row 79 (the lower
//     median of rows 60 .. 99) and the reset table value j for both axes;
//   - x results are 21 cycles apart and no overrun occurs.
module tb_esf_top_bars;
  import esf_pkg::*;
  localparam int unsigned JW = 5, VW = 16, XW = 8, YW = 8, RW = 5, HW = 4;
  localparam int NB = 3;
  localparam int X0 [NB] = '{20, 220, 120};
  localparam int VX [NB] = '{5, -3, 0};
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready;
  esf_event_t ev_data;
  esf_cfg_t cfg;
  logic lut_wr_en, lut_wr_axis;
  logic signed [JW-1:0] lut_wr_j;
  logic [VW-1:0] lut_wr_data;
  logic out_valid, out_jy_ok;
  logic [XW-1:0] out_x;
  logic [YW-1:0] out_y;
  logic signed [JW-1:0] out_jx, out_jy;
  logic [VW-1:0] out_vx, out_vy;
  logic [YW:0] out_ny;
  logic xdet_valid, xdet_hit;
  logic [XW-1:0] xdet_x;
  logic signed [JW-1:0] xdet_j;
  logic [RW-1:0] xdet_r;
  logic [HW-1:0] xdet_h;
  logic [31:0] dt_cycles;
  logic [7:0] density;
  logic adj_up, adj_down, bin_done, overrun_x, overrun_y, overrun_assoc, assoc_done;
  logic [15:0] bin_index;

  int checks = 0, failures = 0;
  int pos [NB];     // bar positions in the bin being filled
  int cl [NB];      // bar positions in the last closed bin
  int nb, n_out, n_hit, n_noise, cyc, last_det, hits_bin;

  esf_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int x, int y);
    @(negedge clk);
    ev_valid = 1;
    ev_data = '{t: 32'(bin_index), x: 16'(x), y: 15'(y), p: 1'b0};
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    #1 ev_valid = 0;
  endtask

  // Bar index owning column x in the last closed bin, or -1.
  function automatic int bar_of(int x);
    for (int k = 0; k < NB; k++)
      if (x == cl[k] || x == cl[k] + 1) return k;
    return -1;
  endfunction

  function automatic bit near_bar(int x);
    for (int k = 0; k < NB; k++)
      if (x >= pos[k] - 1 && x <= pos[k] + 2) return 1'b1;
    return 1'b0;
  endfunction

  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n) begin
    if (bin_done) begin
      if (nb >= 16) check(hits_bin == 2 * NB, $sformatf("x detections in bin: %0d", hits_bin));
      last_det = -1;
      hits_bin = 0;
    end
    if (xdet_valid) begin
      if (last_det >= 0) check(cyc - last_det == 21, $sformatf("x result spacing %0d", cyc - last_det));
      last_det = cyc;
      if (nb >= 15) begin
        automatic int k = bar_of(int'(xdet_x));
        check(k >= 0, $sformatf("scored column %0d is not a bar column", xdet_x));
        if (k >= 0) begin
          check(xdet_hit && xdet_j == JW'(VX[k]) && xdet_r == 15 && xdet_h == 15,
                $sformatf("x=%0d hit=%b j=%0d R=%0d H=%0d, bar speed %0d",
                          xdet_x, xdet_hit, xdet_j, xdet_r, xdet_h, VX[k]));
          n_hit++;
        end
        hits_bin++;
      end
    end
    if (out_valid && nb >= 15) begin
      automatic int k = bar_of(int'(out_x));
      n_out++;
      check(k >= 0, $sformatf("2D output at non-bar column %0d", out_x));
      if (k >= 0)
        check(out_jx == JW'(VX[k]), $sformatf("x=%0d jx=%0d want %0d", out_x, out_jx, VX[k]));
      check(out_jy_ok && out_jy == 0, $sformatf("x=%0d jy=%0d ok=%b", out_x, out_jy, out_jy_ok));
      check(out_ny == 40 && out_y == 79, $sformatf("rows %0d median %0d", out_ny, out_y));
      check($signed(out_vx) == $signed(out_jx) && out_vy == '0, "table velocities");
    end
  end

  initial begin
    ev_valid = 0; ev_data = '0; last_det = -1; n_out = 0; n_hit = 0; n_noise = 0;
    nb = 0; cyc = 0; hits_bin = 0;
    lut_wr_en = 0; lut_wr_axis = 0; lut_wr_j = '0; lut_wr_data = '0;
    for (int k = 0; k < NB; k++) cl[k] = -100;
    cfg = '{dt_init: 32'd20_000, theta_e: 8'(DEF_THETA_E), theta_s: 5'd5,
            beta: 4'd8, mode: SCORE_RAW, adapt_en: 1'b0};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge bin_done);
    for (int b = 0; b < 18; b++) begin
      for (int k = 0; k < NB; k++) pos[k] = X0[k] + VX[k] * b;
      for (int rep = 0; rep < 14; rep++) begin
        for (int r = 60; r < 100; r++)
          for (int k = 0; k < NB; k++) begin
            send(pos[k], r);
            send(pos[k] + 1, r);
          end
        // about 5 % noise: 13 events per pass, 182 per bin against 3,360
        for (int n = 0; n < 13; n++) begin
          automatic int nx = $urandom_range(239), ny = $urandom_range(179);
          if (!near_bar(nx)) begin
            send(nx, ny);
            n_noise++;
          end
        end
      end
      @(posedge bin_done);
      cl = pos; nb = b;
    end
    @(posedge bin_done);
    repeat (10) @(negedge clk);
    $display("bars: x hits %0d, 2D outputs %0d, noise events %0d", n_hit, n_out, n_noise);
    check(n_hit >= 2 * NB * 3, $sformatf("x detections checked: %0d", n_hit));
    check(n_out >= 2 * NB * 2, $sformatf("2D outputs checked: %0d", n_out));
    check(n_noise > 0, "noise events sent");
    check(!overrun_x && !overrun_y && !overrun_assoc, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
