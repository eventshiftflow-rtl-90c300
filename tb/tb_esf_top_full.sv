// tb_esf_top_full: the two-axis core at its default size (240 x 180
// sensor, L = 16, J = 15, 31 hypothesis lanes per axis), with no parameter
// overridden. Only the run-time bin length is set short (20,000 cycles, i.e.
// 0.2 ms at 100 MHz) so that 18 bins simulate quickly; theta_e = 80,
// theta_s = 8, beta = 4 and the cross-multiplied comparison are the
// defaults of the real-data evaluation.
//
// Scene: the outline of a 30 x 30 square moving +3 pixels per bin in x and
// +2 in y, 3 events per outline pixel per bin, so the side columns and the
// top and bottom rows reach the threshold (90 events) and nothing else
// does. Once the grids hold enough history, every 2D output must be a side
// column with j_x = +3, j_y = +2, 30 rows with events and median row 14
// below the top edge. Consecutive x results must be 21 cycles apart
// (L + ceil(log2(2J+1)) = 16 + 5).
module tb_esf_top_full;
  import esf_pkg::*;
  localparam int unsigned JW = 5, VW = 16, XW = 8, YW = 8, RW = 5, HW = 4;
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
  int sq_x, sq_y, cl_x, cl_y, nb, n_out, cyc, last_det;

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

  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n) begin
    if (bin_done) last_det = -1;
    if (xdet_valid) begin
      if (last_det >= 0) check(cyc - last_det == 21, $sformatf("x result spacing %0d", cyc - last_det));
      last_det = cyc;
    end
    if (out_valid && nb >= 12) begin
      n_out++;
      check(out_x == XW'(cl_x) || out_x == XW'(cl_x + 29), $sformatf("column %0d, square at %0d", out_x, cl_x));
      check(out_jx == 3 && out_jy_ok && out_jy == 2, $sformatf("x=%0d jx=%0d jy=%0d ok=%b", out_x, out_jx, out_jy, out_jy_ok));
      check(out_ny == 30 && out_y == YW'(cl_y + 14), $sformatf("rows %0d median %0d top %0d", out_ny, out_y, cl_y));
      check(out_vx == 16'd3 && out_vy == 16'd2, "table velocities");
    end
  end

  initial begin
    ev_valid = 0; ev_data = '0; last_det = -1; n_out = 0; nb = 0; cyc = 0;
    lut_wr_en = 0; lut_wr_axis = 0; lut_wr_j = '0; lut_wr_data = '0;
    cfg = '{dt_init: 32'd20_000, theta_e: 8'(DEF_THETA_E), theta_s: 5'(DEF_THETA_S),
            beta: 4'(DEF_BETA), mode: SCORE_NORM, adapt_en: 1'b0};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge bin_done);
    for (int b = 0; b < 18; b++) begin
      sq_x = 20 + 3 * b; sq_y = 20 + 2 * b;
      for (int rep = 0; rep < 3; rep++)
        for (int i = 0; i < 30; i++) begin
          send(sq_x + i, sq_y);
          send(sq_x + i, sq_y + 29);
          if (i > 0 && i < 29) begin
            send(sq_x, sq_y + i);
            send(sq_x + 29, sq_y + i);
          end
        end
      @(posedge bin_done);
      cl_x = sq_x; cl_y = sq_y; nb = b;
    end
    @(posedge bin_done);
    repeat (10) @(negedge clk);
    check(n_out >= 10, $sformatf("2D outputs checked: %0d", n_out));
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
