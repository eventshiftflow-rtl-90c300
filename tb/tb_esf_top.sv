// tb_esf_top: end-to-end test of the two-axis core at a reduced size
// (32 x 24 sensor, L = 8, J = 3, dt limits 200 .. 1600 cycles, 2-bin
// adaptation period).
//
// Phase A: the outline of an 8 x 8 square moves +2 pixels per bin in x and
// +1 in y; every outline pixel fires 2 events per bin, plus sub-threshold
// noise away from the square's side columns. Once the grids hold a full
// history, every 2D output must be one of the two side columns with
// j_x = +2, the associated j_y = +1 (from the top and bottom rows), the
// median row 3 below the top edge and 8 rows with events. The x velocity
// table is rewritten so that j = +2 reads 200.
// Phase B: adaptive bins on; a sparse scene must lengthen dt, a dense one
// must shorten it.
// Phase C: after a reset, a bin far shorter than the scoring time must
// raise the overrun flags.
// Each mechanism (FIFO stall at a bin boundary, detection, rejection,
// association with a y estimate, velocity table read, dt up, dt down,
// overrun) is counted and must have happened at least once.
module tb_esf_top;
  import esf_pkg::*;
  localparam int unsigned NX = 32, NY = 24, L = 8, J = 3, JW = 3, VW = 16;
  localparam int unsigned XW = 5, YW = 5, RW = 4, HW = 3;
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
  logic [$clog2(NX+1)-1:0] density;
  logic adj_up, adj_down, bin_done, overrun_x, overrun_y, overrun_assoc, assoc_done;
  logic [15:0] bin_index;

  int checks = 0, failures = 0;
  int n_stall = 0, n_hit = 0, n_reject = 0, n_assoc = 0, n_lut = 0;
  int n_up = 0, n_down = 0, n_overrun = 0;
  int sq_x, sq_y;          // square position of the bin being filled
  int cl_x, cl_y;          // square position of the last closed bin
  int nbins_motion;
  bit phase_a;

  esf_top #(.NX(NX), .NY(NY), .L(L), .J(J), .DT_MIN(200), .DT_MAX(1600), .HOLD_BINS(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int x, int y);
    @(negedge clk);
    ev_valid = 1;
    ev_data = '{t: 32'(bin_index), x: 16'(x), y: 15'(y), p: 1'b1};
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    #1 ev_valid = 0;
  endtask

  task automatic square_events(int x0, int y0, int k);
    for (int rep = 0; rep < k; rep++)
      for (int i = 0; i < 8; i++) begin
        send(x0 + i, y0);          // top edge
        send(x0 + i, y0 + 7);      // bottom edge
        if (i > 0 && i < 7) begin
          send(x0, y0 + i);        // left edge
          send(x0 + 7, y0 + i);    // right edge
        end
      end
  endtask

  // counters and output checks
  always @(negedge clk) if (rst_n) begin
    if (bin_done && dut.f_valid) n_stall++;
    if (xdet_valid && xdet_hit) n_hit++;
    if (xdet_valid && !xdet_hit) n_reject++;
    if (adj_up) n_up++;
    if (adj_down) n_down++;
    if (overrun_x || overrun_y || overrun_assoc) n_overrun++;
    if (out_valid && phase_a) begin
      if (out_jy_ok) n_assoc++;
      if (nbins_motion > L + 1) begin
        check(out_x == XW'(cl_x) || out_x == XW'(cl_x + 7),
              $sformatf("output column %0d, square at %0d", out_x, cl_x));
        check(out_jx == 2 && out_jy_ok && out_jy == 1,
              $sformatf("x=%0d jx=%0d jy_ok=%b jy=%0d", out_x, out_jx, out_jy_ok, out_jy));
        check(out_ny == 8 && out_y == YW'(cl_y + 3),
              $sformatf("x=%0d rows %0d median %0d (top %0d)", out_x, out_ny, out_y, cl_y));
        check(out_vx == 16'd200 && out_vy == 16'd1, $sformatf("velocities %0d %0d", out_vx, out_vy));
        n_lut++;
      end
    end
  end

  initial begin
    ev_valid = 0; ev_data = '0;
    lut_wr_en = 0; lut_wr_axis = 0; lut_wr_j = '0; lut_wr_data = '0;
    cfg = '{dt_init: 32'd400, theta_e: 8'd12, theta_s: 5'd4, beta: 4'd4,
            mode: SCORE_NORM, adapt_en: 1'b0};
    phase_a = 1; nbins_motion = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // velocity table: x entry for j = +2 reads 200
    @(negedge clk);
    lut_wr_en = 1; lut_wr_axis = 0; lut_wr_j = 3'sd2; lut_wr_data = 16'd200;
    @(negedge clk);
    lut_wr_en = 0;

    // ---------------- phase A: moving square, fixed bins
    @(posedge bin_done);
    for (int b = 0; b < 14; b++) begin
      sq_x = 2 + 2 * b; sq_y = 2 + b;
      square_events(sq_x, sq_y, 2);
      // sub-threshold noise, away from the side columns
      for (int n = 0; n < 10; n++) begin
        int nx;
        nx = $urandom_range(0, NX - 1);
        if (nx != sq_x && nx != sq_x + 7) send(nx, $urandom_range(0, NY - 1));
      end
      @(posedge bin_done);
      cl_x = sq_x; cl_y = sq_y;
      nbins_motion++;
    end
    @(posedge bin_done);
    phase_a = 0;

    // ---------------- phase B: adaptive bin length
    cfg.adapt_en = 1;
    for (int b = 0; b < 4; b++) begin           // 2 busy columns of 32: 6 %
      square_events(4, 4, 2);
      @(posedge bin_done);
    end
    check(dt_cycles > 400, $sformatf("dt grew to %0d", dt_cycles));
    for (int b = 0; b < 6; b++) begin           // 16 busy columns: 50 %
      for (int x = 0; x < 16; x++)
        for (int k = 0; k < 12; k++) send(2 * x, k);
      @(posedge bin_done);
    end
    check(n_down > 0, "dt shortened");

    // ---------------- phase C: bins shorter than the scoring time
    @(negedge clk);
    rst_n = 0;
    cfg = '{dt_init: 32'd20, theta_e: 8'd1, theta_s: 5'd4, beta: 4'd4,
            mode: SCORE_RAW, adapt_en: 1'b0};
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) send($urandom_range(0, NX - 1), $urandom_range(0, NY - 1));
    repeat (50) @(negedge clk);

    check(n_stall > 0, "FIFO stalled at a bin boundary");
    check(n_hit > 0, "detections");
    check(n_reject > 0, "rejected anchors");
    check(n_assoc > 0, "2D outputs with a y estimate");
    check(n_lut > 0, "velocity table read");
    check(n_up > 0, "dt lengthened");
    check(n_down > 0, "dt shortened");
    check(n_overrun > 0, "overrun");
    $display("mechanisms: stall=%0d hit=%0d reject=%0d assoc=%0d lut=%0d up=%0d down=%0d overrun=%0d",
             n_stall, n_hit, n_reject, n_assoc, n_lut, n_up, n_down, n_overrun);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
