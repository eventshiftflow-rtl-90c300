// tb_esf_y_assoc: 8 x 12 sensor, J = 3. Each bin the testbench sends random
// events, closes the bin, then plays random x and y detections as the two
// scorers would and pulses their done signals. For every x detection the
// block must report, in column order, the median row of the rows that had
// events in that column, the lower median of the y hypotheses over those
// rows, and the row count. The events of the following bin are sent while
// the association of the previous one runs, to check the two map banks. A
// last bin is closed early to check the overrun pulse.
module tb_esf_y_assoc;
  localparam int unsigned NX = 8, NY = 12, J = 3, CW = 16, XW = 3, YW = 4, JW = 3;
  logic clk = 0, rst_n = 0;
  logic ev_valid, bin_done, xd_valid, xd_hit, x_done, yd_valid, yd_hit, y_done;
  logic [CW-1:0] ev_x, ev_y;
  logic [XW-1:0] xd_x;
  logic [YW-1:0] yd_y;
  logic signed [JW-1:0] xd_j, yd_j;
  logic out_valid, out_jy_ok, busy, done, overrun;
  logic [XW-1:0] out_x;
  logic signed [JW-1:0] out_jx, out_jy;
  logic [YW-1:0] out_y;
  logic [YW:0] out_ny;
  int checks = 0, failures = 0;
  bit map_cur [NX][NY], map_prev [NX][NY];
  int xj [NX], yj [NY];
  bit xh [NX], yh [NY];
  int exp_x [$];
  int nout;
  bit seen_done;
  always @(posedge clk) if (done) seen_done = 1;

  esf_y_assoc #(.NX(NX), .NY(NY), .J(J), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic events(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      ev_valid = 1;
      ev_x = CW'($urandom_range(0, NX)); // NX itself is out of range
      ev_y = CW'($urandom_range(0, NY - 1));
      if (ev_x < NX) map_cur[ev_x][ev_y] = 1;
    end
    @(negedge clk);
    ev_valid = 0;
  endtask

  task automatic close_bin();
    @(negedge clk);
    bin_done = 1;
    @(negedge clk);
    bin_done = 0;
    map_prev = map_cur;
    foreach (map_cur[x, y]) map_cur[x][y] = 0;
  endtask

  task automatic detections();
    for (int x = 0; x < NX; x++) begin
      xh[x] = $urandom_range(0, 2) != 0; xj[x] = $urandom_range(0, 2*J) - J;
    end
    for (int y = 0; y < NY; y++) begin
      yh[y] = $urandom_range(0, 2) != 0; yj[y] = $urandom_range(0, 2*J) - J;
    end
    exp_x.delete();
    for (int x = 0; x < NX; x++) begin
      @(negedge clk);
      xd_valid = 1; xd_hit = xh[x]; xd_x = XW'(x); xd_j = JW'(xj[x]);
      if (xh[x]) exp_x.push_back(x);
      if (x < NY) begin yd_valid = 1; yd_hit = yh[x]; yd_y = YW'(x); yd_j = JW'(yj[x]); end
    end
    for (int y = NX; y < NY; y++) begin
      @(negedge clk);
      xd_valid = 0;
      yd_valid = 1; yd_hit = yh[y]; yd_y = YW'(y); yd_j = JW'(yj[y]);
    end
    @(negedge clk);
    xd_valid = 0; yd_valid = 0;
    x_done = 1; y_done = 1;
    @(negedge clk);
    x_done = 0; y_done = 0;
  endtask

  // reference for one column
  task automatic expect_col(int x, output int my, output int ny, output bit ok, output int mj);
    int ys [$], js [$];
    for (int y = 0; y < NY; y++) if (map_prev[x][y]) begin
      ys.push_back(y);
      if (yh[y]) js.push_back(yj[y]);
    end
    ny = ys.size();
    my = (ny > 0) ? ys[(ny + 1) / 2 - 1] : 0;
    // lower median by counting: the smallest v with at least ceil(n/2)
    // values <= v
    mj = 0;
    for (int v = J; v >= -int'(J); v--) begin
      int c;
      c = 0;
      foreach (js[i]) if (js[i] <= v) c++;
      if (c >= (js.size() + 1) / 2) mj = v;
    end
    ok = js.size() > 0;
  endtask

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    int x, my, ny, mj;
    bit ok;
    nout++;
    if (exp_x.size() == 0) check(0, "unexpected output");
    else begin
      x = exp_x.pop_front();
      expect_col(x, my, ny, ok, mj);
      check(out_x == XW'(x) && out_jx == JW'(xj[x]), $sformatf("column %0d/%0d jx %0d", out_x, x, out_jx));
      check(out_ny == ny && (ny == 0 || out_y == YW'(my)), $sformatf("x=%0d rows %0d median y %0d, expected %0d %0d", x, out_ny, out_y, ny, my));
      check(out_jy_ok == ok && (!ok || out_jy == JW'(mj)), $sformatf("x=%0d jy ok=%b %0d, expected %b %0d", x, out_jy_ok, out_jy, ok, mj));
    end
  end

  initial begin
    ev_valid = 0; bin_done = 0; ev_x = '0; ev_y = '0;
    xd_valid = 0; xd_hit = 0; xd_x = '0; xd_j = '0; x_done = 0;
    yd_valid = 0; yd_hit = 0; yd_y = '0; yd_j = '0; y_done = 0;
    nout = 0;
    foreach (map_cur[x, y]) map_cur[x][y] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    events(40);
    for (int b = 0; b < 30; b++) begin
      int want;
      close_bin();
      detections();
      want = exp_x.size();
      nout = 0;
      seen_done = 0;
      // the next bin's events arrive while the association runs
      events($urandom_range(10, 60));
      while (!seen_done) @(negedge clk);
      @(negedge clk);
      check(nout == want, $sformatf("bin %0d outputs %0d expected %0d", b, nout, want));
    end
    // overrun: close a bin while the association is busy
    close_bin();
    detections();
    repeat (5) @(negedge clk);
    if (exp_x.size() > 0) begin
      check(busy, "busy during association");
      exp_x.delete();
      @(negedge clk); bin_done = 1;
      @(negedge clk); bin_done = 0;
      check(overrun, "overrun pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
