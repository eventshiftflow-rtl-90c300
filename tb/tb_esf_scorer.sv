// tb_esf_scorer: the trace scorer at its default size (N = 240, L = 16,
// J = 15: 31 lanes, 5 tree stages). Each trial loads a random grid holding a
// few features moving at known speeds plus random clutter, starts the
// scorer and compares every reported anchor (pixel order, winning j, R, H
// and the threshold decision) with a software evaluation of the trace,
// beta rule, tie rule and threshold, in both scoring modes. It also checks
// the paper's latency: results 21 cycles apart, done 21 cycles per occupied
// pixel after start, and the overrun pulse when a new bin starts early.
module tb_esf_scorer;
  import esf_pkg::*;
  localparam int unsigned N = 240, L = 16, J = 15, XW = 8, RW = 5, HW = 4, JW = 5;
  localparam int unsigned PER = 21;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, overrun, det_valid, det_hit;
  logic [N-1:0] occ;
  logic [L-1:0] grid [N];
  logic [4:0] theta_s;
  logic [3:0] beta;
  esf_score_mode_e mode;
  logic [XW-1:0] det_x;
  logic signed [JW-1:0] det_j;
  logic [RW-1:0] det_r;
  logic [HW-1:0] det_h;
  int checks = 0, failures = 0;
  int cyc = 0;

  esf_scorer #(.N(N), .L(L), .J(J)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  // Reference evaluation of one anchor.
  task automatic ref_anchor(input int x0, output int wj, output int wr, output int wh, output bit hit);
    int r [2*J+1], h [2*J+1], best, pa, pb, p;
    best = -1;
    for (int k = 0; k < 2*J+1; k++) begin
      r[k] = 0; h[k] = 0;
      for (int hh = 1; hh < L; hh++) begin
        p = x0 - (k - int'(J)) * hh;
        if (p >= 0 && p < N) begin h[k]++; r[k] += grid[p][L-1-hh]; end
      end
      if (h[k] >= beta) begin
        if (best < 0) best = k;
        else begin
          pa = (mode == SCORE_RAW) ? r[k] : r[k] * h[best];
          pb = (mode == SCORE_RAW) ? r[best] : r[best] * h[k];
          if (pa > pb || (pa == pb && iabs(k - int'(J)) < iabs(best - int'(J)))) best = k;
        end
      end
    end
    if (best < 0) begin hit = 0; wj = 0; wr = 0; wh = 0; return; end
    wj = best - int'(J); wr = r[best]; wh = h[best];
    hit = (mode == SCORE_RAW) ? (wr > theta_s) : (wr * L > theta_s * wh);
  endtask

  task automatic make_grid(int nfeat, int clutter_pct);
    for (int x = 0; x < N; x++)
      for (int l = 0; l < L; l++) grid[x][l] = ($urandom_range(0, 99) < clutter_pct);
    for (int f = 0; f < nfeat; f++) begin
      int p0, v, p;
      p0 = $urandom_range(0, N-1);
      v  = $urandom_range(0, 2*J) - int'(J);
      if (f % 2 == 0) v = $urandom_range(0, 8) - 4;
      for (int l = 0; l < L; l++) begin
        p = p0 - v * (L - 1 - l);
        if (p >= 0 && p < N) grid[p][l] = 1'b1;
      end
    end
    for (int x = 0; x < N; x++) occ[x] = grid[x][L-1];
  endtask

  task automatic run_trial(int nfeat, int clutter_pct);
    int na, t0, tprev, seen, wj, wr, wh;
    bit hit;
    int xs [$];
    make_grid(nfeat, clutter_pct);
    na = 0;
    for (int x = 0; x < N; x++) if (occ[x]) begin na++; xs.push_back(x); end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc; tprev = -1; seen = 0;
    while (!done) begin
      @(negedge clk);
      if (det_valid) begin
        int x;
        x = xs.pop_front();
        ref_anchor(x, wj, wr, wh, hit);
        check(det_x == XW'(x), $sformatf("anchor order: got %0d expected %0d", det_x, x));
        check(det_hit == hit, $sformatf("x=%0d hit %b expected %b", x, det_hit, hit));
        if (wh >= beta && wr > 0)
          check(det_j == JW'(wj) && det_r == RW'(wr) && det_h == HW'(wh),
                $sformatf("x=%0d j=%0d R=%0d H=%0d expected j=%0d R=%0d H=%0d", x, det_j, det_r, det_h, wj, wr, wh));
        if (tprev >= 0) check(cyc - tprev == PER, $sformatf("result spacing %0d", cyc - tprev));
        tprev = cyc;
        seen++;
      end
    end
    check(seen == na, $sformatf("results %0d for %0d occupied pixels", seen, na));
    if (na > 0) check(cyc - t0 == PER * na + 1, $sformatf("bin scoring took %0d cycles for %0d pixels", cyc - t0, na));
  endtask

  initial begin
    start = 0; occ = '0; theta_s = 8; beta = 4; mode = SCORE_NORM;
    foreach (grid[x]) grid[x] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // no occupied pixel: done one cycle after start
    run_trial(0, 0);
    for (int t = 0; t < 4; t++) begin
      mode = esf_score_mode_e'(t % 2);
      theta_s = (t < 2) ? 5'd8 : 5'd5;
      beta = (t < 2) ? 4'd4 : 4'd8;
      run_trial(6, 6);
    end
    // overrun: a second start while the first bin is still being scored
    make_grid(6, 10);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (50) @(negedge clk);
    check(busy, "busy during scoring");
    start = 1;
    @(negedge clk); start = 0;
    check(overrun, "overrun pulse on early start");
    while (!done) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
