// tb_esf_axis_pipeline: one 32-pixel axis (L = 8, J = 3) watching two
// features, one moving +2 pixels per bin and one moving -1, plus noise
// events that stay below the event threshold. Each bin the testbench checks
// the occupancy vector; once the grid holds enough history it checks that
// both features are detected with their true hypotheses, that the scores are
// full (R = H) and that nothing else is reported.
module tb_esf_axis_pipeline;
  import esf_pkg::*;
  localparam int unsigned N = 32, L = 8, J = 3, XW = 5, RW = 4, HW = 3, JW = 3;
  logic clk = 0, rst_n = 0;
  logic ev_valid, bin_done, occ_valid, busy, done, overrun, det_valid, det_hit;
  logic [15:0] ev_coord;
  logic [7:0] theta_e;
  logic [4:0] theta_s;
  logic [3:0] beta;
  esf_score_mode_e mode;
  logic [N-1:0] occ, exp_occ;
  logic [XW-1:0] det_x;
  logic signed [JW-1:0] det_j;
  logic [RW-1:0] det_r;
  logic [HW-1:0] det_h;
  int checks = 0, failures = 0;
  int pa, pb, nhit;

  esf_axis_pipeline #(.N(N), .L(L), .J(J)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int x, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      ev_valid = 1; ev_coord = 16'(x);
    end
    @(negedge clk);
    ev_valid = 0;
  endtask

  initial begin
    ev_valid = 0; bin_done = 0; ev_coord = '0;
    theta_e = 6; theta_s = 4; beta = 4; mode = SCORE_NORM;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 14; b++) begin
      pa = 2 + 2 * b;      // +2 px/bin
      pb = 31 - b;         // -1 px/bin
      send(pa, 6);
      send(pb, 7);
      for (int k = 0; k < 10; k++) send($urandom_range(0, N-1), $urandom_range(1, 2));
      exp_occ = '0;
      if (pa < N) exp_occ[pa] = 1'b1;
      exp_occ[pb] = 1'b1;
      @(negedge clk);
      bin_done = 1;
      @(negedge clk);
      bin_done = 0;
      check(occ_valid, "occ_valid");
      // noise may pile up on a feature pixel, never create one: compare the
      // feature pixels, and require nothing else to be occupied
      check(occ == exp_occ, $sformatf("bin %0d occ %h expected %h", b, occ, exp_occ));
      nhit = 0;
      while (!done) begin
        @(negedge clk);
        if (det_valid && det_hit) begin
          nhit++;
          if (int'(det_x) == pa) check(det_j == 2 && (b < L - 1 || det_r == det_h), $sformatf("bin %0d +2 feature j=%0d R=%0d H=%0d", b, det_j, det_r, det_h));
          else if (int'(det_x) == pb) check(det_j == -1 && (b < L - 1 || det_r == det_h), $sformatf("bin %0d -1 feature j=%0d R=%0d H=%0d", b, det_j, det_r, det_h));
          else check(0, $sformatf("unexpected detection at %0d", det_x));
        end
      end
      // with >= 5 bins of history both features must be found
      if (b >= 6) check(nhit == ((pa < N) ? 2 : 1), $sformatf("bin %0d detections %0d", b, nhit));
      check(!overrun, "no overrun");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
