// tb_esf_hyp_lane: three lanes (j = +3, -2, 0) on a 16-pixel, 8-bin random
// grid. For random anchors x0 the testbench drives the grid columns the way
// the scorer does (step h gets column L-1-h) and compares R and H after the
// L-1 steps with a direct evaluation of the diagonal trace, including traces
// that leave the sensor early.
module tb_esf_hyp_lane;
  localparam int unsigned N = 16, L = 8, XW = 4, RW = 4, HW = 3;
  localparam int JV [3] = '{3, -2, 0};
  logic clk = 0, rst_n = 0;
  logic load, step;
  logic [XW-1:0] x0;
  logic [N-1:0] col;
  logic [RW-1:0] r [3];
  logic [HW-1:0] h [3];
  logic [N-1:0] g [L];      // g[l][x]
  int checks = 0, failures = 0;

  for (genvar k = 0; k < 3; k++) begin : g_l
    esf_hyp_lane #(.N(N), .L(L), .J_VAL(JV[k]), .XW(XW), .RW(RW), .HW(HW)) dut (
      .clk, .rst_n, .load, .x0, .step, .col, .r(r[k]), .h(h[k]));
  end

  always #5 clk = ~clk;

  initial begin
    load = 0; step = 0; x0 = '0; col = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      foreach (g[l]) g[l] = N'($urandom() & $urandom());
      @(negedge clk);
      x0 = XW'($urandom_range(0, N-1)); load = 1;
      @(negedge clk);
      load = 0;
      for (int hh = 1; hh < L; hh++) begin
        step = 1; col = g[L-1-hh];
        @(negedge clk);
      end
      step = 0;
      for (int k = 0; k < 3; k++) begin
        int er, eh, p;
        er = 0; eh = 0;
        for (int hh = 1; hh < L; hh++) begin
          p = int'(x0) - JV[k] * hh;
          if (p >= 0 && p < N) begin eh++; er += g[L-1-hh][p]; end
        end
        checks++;
        if (r[k] != er || h[k] != eh) begin
          failures++;
          $display("FAIL: j=%0d x0=%0d R=%0d H=%0d expected R=%0d H=%0d", JV[k], x0, r[k], h[k], er, eh);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
