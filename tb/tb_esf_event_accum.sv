// tb_esf_event_accum: random events into a 16-pixel accumulator with 4-bit
// counters. A software count per pixel predicts each occupancy vector
// (count >= theta_e, counters saturating at 15), events given in the
// bin_done cycle must be ignored, out-of-range coordinates must be dropped,
// and occ_valid must follow bin_done by one cycle.
module tb_esf_event_accum;
  localparam int unsigned N = 16, CNT_W = 4, CW = 16;
  logic clk = 0, rst_n = 0;
  logic ev_valid, bin_done, occ_valid;
  logic [CW-1:0] ev_coord;
  logic [CNT_W-1:0] theta_e;
  logic [N-1:0] occ, expect_occ;
  int checks = 0, failures = 0;
  int cnt [N];

  esf_event_accum #(.N(N), .CNT_W(CNT_W), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    ev_valid = 0; bin_done = 0; ev_coord = '0; theta_e = 4;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int bin = 0; bin < 40; bin++) begin
      theta_e = CNT_W'($urandom_range(1, 12));
      for (int c = 0; c < 120; c++) begin
        @(negedge clk);
        ev_valid = $urandom_range(0, 3) != 0;
        // mostly in range, a few out of range, pixel 3 very busy (saturates)
        ev_coord = ($urandom_range(0, 9) == 0) ? CW'($urandom_range(N, 300))
                 : ($urandom_range(0, 3) == 0) ? CW'(3) : CW'($urandom_range(0, N-1));
        if (ev_valid && ev_coord < N) cnt[ev_coord]++;
      end
      @(negedge clk);
      // close the bin; an event offered now must not be counted
      bin_done = 1; ev_valid = 1; ev_coord = 5;
      for (int i = 0; i < N; i++) expect_occ[i] = ((cnt[i] > 15 ? 15 : cnt[i]) >= theta_e);
      @(negedge clk);
      bin_done = 0; ev_valid = 0;
      check(occ_valid == 1'b1, "occ_valid after bin_done");
      check(occ == expect_occ, $sformatf("bin %0d occ %h expected %h", bin, occ, expect_occ));
      foreach (cnt[i]) cnt[i] = 0;
      @(negedge clk);
      check(occ_valid == 1'b0, "occ_valid is a pulse");
      check(occ == expect_occ, "occ holds");
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
