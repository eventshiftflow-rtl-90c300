// tb_esf_density_ctrl: 20-pixel controller with dt limits 8 .. 64 and a
// 2-bin adaptation period. Occupancy vectors of chosen density check that
// dt doubles below 10 % (fewer than 2 pixels), halves above 40 % (more than
// 8 pixels), stays inside the band, respects the clamps and the hold-off,
// and never moves when adapt_en is low.
module tb_esf_density_ctrl;
  localparam int unsigned N = 20, DT_W = 16;
  logic clk = 0, rst_n = 0;
  logic [DT_W-1:0] cfg_dt_init, dt_cycles;
  logic adapt_en, occ_valid, adj_up, adj_down, in_hold;
  logic [N-1:0] occ;
  logic [$clog2(N+1)-1:0] density;
  int checks = 0, failures = 0;
  int model_dt, hold;

  esf_density_ctrl #(.N(N), .DT_W(DT_W), .DT_MIN(8), .DT_MAX(64), .HOLD_BINS(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one bin with k occupied pixels
  task automatic bin(int k);
    logic [N-1:0] v = '0;
    int up, dn;
    for (int i = 0; i < k; i++) v[(i * 7) % N] = 1'b1;
    @(negedge clk);
    occ = v; occ_valid = 1;
    #1 check(density == k, $sformatf("popcount %0d expected %0d", density, k));
    up = 0; dn = 0;
    if (hold > 0) hold--;
    else if (adapt_en && k * 10 < N && model_dt < 64) begin
      model_dt = (model_dt * 2 > 64) ? 64 : model_dt * 2; hold = 2; up = 1;
    end else if (adapt_en && k * 5 > 2 * N && model_dt > 8) begin
      model_dt = (model_dt / 2 < 8) ? 8 : model_dt / 2; hold = 2; dn = 1;
    end
    @(negedge clk);
    occ_valid = 0;
    check(dt_cycles == model_dt, $sformatf("dt %0d expected %0d (k=%0d)", dt_cycles, model_dt, k));
    check(adj_up == up && adj_down == dn, "adjust pulses");
    check(in_hold == (hold > 0), "hold flag");
    repeat (2) @(negedge clk);
  endtask

  initial begin
    cfg_dt_init = 16; adapt_en = 1; occ_valid = 0; occ = '0;
    model_dt = 16; hold = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(dt_cycles == 16, "initial dt");
    bin(1);  bin(1); bin(1);            // low: up to 32, then two held bins
    bin(0);                             // up to 64
    bin(0); bin(0); bin(0);             // held twice, then clamped at 64
    bin(5);                             // in band
    bin(12); bin(12); bin(12); bin(12); // down to 32, hold, hold, down to 16
    bin(9); bin(9); bin(20); bin(20); bin(20); bin(20); bin(20); // clamp at 8
    bin(8); bin(2);                     // 40 % and 10 % exactly are in band
    adapt_en = 0;
    for (int i = 0; i < 12; i++) bin($urandom_range(0, N));
    adapt_en = 1;
    for (int i = 0; i < 40; i++) bin($urandom_range(0, N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
