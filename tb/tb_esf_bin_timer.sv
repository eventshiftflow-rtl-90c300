// tb_esf_bin_timer: checks that bin_done pulses exactly every dt_cycles
// cycles, that a changed dt_cycles takes effect at the next bin, and that
// bin_index counts the completed bins.
module tb_esf_bin_timer;
  logic clk = 0, rst_n = 0;
  logic [31:0] dt_cycles, count;
  logic bin_done;
  logic [15:0] bin_index;
  int checks = 0, failures = 0;
  int last_pulse, cyc, npulse;
  int expect_dt;

  esf_bin_timer #(.DT_W(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    dt_cycles = 7;
    expect_dt = 7;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0; last_pulse = -1; npulse = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (bin_done) begin
        if (last_pulse >= 0) check(cyc - last_pulse == expect_dt, $sformatf("period %0d, expected %0d", cyc - last_pulse, expect_dt));
        else check(cyc == expect_dt - 1, "first bin length");
        last_pulse = cyc;
        npulse++;
        check(bin_index == 16'(npulse - 1), "bin index");
        // a new length, written after the clock edge that ends a bin,
        // applies to the bin that has just begun
        if (npulse == 20) begin @(posedge clk); #1 dt_cycles = 3; expect_dt = 3; end
        if (npulse == 40) begin @(posedge clk); #1 dt_cycles = 12; expect_dt = 12; end
      end
      cyc++;
    end
    check(npulse > 45, "enough bins seen");
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
