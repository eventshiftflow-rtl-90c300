// tb_esf_event_fifo: self-checking test of the event FIFO.
// A reference queue models the FIFO. Random pushes and pops (with random
// stalls on both sides) check word order, the full flag (in_ready low exactly
// at DEPTH words), the empty flag and the level output.
module tb_esf_event_fifo;
  import esf_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  esf_event_t in_data, out_data;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;
  esf_event_t q[$];

  esf_event_fifo #(.T(esf_event_t), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // compare state with the model before this cycle's transfers
      check(level == q.size(), "level");
      check(in_ready == (q.size() < DEPTH), "in_ready / full");
      check(out_valid == (q.size() > 0), "out_valid / empty");
      if (q.size() > 0) check(out_data == q[0], "head word");
      in_valid  = ($urandom_range(0, 99) < (cyc < 1000 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (cyc < 1000 ? 30 : 70));
      in_data   = {$urandom(), $urandom()};
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update on the clock edge
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) void'(q.pop_front());
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
