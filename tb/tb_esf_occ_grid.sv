// tb_esf_occ_grid: shifts random occupancy vectors into an 8 x 4 grid and
// compares every bit with a model of Eqs. (2)-(3): on shift the columns move
// one place toward l = 0 and the new vector enters at l = L-1; without
// shift_en the grid holds.
module tb_esf_occ_grid;
  localparam int unsigned N = 8, L = 4;
  logic clk = 0, rst_n = 0;
  logic shift_en;
  logic [N-1:0] occ_in;
  logic [L-1:0] grid [N];
  logic [N-1:0] hist [L];    // model: hist[l] = column l
  int checks = 0, failures = 0;

  esf_occ_grid #(.N(N), .L(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    shift_en = 0; occ_in = '0;
    foreach (hist[l]) hist[l] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      shift_en = $urandom_range(0, 2) != 0;
      occ_in   = N'($urandom());
      @(posedge clk);
      if (shift_en) begin
        for (int l = 0; l < L - 1; l++) hist[l] = hist[l+1];
        hist[L-1] = occ_in;
      end
      #1;
      for (int x = 0; x < N; x++)
        for (int l = 0; l < L; l++) begin
          checks++;
          if (grid[x][l] !== hist[l][x]) begin
            failures++;
            $display("FAIL: cycle %0d G[%0d,%0d]=%b expected %b", c, x, l, grid[x][l], hist[l][x]);
          end
        end
    end
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
