// tb_esf_vel_lut: checks the reset contents (entry j holds j), random
// writes and reads against a model table, and that out-of-range hypotheses
// neither write nor read an entry.
module tb_esf_vel_lut;
  localparam int unsigned J = 3, JW = 4, VW = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en;
  logic signed [JW-1:0] wr_j, rd_j;
  logic [VW-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  int model [2*J+1];

  esf_vel_lut #(.J(J), .JW(JW), .VW(VW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_en = 0; wr_j = '0; rd_j = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int j = -int'(J); j <= int'(J); j++) begin
      model[j + J] = j;
      rd_j = JW'(j); #1;
      check(rd_data == VW'(j), $sformatf("reset entry %0d = %0d", j, $signed(rd_data)));
    end
    for (int c = 0; c < 500; c++) begin
      int wj, rj;
      @(negedge clk);
      wj = $urandom_range(0, 2*J + 2) - int'(J) - 1;   // includes -J-1 and J+1
      rj = $urandom_range(0, 2*J + 2) - int'(J) - 1;
      wr_en = $urandom_range(0, 1); wr_j = JW'(wj); wr_data = VW'($urandom());
      rd_j = JW'(rj);
      #1;
      check(rd_data == ((rj >= -int'(J) && rj <= int'(J)) ? VW'(model[rj + J]) : '0),
            $sformatf("read %0d", rj));
      @(posedge clk);
      if (wr_en && wj >= -int'(J) && wj <= int'(J)) model[wj + J] = int'(wr_data);
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
