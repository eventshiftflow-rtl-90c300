// tb_esf_cmp_tree: a 7-leaf tree (j = -3 .. +3, 3 stages) fed with a new
// random leaf set every cycle in both scoring modes. A reference arg-max
// (raw R, or R_a*H_b vs R_b*H_a; ties to smaller |j|, then to negative j;
// invalid leaves never win) predicts each winner, which must appear exactly
// 3 cycles later with its tag. Random ties are made likely on purpose.
module tb_esf_cmp_tree;
  import esf_pkg::*;
  localparam int unsigned NL = 7, RW = 4, HW = 3, JW = 3, TAGW = 8, S = 3;
  logic clk = 0, rst_n = 0;
  esf_score_mode_e mode;
  logic flush, in_valid, out_valid, win_ok;
  logic [TAGW-1:0] in_tag, out_tag;
  logic leaf_ok [NL];
  logic [RW-1:0] leaf_r [NL];
  logic [HW-1:0] leaf_h [NL];
  logic signed [JW-1:0] leaf_j [NL];
  logic [RW-1:0] win_r;
  logic [HW-1:0] win_h;
  logic signed [JW-1:0] win_j;
  int checks = 0, failures = 0;
  int exp_j [$], exp_tag [$];
  bit exp_ok [$];

  esf_cmp_tree #(.NL(NL), .RW(RW), .HW(HW), .JW(JW), .TAGW(TAGW)) dut (.*);

  always #5 clk = ~clk;

  function automatic bit better(int ra, int ha, int ja, int rb, int hb, int jb, esf_score_mode_e m);
    int pa, pb;
    pa = (m == SCORE_RAW) ? ra : ra * hb;
    pb = (m == SCORE_RAW) ? rb : rb * ha;
    if (pa != pb) return pa > pb;
    if ((ja < 0 ? -ja : ja) != (jb < 0 ? -jb : jb)) return (ja < 0 ? -ja : ja) < (jb < 0 ? -jb : jb);
    return ja < jb;
  endfunction

  initial begin
    flush = 0; in_valid = 0; in_tag = '0; mode = SCORE_RAW;
    for (int i = 0; i < NL; i++) begin
      leaf_ok[i] = 0; leaf_r[i] = '0; leaf_h[i] = '0; leaf_j[i] = JW'(i - 3);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int best;
      @(negedge clk);
      // compare the output with the prediction made S cycles ago
      if (exp_j.size() == S) begin
        int ej, et; bit eo;
        ej = exp_j.pop_front(); et = exp_tag.pop_front(); eo = exp_ok.pop_front();
        checks++;
        if (!out_valid || out_tag != TAGW'(et) || win_ok != eo || (eo && win_j != JW'(ej))) begin
          failures++;
          $display("FAIL: cycle %0d got v=%b tag=%0d ok=%b j=%0d expected tag=%0d ok=%b j=%0d",
                   c, out_valid, out_tag, win_ok, win_j, et, eo, ej);
        end
      end
      // the mode is a static setting: change it only with the pipeline's
      // predictions discarded
      if (c % 1000 == 0) begin
        mode = esf_score_mode_e'(c / 1000 % 2);
        exp_j.delete(); exp_tag.delete(); exp_ok.delete();
      end
      in_valid = 1; in_tag = TAGW'(c);
      best = -1;
      for (int i = 0; i < NL; i++) begin
        leaf_ok[i] = $urandom_range(0, 5) != 0;
        leaf_r[i]  = RW'($urandom_range(0, 4));
        leaf_h[i]  = HW'($urandom_range(1, 4));
        if (leaf_ok[i] && (best < 0 || better(leaf_r[i], leaf_h[i], i - 3,
                                              leaf_r[best], leaf_h[best], best - 3, mode)))
          best = i;
      end
      exp_j.push_back(best - 3); exp_tag.push_back(c); exp_ok.push_back(best >= 0);
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
