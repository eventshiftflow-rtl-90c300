// esf_bin_timer: the time-bin clock of the core.
//
// A free-running counter increments every clock cycle. When it reaches
// dt_cycles-1 it returns to zero and bin_done pulses high for that one cycle,
// so a bin lasts exactly dt_cycles clock cycles (dt / T_clk, as in the
// paper's compare-and-reset counter; no modulo logic). dt_cycles may change
// at any time; the new length applies from the next compare. The compare is
// ">=" rather than "==", so lowering dt_cycles below the current count ends
// the bin at once instead of letting the counter run on. A dt_cycles of 0
// behaves as 1.
//
// bin_index counts completed bins (wrapping); it is for observation only.
module esf_bin_timer #(
  parameter int unsigned DT_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [DT_W-1:0] dt_cycles,
  output logic            bin_done,
  output logic [DT_W-1:0] count,
  output logic [15:0]     bin_index
);
  always_comb bin_done = (count + 1'b1) >= dt_cycles;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      bin_index <= '0;
    end else if (bin_done) begin
      count     <= '0;
      bin_index <= bin_index + 1'b1;
    end else begin
      count <= count + 1'b1;
    end
  end
endmodule
