// esf_occ_grid: the spatiotemporal occupancy grid of one axis.
//
// N shift registers of L bits each hold the occupancy vectors of the L most
// recent time bins. grid[x][l] is pixel x in bin l, with l = L-1 the newest
// bin and l = 0 the oldest. When shift_en is high, every register moves by
// one place in the same clock cycle, grid[x][l] <= grid[x][l+1], and the new
// occupancy bit occ_in[x] enters at l = L-1; the oldest bit is dropped.
// There is no addressing and no RAM: the whole grid is flip-flops with a
// common enable, and every bit is readable at once on the grid output, which
// gives the scorer as many read ports as it has hypothesis lanes.
//
// All of this follows the paper. Reset clears the grid (this design's
// choice).
module esf_occ_grid #(
  parameter int unsigned N = 240,
  parameter int unsigned L = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift_en,
  input  logic [N-1:0]     occ_in,
  output logic [L-1:0]     grid [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int x = 0; x < N; x++) grid[x] <= '0;
    end else if (shift_en) begin
      for (int x = 0; x < N; x++) grid[x] <= {occ_in[x], grid[x][L-1:1]};
    end
  end
endmodule
