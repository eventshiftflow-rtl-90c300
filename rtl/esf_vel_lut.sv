// esf_vel_lut: hypothesis-to-velocity lookup table.
//
// The winning hypothesis j* is a displacement in pixels per bin; the
// physical velocity is j* / dt. Rather than divide, the core looks the
// velocity up in a table of 2J+1 entries, one per hypothesis, which the host
// fills for its bin length (and may refill whenever it changes dt). Entries
// are VW-bit words in whatever unit the host chooses; the core only stores
// and returns them.
//
// Write port: wr_en with wr_j (signed hypothesis, -J .. +J) and wr_data,
// taken on the clock edge; a wr_j outside the range is ignored. Read port:
// rd_j selects an entry combinationally; rd_data follows in the same cycle.
// After reset entry j holds j itself (velocity in pixels per bin), so the
// table is usable before the host writes it. The reset contents, the port
// shapes and VW are this design's choices; the paper gives only the table's
// purpose.
module esf_vel_lut #(
  parameter int unsigned J  = 15,
  parameter int unsigned JW = $clog2(J + 1) + 1,
  parameter int unsigned VW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic signed [JW-1:0] wr_j,
  input  logic [VW-1:0]        wr_data,
  input  logic signed [JW-1:0] rd_j,
  output logic [VW-1:0]        rd_data
);
  localparam int unsigned NL = 2 * J + 1;
  localparam int unsigned AW = $clog2(NL);

  logic [VW-1:0] tbl [NL];
  logic [AW-1:0] wa, ra;
  logic          w_in, r_in;

  assign w_in = (wr_j >= -$signed(JW'(J))) && (wr_j <= $signed(JW'(J)));
  assign r_in = (rd_j >= -$signed(JW'(J))) && (rd_j <= $signed(JW'(J)));
  assign wa   = AW'(wr_j + $signed(JW'(J)));
  assign ra   = AW'(rd_j + $signed(JW'(J)));
  assign rd_data = r_in ? tbl[ra] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NL; i++) tbl[i] <= VW'(i - int'(J));
    end else if (wr_en && w_in) begin
      tbl[wa] <= wr_data;
    end
  end
endmodule
