// esf_event_fifo: small synchronous FIFO in front of the event binning stage.
//
// Events arrive whenever the sensor interface delivers them; the binning
// stage cannot take one in the cycle in which it closes a bin (its counters
// are compared and cleared then), so the FIFO absorbs the event stream while
// the downstream side stalls. Both sides use a valid/ready handshake in the
// AXI-stream style: a word moves when valid and ready are both high.
//
// Storage is a circular buffer of DEPTH words with read and write pointers
// one bit wider than the address, which tells full from empty. The head word
// is presented combinationally on out_data, so a word written into an empty
// FIFO can leave it one cycle later. in_ready is low only when the FIFO is
// full. Reset empties the FIFO; the storage array itself is not reset.
//
// The paper calls for "a small input FIFO"; the depth of 16 and the
// handshake details are this design's choices.
module esf_event_fifo #(
  parameter type         T     = logic [63:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  // write side
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  // read side
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  // status
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign level     = ($clog2(DEPTH)+1)'(wr_ptr - rd_ptr);
  assign in_ready  = (wr_ptr - rd_ptr) != (AW+1)'(DEPTH);
  assign out_valid = wr_ptr != rd_ptr;
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  // Handshake rules: a stalled output word stays put until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
  a_level_bound: assert property (@(posedge clk) disable iff (!rst_n)
    32'(level) <= DEPTH);
endmodule
