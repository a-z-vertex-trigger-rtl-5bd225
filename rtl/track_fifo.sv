// track_fifo: queue of 2D tracks waiting for the prediction chain.
//
// The 2D trigger separates the tracks of an event and the neural trigger
// handles them one by one (paper); this synchronous FIFO holds the tracks that
// arrive while the chain is busy. Ready/valid on both sides: a word is written
// when in_valid && in_ready and read when out_valid && out_ready. in_ready is
// low when the FIFO is full (backpressure to the link). First-word
// fall-through: out_data shows the head of the queue whenever out_valid is set.
// Depth and the data type are this design's choice; the paper gives neither.
//
// The assertions use the asynchronous reset in their disable iff; lint notes
// the reset as used in both an asynchronous and a synchronous context, which
// concerns only the assertions.
module track_fifo #(
  parameter type T     = logic [23:0],
  parameter int  DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (int'(count) < DEPTH);
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      end
      if (pop) begin
        rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      end
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // A full FIFO never accepts and an empty one never delivers.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) int'(count) <= DEPTH);
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);

endmodule
