// stream_fifo: synchronous first-in first-out queue with valid/ready handshakes.
//
// Building blocks inside a compute engine and consecutive compute engines are
// joined by FIFOs with handshake interfaces; this is that FIFO. A word moves
// on a port in every cycle where valid and ready are both high. Storage is a
// DEPTH-entry circular array with read and write pointers and an occupancy
// counter; in_ready is high while the FIFO is not full and out_valid while it
// is not empty. The output word is read straight from the array (first-word
// fall-through), so a word written in cycle t can leave in cycle t+1.
// Reset clears the pointers; the array itself needs no reset. The depth and
// the fall-through behaviour are this design's choices.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module stream_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = aws_pkg::idx_w(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A producer must hold its word until it is taken.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));

endmodule
