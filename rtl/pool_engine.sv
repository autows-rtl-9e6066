// pool_engine: a max-pooling CE of the layer-wise pipeline.
//
// A CE without weights memory: the same input buffer as a convolution CE
// (sliding_window) gathers a K x K window of each CP-channel activation
// word, and a row of CP comparator trees takes the signed maximum over the
// K*K window positions of each channel. The result is registered, so one
// output word of CP*LA bits leaves per window, one cycle after the window
// is formed, at one word per cycle when the output is ready.
// Interface: valid/ready streams in and out. Input words (CP*LA bits) come
// in the order batch, row, column, channel group (CT groups of CP channels,
// fastest); output words come in the same order over the
// (H-K+1) x (W-K+1) plane, channel group ct, lane cp = channel ct*CP + cp.
// Following the paper: pooling CEs reuse the input buffer, and the PE array
// handles element-wise operations when there is no weights memory. This
// design's choices: max pooling, stride 1 and no padding (as in the
// convolution CE), and the register after the comparators.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module pool_engine #(
  parameter int unsigned LA = 5,
  parameter int unsigned CP = 4,
  parameter int unsigned H  = 6,
  parameter int unsigned W  = 6,
  parameter int unsigned CT = 2,
  parameter int unsigned K  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [CP*LA-1:0]   in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [CP*LA-1:0]   out_data
);
  logic                   win_valid, win_ready;
  logic [K*K*CP*LA-1:0]   win_data;
  logic [CP*LA-1:0]       max_d;

  sliding_window #(.LA(LA), .CP(CP), .H(H), .W(W), .CT(CT), .K(K)) u_in_buf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .out_valid (win_valid),
    .out_ready (win_ready),
    .out_data  (win_data)
  );

  // Per-channel maximum over the window.
  always_comb begin
    for (int cp = 0; cp < int'(CP); cp++) begin
      automatic logic signed [LA-1:0] m = win_data[cp*LA +: LA];
      for (int e = 1; e < int'(K*K); e++)
        if ($signed(win_data[(e*int'(CP) + cp)*LA +: LA]) > m)
          m = win_data[(e*int'(CP) + cp)*LA +: LA];
      max_d[cp*LA +: LA] = m;
    end
  end

  assign win_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (win_valid && win_ready) out_data <= max_d;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)         out_valid <= 1'b0;
    else if (win_ready) out_valid <= win_valid;
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
