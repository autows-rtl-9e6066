// sliding_window: the CE input buffer ("kernel gathering").
//
// Activations arrive one word per handshake, each word holding CP channels of
// LA bits, in the order batch, row (H), column (W), channel group (CT), the
// channel group changing fastest. A K x K window slides over the H x W plane
// with stride 1 and no padding, so the output plane is (H-K+1) x (W-K+1).
// The window is gathered with one shift register of ((K-1)*W + K-1)*CT + 1
// words: the word that entered d words ago sits at tap d, so window position
// (ki, kj) of the current channel group is tap ((K-1-ki)*W + (K-1-kj))*CT.
// Every input word shifts the register; when the word completes a valid window
// position (row >= K-1 and column >= K-1) the output becomes valid and shows
// the K*K*CP words of that window, laid out as
//   out_data[((ki*K + kj)*CP + cp)*LA +: LA].
// Input is accepted whenever no window is waiting or the waiting one is being
// taken, so one window leaves per cycle at full rate (latency 1 cycle).
// The shift-register structure and the input/output widths c_p*L_A and
// c_p*k^2*L_A follow the paper; stride 1, no padding and k_p = k (the whole
// window produced at once, k_t = 1) are this design's choices.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module sliding_window #(
  parameter int unsigned LA = 5,
  parameter int unsigned CP = 2,
  parameter int unsigned H  = 8,
  parameter int unsigned W  = 8,
  parameter int unsigned CT = 2,
  parameter int unsigned K  = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CP*LA-1:0]      in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [K*K*CP*LA-1:0]  out_data
);
  localparam int unsigned SR_LEN = ((K-1)*W + (K-1))*CT + 1;

  logic [CP*LA-1:0] sr [SR_LEN];
  logic [aws_pkg::idx_w(CT)-1:0] ct;
  logic [aws_pkg::idx_w(W)-1:0]  col;
  logic [aws_pkg::idx_w(H)-1:0]  row;
  logic accept;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;

  // Shift register: tap 0 holds the newest word.
  always_ff @(posedge clk) begin
    if (accept) begin
      sr[0] <= in_data;
      for (int unsigned d = 1; d < SR_LEN; d++) sr[d] <= sr[d-1];
    end
  end

  // Position counters and output-valid flag.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ct <= '0; col <= '0; row <= '0;
      out_valid <= 1'b0;
    end else begin
      if (accept) begin
        out_valid <= (int'(row) + 1 >= int'(K)) && (int'(col) + 1 >= int'(K));
        if (ct == ($bits(ct))'(CT-1)) begin
          ct <= '0;
          if (col == ($bits(col))'(W-1)) begin
            col <= '0;
            row <= (row == ($bits(row))'(H-1)) ? '0 : row + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end else begin
          ct <= ct + 1'b1;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // Window taps.
  always_comb begin
    for (int unsigned ki = 0; ki < K; ki++)
      for (int unsigned kj = 0; kj < K; kj++)
        out_data[(ki*K + kj)*CP*LA +: CP*LA] = sr[((K-1-ki)*W + (K-1-kj))*CT];
  end

endmodule
