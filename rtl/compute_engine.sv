// compute_engine: one layer of the layer-wise pipeline (a convolution, or a
// fully connected layer with H = W = K = 1).
//
// Dataflow, each arrow a valid/ready handshake:
//   activations (CP*LA bits, b*H*W*CT words)
//     -> sliding_window (K x K window, CP*K*K*LA bits, b*Ho*Wo*CT words)
//     -> pe_array: fork to FP filter lanes, multiply with the weight words
//        from weights_memory (FP*CP*K*K*LW bits, b*Ho*Wo*FT*CT words)
//     -> output_buffer: sum and accumulate over window and CT channel groups
//     -> activations out (FP*LA bits, b*Ho*Wo*FT words)
// with CT = C/CP, FT = F/FP, Ho = H-K+1, Wo = W-K+1. Inputs arrive in the
// order batch, row, column, channel group; outputs leave in the order batch,
// row, column, filter group, output channel ft*FP + fp in lane fp.
// Weights: logical weight word p = ct*FT + ft holds, for lane fp and window
// element e = (ki*K+kj)*CP + cp, weight W[ft*FP+fp][ct*CP+cp][ki][kj] at bits
// (fp*E + e)*LW. The M_dep = FT*CT words are split into N fragments of U_ON
// static and U_OFF streamed words, (U_ON+U_OFF)*N = FT*CT. Static words are
// preloaded on ld_*; streamed words come from the DMA scheduler on dma_* in
// clk_dma, WW bits per beat.
// Rate: one weight word per clk_comp cycle, i.e. FT*CT cycles per output
// pixel, when the streamed fragment arrives in time; raw_stall marks cycles
// lost waiting for it.
// The block split, the stream widths and tripcounts follow the paper's CE
// dataflow; the loop order, the weight layout and k_p = k (window processed
// whole) are this design's choices.
module compute_engine #(
  parameter int unsigned LA    = 5,
  parameter int unsigned LW    = 4,
  parameter int unsigned H     = 8,
  parameter int unsigned W     = 8,
  parameter int unsigned C     = 8,
  parameter int unsigned F     = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned CP    = 2,
  parameter int unsigned FP    = 2,
  parameter int unsigned U_ON  = 14,
  parameter int unsigned U_OFF = 2,
  parameter int unsigned N     = 2,
  parameter int unsigned WW    = 16,
  parameter int unsigned SHIFT = 4,
  parameter bit          RELU  = 1'b1,
  // derived, not to be overridden
  parameter int unsigned CT    = C / CP,
  parameter int unsigned FT    = F / FP,
  parameter int unsigned E     = K * K * CP,
  parameter int unsigned MW    = FP * E * LW
) (
  input  logic                  clk_comp,
  input  logic                  rst_comp_n,
  input  logic                  clk_dma,
  input  logic                  rst_dma_n,
  // activations in / out (clk_comp)
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CP*LA-1:0]      in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [FP*LA-1:0]      out_data,
  // static weight preload (clk_comp)
  input  logic                  ld_en,
  input  logic [aws_pkg::idx_w(U_ON*N)-1:0] ld_addr,
  input  logic [MW-1:0]         ld_data,
  // streamed weights (clk_dma)
  input  logic                  dma_valid,
  output logic                  dma_ready,
  input  logic [WW-1:0]         dma_data,
  output logic                  dma_blocked,
  // status (clk_comp)
  output logic                  raw_stall,
  output logic                  on_rd,
  output logic                  off_rd
);
  logic               win_valid, win_ready;
  logic [E*LA-1:0]    win_data;
  logic               w_valid, w_ready;
  logic [MW-1:0]      w_data;
  logic               p_valid, p_ready;
  logic [FP*E*(LA+LW)-1:0] p_data;

  sliding_window #(.LA(LA), .CP(CP), .H(H), .W(W), .CT(CT), .K(K)) u_in_buf (
    .clk(clk_comp), .rst_n(rst_comp_n),
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data)
  );

  weights_memory #(.MW(MW), .WW(WW), .U_ON(U_ON), .U_OFF(U_OFF), .N(N)) u_wmem (
    .clk_comp, .rst_comp_n, .ld_en, .ld_addr, .ld_data,
    .clk_dma, .rst_dma_n, .dma_valid, .dma_ready, .dma_data, .dma_blocked,
    .w_valid, .w_ready, .w_data, .raw_stall, .on_rd, .off_rd
  );

  pe_array #(.LA(LA), .LW(LW), .FP(FP), .E(E), .FT(FT)) u_pe (
    .clk(clk_comp), .rst_n(rst_comp_n),
    .a_valid(win_valid), .a_ready(win_ready), .a_data(win_data),
    .w_valid, .w_ready, .w_data,
    .p_valid, .p_ready, .p_data
  );

  output_buffer #(.LA(LA), .LW(LW), .FP(FP), .E(E), .FT(FT), .CT(CT),
                  .SHIFT(SHIFT), .RELU(RELU)) u_out_buf (
    .clk(clk_comp), .rst_n(rst_comp_n),
    .p_valid, .p_ready, .p_data,
    .out_valid, .out_ready, .out_data
  );

  initial begin
    assert (C % CP == 0 && F % FP == 0) else $error("compute_engine: CP must divide C and FP must divide F");
    assert ((U_ON + U_OFF) * N == FT * CT) else $error("compute_engine: (U_ON+U_OFF)*N must equal FT*CT");
    assert (MW % WW == 0) else $error("compute_engine: WW must divide the weight word width");
  end

endmodule
