// autows_top: a two-layer weight-streaming layer-pipelined accelerator.
//
// Three CEs run as a pipeline: CE0 (a K0 x K0 convolution on an
// H0 x W0 x C0 input) feeds CE1 (a K1 x K1 convolution, 1 x 1 by default)
// through an activation FIFO, and CE1 feeds a PK x PK max-pooling CE
// (stride 1, no weights); activations enter CE0 and leave the pooling CE as
// streams, to and from DRAM through an outside DMA. Each CE keeps part of
// its weights in static on-chip storage and streams the rest from DRAM into
// its own dual-clock weight buffer. One DMA scheduler, in clk_dma, shares a
// single DRAM read port between the two buffers in the order and for the
// durations given by its configuration sequence.
// Default sizes (this design's own example, the paper gives none):
//   CE0: 8x8x8 input, 3x3 kernel, 16 filters, c_p=2, f_p=2 -> M_dep 32
//        words of 144 bits, N=2 fragments of 14 static + 2 streamed words,
//        32 cycles per output pixel;
//   CE1: 6x6x16 input, 1x1 kernel, 8 filters, c_p=2, f_p=4 -> M_dep 16
//        words of 32 bits, N=2 fragments of 6 static + 2 streamed words,
//        16 cycles per output pixel (slow-down factor s = 0.5);
//   both layers then refill their buffer b*6*6*2 = 72 times per image, the
//   equal burst counts the paper's write-burst balancing asks for;
//   pool: 2x2 max over CE1's 6x6x8 output, giving 5x5x8.
// CE0's output lanes (f_p = FP0) are CE1's input channel group, so FP0 must
// equal CP1 and CE1's input plane is CE0's output plane.
// Interfaces: activation streams and static-weight preload in clk_comp;
// scheduler configuration and DRAM request/response in clk_dma. Status
// outputs expose, per CE, stalls waiting for streamed weights (raw_stall),
// static and streamed reads (on_rd, off_rd) and DMA beats held back by a
// buffer that is full (dma_blocked), plus the scheduler's round
// pulse, current port and blocked flag.
module autows_top
  import aws_pkg::*;
#(
  parameter int unsigned LA      = 5,
  parameter int unsigned LW      = 4,
  parameter int unsigned WW      = 16,
  parameter int unsigned SEQ_MAX = 8,
  parameter int unsigned FIFO_D  = 8,
  // layer 0
  parameter int unsigned H0 = 8, W0 = 8, C0 = 8, F0 = 16, K0 = 3,
  parameter int unsigned CP0 = 2, FP0 = 2, U_ON0 = 14, U_OFF0 = 2, N0 = 2, SHIFT0 = 7,
  // layer 1
  parameter int unsigned F1 = 8, K1 = 1,
  parameter int unsigned FP1 = 4, U_ON1 = 6, U_OFF1 = 2, N1 = 2, SHIFT1 = 5,
  // max-pooling CE after layer 1
  parameter int unsigned PK = 2,
  // derived, not to be overridden
  parameter int unsigned H1  = H0 - K0 + 1,
  parameter int unsigned W1  = W0 - K0 + 1,
  parameter int unsigned C1  = F0,
  parameter int unsigned CP1 = FP0,
  parameter int unsigned MW0 = FP0 * K0 * K0 * CP0 * LW,
  parameter int unsigned MW1 = FP1 * K1 * K1 * CP1 * LW,
  parameter int unsigned H2  = H1 - K1 + 1,
  parameter int unsigned W2  = W1 - K1 + 1
) (
  input  logic                    clk_comp,
  input  logic                    rst_comp_n,
  input  logic                    clk_dma,
  input  logic                    rst_dma_n,
  // activations (clk_comp)
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [CP0*LA-1:0]       in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [FP1*LA-1:0]       out_data,
  // static weight preload (clk_comp)
  input  logic                    ld0_en,
  input  logic [idx_w(U_ON0*N0)-1:0] ld0_addr,
  input  logic [MW0-1:0]          ld0_data,
  input  logic                    ld1_en,
  input  logic [idx_w(U_ON1*N1)-1:0] ld1_addr,
  input  logic [MW1-1:0]          ld1_data,
  // DMA scheduler configuration (clk_dma)
  input  logic                    sched_enable,
  input  logic                    cfg_seq_we,
  input  logic [idx_w(SEQ_MAX)-1:0] cfg_seq_idx,
  input  logic                    cfg_seq_port,
  input  logic [BURST_LW-1:0]     cfg_seq_beats,
  input  logic [idx_w(SEQ_MAX+1)-1:0] cfg_seq_len,
  input  logic                    cfg_reg_we,
  input  logic                    cfg_reg_port,
  input  logic [DRAM_AW-1:0]      cfg_reg_base,
  input  logic [DRAM_AW-1:0]      cfg_reg_size,
  // DRAM read port (clk_dma)
  output logic                    dram_req_valid,
  input  logic                    dram_req_ready,
  output dma_req_t                dram_req,
  input  logic                    dram_rd_valid,
  output logic                    dram_rd_ready,
  input  logic [WW-1:0]           dram_rd_data,
  // status
  output logic [1:0]              raw_stall,
  output logic [1:0]              on_rd,
  output logic [1:0]              off_rd,
  output logic [1:0]              dma_blocked,
  output logic                    sched_round,
  output logic                    sched_port,
  output logic                    sched_blocked,
  output logic [$clog2(FIFO_D+1)-1:0] fifo_level
);
  logic [1:0]        buf_valid, buf_ready;
  logic [WW-1:0]     buf_data;

  logic              a0_valid, a0_ready;
  logic [FP0*LA-1:0] a0_data;
  logic              a1_valid, a1_ready;
  logic [CP1*LA-1:0] a1_data;
  logic              a2_valid, a2_ready;
  logic [FP1*LA-1:0] a2_data;

  dma_scheduler #(.NPORT(2), .WW(WW), .SEQ_MAX(SEQ_MAX)) u_sched (
    .clk(clk_dma), .rst_n(rst_dma_n), .enable(sched_enable),
    .cfg_seq_we, .cfg_seq_idx, .cfg_seq_port, .cfg_seq_beats, .cfg_seq_len,
    .cfg_reg_we, .cfg_reg_port, .cfg_reg_base, .cfg_reg_size,
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .rd_valid(dram_rd_valid), .rd_ready(dram_rd_ready), .rd_data(dram_rd_data),
    .out_valid(buf_valid), .out_ready(buf_ready), .out_data(buf_data),
    .cur_port(sched_port), .round(sched_round), .blocked(sched_blocked)
  );

  compute_engine #(.LA(LA), .LW(LW), .H(H0), .W(W0), .C(C0), .F(F0), .K(K0),
                   .CP(CP0), .FP(FP0), .U_ON(U_ON0), .U_OFF(U_OFF0), .N(N0),
                   .WW(WW), .SHIFT(SHIFT0), .RELU(1'b1)) u_ce0 (
    .clk_comp, .rst_comp_n, .clk_dma, .rst_dma_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(a0_valid), .out_ready(a0_ready), .out_data(a0_data),
    .ld_en(ld0_en), .ld_addr(ld0_addr), .ld_data(ld0_data),
    .dma_valid(buf_valid[0]), .dma_ready(buf_ready[0]), .dma_data(buf_data),
    .dma_blocked(dma_blocked[0]),
    .raw_stall(raw_stall[0]), .on_rd(on_rd[0]), .off_rd(off_rd[0])
  );

  stream_fifo #(.W(FP0*LA), .DEPTH(FIFO_D)) u_act_fifo (
    .clk(clk_comp), .rst_n(rst_comp_n),
    .in_valid(a0_valid), .in_ready(a0_ready), .in_data(a0_data),
    .out_valid(a1_valid), .out_ready(a1_ready), .out_data(a1_data),
    .count(fifo_level)
  );

  compute_engine #(.LA(LA), .LW(LW), .H(H1), .W(W1), .C(C1), .F(F1), .K(K1),
                   .CP(CP1), .FP(FP1), .U_ON(U_ON1), .U_OFF(U_OFF1), .N(N1),
                   .WW(WW), .SHIFT(SHIFT1), .RELU(1'b1)) u_ce1 (
    .clk_comp, .rst_comp_n, .clk_dma, .rst_dma_n,
    .in_valid(a1_valid), .in_ready(a1_ready), .in_data(a1_data),
    .out_valid(a2_valid), .out_ready(a2_ready), .out_data(a2_data),
    .ld_en(ld1_en), .ld_addr(ld1_addr), .ld_data(ld1_data),
    .dma_valid(buf_valid[1]), .dma_ready(buf_ready[1]), .dma_data(buf_data),
    .dma_blocked(dma_blocked[1]),
    .raw_stall(raw_stall[1]), .on_rd(on_rd[1]), .off_rd(off_rd[1])
  );

  // CE1's output lanes are the pooling CE's channel group (FT1 groups).
  pool_engine #(.LA(LA), .CP(FP1), .H(H2), .W(W2), .CT(F1 / FP1), .K(PK)) u_pool (
    .clk(clk_comp), .rst_n(rst_comp_n),
    .in_valid(a2_valid), .in_ready(a2_ready), .in_data(a2_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
