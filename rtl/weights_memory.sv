// weights_memory: fragmented weight memory of one CE.
//
// The layer's weight memory is M_dep = (U_ON + U_OFF) * N words deep and MW
// bits wide (MW = f_p*c_p*k_p^2*L_W). It is cut into N fragments; in each,
// the first U_ON words are static (kept on chip for good) and the last U_OFF
// words are dynamic (streamed from DRAM each time they are needed). All N
// static parts live in one on-chip array of U_ON*N words; the dynamic parts
// share one weight_buffer of U_OFF words, refilled by the DMA once per
// fragment use.
// Reading: the weight stream walks the logical read pointer
// p = 0 .. M_dep-1 over and over (once per output pixel). For p, with
// i = p / (U_ON+U_OFF) and j = p % (U_ON+U_OFF): j < U_ON reads static word
// U_ON*i + j, otherwise buffer word j - U_ON. Because the dynamic words are
// read in this order, the buffer is walked in order too and needs no address
// from here. A dynamic word is read only once it has been written in full
// (read-after-write check); each slot is refilled as soon as its word has
// been read, so the buffer is refilled b*h_out*w_out*N times per inference,
// overlapping with the reads of static and of other dynamic words.
// A two-input multiplexer after the two registered
// read ports picks the word sent to the PEs.
// Interface: static words are preloaded through ld_* (clk_comp) before
// inference; DMA beats of WW bits arrive on dma_* (clk_dma); weights leave
// on w_* with a valid/ready handshake, one word per cycle when available,
// one cycle after the read is issued. raw_stall is high in a cycle where the
// PEs could take a word but the next word is dynamic and the buffer is not
// yet filled; on_rd / off_rd pulse for each static / dynamic read.
// Following the paper: the fragmentation, the address mapping (i, j), the
// static storage + buffer + mux structure, the two clocks, the RAW check
// and the refill count. This design's choices: the preload port, the
// registered one-cycle read and the status outputs.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module weights_memory #(
  parameter int unsigned MW    = 144,
  parameter int unsigned WW    = 16,
  parameter int unsigned U_ON  = 3,
  parameter int unsigned U_OFF = 1,
  parameter int unsigned N     = 2
) (
  input  logic                  clk_comp,
  input  logic                  rst_comp_n,
  // static storage preload (clk_comp)
  input  logic                  ld_en,
  input  logic [aws_pkg::idx_w(U_ON*N)-1:0] ld_addr,
  input  logic [MW-1:0]         ld_data,
  // DMA write side (clk_dma)
  input  logic                  clk_dma,
  input  logic                  rst_dma_n,
  input  logic                  dma_valid,
  output logic                  dma_ready,
  input  logic [WW-1:0]         dma_data,
  output logic                  dma_blocked,
  // weight stream to the PEs (clk_comp)
  output logic                  w_valid,
  input  logic                  w_ready,
  output logic [MW-1:0]         w_data,
  output logic                  raw_stall,
  output logic                  on_rd,
  output logic                  off_rd
);
  localparam int unsigned U     = U_ON + U_OFF;
  localparam int unsigned ON_D  = (U_ON*N > 0) ? U_ON*N : 1;
  localparam int unsigned JW    = aws_pkg::idx_w(U);
  localparam int unsigned OAW   = aws_pkg::idx_w(ON_D);

  logic [JW-1:0]  j;
  logic [OAW-1:0] on_addr;
  logic           in_on, slot_free, buf_avail, issue, sel_off_q;
  logic [MW-1:0]  on_q, off_q;

  assign in_on     = (j < JW'(U_ON));
  assign slot_free = !w_valid || w_ready;
  assign issue     = slot_free && (in_on || buf_avail);
  assign on_rd     = issue && in_on;
  assign off_rd    = issue && !in_on;
  assign raw_stall = slot_free && !in_on && !buf_avail;

  // Static on-chip storage.
  logic [MW-1:0] static_mem [ON_D];
  always_ff @(posedge clk_comp) begin
    if (ld_en) static_mem[ld_addr] <= ld_data;
    if (on_rd) on_q <= static_mem[on_addr];
  end

  // Dynamic-region buffer.
  if (U_OFF > 0) begin : g_buf
    weight_buffer #(.MW(MW), .WW(WW), .DEPTH(U_OFF)) u_buf (
      .clk_dma    (clk_dma),
      .rst_dma_n  (rst_dma_n),
      .wr_valid   (dma_valid),
      .wr_ready   (dma_ready),
      .wr_data    (dma_data),
      .wr_blocked (dma_blocked),
      .clk_comp   (clk_comp),
      .rst_comp_n (rst_comp_n),
      .rd_avail   (buf_avail),
      .rd_en      (off_rd),
      .rd_data    (off_q)
    );
  end else begin : g_nobuf
    // All weights of this layer are static: the DMA port is never used.
    assign dma_ready   = 1'b0;
    assign dma_blocked = dma_valid;
    assign buf_avail   = 1'b0;
    assign off_q       = '0;
  end

  // Read pointer and output register.
  always_ff @(posedge clk_comp) begin
    if (!rst_comp_n) begin
      j         <= '0;
      on_addr   <= '0;
      w_valid   <= 1'b0;
      sel_off_q <= 1'b0;
    end else begin
      if (issue) begin
        w_valid   <= 1'b1;
        sel_off_q <= !in_on;
        j <= (j == JW'(U-1)) ? '0 : j + 1'b1;
        if (in_on) on_addr <= (on_addr == OAW'(ON_D-1)) ? '0 : on_addr + 1'b1;
      end else if (w_ready) begin
        w_valid <= 1'b0;
      end
    end
  end

  // Output multiplexer (static storage / buffer).
  assign w_data = sel_off_q ? off_q : on_q;

  a_hold: assert property (@(posedge clk_comp) disable iff (!rst_comp_n)
    w_valid && !w_ready |=> w_valid && $stable(w_data));

endmodule
