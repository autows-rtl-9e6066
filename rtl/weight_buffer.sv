// weight_buffer: the dual-clock off-chip weight buffer of one CE.
//
// Holds the dynamic words of the fragment in use: DEPTH words of MW bits
// (u_off words of the layer's weight-memory width). The DMA side writes in
// clk_dma with narrower WW-bit beats, RATIO = MW/WW beats per word, lowest
// slice first; the compute side reads whole MW-bit words in clk_comp with a
// registered, one-cycle read (like a BRAM port of a different width on each
// side). Both sides walk the DEPTH words in order and wrap, so consecutive
// fragments follow each other through the same storage.
// Word-level checks between the clock domains:
//  * Each side keeps a free-running count of the words it has completed
//    (written in full / read), mod 2^CW with 2^CW > DEPTH, and passes it to
//    the other side Gray-coded through a two-flop synchroniser.
//  * Read-after-write: the reader may read its next word only when the
//    synchronised write count is ahead of its read count (rd_avail).
//  * Write-after-read: the writer may write into a slot only when fewer than
//    DEPTH words are waiting to be read (wr_ready), i.e. the word that held
//    the slot has been read.
// A slot is therefore refilled as soon as its previous word has been read,
// while the reader goes on with the rest of the buffer or with static words.
// A count crosses in two to three cycles of the receiving clock; the
// synchronised view is always behind, never ahead, so the checks are safe.
// wr_blocked marks a DMA beat held because the buffer is full.
// Following the paper: dual-port buffer, different clocks and port widths
// on the two sides, read-after-write checking, loading while the PEs read.
// This design's choices: the Gray-coded word counts, the synchroniser depth,
// the beat order.
//
// Each side has its own synchronous active-low reset, in its own clock; both
// must be asserted together (this design's choice).
module weight_buffer #(
  parameter int unsigned MW    = 144,
  parameter int unsigned WW    = 16,
  parameter int unsigned DEPTH = 1
) (
  // DMA (write) side
  input  logic          clk_dma,
  input  logic          rst_dma_n,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [WW-1:0] wr_data,
  output logic          wr_blocked,
  // compute (read) side
  input  logic          clk_comp,
  input  logic          rst_comp_n,
  output logic          rd_avail,
  input  logic          rd_en,
  output logic [MW-1:0] rd_data
);
  localparam int unsigned RATIO = MW / WW;
  localparam int unsigned DAW   = aws_pkg::idx_w(DEPTH);
  localparam int unsigned SW    = aws_pkg::idx_w(RATIO);
  localparam int unsigned CW    = $clog2(DEPTH) + 1;

  function automatic logic [CW-1:0] bin2gray(input logic [CW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [CW-1:0] gray2bin(input logic [CW-1:0] g);
    logic [CW-1:0] b;
    b[CW-1] = g[CW-1];
    for (int i = int'(CW) - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [MW-1:0] mem [DEPTH];

  logic [CW-1:0] rcnt, rgray;          // read side
  logic [CW-1:0] wgray_s0, wgray_s1;   // read side, synchronising wgray

  // ---------------- write side (clk_dma) ----------------
  logic [CW-1:0]  wcnt, wgray, rgray_s0, rgray_s1, wcnt_next;
  logic [DAW-1:0] waddr;
  logic [SW-1:0]  wsub;
  logic           wr_fire, word_done;

  assign wr_ready   = (wcnt - gray2bin(rgray_s1)) != CW'(DEPTH);
  assign wr_fire    = wr_valid && wr_ready;
  assign wr_blocked = wr_valid && !wr_ready;
  assign word_done  = wr_fire && (wsub == SW'(RATIO-1));
  assign wcnt_next  = wcnt + 1'b1;

  always_ff @(posedge clk_dma) begin
    if (wr_fire) mem[waddr][wsub*WW +: WW] <= wr_data;
  end

  always_ff @(posedge clk_dma) begin
    if (!rst_dma_n) begin
      wcnt     <= '0;
      wgray    <= '0;
      rgray_s0 <= '0;
      rgray_s1 <= '0;
      waddr    <= '0;
      wsub     <= '0;
    end else begin
      rgray_s0 <= rgray;
      rgray_s1 <= rgray_s0;
      if (wr_fire) wsub <= (wsub == SW'(RATIO-1)) ? '0 : wsub + 1'b1;
      if (word_done) begin
        waddr <= (waddr == DAW'(DEPTH-1)) ? '0 : waddr + 1'b1;
        wcnt  <= wcnt_next;
        wgray <= bin2gray(wcnt_next);
      end
    end
  end

  // ---------------- read side (clk_comp) ----------------
  logic [DAW-1:0] raddr;
  logic [CW-1:0]  rcnt_next;

  assign rd_avail  = gray2bin(wgray_s1) != rcnt;
  assign rcnt_next = rcnt + 1'b1;

  always_ff @(posedge clk_comp) begin
    if (rd_en) rd_data <= mem[raddr];
  end

  always_ff @(posedge clk_comp) begin
    if (!rst_comp_n) begin
      rcnt     <= '0;
      rgray    <= '0;
      wgray_s0 <= '0;
      wgray_s1 <= '0;
      raddr    <= '0;
    end else begin
      wgray_s0 <= wgray;
      wgray_s1 <= wgray_s0;
      if (rd_en) begin
        raddr <= (raddr == DAW'(DEPTH-1)) ? '0 : raddr + 1'b1;
        rcnt  <= rcnt_next;
        rgray <= bin2gray(rcnt_next);
      end
    end
  end

  // The reader may read only a word that has been written in full.
  a_raw: assert property (@(posedge clk_comp) disable iff (!rst_comp_n)
    rd_en |-> rd_avail);

  initial begin
    assert (MW % WW == 0) else $error("weight_buffer: MW must be a multiple of WW");
  end

endmodule
