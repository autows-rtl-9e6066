// tb_weight_buffer: the two sides run on unrelated clocks (10 ns compute,
// 6 ns DMA). The DMA side writes a random word stream, RATIO beats per word,
// with random gaps; the read side reads the words in order with random
// pauses whenever rd_avail allows, and compares each with the stream.
// Checks: every word read; that rd_avail never offers a word before all of
// its beats are written (read-after-write); that no beat is written into a
// slot whose previous word is still unread (write-after-read); that the
// writer is sometimes held off (wr_blocked); and that writes overlap with
// unread words in the buffer (the buffer is refilled while it is read).
module tb_weight_buffer;
  localparam int MW = 24, WW = 8, DEPTH = 3, RATIO = MW / WW, NWORD = 90;
  logic clk_dma = 0, clk_comp = 0, rst_dma_n = 0, rst_comp_n = 0;
  always #3 clk_dma  = ~clk_dma;
  always #5 clk_comp = ~clk_comp;
  logic wr_valid, wr_ready, wr_blocked, rd_avail, rd_en;
  logic [WW-1:0] wr_data;
  logic [MW-1:0] rd_data;
  weight_buffer #(.MW(MW), .WW(WW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [MW-1:0] words [NWORD];
  int wbeat = 0, blocked = 0, overlap = 0, nread = 0;

  initial foreach (words[i]) words[i] = MW'($urandom);

  // writer
  always @(posedge clk_dma) begin
    if (!rst_dma_n) begin
      wr_valid <= 0;
    end else begin
      blocked += int'(wr_blocked);
      if (wr_valid && wr_ready) begin
        checks++;
        if (wbeat / RATIO - DEPTH >= nread) begin
          failures++; $display("beat %0d overwrites unread word (%0d read)", wbeat, nread);
        end
        if (wbeat / RATIO > nread) overlap++;
        wbeat <= wbeat + 1;
      end
      if (!(wr_valid && !wr_ready))
        wr_valid <= ((wr_valid && wr_ready) ? wbeat + 1 : wbeat) < NWORD*RATIO && $urandom % 3 != 0;
    end
  end
  assign wr_data = words[(wbeat / RATIO) % NWORD][(wbeat % RATIO)*WW +: WW];

  // reader
  initial begin
    rd_en = 0;
    repeat (2) @(posedge clk_dma);
    rst_dma_n = 1;
    @(negedge clk_comp); rst_comp_n = 1;
    for (int i = 0; i < NWORD; i++) begin
      // slow phases let the writer fill the buffer and block
      repeat ((i / 15) % 2 == 1 ? $urandom % 12 : $urandom % 2) @(negedge clk_comp);
      while (!rd_avail) @(negedge clk_comp);
      checks++;
      if (wbeat < (i + 1)*RATIO) begin
        failures++; $display("word %0d offered after only %0d beats", i, wbeat);
      end
      rd_en = 1;
      @(posedge clk_comp); nread = i + 1;
      @(negedge clk_comp);
      rd_en = 0;
      checks++;
      if (rd_data !== words[i]) begin
        failures++; $display("word %0d: got %h expected %h", i, rd_data, words[i]);
      end
    end
    checks++;
    if (blocked == 0) begin failures++; $display("writer never held off"); end
    checks++;
    if (overlap == 0) begin failures++; $display("no write overlapped unread words"); end
    $display("blocked beats %0d, beats written while words were waiting %0d", blocked, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_comp);
    failures++;
    $display("watchdog: %0d words read", nread);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
