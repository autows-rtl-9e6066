// tb_weights_memory: a 3-fragment memory with 4 static and 2 streamed
// words per fragment. Static words are preloaded; streamed words are sent
// on the DMA side in fragment order. The weight stream must repeat the
// logical words 0..M_dep-1 in order, again and again, whatever the gaps.
// Phase 1 (slow DMA, random back-pressure) must show read-after-write
// stalls; phase 2 (DMA 5x faster, no back-pressure) must deliver one
// word per compute cycle with no stall, i.e. (U_ON+U_OFF) cycles per
// fragment, and the streamed/static read counts must match the layout.
module tb_weights_memory;
  localparam int MW = 32, WW = 16, U_ON = 4, U_OFF = 2, N = 3, U = U_ON + U_OFF;
  localparam int MDEP = U * N, RATIO = MW / WW, DW = N * U_OFF * RATIO;
  logic clk_comp = 0, clk_dma = 0, rst_comp_n = 0, rst_dma_n = 0;
  always #5 clk_comp = ~clk_comp;
  always #1 clk_dma  = ~clk_dma;
  logic ld_en, dma_valid, dma_ready, dma_blocked, w_valid, w_ready, raw_stall, on_rd, off_rd;
  logic [$clog2(U_ON*N)-1:0] ld_addr;
  logic [MW-1:0] ld_data, w_data;
  logic [WW-1:0] dma_data;
  weights_memory #(.MW(MW), .WW(WW), .U_ON(U_ON), .U_OFF(U_OFF), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic [MW-1:0] word [MDEP];
  logic [WW-1:0] dram [DW];
  bit slow = 1;
  int dptr, optr = 0, stall_slow = 0, stall_fast = 0, n_on = 0, n_off = 0;

  initial begin
    foreach (word[p]) word[p] = MW'($urandom);
    for (int p = 0; p < MDEP; p++)
      if (p % U >= U_ON)
        for (int s = 0; s < RATIO; s++)
          dram[((p/U)*U_OFF + p%U - U_ON)*RATIO + s] = word[p][s*WW +: WW];
  end

  always @(posedge clk_dma) begin
    if (!rst_dma_n) begin
      dptr <= 0; dma_valid <= 0;
    end else begin
      if (dma_valid && dma_ready) dptr <= (dptr + 1) % DW;
      if (!(dma_valid && !dma_ready)) dma_valid <= !slow || $urandom % 8 == 0;
    end
  end
  assign dma_data = dram[dptr];

  always @(posedge clk_comp) begin
    if (rst_comp_n) begin
      w_ready <= !slow || $urandom % 2 == 0;
      if (raw_stall) begin if (slow) stall_slow++; else stall_fast++; end
      n_on += int'(on_rd); n_off += int'(off_rd);
      if (w_valid && w_ready) begin
        checks++;
        if (w_data !== word[optr % MDEP]) begin
          failures++;
          if (failures < 10) $display("word %0d: got %h expected %h", optr, w_data, word[optr % MDEP]);
        end
        optr <= optr + 1;
      end
    end
  end

  initial begin
    int t0, t1;
    ld_en = 0; ld_addr = '0; ld_data = '0; w_ready = 0;
    repeat (2) @(posedge clk_comp);
    for (int p = 0; p < MDEP; p++)
      if (p % U < U_ON) begin
        @(negedge clk_comp); ld_en = 1; ld_addr = ($bits(ld_addr))'((p/U)*U_ON + p%U); ld_data = word[p];
      end
    @(negedge clk_comp); ld_en = 0;
    rst_dma_n = 1; rst_comp_n = 1;
    wait (optr >= 5*MDEP);
    @(posedge clk_comp); slow = 0;
    wait (optr % MDEP == 0);           // start of a pass
    repeat (3*MDEP) @(posedge clk_comp);
    // measure 10 passes at full rate
    wait (optr % MDEP == 0);
    t0 = int'($time);
    wait (optr % MDEP == 1);
    wait (optr % MDEP == 0);
    repeat (9) begin wait (optr % MDEP == 1); wait (optr % MDEP == 0); end
    t1 = int'($time);
    checks++;
    if ((t1 - t0) / 10 > 10 * MDEP) begin
      failures++; $display("full rate: %0d ns for 10 passes of %0d words", t1 - t0, MDEP);
    end
    checks++;
    if (stall_slow == 0 || stall_fast != 0) begin
      failures++; $display("stalls: slow %0d fast %0d", stall_slow, stall_fast);
    end
    checks++;
    if (n_off * U_ON != n_on * U_OFF && (n_off - 1) * U_ON > n_on * U_OFF + U_ON*U_OFF) begin
      failures++; $display("static/streamed reads %0d/%0d", n_on, n_off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_comp);
    failures++;
    $display("watchdog: %0d words", optr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
