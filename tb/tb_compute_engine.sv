// tb_compute_engine: self-checking test of one compute engine at its default
// size (8x8x8 input, 3x3 kernel, 16 filters, c_p = f_p = 2, 2 fragments of
// 14 static + 2 streamed weight words).
//
// Random signed weights and activations; the expected output of every image
// is computed here with a direct convolution loop. Static weight words are
// preloaded, streamed words are served in fragment order from a local array
// on the clk_dma side. Three images are run:
//   image 0: random gaps on input, output and DMA beats (slow DMA -> the CE
//            must stall on the read-after-write check),
//   images 1-2: no gaps and a DMA fast enough for one weight word per
//            compute cycle; then no stall may occur and each image must take
//            at most FT*CT = 32 cycles per output pixel plus a row-start
//            allowance.
module tb_compute_engine;
  localparam int LA = 5, LW = 4, H = 8, W = 8, C = 8, F = 16, K = 3;
  localparam int CP = 2, FP = 2, U_ON = 14, U_OFF = 2, N = 2, WW = 16, SHIFT = 7;
  localparam int CT = C / CP, FT = F / FP, E = K * K * CP, MW = FP * E * LW;
  localparam int HO = H - K + 1, WO = W - K + 1, U = U_ON + U_OFF;
  localparam int RATIO = MW / WW, NB = 3;
  localparam int DRAM_WORDS = N * U_OFF * RATIO;

  logic clk_comp = 0, clk_dma = 0;
  logic rst_comp_n = 0, rst_dma_n = 0;
  always #5 clk_comp = ~clk_comp;
  always #1 clk_dma  = ~clk_dma;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [CP*LA-1:0] in_data;
  logic [FP*LA-1:0] out_data;
  logic ld_en;
  logic [aws_pkg::idx_w(U_ON*N)-1:0] ld_addr;
  logic [MW-1:0] ld_data;
  logic dma_valid, dma_ready, dma_blocked;
  logic [WW-1:0] dma_data;
  logic raw_stall, on_rd, off_rd;

  compute_engine #(.LA(LA), .LW(LW), .H(H), .W(W), .C(C), .F(F), .K(K), .CP(CP), .FP(FP),
                   .U_ON(U_ON), .U_OFF(U_OFF), .N(N), .WW(WW), .SHIFT(SHIFT), .RELU(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [LW-1:0] wt [F][C][K][K];
  logic signed [LA-1:0] x  [NB][H][W][C];
  logic [MW-1:0]  wword [FT*CT];
  logic [WW-1:0]  dram  [DRAM_WORDS];
  logic [FP*LA-1:0] exp_out [NB*HO*WO*FT];
  logic [CP*LA-1:0] in_seq  [NB*H*W*CT];
  bit slow = 1;

  function automatic logic [LA-1:0] requant(input longint v);
    automatic longint s = v >>> SHIFT;
    if (s < 0) s = 0;
    if (s > (1 << (LA-1)) - 1) s = (1 << (LA-1)) - 1;
    return s[LA-1:0];
  endfunction

  initial begin
    // data and reference
    foreach (wt[f, c, i, j]) wt[f][c][i][j] = LW'($urandom);
    foreach (x[b, r, col, c]) x[b][r][col][c] = LA'($urandom);
    for (int p = 0; p < FT*CT; p++) begin
      automatic int ct = p / FT, ft = p % FT;
      for (int fp = 0; fp < FP; fp++)
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++)
            for (int cp = 0; cp < CP; cp++)
              wword[p][(fp*E + (i*K + j)*CP + cp)*LW +: LW] = wt[ft*FP+fp][ct*CP+cp][i][j];
    end
    for (int p = 0; p < FT*CT; p++) begin
      automatic int fi = p / U, fj = p % U;
      if (fj >= U_ON)
        for (int s = 0; s < RATIO; s++)
          dram[(fi*U_OFF + fj - U_ON)*RATIO + s] = wword[p][s*WW +: WW];
    end
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < H; r++)
        for (int col = 0; col < W; col++)
          for (int ct = 0; ct < CT; ct++)
            for (int cp = 0; cp < CP; cp++)
              in_seq[((b*H + r)*W + col)*CT + ct][cp*LA +: LA] = x[b][r][col][ct*CP+cp];
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < HO; r++)
        for (int col = 0; col < WO; col++)
          for (int ft = 0; ft < FT; ft++)
            for (int fp = 0; fp < FP; fp++) begin
              automatic longint acc = 0;
              for (int c = 0; c < C; c++)
                for (int i = 0; i < K; i++)
                  for (int j = 0; j < K; j++)
                    acc += longint'(x[b][r+i][col+j][c]) * longint'(wt[ft*FP+fp][c][i][j]);
              exp_out[((b*HO + r)*WO + col)*FT + ft][fp*LA +: LA] = requant(acc);
            end
  end

  // static weight preload, then release reset of the datapath
  initial begin
    ld_en = 0; ld_addr = '0; ld_data = '0;
    repeat (3) @(posedge clk_comp);
    for (int p = 0; p < FT*CT; p++) begin
      if (p % U < U_ON) begin
        @(negedge clk_comp);
        ld_en = 1; ld_addr = ($bits(ld_addr))'((p / U) * U_ON + p % U); ld_data = wword[p];
      end
    end
    @(negedge clk_comp); ld_en = 0;
    @(negedge clk_dma); rst_dma_n = 1;
    @(negedge clk_comp); rst_comp_n = 1;
  end

  // DMA beats, in fragment order, looping
  int dptr;
  always @(posedge clk_dma) begin
    if (!rst_dma_n) begin
      dptr <= 0; dma_valid <= 0;
    end else begin
      if (dma_valid && dma_ready) dptr <= (dptr + 1) % DRAM_WORDS;
      if (!(dma_valid && !dma_ready)) dma_valid <= slow ? ($urandom % 4 == 0) : 1'b1;
    end
  end
  assign dma_data = dram[(dma_valid && dma_ready) ? dptr : dptr];

  // input driver
  int iptr;
  always @(posedge clk_comp) begin
    if (!rst_comp_n) begin
      iptr <= 0; in_valid <= 0;
    end else begin
      if (in_valid && in_ready) iptr <= iptr + 1;
      if (!(in_valid && !in_ready))
        in_valid <= ((in_valid && in_ready) ? iptr + 1 : iptr) < NB*H*W*CT && (!slow || $urandom % 3 != 0);
    end
  end
  assign in_data = in_seq[iptr < NB*H*W*CT ? iptr : 0];

  // output monitor
  int optr = 0, cyc = 0, img_start = 0, stalls_fast = 0, stalls_slow = 0;
  always @(posedge clk_comp) begin
    cyc <= cyc + 1;
    out_ready <= slow ? ($urandom % 4 != 0) : 1'b1;
    if (rst_comp_n && raw_stall) begin
      if (slow) stalls_slow <= stalls_slow + 1; else stalls_fast <= stalls_fast + 1;
    end
    if (rst_comp_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== exp_out[optr]) begin
        failures++;
        if (failures < 40) $display("mismatch at output %0d: got %h expected %h", optr, out_data, exp_out[optr]);
      end
      optr <= optr + 1;
      if ((optr + 1) % (HO*WO*FT) == 0) begin
        if (!slow) begin
          // rate: FT*CT cycles per pixel, plus at most 2*K*CT per row start
          checks++;
          if (cyc - img_start > HO*WO*FT*CT + HO*2*K*CT + 16) begin
            failures++;
            $display("image took %0d cycles, more than the expected rate allows", cyc - img_start);
          end
        end
        img_start <= cyc;
        slow <= 0;
      end
    end
  end

  initial begin
    out_ready = 0;
    wait (optr == NB*HO*WO*FT);
    repeat (5) @(posedge clk_comp);
    checks++;
    if (stalls_slow == 0) begin failures++; $display("no read-after-write stall seen with slow DMA"); end
    checks++;
    if (stalls_fast != 0) begin failures++; $display("%0d stalls with fast DMA", stalls_fast); end
    $display("stalls: slow phase %0d, fast phase %0d", stalls_slow, stalls_fast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_comp);
    failures++;
    $display("watchdog: timeout, %0d outputs seen", optr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
