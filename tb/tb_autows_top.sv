// tb_autows_top: end-to-end test of the accelerator (two convolution CEs
// and a max-pooling CE) at its default parameters (no parameter overrides).
//
// Random weights and input images; the expected output is computed here by
// running both convolutions (with the same shift, ReLU and saturation) and
// the 2x2 max pooling in plain loops. The testbench preloads the static weight words of both CEs,
// places their streamed words in a DRAM model region per CE in fragment
// order, and programs the DMA scheduler with a balanced sequence:
// {CE0, U_OFF0*RATIO0 beats}, {CE1, U_OFF1*RATIO1 beats}, so each round
// refills one fragment of each layer. Image 0 runs with a slow DRAM and
// random output back-pressure; images 1.. with full-speed DRAM and no
// back-pressure, where the pipeline must reach the rate of its slowest CE
// (FT0*CT0 cycles per output pixel).
// Mechanisms that must each occur at least once: read-after-write stall in
// each CE, DMA beat held back by a full buffer (per CE and at the
// scheduler), static and streamed weight reads in each CE, a completed
// scheduler round, each scheduler port selected, a full inter-CE FIFO and
// output back-pressure.
module tb_autows_top;
  import aws_pkg::*;
  localparam int LA = 5, LW = 4, WW = 16, FIFO_D = 8;
  localparam int H0 = 8, W0 = 8, C0 = 8, F0 = 16, K0 = 3, CP0 = 2, FP0 = 2;
  localparam int U_ON0 = 14, U_OFF0 = 2, N0 = 2, SHIFT0 = 7;
  localparam int F1 = 8, K1 = 1, FP1 = 4, U_ON1 = 6, U_OFF1 = 2, N1 = 2, SHIFT1 = 5;
  localparam int H1 = H0 - K0 + 1, W1 = W0 - K0 + 1, C1 = F0, CP1 = FP0;
  localparam int H2 = H1 - K1 + 1, W2 = W1 - K1 + 1;
  localparam int PK = 2, H3 = H2 - PK + 1, W3 = W2 - PK + 1;
  localparam int CT0 = C0 / CP0, FT0 = F0 / FP0, E0 = K0*K0*CP0, MW0 = FP0*E0*LW;
  localparam int CT1 = C1 / CP1, FT1 = F1 / FP1, E1 = K1*K1*CP1, MW1 = FP1*E1*LW;
  localparam int U0 = U_ON0 + U_OFF0, U1 = U_ON1 + U_OFF1;
  localparam int R0 = MW0 / WW, R1 = MW1 / WW;
  localparam int BASE1 = 64;
  localparam int NB = 3;
  localparam int NOUT = NB * H3 * W3 * FT1;

  logic clk_comp = 0, clk_dma = 0, rst_comp_n = 0, rst_dma_n = 0;
  always #5 clk_comp = ~clk_comp;
  always #1 clk_dma  = ~clk_dma;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [CP0*LA-1:0] in_data;
  logic [FP1*LA-1:0] out_data;
  logic ld0_en, ld1_en;
  logic [idx_w(U_ON0*N0)-1:0] ld0_addr;
  logic [idx_w(U_ON1*N1)-1:0] ld1_addr;
  logic [MW0-1:0] ld0_data;
  logic [MW1-1:0] ld1_data;
  logic sched_enable, cfg_seq_we, cfg_seq_port, cfg_reg_we, cfg_reg_port;
  logic [idx_w(8)-1:0] cfg_seq_idx;
  logic [BURST_LW-1:0] cfg_seq_beats;
  logic [idx_w(9)-1:0] cfg_seq_len;
  logic [DRAM_AW-1:0] cfg_reg_base, cfg_reg_size;
  logic dram_req_valid, dram_req_ready, dram_rd_valid, dram_rd_ready;
  dma_req_t dram_req;
  logic [WW-1:0] dram_rd_data;
  logic [1:0] raw_stall, on_rd, off_rd, dma_blocked;
  logic sched_round, sched_port, sched_blocked;
  logic [$clog2(FIFO_D+1)-1:0] fifo_level;
  logic slow = 1;

  autows_top dut (.*);

  dram_model #(.WW(WW), .WORDS(128)) u_dram (
    .clk(clk_dma), .rst_n(rst_dma_n), .slow(slow),
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .rd_valid(dram_rd_valid), .rd_ready(dram_rd_ready), .rd_data(dram_rd_data)
  );

  int checks = 0, failures = 0;
  logic signed [LW-1:0] wt0 [F0][C0][K0][K0];
  logic signed [LW-1:0] wt1 [F1][C1][K1][K1];
  logic signed [LA-1:0] x0 [NB][H0][W0][C0];
  logic signed [LA-1:0] x1 [NB][H1][W1][C1];
  logic signed [LA-1:0] x2 [NB][H2][W2][F1];
  logic [MW0-1:0] ww0 [FT0*CT0];
  logic [MW1-1:0] ww1 [FT1*CT1];
  logic [CP0*LA-1:0] in_seq [NB*H0*W0*CT0];
  logic [FP1*LA-1:0] exp_out [NOUT];

  function automatic logic signed [LA-1:0] requant(input longint v, input int sh);
    automatic longint s = v >>> sh;
    if (s < 0) s = 0;
    if (s > (1 << (LA-1)) - 1) s = (1 << (LA-1)) - 1;
    return LA'(s);
  endfunction

  initial begin
    foreach (wt0[f, c, i, j]) wt0[f][c][i][j] = LW'($urandom);
    foreach (wt1[f, c, i, j]) wt1[f][c][i][j] = LW'($urandom);
    foreach (x0[b, r, q, c])  x0[b][r][q][c]  = LA'($urandom);
    for (int p = 0; p < FT0*CT0; p++)
      for (int fp = 0; fp < FP0; fp++)
        for (int i = 0; i < K0; i++)
          for (int j = 0; j < K0; j++)
            for (int cp = 0; cp < CP0; cp++)
              ww0[p][(fp*E0 + (i*K0 + j)*CP0 + cp)*LW +: LW] = wt0[(p%FT0)*FP0+fp][(p/FT0)*CP0+cp][i][j];
    for (int p = 0; p < FT1*CT1; p++)
      for (int fp = 0; fp < FP1; fp++)
        for (int i = 0; i < K1; i++)
          for (int j = 0; j < K1; j++)
            for (int cp = 0; cp < CP1; cp++)
              ww1[p][(fp*E1 + (i*K1 + j)*CP1 + cp)*LW +: LW] = wt1[(p%FT1)*FP1+fp][(p/FT1)*CP1+cp][i][j];
    for (int p = 0; p < FT0*CT0; p++)
      if (p % U0 >= U_ON0)
        for (int s = 0; s < R0; s++)
          u_dram.mem[((p/U0)*U_OFF0 + p%U0 - U_ON0)*R0 + s] = ww0[p][s*WW +: WW];
    for (int p = 0; p < FT1*CT1; p++)
      if (p % U1 >= U_ON1)
        for (int s = 0; s < R1; s++)
          u_dram.mem[BASE1 + ((p/U1)*U_OFF1 + p%U1 - U_ON1)*R1 + s] = ww1[p][s*WW +: WW];
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < H0; r++)
        for (int q = 0; q < W0; q++)
          for (int ct = 0; ct < CT0; ct++)
            for (int cp = 0; cp < CP0; cp++)
              in_seq[((b*H0 + r)*W0 + q)*CT0 + ct][cp*LA +: LA] = x0[b][r][q][ct*CP0+cp];
    // layer 0 then layer 1, straight from the definition of a convolution
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < H1; r++)
        for (int q = 0; q < W1; q++)
          for (int f = 0; f < F0; f++) begin
            automatic longint acc = 0;
            for (int c = 0; c < C0; c++)
              for (int i = 0; i < K0; i++)
                for (int j = 0; j < K0; j++)
                  acc += longint'(x0[b][r+i][q+j][c]) * longint'(wt0[f][c][i][j]);
            x1[b][r][q][f] = requant(acc, SHIFT0);
          end
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < H2; r++)
        for (int q = 0; q < W2; q++)
          for (int ft = 0; ft < FT1; ft++)
            for (int fp = 0; fp < FP1; fp++) begin
              automatic longint acc = 0;
              for (int c = 0; c < C1; c++)
                for (int i = 0; i < K1; i++)
                  for (int j = 0; j < K1; j++)
                    acc += longint'(x1[b][r+i][q+j][c]) * longint'(wt1[ft*FP1+fp][c][i][j]);
              x2[b][r][q][ft*FP1+fp] = requant(acc, SHIFT1);
            end
    // then the 2x2 max pooling
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < H3; r++)
        for (int q = 0; q < W3; q++)
          for (int f = 0; f < F1; f++) begin
            automatic logic signed [LA-1:0] m = x2[b][r][q][f];
            for (int i = 0; i < PK; i++)
              for (int j = 0; j < PK; j++)
                if (x2[b][r+i][q+j][f] > m) m = x2[b][r+i][q+j][f];
            exp_out[((b*H3 + r)*W3 + q)*FT1 + f/FP1][(f%FP1)*LA +: LA] = m;
          end
  end

  // configuration: static preload (clk_comp) and scheduler set-up (clk_dma)
  initial begin
    ld0_en = 0; ld1_en = 0; ld0_addr = '0; ld1_addr = '0; ld0_data = '0; ld1_data = '0;
    sched_enable = 0; cfg_seq_we = 0; cfg_reg_we = 0; cfg_seq_idx = '0; cfg_seq_port = 0;
    cfg_seq_beats = '0; cfg_seq_len = '0; cfg_reg_port = 0; cfg_reg_base = '0; cfg_reg_size = '0;
    repeat (3) @(posedge clk_comp);
    for (int p = 0; p < FT0*CT0; p++)
      if (p % U0 < U_ON0) begin
        @(negedge clk_comp);
        ld0_en = 1; ld0_addr = ($bits(ld0_addr))'((p/U0)*U_ON0 + p%U0); ld0_data = ww0[p];
      end
    @(negedge clk_comp); ld0_en = 0;
    for (int p = 0; p < FT1*CT1; p++)
      if (p % U1 < U_ON1) begin
        @(negedge clk_comp);
        ld1_en = 1; ld1_addr = ($bits(ld1_addr))'((p/U1)*U_ON1 + p%U1); ld1_data = ww1[p];
      end
    @(negedge clk_comp); ld1_en = 0;
    @(negedge clk_dma); rst_dma_n = 1;
    @(negedge clk_dma);
    cfg_reg_we = 1; cfg_reg_port = 0; cfg_reg_base = 0;     cfg_reg_size = DRAM_AW'(N0*U_OFF0*R0);
    @(negedge clk_dma);
    cfg_reg_we = 1; cfg_reg_port = 1; cfg_reg_base = DRAM_AW'(BASE1); cfg_reg_size = DRAM_AW'(N1*U_OFF1*R1);
    @(negedge clk_dma); cfg_reg_we = 0;
    cfg_seq_we = 1; cfg_seq_idx = 0; cfg_seq_port = 0; cfg_seq_beats = BURST_LW'(U_OFF0*R0);
    @(negedge clk_dma);
    cfg_seq_we = 1; cfg_seq_idx = 1; cfg_seq_port = 1; cfg_seq_beats = BURST_LW'(U_OFF1*R1);
    @(negedge clk_dma); cfg_seq_we = 0; cfg_seq_len = 2; sched_enable = 1;
    @(negedge clk_comp); rst_comp_n = 1;
  end

  // input driver
  int iptr;
  always @(posedge clk_comp) begin
    if (!rst_comp_n) begin
      iptr <= 0; in_valid <= 0;
    end else begin
      if (in_valid && in_ready) iptr <= iptr + 1;
      if (!(in_valid && !in_ready))
        in_valid <= ((in_valid && in_ready) ? iptr + 1 : iptr) < NB*H0*W0*CT0;
    end
  end
  assign in_data = in_seq[iptr < NB*H0*W0*CT0 ? iptr : 0];

  // event counters
  int n_raw [2], n_blk [2], n_on [2], n_off [2], n_round, n_sblk, n_port1, n_fifo_full, n_bp;
  initial begin
    n_raw = '{0, 0}; n_blk = '{0, 0}; n_on = '{0, 0}; n_off = '{0, 0};
    n_round = 0; n_sblk = 0; n_port1 = 0; n_fifo_full = 0; n_bp = 0;
  end
  always @(posedge clk_comp) if (rst_comp_n) begin
    for (int c = 0; c < 2; c++) begin
      n_raw[c] += int'(raw_stall[c]);
      n_on[c]  += int'(on_rd[c]);
      n_off[c] += int'(off_rd[c]);
    end
    n_fifo_full += int'(int'(fifo_level) == FIFO_D);
    n_bp += int'(out_valid && !out_ready);
  end
  always @(posedge clk_dma) if (rst_dma_n) begin
    for (int c = 0; c < 2; c++) n_blk[c] += int'(dma_blocked[c]);
    n_round += int'(sched_round);
    n_sblk  += int'(sched_blocked);
    n_port1 += int'(dram_rd_valid && dram_rd_ready && sched_port);
  end

  // output monitor
  int optr = 0, cyc = 0, img_start = 0;
  always @(posedge clk_comp) begin
    cyc <= cyc + 1;
    out_ready <= slow ? ($urandom % 64 == 0) : 1'b1;
    if (rst_comp_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== exp_out[optr]) begin
        failures++;
        if (failures < 20) $display("mismatch at output %0d: got %h expected %h", optr, out_data, exp_out[optr]);
      end
      optr <= optr + 1;
      if ((optr + 1) % (H3*W3*FT1) == 0) begin
        if (!slow) begin
          checks++;
          $display("image took %0d cycles (slowest CE needs %0d per image)", cyc - img_start, H1*W1*FT0*CT0);
          if (cyc - img_start > H1*W1*FT0*CT0 + H1*2*K0*CT0 + 16) begin
            failures++;
            $display("pipeline slower than its slowest CE");
          end
        end
        img_start <= cyc;
        slow <= 0;
      end
    end
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-40s %0d", what, n);
    if (n == 0) begin failures++; $display("  ^ never happened"); end
  endtask

  initial begin
    out_ready = 0;
    wait (optr == NOUT);
    repeat (5) @(posedge clk_comp);
    $display("mechanism counts:");
    need("CE0 read-after-write stalls", n_raw[0]);
    need("CE1 read-after-write stalls", n_raw[1]);
    need("CE0 DMA beats held by full buffer", n_blk[0]);
    need("CE1 DMA beats held by full buffer", n_blk[1]);
    need("scheduler blocked cycles", n_sblk);
    need("CE0 static reads", n_on[0]);
    need("CE0 streamed reads", n_off[0]);
    need("CE1 static reads", n_on[1]);
    need("CE1 streamed reads", n_off[1]);
    need("scheduler rounds", n_round);
    need("beats routed to CE1", n_port1);
    need("inter-CE FIFO full cycles", n_fifo_full);
    need("output back-pressure cycles", n_bp);
    // every fragment of both layers refilled once per output pixel (r = b*Ho*Wo*N)
    checks++;
    if (n_off[0] != NB*H1*W1*N0*U_OFF0 || n_off[1] != NB*H2*W2*N1*U_OFF1) begin
      failures++;
      $display("streamed reads %0d/%0d, expected %0d/%0d", n_off[0], n_off[1],
               NB*H1*W1*N0*U_OFF0, NB*H2*W2*N1*U_OFF1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk_comp);
    failures++;
    $display("watchdog: timeout, %0d of %0d outputs seen", optr, NOUT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
