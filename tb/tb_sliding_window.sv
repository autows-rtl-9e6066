// tb_sliding_window: streams two random 5x6 frames of 2 channel groups
// through a 3x3 window with random input gaps and output back-pressure, and
// compares every window with one cut straight from the frame. A second pass
// with no gaps checks the full rate: one input word accepted per cycle
// while the output is always taken.
module tb_sliding_window;
  localparam int LA = 5, CP = 2, H = 5, W = 6, CT = 2, K = 3, NB = 2;
  localparam int HO = H - K + 1, WO = W - K + 1;
  localparam int NIN = NB*H*W*CT, NOUT = NB*HO*WO*CT;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [CP*LA-1:0] in_data;
  logic [K*K*CP*LA-1:0] out_data;
  sliding_window #(.LA(LA), .CP(CP), .H(H), .W(W), .CT(CT), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  logic [CP*LA-1:0] pix [NB][H][W][CT];
  logic [CP*LA-1:0] in_seq [NIN];
  logic [K*K*CP*LA-1:0] exp_win [NOUT];
  bit gaps = 1;
  int iptr, optr, pass_cycles, in_fires;

  initial begin
    foreach (pix[b, r, c, t]) pix[b][r][c][t] = (CP*LA)'($urandom);
    for (int b = 0; b < NB; b++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      for (int t = 0; t < CT; t++) in_seq[((b*H + r)*W + c)*CT + t] = pix[b][r][c][t];
    for (int b = 0; b < NB; b++) for (int r = 0; r < HO; r++) for (int c = 0; c < WO; c++)
      for (int t = 0; t < CT; t++)
        for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
          exp_win[((b*HO + r)*WO + c)*CT + t][(i*K + j)*CP*LA +: CP*LA] = pix[b][r+i][c+j][t];
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      iptr <= 0; optr <= 0; in_valid <= 0; out_ready <= 0;
    end else begin
      if (in_valid && in_ready) iptr <= iptr + 1;
      if (!(in_valid && !in_ready))
        in_valid <= ((in_valid && in_ready) ? iptr + 1 : iptr) < NIN && (!gaps || $urandom % 2 == 0);
      out_ready <= !gaps || ($urandom % 3 == 0);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== exp_win[optr]) begin
          failures++;
          if (failures < 10) $display("window %0d: got %h expected %h", optr, out_data, exp_win[optr]);
        end
        optr <= optr + 1;
      end
    end
  end
  assign in_data = in_seq[iptr < NIN ? iptr : 0];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (optr == NOUT);
    // second pass, full rate
    @(negedge clk); rst_n = 0; gaps = 0;
    @(negedge clk); rst_n = 1;
    pass_cycles = 0; in_fires = 0;
    while (iptr < NIN) begin
      @(posedge clk);
      pass_cycles++;
      in_fires += int'(in_valid && in_ready);
    end
    wait (optr == NOUT);
    checks++;
    if (pass_cycles > NIN + 2) begin
      failures++;
      $display("full-rate pass took %0d cycles for %0d words", pass_cycles, NIN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
