// tb_pool_engine: streams NB random images (signed activations) through a
// 3x3 max-pooling engine and compares every output word with a maximum
// worked out directly over the window. Images 0 and 1 run with random input
// gaps and random output back-pressure; image 2 runs at full speed, where
// the engine must take one input word per cycle (rate check: the image's
// H*W*CT input words in at most H*W*CT + 4 cycles).
module tb_pool_engine;
  localparam int LA = 5, CP = 3, H = 7, W = 6, CT = 2, K = 3, NB = 3;
  localparam int HO = H - K + 1, WO = W - K + 1;
  localparam int NIN = NB*H*W*CT, NOUT = NB*HO*WO*CT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [CP*LA-1:0] in_data, out_data;
  pool_engine #(.LA(LA), .CP(CP), .H(H), .W(W), .CT(CT), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [LA-1:0] x [NB][H][W][CT*CP];
  logic [CP*LA-1:0] in_seq [NIN];
  logic [CP*LA-1:0] exp_out [NOUT];
  int iptr = 0, optr = 0;
  int t_start = 0, t_end = 0;
  logic fast;

  initial begin
    foreach (x[b, r, q, c]) x[b][r][q][c] = LA'($urandom);
    foreach (in_seq[i]) begin
      automatic int b = i / (H*W*CT), r = (i / (W*CT)) % H, q = (i / CT) % W, ct = i % CT;
      for (int cp = 0; cp < CP; cp++) in_seq[i][cp*LA +: LA] = x[b][r][q][ct*CP + cp];
    end
    foreach (exp_out[o]) begin
      automatic int b = o / (HO*WO*CT), r = (o / (WO*CT)) % HO, q = (o / CT) % WO, ct = o % CT;
      for (int cp = 0; cp < CP; cp++) begin
        automatic logic signed [LA-1:0] m = x[b][r][q][ct*CP + cp];
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++)
            if (x[b][r+i][q+j][ct*CP + cp] > m) m = x[b][r+i][q+j][ct*CP + cp];
        exp_out[o][cp*LA +: LA] = m;
      end
    end
  end

  assign fast    = iptr >= 2*H*W*CT;
  assign in_data = in_seq[iptr < NIN ? iptr : 0];

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 0; out_ready <= 0;
    end else begin
      if (in_valid && in_ready) begin
        if (iptr == 2*H*W*CT) t_start = int'($time / 10);
        if (iptr == NIN - 1) t_end = int'($time / 10);
        iptr <= iptr + 1;
      end
      if (!(in_valid && !in_ready))
        in_valid <= ((in_valid && in_ready) ? iptr + 1 : iptr) < NIN && (fast || $urandom % 3 != 0);
      out_ready <= fast || ($urandom % 4 != 0);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== exp_out[optr]) begin
          failures++; $display("output %0d: got %h expected %h", optr, out_data, exp_out[optr]);
        end
        optr <= optr + 1;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (optr == NOUT);
    repeat (5) @(posedge clk);
    checks++;
    if (t_end - t_start > H*W*CT + 4) begin
      failures++; $display("full-speed image took %0d cycles", t_end - t_start);
    end
    $display("full-speed image: %0d input words in %0d cycles", H*W*CT, t_end - t_start + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d outputs", optr, NOUT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
