// tb_output_buffer: random product words (ft fastest, then ct) with random
// gaps and output back-pressure. For each output pixel and filter group the
// expected word is the sum over all products and channel groups, shifted,
// ReLU-clamped and saturated, computed here; one output per filter group
// must appear, only on the last channel group.
module tb_output_buffer;
  localparam int LA = 5, LW = 4, FP = 2, E = 3, FT = 2, CT = 3, SHIFT = 2, PW = LA + LW;
  localparam int NPIX = 30, NIN = NPIX * CT * FT, NOUT = NPIX * FT;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic p_valid, p_ready, out_valid, out_ready;
  logic [FP*E*PW-1:0] p_data;
  logic [FP*LA-1:0] out_data;
  output_buffer #(.LA(LA), .LW(LW), .FP(FP), .E(E), .FT(FT), .CT(CT), .SHIFT(SHIFT), .RELU(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  logic [FP*E*PW-1:0] pv [NIN];
  logic [FP*LA-1:0] ev [NOUT];
  int iptr, optr;

  initial begin
    foreach (pv[i]) pv[i] = (FP*E*PW)'({$urandom, $urandom});
    for (int px = 0; px < NPIX; px++)
      for (int ft = 0; ft < FT; ft++)
        for (int f = 0; f < FP; f++) begin
          automatic longint acc = 0;
          for (int ct = 0; ct < CT; ct++)
            for (int e = 0; e < E; e++)
              acc += longint'($signed(pv[(px*CT + ct)*FT + ft][(f*E + e)*PW +: PW]));
          acc = acc >>> SHIFT;
          if (acc < 0) acc = 0;
          if (acc > 15) acc = 15;
          ev[px*FT + ft][f*LA +: LA] = LA'(acc);
        end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      iptr <= 0; optr <= 0; p_valid <= 0; out_ready <= 0;
    end else begin
      if (p_valid && p_ready) iptr <= iptr + 1;
      if (!(p_valid && !p_ready))
        p_valid <= ((p_valid && p_ready) ? iptr + 1 : iptr) < NIN && $urandom % 4 != 0;
      out_ready <= $urandom % 3 != 0;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== ev[optr]) begin
          failures++;
          if (failures < 10) $display("output %0d: got %h expected %h", optr, out_data, ev[optr]);
        end
        optr <= optr + 1;
      end
    end
  end
  assign p_data = pv[iptr < NIN ? iptr : 0];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (iptr == NIN);
    repeat (20) @(posedge clk);
    checks++;
    if (optr != NOUT) begin failures++; $display("%0d outputs, expected %0d", optr, NOUT); end
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
