// tb_pe_array: random windows and weight words with random gaps on both
// inputs and random output back-pressure. Every product is compared with
// one computed here from the signed operands; the test also checks that
// each window is used for exactly FT weight words before it is released,
// and that with no gaps one product word leaves per cycle.
module tb_pe_array;
  localparam int LA = 5, LW = 4, FP = 2, E = 3, FT = 3, PW = LA + LW;
  localparam int NA = 40, NW = NA * FT;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_valid, a_ready, w_valid, w_ready, p_valid, p_ready;
  logic [E*LA-1:0] a_data;
  logic [FP*E*LW-1:0] w_data;
  logic [FP*E*PW-1:0] p_data;
  pe_array #(.LA(LA), .LW(LW), .FP(FP), .E(E), .FT(FT)) dut (.*);

  int checks = 0, failures = 0;
  logic [E*LA-1:0] av [NA];
  logic [FP*E*LW-1:0] wv [NW];
  logic [FP*E*PW-1:0] ev [NW];
  int aptr, wptr, pptr, a_taken_at_w [NA];
  bit gaps = 1;
  int fast_cycles, fast_out;

  initial begin
    foreach (av[i]) av[i] = (E*LA)'($urandom);
    foreach (wv[i]) wv[i] = (FP*E*LW)'({$urandom, $urandom});
    for (int k = 0; k < NW; k++)
      for (int f = 0; f < FP; f++)
        for (int e = 0; e < E; e++) begin
          automatic longint pa = longint'($signed(av[k/FT][e*LA +: LA]));
          automatic longint pw = longint'($signed(wv[k][(f*E + e)*LW +: LW]));
          ev[k][(f*E + e)*PW +: PW] = PW'(pa * pw);
        end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      aptr <= 0; wptr <= 0; pptr <= 0; a_valid <= 0; w_valid <= 0; p_ready <= 0;
    end else begin
      if (a_valid && a_ready) begin
        aptr <= aptr + 1;
        checks++;
        if ((wptr + 1) % FT != 0 || !(w_valid && w_ready)) begin
          failures++; $display("window %0d released after weight %0d", aptr, wptr);
        end
      end
      if (w_valid && w_ready) wptr <= wptr + 1;
      if (!(a_valid && !a_ready))
        a_valid <= ((a_valid && a_ready) ? aptr + 1 : aptr) < NA && (!gaps || $urandom % 3 != 0);
      if (!(w_valid && !w_ready))
        w_valid <= ((w_valid && w_ready) ? wptr + 1 : wptr) < NW && (!gaps || $urandom % 3 != 0);
      p_ready <= !gaps || $urandom % 2 == 0;
      if (p_valid && p_ready) begin
        checks++;
        if (p_data !== ev[pptr]) begin
          failures++;
          if (failures < 10) $display("product %0d: got %h expected %h", pptr, p_data, ev[pptr]);
        end
        pptr <= pptr + 1;
      end
    end
  end
  assign a_data = av[aptr < NA ? aptr : 0];
  assign w_data = wv[wptr < NW ? wptr : 0];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (pptr == NW);
    @(negedge clk); rst_n = 0; gaps = 0;
    @(negedge clk); rst_n = 1;
    fast_cycles = 0;
    while (pptr < NW) begin @(posedge clk); fast_cycles++; end
    checks++;
    if (fast_cycles > NW + 3) begin
      failures++; $display("full rate: %0d cycles for %0d products", fast_cycles, NW);
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
