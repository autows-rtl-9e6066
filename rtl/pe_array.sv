// pe_array: the CE processing elements, including the data fork.
//
// Each activation word is one K*K*CP window from the input buffer; each
// weight word holds FP filters of the same K*K*CP shape,
//   w_data[(fp*E + e)*LW +: LW] with E = K*K*CP and e = (ki*K + kj)*CP + cp.
// The window is forked (broadcast) to the FP filter lanes and all FP*E signed
// products are formed in parallel, one weight word per handshake. A window
// is reused for FT consecutive weight words (the FT filter groups of the
// layer) and released after the last of them. Products leave registered as
//   p_data[(fp*E + e)*(LA+LW) +: LA+LW]
// with one cycle of latency; the array runs at one weight word per cycle
// unless an input is missing or the output is held.
// The product-only PE, the f_p*c_p*k_p^2*(L_W+L_A) output width and the
// f_t-fold reuse of each window follow the paper's CE dataflow; signed two's
// complement operands and putting the f_p-way fork here as wiring are this
// design's choices.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module pe_array #(
  parameter int unsigned LA = 5,
  parameter int unsigned LW = 4,
  parameter int unsigned FP = 2,
  parameter int unsigned E  = 18,
  parameter int unsigned FT = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      a_valid,
  output logic                      a_ready,
  input  logic [E*LA-1:0]           a_data,
  input  logic                      w_valid,
  output logic                      w_ready,
  input  logic [FP*E*LW-1:0]        w_data,
  output logic                      p_valid,
  input  logic                      p_ready,
  output logic [FP*E*(LA+LW)-1:0]   p_data
);
  localparam int unsigned PW = LA + LW;

  logic [aws_pkg::idx_w(FT)-1:0] ft;

  // Signed LA x LW multiply into a full-width PW-bit product.
  function automatic logic [PW-1:0] mul(input logic [LA-1:0] a, input logic [LW-1:0] w);
    logic signed [PW-1:0] ax, wx;
    ax = PW'($signed(a));
    wx = PW'($signed(w));
    return ax * wx;
  endfunction
  logic fire;

  assign fire    = a_valid && w_valid && (!p_valid || p_ready);
  assign w_ready = fire;
  assign a_ready = fire && (ft == ($bits(ft))'(FT-1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ft      <= '0;
      p_valid <= 1'b0;
    end else begin
      if (fire) begin
        p_valid <= 1'b1;
        ft <= (ft == ($bits(ft))'(FT-1)) ? '0 : ft + 1'b1;
      end else if (p_ready) begin
        p_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      for (int unsigned fp = 0; fp < FP; fp++)
        for (int unsigned e = 0; e < E; e++)
          p_data[(fp*E + e)*PW +: PW] <=
            mul(a_data[e*LA +: LA], w_data[(fp*E + e)*LW +: LW]);
    end
  end

endmodule
