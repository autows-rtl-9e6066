// output_buffer: the CE accumulation stage.
//
// Each input word carries FP lanes of E = K*K*CP products (from pe_array).
// For every lane the E products are summed, and the sum is accumulated over
// the CT channel groups of the layer in one accumulator per (filter group ft,
// lane fp): products arrive with ft changing fastest, then ct, so FT*FP
// accumulators are needed. On the last channel group the finished sum is
// requantised and sent out as one FP*LA-bit word per ft; earlier groups are
// only absorbed. Output words leave in the order pixel, ft, and lane fp holds
// output channel ft*FP + fp:  out_data[fp*LA +: LA].
// Requantisation: arithmetic right shift by SHIFT, optional ReLU (RELU=1),
// then saturation to the signed LA-bit range.
// Timing: input taken every cycle while absorbing; on the last group an input
// is taken when the single output register is free or being emptied; one
// cycle of latency.
// Accumulation over the window and channel dimensions and the f_p*L_A output
// width follow the paper; the accumulator width, shift-and-saturate
// requantisation and the place of the ReLU are this design's choices.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module output_buffer #(
  parameter int unsigned LA    = 5,
  parameter int unsigned LW    = 4,
  parameter int unsigned FP    = 2,
  parameter int unsigned E     = 18,
  parameter int unsigned FT    = 4,
  parameter int unsigned CT    = 2,
  parameter int unsigned SHIFT = 4,
  parameter bit          RELU  = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     p_valid,
  output logic                     p_ready,
  input  logic [FP*E*(LA+LW)-1:0]  p_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [FP*LA-1:0]         out_data
);
  localparam int unsigned PW = LA + LW;
  localparam int unsigned AW = PW + aws_pkg::idx_w(E*CT) + 1;

  logic signed [AW-1:0] acc [FT][FP];
  logic signed [AW-1:0] lane_sum [FP];
  logic [aws_pkg::idx_w(FT)-1:0] ft;
  logic [aws_pkg::idx_w(CT)-1:0] ct;
  logic last_ct, take;

  assign last_ct = (ct == ($bits(ct))'(CT-1));
  assign p_ready = !last_ct || !out_valid || out_ready;
  assign take    = p_valid && p_ready;

  // Adder tree per lane (written as a loop; synthesis builds the tree).
  always_comb begin
    for (int unsigned fp = 0; fp < FP; fp++) begin
      lane_sum[fp] = '0;
      for (int unsigned e = 0; e < E; e++)
        lane_sum[fp] += AW'($signed(p_data[(fp*E + e)*PW +: PW]));
    end
  end

  function automatic logic [LA-1:0] requant(input logic signed [AW-1:0] v);
    logic signed [AW-1:0] s;
    s = v >>> SHIFT;
    if (RELU && s < 0) s = '0;
    if (s > AW'((1 << (LA-1)) - 1))      return LA'((1 << (LA-1)) - 1);
    else if (s < -AW'(1 << (LA-1)))      return LA'(-(1 << (LA-1)));
    else                                  return s[LA-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ft <= '0;
      ct <= '0;
      out_valid <= 1'b0;
    end else begin
      if (take && last_ct)  out_valid <= 1'b1;
      else if (out_ready)   out_valid <= 1'b0;
      if (take) begin
        if (ft == ($bits(ft))'(FT-1)) begin
          ft <= '0;
          ct <= last_ct ? '0 : ct + 1'b1;
        end else begin
          ft <= ft + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      for (int unsigned fp = 0; fp < FP; fp++) begin
        if (ct == '0) acc[ft][fp] <= lane_sum[fp];
        else          acc[ft][fp] <= acc[ft][fp] + lane_sum[fp];
        if (last_ct)
          out_data[fp*LA +: LA] <= requant((ct == '0) ? lane_sum[fp] : acc[ft][fp] + lane_sum[fp]);
      end
    end
  end

endmodule
