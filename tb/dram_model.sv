// dram_model: behavioural model of the off-chip DRAM and its read engine,
// for testbenches only.
//
// Accepts one read request {addr, len} at a time (req_ready is high while
// idle) and returns len consecutive words of `mem`, starting at addr, one
// per rd_valid/rd_ready handshake. When `slow` is set, beats come with
// random gaps (about one beat in six cycles), modelling a busy memory.
// The testbench fills `mem` directly by hierarchical reference.
module dram_model
  import aws_pkg::*;
#(
  parameter int unsigned WW    = 16,
  parameter int unsigned WORDS = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          slow,
  input  logic          req_valid,
  output logic          req_ready,
  input  dma_req_t      req,
  output logic          rd_valid,
  input  logic          rd_ready,
  output logic [WW-1:0] rd_data
);
  logic [WW-1:0] mem [WORDS];
  int unsigned addr, left;

  assign req_ready = rst_n && (left == 0);
  assign rd_data   = mem[addr % WORDS];

  always @(posedge clk) begin
    if (!rst_n) begin
      left <= 0; rd_valid <= 1'b0; addr <= 0;
    end else if (req_valid && req_ready) begin
      addr <= int'(req.addr);
      left <= int'(req.len);
      rd_valid <= 1'b0;
    end else if (left != 0) begin
      if (rd_valid && rd_ready) begin
        addr <= addr + 1;
        left <= left - 1;
        rd_valid <= (left > 1) && (!slow || $urandom % 6 == 0);
      end else if (!rd_valid) begin
        rd_valid <= !slow || $urandom % 6 == 0;
      end
    end
  end
endmodule
