// dma_scheduler: deterministic time-multiplexing of one DMA port over the
// weight buffers of several CEs.
//
// A configuration sequence of up to SEQ_MAX entries lists, in order, which
// CE to serve and for how many DMA beats; the scheduler walks it round
// after round. Each CE also has a DRAM region (word base address and size in
// DMA words) holding its dynamic weights in the order they are consumed; a
// per-CE pointer walks that region and wraps at its end, so consecutive
// services of a CE fetch consecutive fragments.
// For each entry the scheduler
//   1. sends one read request {addr = base + pointer, len = beats} (S_REQ),
//   2. forwards the returned beats to that CE only: the demultiplexer drives
//      out_valid of the selected port and takes rd_ready from its out_ready
//      (S_DATA), so a CE whose buffer is not yet free holds the whole DMA,
//   3. advances the CE pointer and moves to the next entry.
// All of it runs in clk_dma. Entries must not cross the end of a region
// (beats divides the region size). Configuration is written while
// `enable` is low; `round` pulses when the sequence wraps, `blocked` is high
// while a beat waits for its CE.
// Following the paper: a demultiplexer between the DMA port and the CEs,
// controlled by a configuration sequence giving order and duration of
// service. This design's choices: the request/response port, per-CE address
// regions, the register-file configuration interface.
//
// Reset is synchronous and active low (this design's choice; the paper does
// not discuss reset); it clears control state only, never data arrays.
module dma_scheduler
  import aws_pkg::*;
#(
  parameter int unsigned NPORT   = 2,
  parameter int unsigned WW      = 16,
  parameter int unsigned SEQ_MAX = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       enable,
  // configuration
  input  logic                       cfg_seq_we,
  input  logic [idx_w(SEQ_MAX)-1:0]  cfg_seq_idx,
  input  logic [idx_w(NPORT)-1:0]    cfg_seq_port,
  input  logic [BURST_LW-1:0]        cfg_seq_beats,
  input  logic [idx_w(SEQ_MAX+1)-1:0] cfg_seq_len,
  input  logic                       cfg_reg_we,
  input  logic [idx_w(NPORT)-1:0]    cfg_reg_port,
  input  logic [DRAM_AW-1:0]         cfg_reg_base,
  input  logic [DRAM_AW-1:0]         cfg_reg_size,
  // DRAM read engine
  output logic                       req_valid,
  input  logic                       req_ready,
  output dma_req_t                   req,
  input  logic                       rd_valid,
  output logic                       rd_ready,
  input  logic [WW-1:0]              rd_data,
  // CE weight buffers
  output logic [NPORT-1:0]           out_valid,
  input  logic [NPORT-1:0]           out_ready,
  output logic [WW-1:0]              out_data,
  // status
  output logic [idx_w(NPORT)-1:0]    cur_port,
  output logic                       round,
  output logic                       blocked
);
  localparam int unsigned PW = idx_w(NPORT);
  localparam int unsigned SW = idx_w(SEQ_MAX);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA} state_t;

  typedef struct packed {
    logic [PW-1:0]       port;
    logic [BURST_LW-1:0] beats;
  } seq_entry_t;

  seq_entry_t         seq  [SEQ_MAX];
  logic [DRAM_AW-1:0] base [NPORT];
  logic [DRAM_AW-1:0] size [NPORT];
  logic [DRAM_AW-1:0] ptr  [NPORT];

  state_t              state;
  logic [SW-1:0]       idx;
  logic [BURST_LW-1:0] left;
  seq_entry_t          cur;
  logic                beat;

  assign cur      = seq[idx];
  assign cur_port = cur.port;

  assign req_valid = (state == S_REQ);
  assign req.addr  = base[cur.port] + ptr[cur.port];
  assign req.len   = cur.beats;

  // Demultiplexer.
  always_comb begin
    out_valid = '0;
    if (state == S_DATA) out_valid[cur.port] = rd_valid;
  end
  // Data is broadcast to every port; only the valid strobe is demultiplexed.
  assign out_data = rd_data;
  assign rd_ready = (state == S_DATA) && out_ready[cur.port];
  assign beat     = rd_valid && rd_ready;
  assign blocked  = (state == S_DATA) && rd_valid && !out_ready[cur.port];

  // Configuration registers.
  always_ff @(posedge clk) begin
    if (cfg_seq_we) seq[cfg_seq_idx] <= '{port: cfg_seq_port, beats: cfg_seq_beats};
    if (cfg_reg_we) begin
      base[cfg_reg_port] <= cfg_reg_base;
      size[cfg_reg_port] <= cfg_reg_size;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      left  <= '0;
      round <= 1'b0;
      for (int p = 0; p < NPORT; p++) ptr[p] <= '0;
    end else begin
      round <= 1'b0;
      if (cfg_reg_we) ptr[cfg_reg_port] <= '0;
      unique case (state)
        S_IDLE: if (enable && cfg_seq_len != '0) begin
          idx   <= '0;
          state <= S_REQ;
        end
        S_REQ: if (req_ready) begin
          left  <= cur.beats;
          state <= S_DATA;
        end
        S_DATA: if (beat) begin
          left <= left - 1'b1;
          if (left == BURST_LW'(1)) begin
            ptr[cur.port] <= (ptr[cur.port] + DRAM_AW'(cur.beats) >= size[cur.port])
                             ? '0 : ptr[cur.port] + DRAM_AW'(cur.beats);
            if (32'(idx) + 1 >= 32'(cfg_seq_len)) begin
              idx   <= '0;
              round <= 1'b1;
            end else begin
              idx <= idx + 1'b1;
            end
            state <= enable ? S_REQ : S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req));

endmodule
