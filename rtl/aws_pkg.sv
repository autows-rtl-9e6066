// aws_pkg: shared constants, types and helper functions of the weight-streaming
// layer-pipelined accelerator.
//
// The accelerator maps every DNN layer onto its own compute engine (CE); a
// CE's weights are split into a static part kept on chip and a dynamic part
// that a DMA scheduler re-streams from DRAM into a small dual-clock buffer.
// This package holds what several modules share: the DRAM address width, the
// request record the DMA scheduler sends to the DRAM read engine, and a
// width helper that never returns zero. All widths here are this design's
// own choices; the paper fixes none of them.
package aws_pkg;

  // DRAM byte-free word address width used by the DMA scheduler.
  localparam int unsigned DRAM_AW  = 24;
  // Width of a burst length field (in DMA beats).
  localparam int unsigned BURST_LW = 16;

  // One read request from the DMA scheduler to the DRAM read engine:
  // fetch `len` consecutive DMA words starting at word address `addr`.
  typedef struct packed {
    logic [DRAM_AW-1:0]  addr;
    logic [BURST_LW-1:0] len;
  } dma_req_t;

  // Bits needed to index `n` items, at least 1.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

endpackage
