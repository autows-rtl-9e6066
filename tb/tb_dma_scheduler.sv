// tb_dma_scheduler: three CE ports, a four-entry sequence
// {0: 6 beats}, {1: 4 beats}, {2: 2 beats}, {1: 4 beats}, and one DRAM
// region per port. A slow DRAM model answers the requests and every port
// takes beats with random back-pressure. Checks: every request address and
// length, that beats go only to the port the sequence names, in sequence
// order, that each port receives its region's words in order with wrap
// around, that no beat is lost or duplicated, and the round count.
module tb_dma_scheduler;
  import aws_pkg::*;
  localparam int NPORT = 3, WW = 16, SEQ_MAX = 8, NENT = 4;
  localparam int SEQ_PORT  [NENT] = '{0, 1, 2, 1};
  localparam int SEQ_BEATS [NENT] = '{6, 4, 2, 4};
  localparam int BASE [NPORT] = '{10, 40, 70};
  localparam int SIZE [NPORT] = '{12, 8, 6};
  localparam int ROUNDS = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, cfg_seq_we, cfg_reg_we, req_valid, req_ready, rd_valid, rd_ready, round, blocked;
  logic [idx_w(SEQ_MAX)-1:0] cfg_seq_idx;
  logic [idx_w(NPORT)-1:0] cfg_seq_port, cfg_reg_port, cur_port;
  logic [BURST_LW-1:0] cfg_seq_beats;
  logic [idx_w(SEQ_MAX+1)-1:0] cfg_seq_len;
  logic [DRAM_AW-1:0] cfg_reg_base, cfg_reg_size;
  dma_req_t req;
  logic [WW-1:0] rd_data, out_data;
  logic [NPORT-1:0] out_valid, out_ready;

  dma_scheduler #(.NPORT(NPORT), .WW(WW), .SEQ_MAX(SEQ_MAX)) dut (.*);
  dram_model #(.WW(WW), .WORDS(128)) u_dram (.clk, .rst_n, .slow(1'b1), .req_valid, .req_ready,
                                              .req, .rd_valid, .rd_ready, .rd_data);

  int checks = 0, failures = 0;
  int ent = 0, left = SEQ_BEATS[0], got [NPORT], n_round = 0, n_req = 0, n_blocked = 0;
  int ptr_model [NPORT];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial foreach (u_dram.mem[i]) u_dram.mem[i] = WW'(i * 7 + 3);

  always @(posedge clk) if (rst_n && enable) begin
    out_ready <= NPORT'($urandom);
    n_round   += int'(round);
    n_blocked += int'(blocked);
    if (req_valid && req_ready) begin
      check(req.addr == DRAM_AW'(BASE[SEQ_PORT[n_req % NENT]] + ptr_model[SEQ_PORT[n_req % NENT]]),
            $sformatf("request %0d address %0d", n_req, req.addr));
      check(req.len == BURST_LW'(SEQ_BEATS[n_req % NENT]), "request length");
      ptr_model[SEQ_PORT[n_req % NENT]] = (ptr_model[SEQ_PORT[n_req % NENT]] + SEQ_BEATS[n_req % NENT]) % SIZE[SEQ_PORT[n_req % NENT]];
      n_req++;
    end
    check($countones(out_valid) <= 1, "one port at a time");
    for (int p = 0; p < NPORT; p++)
      if (out_valid[p] && out_ready[p]) begin
        check(p == SEQ_PORT[ent], $sformatf("beat to port %0d during entry %0d", p, ent));
        check(out_data == WW'((BASE[p] + got[p] % SIZE[p]) * 7 + 3), $sformatf("port %0d beat %0d data", p, got[p]));
        got[p]++;
        left--;
        if (left == 0) begin
          ent = (ent + 1) % NENT;
          left = SEQ_BEATS[ent];
        end
      end
  end

  initial begin
    got = '{0, 0, 0}; ptr_model = '{0, 0, 0};
    enable = 0; cfg_seq_we = 0; cfg_reg_we = 0; out_ready = '0;
    cfg_seq_idx = '0; cfg_seq_port = '0; cfg_seq_beats = '0; cfg_seq_len = '0;
    cfg_reg_port = '0; cfg_reg_base = '0; cfg_reg_size = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPORT; p++) begin
      @(negedge clk); cfg_reg_we = 1; cfg_reg_port = p[idx_w(NPORT)-1:0];
      cfg_reg_base = DRAM_AW'(BASE[p]); cfg_reg_size = DRAM_AW'(SIZE[p]);
    end
    @(negedge clk); cfg_reg_we = 0;
    for (int e = 0; e < NENT; e++) begin
      @(negedge clk); cfg_seq_we = 1; cfg_seq_idx = e[idx_w(SEQ_MAX)-1:0];
      cfg_seq_port = SEQ_PORT[e][idx_w(NPORT)-1:0]; cfg_seq_beats = BURST_LW'(SEQ_BEATS[e]);
    end
    @(negedge clk); cfg_seq_we = 0; cfg_seq_len = NENT; enable = 1;
    wait (n_round == ROUNDS);
    @(negedge clk);
    check(got[0] == ROUNDS*6 && got[1] == ROUNDS*8 && got[2] == ROUNDS*2,
          $sformatf("beats per port %0d %0d %0d", got[0], got[1], got[2]));
    check(n_blocked > 0, "back-pressure seen");
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
