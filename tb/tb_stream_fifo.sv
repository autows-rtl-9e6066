// tb_stream_fifo: random pushes and pops against a queue model. Checks every
// popped word, the occupancy count, that a full FIFO refuses input, and the
// one-cycle fall-through latency of an empty FIFO.
module tb_stream_fifo;
  localparam int W = 8, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q [$];
  bit run = 0;
  int t = 0;

  // random traffic, sampled and driven at the clock edge
  always @(posedge clk) if (run) begin
    t <= t + 1;
    check(count == q.size(), "count");
    if (q.size() == DEPTH) begin fulls++; check(!in_ready, "full must refuse"); end
    if (out_valid && out_ready) begin
      check(q.size() > 0 && out_data == q[0], "data order");
      if (q.size() > 0) void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
    if (!(in_valid && !in_ready)) begin
      in_valid <= ($urandom % 3) != 0;
      in_data  <= W'($urandom);
    end
    out_ready <= (t < 1000) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: push into empty FIFO, visible after one edge
    @(negedge clk); in_valid = 1; in_data = 8'hA5;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 8'hA5 && count == 1, "fall-through latency");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid && count == 0, "empty after pop");
    run = 1;
    repeat (2000) @(posedge clk);
    run = 0;
    check(fulls > 0, "full state reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
