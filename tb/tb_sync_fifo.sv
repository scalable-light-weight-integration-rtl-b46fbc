// Self-checking test of sync_fifo (request buffer / local grant buffer):
// random writes and reads against a queue model, checking data order,
// empty, full and count every cycle, including a fill to full and a drain.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, empty, full;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(bit w, bit r);
    @(negedge clk);
    wr_en = w && !full; rd_en = r && !empty; wr_data = W'($urandom);
    checks++;
    if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size()) begin
      failures++; $display("ERROR: flags: empty %0d full %0d count %0d model %0d", empty, full, count, q.size());
    end
    if (rd_en) begin
      checks++;
      if (rd_data != q[0]) begin failures++; $display("ERROR: data %h exp %h", rd_data, q[0]); end
    end
    @(posedge clk);
    if (rd_en) void'(q.pop_front());
    if (wr_en) q.push_back(wr_data);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D + 2; i++) step(1, 0);   // fill past full
    for (int i = 0; i < D + 2; i++) step(0, 1);   // drain past empty
    for (int i = 0; i < 3000; i++) step($urandom_range(0, 1), $urandom_range(0, 1));
    @(negedge clk); wr_en = 0; rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
