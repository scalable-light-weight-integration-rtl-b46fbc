// Self-checking test of pkt_fifo (task buffer, packet output buffer,
// chaining buffer): random packets of 1 to 6 flits are written with the
// end-of-unit mark on their last flit and read back at random. Checks data,
// rd_eop, unit_ready (a complete unit is stored), empty, full and
// almost_full against a model every cycle.
module tb_pkt_fifo;
  localparam int W = 20, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_eop = 0, rd_en = 0, rd_eop, empty, full, almost_full, unit_ready;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W:0] q [$];
  int units = 0, left = 0;

  pkt_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(bit w, bit r);
    @(negedge clk);
    if (left == 0) left = $urandom_range(1, 6);
    wr_en = w && !full; rd_en = r && !empty; wr_data = W'($urandom); wr_eop = (left == 1);
    checks++;
    if (empty != (q.size() == 0) || full != (q.size() == D) || almost_full != (q.size() >= D - 1)
        || unit_ready != (units > 0) || int'(count) != q.size()) begin
      failures++; $display("ERROR: flags e%0d f%0d af%0d ur%0d model size %0d units %0d",
                           empty, full, almost_full, unit_ready, q.size(), units);
    end
    if (rd_en) begin
      checks++;
      if ({rd_eop, rd_data} != q[0]) begin failures++; $display("ERROR: data"); end
    end
    @(posedge clk);
    if (rd_en) begin
      if (q[0][W]) units--;
      void'(q.pop_front());
    end
    if (wr_en) begin
      q.push_back({wr_eop, wr_data});
      if (wr_eop) units++;
      left--;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D + 2; i++) step(1, 0);
    for (int i = 0; i < D + 2; i++) step(0, 1);
    for (int i = 0; i < 4000; i++) step($urandom_range(0, 2) != 0, $urandom_range(0, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
