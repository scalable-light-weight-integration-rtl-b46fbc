// Self-checking test of async_fifo (router input/output buffers): a writer
// on a 4-unit clock and a bursty reader on a 10-unit clock move 3000
// random words; every
// word must arrive once, in order. The writer fills the FIFO until wfull,
// which must appear, and walmost_full must be raised before wfull.
module tb_async_fifo;
  localparam int W = 24, D = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #2 wclk = ~wclk;
  always #5 rclk = ~rclk;
  logic wr_en = 0, rd_en = 0, wfull, walmost_full, rempty;
  logic [W-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0, n_full = 0, n_af_only = 0;
  logic [W-1:0] q [$];
  localparam int N = 3000;
  int nsent = 0, nrecv = 0;
  bit read_gate = 1;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer: drive on the falling edge
  always @(negedge wclk) if (wrst_n) begin
    if (wfull) n_full++;
    if (walmost_full && !wfull) n_af_only++;
    if (nsent < N && !wfull) begin
      wr_en   <= 1'b1;
      wr_data <= W'($urandom);
    end else wr_en <= 1'b0;
  end
  always @(posedge wclk) if (wr_en && !wfull) begin
    q.push_back(wr_data);
    nsent++;
  end

  // reader: bursty
  always @(negedge rclk) if (rrst_n) begin
    if ($urandom_range(0, 99) == 0) read_gate <= !read_gate;
    rd_en <= read_gate && !rempty;
    if (read_gate && !rempty) begin
      checks++;
      if (q.size() == 0 || rd_data != q[0]) begin
        failures++; $display("ERROR: got %h exp %h", rd_data, q.size() ? q[0] : '0);
      end
      if (q.size() != 0) void'(q.pop_front());
      nrecv++;
    end
  end

  initial begin
    #30 wrst_n = 1; rrst_n = 1;
    wait (nrecv == N);
    #100;
    checks++;
    if (n_full == 0 || n_af_only == 0) begin failures++; $display("ERROR: full never seen"); end
    checks++;
    if (!rempty) begin failures++; $display("ERROR: not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
