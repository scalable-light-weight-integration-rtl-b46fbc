// Self-checking test of packet_receiver. The PR under test serves HWA IDs
// 4..7 (BASE_ID = 4) with two task buffers each. The testbench plays the
// router output buffer (a queue with Empty and first-word-fall-through
// data) and the other PRs: a packet for an HWA outside 4..7 is removed by
// the testbench after checking that this PR left it alone. Commands must be
// written to the right channel's request input one cycle after they are
// read; payload packets (head plus body flits) must land, flit by flit and
// in order, in the task buffer named by the head flit; Ready low must hold
// the PR back. A payload packet of N flits must be written within N+2
// cycles of its head flit becoming visible (the paper's PR payload latency).
module tb_packet_receiver;
  import hwa_pkg::*;
  localparam int NCH = 4, NUM_TB = 2, BASE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx_empty, rx_rd_en;
  logic [FLIT_W-1:0] rx_data, data_out;
  logic [NCH-1:0] req_ready = '1, req_wr;
  logic [NCH-1:0][NUM_TB-1:0] tb_ready = '1, tb_wr;

  packet_receiver #(.NCH(NCH), .NUM_TB(NUM_TB), .BASE_ID(BASE)) dut (.*);

  int checks = 0, failures = 0;
  logic [FLIT_W-1:0] inq [$];
  // expected writes per target: index ch*3 + 0 = request, +1+tb = task buffer
  logic [FLIT_W-1:0] expq [NCH*3][$];
  int n_foreign = 0, n_stall = 0, n_cmd = 0, n_pay = 0;

  assign rx_empty = (inq.size() == 0);
  assign rx_data  = rx_empty ? '0 : inq[0];

  function automatic logic [FLIT_W-1:0] head(int hwa, bit cmd, int tb, bit tail, int tag);
    head_flit_t h;
    h = '0; h.route = FPGA_NODE; h.pkt_head = 1; h.pkt_tail = tail;
    h.hwa_id = HWAID_W'(hwa); h.cmd = cmd; h.tb_id = TBID_W'(tb);
    h.task_head = 1; h.task_tail = 1; h.start_addr = ADDR_W'(tag);
    return h;
  endfunction

  int tag = 0;
  task automatic add_packet(int hwa, bit cmd, int tb, int nbody);
    logic [FLIT_W-1:0] f;
    body_flit_t b;
    bit mine;
    mine = (hwa >= BASE && hwa < BASE + NCH);
    tag++;
    f = head(hwa, cmd, tb, cmd || nbody == 0, tag);
    inq.push_back(f);
    if (mine) expq[(hwa - BASE) * 3 + (cmd ? 0 : 1 + tb)].push_back(f);
    if (!cmd) for (int i = 0; i < nbody; i++) begin
      b.route = FPGA_NODE; b.pkt_head = 0; b.pkt_tail = (i == nbody - 1);
      b.data = {32'(tag), 32'(i), 64'($urandom)};
      inq.push_back(b);
      if (mine) expq[(hwa - BASE) * 3 + 1 + tb].push_back(b);
    end
  endtask

  // pop the queue when the PR reads; check the writes; play the other PRs
  int idle_foreign = 0;
  int last_read_cycle = -10, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < NCH; c++) begin
      if (req_wr[c]) begin
        checks++; n_cmd++;
        if (expq[c*3].size() == 0 || data_out != expq[c*3][0]) begin failures++; $display("ERROR: cmd ch %0d", c); end
        else void'(expq[c*3].pop_front());
        checks++;
        if (cyc - last_read_cycle != 1) begin failures++; $display("ERROR: command latency"); end
      end
      for (int t = 0; t < NUM_TB; t++) if (tb_wr[c][t]) begin
        checks++; n_pay++;
        if (expq[c*3+1+t].size() == 0 || data_out != expq[c*3+1+t][0]) begin
          failures++; $display("ERROR: tb write ch %0d tb %0d", c, t);
        end else void'(expq[c*3+1+t].pop_front());
      end
    end
    if (rx_rd_en && !rx_empty) begin
      void'(inq.pop_front());
      last_read_cycle = cyc;
    end else if (!rx_empty) begin
      head_flit_t h;
      h = head_flit_t'(inq[0]);
      if (h.pkt_head && !(h.hwa_id >= BASE && h.hwa_id < BASE + NCH)) begin
        idle_foreign++;
        if (idle_foreign == 3) begin
          // another PR takes the whole packet
          n_foreign++;
          do void'(inq.pop_front());
          while (inq.size() != 0 && !inq[0][129]);
          idle_foreign = 0;
        end
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency of one payload packet of N = 1 + 5 flits
    add_packet(5, 0, 1, 5);
    t0 = cyc;
    wait (expq[1*3+2].size() == 0);
    @(posedge clk);
    checks++;
    if (cyc - t0 > 6 + 2) begin failures++; $display("ERROR: payload latency %0d", cyc - t0); end
    // Ready low holds the PR back
    tb_ready[2][0] = 1'b0;
    add_packet(6, 0, 0, 3);
    repeat (20) @(posedge clk);
    checks++;
    if (expq[2*3+1].size() != 4) begin failures++; $display("ERROR: wrote while not ready"); end
    else n_stall++;
    tb_ready[2][0] = 1'b1;
    // random traffic
    for (int i = 0; i < 300; i++) begin
      int hwa;
      hwa = $urandom_range(0, 11);
      add_packet(hwa, $urandom_range(0, 2) == 0, $urandom_range(0, 1), $urandom_range(1, 8));
    end
    while (inq.size() != 0) begin
      @(posedge clk);
      if ($urandom_range(0, 9) == 0) tb_ready[$urandom_range(0, 3)][$urandom_range(0, 1)] <= 1'b0;
      else tb_ready <= '1;
    end
    repeat (5) @(posedge clk);
    for (int k = 0; k < NCH * 3; k++) begin
      checks++;
      if (expq[k].size() != 0) begin failures++; $display("ERROR: %0d flits never written to %0d", expq[k].size(), k); end
    end
    checks++;
    if (n_foreign == 0 || n_stall == 0 || n_cmd == 0 || n_pay == 0) begin failures++; $display("ERROR: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
