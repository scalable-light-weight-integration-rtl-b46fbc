// End-to-end test of the FPGA multi-accelerator interface at its default
// size (32 HWA channels, PR4, PS4, two task buffers per channel).
//
// The testbench plays the processors and the memory node on the router side:
// it writes request flits into the router port, answers every grant with the
// payload packet for the granted task buffer (as the processor for direct
// access, as the memory node when the grant is routed there), and checks
// every result packet word against the expected value. Each channel drives a
// behavioural accelerator that adds (ID + 1) to every word, so a chained
// invocation must come back with the sum over all HWAs of the chain.
// Phases: single invocations of every channel; a burst of requests to one
// channel (request-buffer queueing and task-buffer waiting); GSM-like
// 3-flit and JPEG-like 18-flit payload packets; chaining depths 0 to 3 in a
// chaining group (JPEG decoder chain); results sent to memory with a
// notifying packet; multi-packet tasks; priorities; and a random mix. Every
// mechanism the design names is counted and must have happened.
module tb_fpga_accel_top;
  import hwa_pkg::*;

  localparam int NUM_CH = 32;
  localparam int GRP    = 4;

  logic clk = 0, clk_noc = 0, rst_n = 0, rst_noc_n = 0;
  always #5 clk = ~clk;       // interface clock
  always #2 clk_noc = ~clk_noc; // router clock

  logic              rx_wr, rx_full, tx_rd, tx_empty;
  logic [FLIT_W-1:0] rx_data, tx_data;
  logic [NUM_CH-1:0] hwa_idle, hwa_done, hwa_in_valid, hwa_in_last;
  logic [NUM_CH-1:0] hwa_out_valid, hwa_out_last, hwa_out_ready;
  logic [NUM_CH-1:0][DATA_W-1:0] hwa_in_data, hwa_out_data;
  logic [NUM_CH-1:0] ev_bypass, ev_req_wait, ev_chain_in, ev_chain_out, ev_result;
  logic              ev_cmd_first;

  fpga_accel_top dut (
    .clk_noc, .rst_noc_n, .clk, .rst_n,
    .rx_wr, .rx_data, .rx_full, .tx_rd, .tx_data, .tx_empty,
    .hwa_idle, .hwa_done, .hwa_in_valid, .hwa_in_data, .hwa_in_last,
    .hwa_out_valid, .hwa_out_data, .hwa_out_last, .hwa_out_ready,
    .ev_bypass, .ev_req_wait, .ev_chain_in, .ev_chain_out, .ev_result, .ev_cmd_first);

  // accelerators: channel 3 of each group is slow (Dfdiv-like), others fast
  for (genvar c = 0; c < NUM_CH; c++) begin : g_hwa
    hwa_model #(.ID(c), .LAT((c % 4 == 3) ? 60 : 1 + (c % 3))) u_hwa (
      .clk, .rst_n, .idle(hwa_idle[c]), .done(hwa_done[c]),
      .in_valid(hwa_in_valid[c]), .in_data(hwa_in_data[c]), .in_last(hwa_in_last[c]),
      .out_valid(hwa_out_valid[c]), .out_data(hwa_out_data[c]), .out_last(hwa_out_last[c]),
      .out_ready(hwa_out_ready[c]));
  end

  int checks = 0, failures = 0;

  // ---------------- invocation bookkeeping ----------------
  typedef struct {
    int          src, hwa, nw, depth, prio, npkt;
    logic [5:0]  cidx;
    logic [1:0]  dir;
    logic [127:0] base;
    logic [127:0] add;     // expected total increment
    int          final_hwa;
    bit          granted, done, notified;
  } inv_t;
  inv_t inv [int];         // keyed by tag (start address)
  int   next_tag = 1;
  int   outstanding = 0;

  // flit send queue towards the FPGA
  logic [FLIT_W-1:0] sendq [$];

  function automatic logic [FLIT_W-1:0] mk_head(int src, int hwa, bit cmd, bit th, bit tt,
      int tb, int depth, logic [5:0] cidx, int prio, logic [1:0] dir, int tag, int nw, bit ptail);
    head_flit_t h;
    h = '0;
    h.route = FPGA_NODE; h.pkt_head = 1; h.pkt_tail = ptail;
    h.src_id = SRC_W'(src); h.hwa_id = HWAID_W'(hwa); h.cmd = cmd;
    h.task_head = th; h.task_tail = tt; h.tb_id = TBID_W'(tb);
    h.cdepth = CDEPTH_W'(depth); h.cindex = cidx; h.prio = PRIO_W'(prio); h.dir = dir;
    h.start_addr = ADDR_W'(tag); h.data_size = SIZE_W'(nw * 16);
    h.payload = cmd ? HPAYLD_W'(CMD_REQUEST) : '0;
    return h;
  endfunction

  function automatic logic [127:0] word_of(int tag, int i);
    return {32'(tag), 32'(i), 32'hC0DE_0000 + 32'(i * 7), 32'(tag * 3 + i)};
  endfunction

  // start an invocation: returns its tag
  function automatic int invoke(int src, int hwa, int nw, int depth, logic [5:0] cidx,
                                int prio, logic [1:0] dir, int npkt);
    inv_t v;
    int   h;
    v.src = src; v.hwa = hwa; v.nw = nw; v.depth = depth; v.cidx = cidx; v.prio = prio;
    v.dir = dir; v.npkt = (npkt > nw) ? nw : npkt; v.granted = 0; v.done = 0; v.notified = (dir[1] == 0);
    v.add = 128'(hwa + 1);
    h = hwa;
    for (int d = depth - 1; d >= 0; d--) begin
      h = (h / GRP) * GRP + int'(cidx[2*d +: 2]);
      v.add += 128'(h + 1);
    end
    v.final_hwa = h;
    inv[next_tag] = v;
    sendq.push_back(mk_head(src, hwa, 1, 0, 0, 0, depth, cidx, prio, dir, next_tag, nw, 1));
    outstanding++;
    next_tag++;
    return next_tag - 1;
  endfunction

  // payload of a granted invocation, split into npkt packets
  task automatic send_payload(int tag, int tb);
    inv_t v;
    int   per, w;
    v = inv[tag];
    per = (v.nw + v.npkt - 1) / v.npkt;
    w = 0;
    for (int p = 0; p < v.npkt; p++) begin
      int k;
      body_flit_t b;
      k = (p == v.npkt - 1) ? v.nw - w : per;
      sendq.push_back(mk_head(v.src, v.hwa, 0, p == 0, p == v.npkt - 1, tb, v.depth, v.cidx,
                              v.prio, v.dir, tag, v.nw, 0));
      for (int i = 0; i < k; i++) begin
        b.route = FPGA_NODE; b.pkt_head = 0; b.pkt_tail = (i == k - 1);
        b.data = word_of(tag, w + i);
        sendq.push_back(b);
      end
      w += k;
    end
  endtask

  // ---------------- router side driver ----------------
  // inputs change on the falling edge, away from the sampling edge
  always @(negedge clk_noc) begin
    rx_wr <= 1'b0;
    if (rst_noc_n && sendq.size() != 0 && !rx_full) begin
      rx_wr   <= 1'b1;
      rx_data <= sendq.pop_front();
    end
  end

  // ---------------- router side monitor ----------------
  int n_grant = 0, n_result = 0, n_notify = 0, n_mmu_grant = 0, n_prio = 0, n_multi = 0;
  int n_cmd_first = 0, n_bypass = 0, n_req_wait = 0, n_chain_in = 0, n_chain_out = 0;
  int n_chain_depth [4] = '{0, 0, 0, 0};
  int n_big = 0, n_gsm = 0;
  bit          in_res = 0;
  int          res_tag, res_i;
  head_flit_t  res_h;

  initial begin rx_wr = 0; rx_data = '0; tx_rd = 0; end
  always @(negedge clk_noc) tx_rd <= rst_noc_n && !tx_empty;
  always @(negedge clk_noc) if (rst_noc_n && !tx_empty) begin
    head_flit_t h;
    body_flit_t b;
    h = head_flit_t'(tx_data);
    b = body_flit_t'(tx_data);
    if (!in_res) begin
      checks++;
      if (!h.pkt_head) begin failures++; $display("ERROR: expected a head flit"); end
      else if (h.cmd) begin
        int tag;
        tag = int'(h.start_addr);
        checks++;
        if (!inv.exists(tag)) begin failures++; $display("ERROR: command for unknown tag %0d", tag); end
        else if (h.payload[1:0] == CMD_GRANT) begin
          logic [ROUTE_W-1:0] want;
          n_grant++;
          want = inv[tag].dir[0] ? MMU_NODE : proc_node(SRC_W'(inv[tag].src));
          if (h.route != want || inv[tag].granted || int'(h.hwa_id) != inv[tag].hwa) begin
            failures++; $display("ERROR: bad grant tag %0d route %0d", tag, h.route);
          end
          if (h.route == MMU_NODE) n_mmu_grant++;
          inv[tag].granted = 1;
          send_payload(tag, int'(h.tb_id));
        end else if (h.payload[1:0] == CMD_NOTIFY) begin
          n_notify++;
          if (!inv[tag].done || inv[tag].notified || h.route != proc_node(SRC_W'(inv[tag].src))) begin
            failures++; $display("ERROR: bad notify tag %0d", tag);
          end
          inv[tag].notified = 1;
          if (inv[tag].notified) outstanding--;
        end else begin
          failures++; $display("ERROR: unknown command code");
        end
      end else begin
        logic [ROUTE_W-1:0] want;
        res_tag = int'(h.start_addr);
        res_h   = h;
        res_i   = 0;
        in_res  = 1;
        checks++;
        if (!inv.exists(res_tag)) begin failures++; $display("ERROR: result for unknown tag"); end
        else begin
          want = inv[res_tag].dir[1] ? MMU_NODE : proc_node(SRC_W'(inv[res_tag].src));
          if (h.route != want || int'(h.hwa_id) != inv[res_tag].final_hwa || h.cdepth != 0) begin
            failures++; $display("ERROR: bad result head tag %0d route %0d hwa %0d", res_tag, h.route, h.hwa_id);
          end
        end
      end
    end else begin
      checks++;
      if (b.pkt_head || b.data != word_of(res_tag, res_i) + inv[res_tag].add) begin
        failures++; $display("ERROR: tag %0d word %0d got %h", res_tag, res_i, b.data);
      end
      res_i++;
      if (b.pkt_tail) begin
        in_res = 0;
        checks++;
        if (res_i != inv[res_tag].nw || inv[res_tag].done) begin
          failures++; $display("ERROR: tag %0d got %0d words", res_tag, res_i);
        end
        inv[res_tag].done = 1;
        n_result++;
        n_chain_depth[inv[res_tag].depth]++;
        if (inv[res_tag].prio != 0) n_prio++;
        if (inv[res_tag].npkt > 1) n_multi++;
        if (inv[res_tag].nw >= 17) n_big++;
        if (inv[res_tag].nw == 2)  n_gsm++;
        if (inv[res_tag].notified) outstanding--;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    n_bypass    += $countones(ev_bypass);
    n_req_wait  += $countones(ev_req_wait);
    n_chain_in  += $countones(ev_chain_in);
    n_chain_out += $countones(ev_chain_out);
    n_cmd_first += int'(ev_cmd_first);
  end

  task automatic wait_all(int max_cycles);
    int k;
    k = 0;
    while (outstanding != 0 && k < max_cycles) begin
      @(posedge clk);
      k++;
    end
    checks++;
    if (outstanding != 0) begin
      failures++; $display("ERROR: %0d invocations still outstanding", outstanding);
      foreach (inv[k2]) if (!inv[k2].done || !inv[k2].notified)
        $display("  pending tag %0d src %0d hwa %0d nw %0d depth %0d dir %0d granted %0d done %0d",
                 k2, inv[k2].src, inv[k2].hwa, inv[k2].nw, inv[k2].depth, inv[k2].dir, inv[k2].granted, inv[k2].done);
    end
  endtask

  task automatic expect_count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("ERROR: mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (4) @(posedge clk);
    rst_n = 1; rst_noc_n = 1;
    repeat (4) @(posedge clk);

    // 1. one direct invocation of every channel, 4 words
    for (int c = 0; c < NUM_CH; c++) t = invoke(c % 8, c, 4, 0, '0, 0, 2'b00, 1);
    wait_all(40000);

    // 2. burst of six requests to one channel: RB queueing, TB waiting
    for (int i = 0; i < 6; i++) t = invoke(i, 5, 8, 0, '0, 0, 2'b00, 1);
    wait_all(40000);

    // 3. GSM-like (3-flit packet: head + 2 words) and JPEG-like (18 flits)
    for (int i = 0; i < 8; i++) t = invoke(i, 8 + i, 2, 0, '0, 0, 2'b00, 1);
    for (int i = 0; i < 8; i++) t = invoke(i, 16 + i, 17, 0, '0, 0, 2'b00, 1);
    wait_all(40000);

    // 4. JPEG decoder chain in group 0: izigzag(0) -> iquantize(1) -> idct(2) -> shiftbound(3)
    //    slot d holds the HWA that runs with d hops left after it
    t = invoke(1, 0, 17, 0, 6'b00_00_00, 0, 2'b00, 1);
    t = invoke(2, 0, 17, 1, 6'b00_00_01, 0, 2'b00, 1);
    t = invoke(3, 0, 17, 2, 6'b00_01_10, 0, 2'b00, 1);
    t = invoke(5, 0, 17, 3, 6'b01_10_11, 0, 2'b00, 1);
    t = invoke(6, 8, 6, 3, 6'b01_10_11, 0, 2'b00, 1);
    wait_all(60000);

    // 5. memory access: input from memory, results to memory with notification
    for (int i = 0; i < 4; i++) t = invoke(i, 12 + i, 5, 0, '0, 0, 2'b11, 1);
    t = invoke(7, 20, 5, 2, 6'b00_01_10, 0, 2'b10, 1);
    wait_all(40000);

    // 6. multi-packet tasks and priorities, many channels at once
    for (int c = 0; c < NUM_CH; c++)
      t = invoke(c % 8, c, 3 + (c % 5), 0, '0, c % 4, 2'b00, (c % 3 == 0) ? 2 : 1);
    wait_all(60000);

    // 7. random mix
    for (int i = 0; i < 80; i++) begin
      int h, d, nw;
      logic [5:0] ci;
      h  = $urandom_range(0, NUM_CH - 1);
      d  = $urandom_range(0, 3);
      nw = $urandom_range(1, 20);
      ci = 6'($urandom);
      t = invoke($urandom_range(0, 7), h, nw, d, ci, $urandom_range(0, 3),
                 2'($urandom_range(0, 3)), $urandom_range(1, 2));
      if (i % 20 == 19) wait_all(80000);
    end
    wait_all(80000);

    $display("mechanism counts:");
    expect_count("grant packets", n_grant);
    expect_count("grants routed to memory node", n_mmu_grant);
    expect_count("result packets", n_result);
    expect_count("notifying packets", n_notify);
    expect_count("request-buffer bypass", n_bypass);
    expect_count("request waiting for a task buffer", n_req_wait);
    expect_count("chained inputs taken", n_chain_in);
    expect_count("chained outputs written", n_chain_out);
    expect_count("chaining depth 0 results", n_chain_depth[0]);
    expect_count("chaining depth 1 results", n_chain_depth[1]);
    expect_count("chaining depth 2 results", n_chain_depth[2]);
    expect_count("chaining depth 3 results", n_chain_depth[3]);
    expect_count("command sent ahead of a result", n_cmd_first);
    expect_count("results with non-zero priority", n_prio);
    expect_count("multi-packet tasks", n_multi);
    expect_count("3-flit (GSM-size) payloads", n_gsm);
    expect_count("18-flit (JPEG-size) payloads", n_big);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
