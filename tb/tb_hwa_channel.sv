// Self-checking test of one hwa_channel (HWA ID 1, group of four, only its
// own chaining buffer present in the group) with the behavioural
// accelerator model. The testbench plays the packet receiver (writes
// requests and task packets), the packet sender (drains the grant buffer
// and whole result packets) and the processors. Checks: a request with an
// empty request buffer is granted through the bypass and the grant is
// readable two cycles after the request was written; grants carry the task
// buffer to use and are routed to the requester (or to the memory node when
// the input comes from memory); a third request waits while both task
// buffers are busy and is granted once one is released; result packets carry
// every input word transformed by the accelerator, routed to the requester;
// a chained invocation (depth 1, next HWA = itself) runs the accelerator
// twice through the chaining buffer and returns one result; a result sent to
// memory is followed by a notifying command; multi-packet tasks are
// reassembled; a random mix of invocations all complete.
module tb_hwa_channel;
  import hwa_pkg::*;
  localparam int MY_ID = 1, NUM_TB = 2, GRP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_wr = 0, req_ready, grt_rdy, grt_rden = 0, d_rdy, acc_rden = 0;
  logic [NUM_TB-1:0] tb_wr = '0, tb_ready;
  logic [FLIT_W-1:0] pr_data = '0, grt_data, acc_data;
  logic cb_own_ready, cb_own_eop;
  logic [FLIT_W-1:0] cb_own_head;
  logic [GRP-1:0] cb_grp_ready, cb_grp_eop, cb_grp_rd;
  logic [GRP-1:0][FLIT_W-1:0] cb_grp_head;
  logic hwa_idle, hwa_done, hwa_in_valid, hwa_in_last, hwa_out_valid, hwa_out_last, hwa_out_ready;
  logic [DATA_W-1:0] hwa_in_data, hwa_out_data;
  logic ev_bypass, ev_req_wait, ev_chain_in, ev_chain_out, ev_result;

  always_comb begin
    cb_grp_ready = '0; cb_grp_head = '0; cb_grp_eop = '0;
    cb_grp_ready[MY_ID] = cb_own_ready;
    cb_grp_head[MY_ID]  = cb_own_head;
    cb_grp_eop[MY_ID]   = cb_own_eop;
  end

  hwa_channel #(.MY_ID(MY_ID), .NUM_TB(NUM_TB), .GRP(GRP)) dut (
    .clk, .rst_n, .req_wr, .tb_wr, .pr_data, .req_ready, .tb_ready,
    .grt_rdy, .grt_data, .grt_rden, .d_rdy, .acc_data, .acc_rden,
    .cb_own_ready, .cb_own_head, .cb_own_eop, .cb_own_rd(cb_grp_rd[MY_ID]),
    .cb_grp_ready, .cb_grp_head, .cb_grp_eop, .cb_grp_rd,
    .hwa_idle, .hwa_done, .hwa_in_valid, .hwa_in_data, .hwa_in_last,
    .hwa_out_valid, .hwa_out_data, .hwa_out_last, .hwa_out_ready,
    .ev_bypass, .ev_req_wait, .ev_chain_in, .ev_chain_out, .ev_result);

  hwa_model #(.ID(MY_ID), .LAT(4)) u_hwa (.clk, .rst_n, .idle(hwa_idle), .done(hwa_done),
    .in_valid(hwa_in_valid), .in_data(hwa_in_data), .in_last(hwa_in_last),
    .out_valid(hwa_out_valid), .out_data(hwa_out_data), .out_last(hwa_out_last), .out_ready(hwa_out_ready));

  int checks = 0, failures = 0;
  int n_bypass = 0, n_wait = 0, n_cin = 0, n_cout = 0;
  always @(posedge clk) if (rst_n) begin
    n_bypass += ev_bypass; n_wait += ev_req_wait; n_cin += ev_chain_in; n_cout += ev_chain_out;
  end

  // packet-sender side: drain grants and result packets into queues
  head_flit_t grants [$];
  logic [FLIT_W-1:0] res [$];
  int res_pkts = 0;
  int last_req_t = 0, grant_t = 0;
  always @(negedge clk) begin
    grt_rden = 0; acc_rden = 0;
    if (rst_n && grt_rdy) begin
      grt_rden = 1;
      grants.push_back(head_flit_t'(grt_data));
      grant_t = $time;
    end else if (rst_n && d_rdy && $urandom_range(0, 1) == 1) begin
      acc_rden = 1;
      res.push_back(acc_data);
      if (acc_data[128]) res_pkts++;
    end
  end

  function automatic logic [FLIT_W-1:0] mk_head(bit cmd, int src, int tag, int depth, logic [5:0] cidx,
                                                logic [1:0] dir, int tb, bit th, bit tt);
    head_flit_t h;
    h = '0; h.route = FPGA_NODE; h.pkt_head = 1; h.pkt_tail = cmd; h.src_id = SRC_W'(src);
    h.hwa_id = HWAID_W'(MY_ID); h.cmd = cmd; h.task_head = th; h.task_tail = tt; h.tb_id = TBID_W'(tb);
    h.cdepth = CDEPTH_W'(depth); h.cindex = cidx; h.dir = dir; h.start_addr = ADDR_W'(tag);
    h.data_size = 10'd16; h.payload = cmd ? HPAYLD_W'(CMD_REQUEST) : '0;
    return h;
  endfunction

  task automatic request(int src, int tag, int depth, logic [5:0] cidx, logic [1:0] dir);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_wr = 1; pr_data = mk_head(1, src, tag, depth, cidx, dir, 0, 0, 0);
    last_req_t = $time;
    @(negedge clk); req_wr = 0;
  endtask

  // wait for the grant of tag; returns its TB
  task automatic get_grant(int tag, int src, logic [1:0] dir, output int tb);
    int k, found;
    k = 0; found = -1; tb = 0;
    while (found < 0 && k < 3000) begin
      foreach (grants[i]) if (found < 0 && int'(grants[i].start_addr) == tag && grants[i].payload[1:0] == CMD_GRANT) found = i;
      if (found < 0) begin @(negedge clk); k++; end
    end
    checks++;
    if (found < 0) begin failures++; $display("ERROR: no grant for tag %0d", tag); return; end
    if (grants[found].route != (dir[0] ? MMU_NODE : proc_node(SRC_W'(src))) || !grants[found].cmd) begin
      failures++; $display("ERROR: grant for tag %0d routed to %0d", tag, grants[found].route);
    end
    tb = grants[found].tb_id;
    grants.delete(found);
  endtask

  function automatic logic [127:0] word(int tag, int i);
    return {32'(tag), 32'(i), 64'h0123_4567_89AB_CDEF};
  endfunction

  task automatic send_task(int src, int tag, int depth, logic [5:0] cidx, logic [1:0] dir, int tb, int npkt, int nw);
    int wpp, w;
    wpp = (nw + npkt - 1) / npkt;
    w = 0;
    for (int p = 0; p < npkt; p++) begin
      int n;
      n = (p == npkt - 1) ? nw - w : wpp;
      @(negedge clk);
      while (!tb_ready[tb]) @(negedge clk);
      tb_wr = '0; tb_wr[tb] = 1; pr_data = mk_head(0, src, tag, depth, cidx, dir, tb, p == 0, p == npkt - 1);
      for (int i = 0; i < n; i++) begin
        body_flit_t b;
        b.route = FPGA_NODE; b.pkt_head = 0; b.pkt_tail = (i == n - 1); b.data = word(tag, w++);
        @(negedge clk);
        pr_data = b;
      end
      @(negedge clk); tb_wr = '0;
    end
  endtask

  // wait for the result packet of tag and check it
  task automatic check_result(int src, int tag, int depth, logic [1:0] dir, int nw);
    int k, s;
    head_flit_t h;
    k = 0; s = -1;
    while (s < 0 && k < 5000) begin
      for (int i = 0; i < res.size(); i++)
        if (s < 0 && res[i][129] && int'(res[i][102:71]) == tag && res.size() >= i + 1 + nw) s = i;
      if (s < 0) begin @(negedge clk); k++; end
    end
    checks++;
    if (s < 0) begin failures++; $display("ERROR: no result for tag %0d", tag); return; end
    h = head_flit_t'(res[s]);
    if (h.route != (dir[1] ? MMU_NODE : proc_node(SRC_W'(src))) || h.hwa_id != MY_ID) begin
      failures++; $display("ERROR: result of tag %0d routed to %0d", tag, h.route);
    end
    for (int i = 0; i < nw; i++) begin
      body_flit_t b;
      b = body_flit_t'(res[s + 1 + i]);
      checks++;
      if (b.pkt_head || b.data != word(tag, i) + 128'((MY_ID + 1) * (depth + 1)) || b.pkt_tail != (i == nw - 1)) begin
        failures++; $display("ERROR: tag %0d word %0d = %h", tag, i, b.data);
      end
    end
    for (int i = 0; i <= nw; i++) res.delete(s);
  endtask

  task automatic check_notify(int src, int tag);
    int k, found;
    k = 0; found = -1;
    while (found < 0 && k < 3000) begin
      foreach (grants[i]) if (found < 0 && int'(grants[i].start_addr) == tag && grants[i].payload[1:0] == CMD_NOTIFY) found = i;
      if (found < 0) begin @(negedge clk); k++; end
    end
    checks++;
    if (found < 0 || grants[found].route != proc_node(SRC_W'(src))) begin
      failures++; $display("ERROR: notification for tag %0d", tag); return;
    end
    grants.delete(found);
  endtask

  task automatic invoke(int src, int tag, int depth, logic [5:0] cidx, logic [1:0] dir, int npkt, int nw);
    int tb;
    request(src, tag, depth, cidx, dir);
    get_grant(tag, src, dir, tb);
    send_task(src, tag, depth, cidx, dir, tb, npkt, nw);
    check_result(src, tag, depth, dir, nw);
    if (dir[1]) check_notify(src, tag);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tb1, tb2, tb3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // bypass grant latency
    request(2, 1, 0, 6'b0, 2'b00);
    get_grant(1, 2, 2'b00, tb1);
    checks++;
    if ((grant_t - last_req_t) / 10 > 2 || n_bypass != 1) begin
      failures++; $display("ERROR: grant %0d cycles after the request", (grant_t - last_req_t) / 10);
    end
    send_task(2, 1, 0, 6'b0, 2'b00, tb1, 1, 4);
    check_result(2, 1, 0, 2'b00, 4);
    // both TBs taken, third request waits
    request(3, 10, 0, 6'b0, 2'b00);
    request(4, 11, 0, 6'b0, 2'b01);
    request(5, 12, 0, 6'b0, 2'b00);
    get_grant(10, 3, 2'b00, tb1);
    get_grant(11, 4, 2'b01, tb2);
    repeat (10) @(negedge clk);
    checks++;
    if (grants.size() != 0 || n_wait == 0 || tb1 == tb2) begin failures++; $display("ERROR: third request granted early"); end
    send_task(3, 10, 0, 6'b0, 2'b00, tb1, 1, 3);
    get_grant(12, 5, 2'b00, tb3);
    checks++;
    if (tb3 != tb1) begin failures++; $display("ERROR: released TB not reused"); end
    send_task(4, 11, 0, 6'b0, 2'b01, tb2, 2, 6);
    send_task(5, 12, 0, 6'b0, 2'b00, tb3, 1, 2);
    check_result(3, 10, 0, 2'b00, 3);
    check_result(4, 11, 0, 2'b01, 6);
    check_result(5, 12, 0, 2'b00, 2);
    // chaining through the own CB: depth 1, slot 0 = HWA 1
    invoke(6, 20, 1, 6'b00_00_01, 2'b00, 1, 5);
    checks++;
    if (n_cout != 1 || n_cin != 1) begin failures++; $display("ERROR: chain events %0d/%0d", n_cout, n_cin); end
    invoke(1, 21, 2, 6'b00_01_01, 2'b00, 1, 3);
    // result to memory, then a notification
    invoke(0, 30, 0, 6'b0, 2'b10, 1, 4);
    // multi-packet task
    invoke(7, 40, 0, 6'b0, 2'b00, 3, 9);
    // random mix
    for (int k = 0; k < 30; k++) begin
      int d;
      d = $urandom_range(0, 3);
      invoke($urandom_range(0, 7), 100 + k, d, {2'b01, 2'b01, 2'b01}, 2'($urandom_range(0, 3)),
             $urandom_range(1, 3), $urandom_range(3, 24));
    end
    checks++;
    if (grants.size() != 0 || res.size() != 0) begin failures++; $display("ERROR: leftover flits"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
