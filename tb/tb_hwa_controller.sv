// Self-checking test of hwa_controller. Two task buffers and four chaining
// buffers are real pkt_fifo instances filled by the testbench; the task
// arbiter and chaining controller offers are driven directly; the HWA is
// the behavioural model. Checks: the words reaching the HWA are the data
// flits of the task, in order, with head flits of later packets dropped
// and the last word marked; the task buffer is released exactly once at
// the end of its task; pg_start carries the task's header after the HWA is
// done; chained work is taken before a task buffer when both are offered;
// nothing starts while the packet generator is busy; a task of N words has
// entered the HWA within 4+N cycles of being accepted (the paper's HWAC
// latency).
module tb_hwa_controller;
  import hwa_pkg::*;
  localparam int NUM_TB = 2, GRP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ta_valid = 0, ta_accept, cc_valid = 0, cc_accept;
  logic [0:0] ta_sel = '0;
  logic [1:0] cc_sel = '0;
  logic [NUM_TB-1:0][FLIT_W-1:0] tb_data;
  logic [NUM_TB-1:0] tb_eop, tb_rd, tb_in_use, tb_release;
  logic [GRP-1:0][FLIT_W-1:0] cb_data;
  logic [GRP-1:0] cb_eop, cb_rd;
  logic hwa_idle, hwa_done, hwa_in_valid, hwa_in_last, pg_ready = 1, pg_start, chain_evt;
  logic [DATA_W-1:0] hwa_in_data, hwa_out_data;
  logic [FLIT_W-1:0] pg_hdr;
  logic hwa_out_valid, hwa_out_last, hwa_out_ready = 0;

  logic [NUM_TB-1:0] tbw = '0; logic [FLIT_W-1:0] tbd = '0; logic tbe = 0;
  logic [GRP-1:0] cbw = '0; logic [FLIT_W-1:0] cbd = '0; logic cbe = 0;

  for (genvar t = 0; t < NUM_TB; t++) begin : g_tb
    pkt_fifo #(.WIDTH(FLIT_W), .DEPTH(64)) u (.clk, .rst_n, .wr_en(tbw[t]), .wr_data(tbd), .wr_eop(tbe),
      .rd_en(tb_rd[t]), .rd_data(tb_data[t]), .rd_eop(tb_eop[t]), .empty(), .full(), .almost_full(),
      .unit_ready(), .count());
  end
  for (genvar j = 0; j < GRP; j++) begin : g_cb
    pkt_fifo #(.WIDTH(FLIT_W), .DEPTH(64)) u (.clk, .rst_n, .wr_en(cbw[j]), .wr_data(cbd), .wr_eop(cbe),
      .rd_en(cb_rd[j]), .rd_data(cb_data[j]), .rd_eop(cb_eop[j]), .empty(), .full(), .almost_full(),
      .unit_ready(), .count());
  end

  hwa_controller #(.NUM_TB(NUM_TB), .GRP(GRP)) dut (.*);

  hwa_model #(.ID(0), .LAT(3)) u_hwa (.clk, .rst_n, .idle(hwa_idle), .done(hwa_done),
    .in_valid(hwa_in_valid), .in_data(hwa_in_data), .in_last(hwa_in_last),
    .out_valid(hwa_out_valid), .out_data(hwa_out_data), .out_last(hwa_out_last), .out_ready(hwa_out_ready));

  int checks = 0, failures = 0;
  logic [127:0] expw [$];
  int explen [$];
  int cnt = 0;
  int n_in = 0, n_last = 0, n_rel [NUM_TB] = '{0, 0}, n_start = 0, n_chain = 0;
  logic [FLIT_W-1:0] last_hdr;

  always @(posedge clk) if (rst_n) begin
    if (hwa_in_valid) begin
      checks++;
      if (expw.size() == 0 || hwa_in_data != expw[0]) begin failures++; $display("ERROR: HWA word %h", hwa_in_data); end
      else void'(expw.pop_front());
      n_in++;
      cnt++;
      if (hwa_in_last) begin
        n_last++;
        checks++;
        if (explen.size() == 0 || cnt != explen[0]) begin failures++; $display("ERROR: last word after %0d words", cnt); end
        else void'(explen.pop_front());
        cnt = 0;
      end
    end
    for (int t = 0; t < NUM_TB; t++) if (tb_release[t]) n_rel[t]++;
    // stand-in for the packet generator: drain results after pg_start
    if (hwa_out_valid && hwa_out_ready && hwa_out_last) hwa_out_ready <= 0;
    if (pg_start) begin
      hwa_out_ready <= 1;
      n_start++;
      last_hdr = pg_hdr;
    end
    if (chain_evt) n_chain++;
  end

  function automatic logic [FLIT_W-1:0] hd(int tag, bit th, bit tt, int depth);
    head_flit_t h;
    h = '0; h.pkt_head = 1; h.task_head = th; h.task_tail = tt; h.start_addr = ADDR_W'(tag);
    h.cdepth = CDEPTH_W'(depth); h.src_id = 3'd5; h.prio = 2'd2;
    return h;
  endfunction

  // write a task of npkt packets x nw words into TB t (or CB j when cb)
  task automatic load(bit cb, int idx, int tag, int npkt, int nw);
    for (int p = 0; p < npkt; p++) begin
      @(negedge clk);
      tbw = '0; cbw = '0;
      if (cb) begin cbw[idx] = 1; cbd = hd(tag, p == 0, p == npkt - 1, 1); cbe = 0; end
      else    begin tbw[idx] = 1; tbd = hd(tag, p == 0, p == npkt - 1, 0); tbe = 0; end
      for (int i = 0; i < nw; i++) begin
        body_flit_t b;
        logic [127:0] w;
        w = {32'(tag), 32'(p), 32'(i), 32'hABCD};
        b.route = '0; b.pkt_head = 0; b.pkt_tail = (i == nw - 1); b.data = w;
        @(negedge clk);
        if (cb) begin cbd = b; cbe = (i == nw - 1) && (p == npkt - 1); end
        else    begin tbd = b; tbe = (i == nw - 1) && (p == npkt - 1); end
        expw.push_back(w);
      end
    end
    @(negedge clk); tbw = '0; cbw = '0;
    explen.push_back(npkt * nw);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic finish_task();
    int k;
    k = 0;
    while (n_start == 0 && k < 200) begin @(posedge clk); k++; end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. single-packet task from TB 1, 5 words; latency check
    load(0, 1, 11, 1, 5);
    @(negedge clk); ta_valid = 1; ta_sel = 1;
    @(posedge clk); #1; t0 = $time;
    @(negedge clk); ta_valid = 0;
    while (n_last == 0) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 4 + 5) begin failures++; $display("ERROR: HWAC latency %0d cycles", (t1 - t0) / 10); end
    finish_task();
    checks++;
    if (n_rel[1] != 1 || n_rel[0] != 0 || n_start != 1 || last_hdr[102:71] != 11) begin
      failures++; $display("ERROR: release/pg_start after task 1");
    end
    // 2. multi-packet task (3 packets x 2 words) from TB 0
    n_start = 0;
    load(0, 0, 22, 3, 2);
    @(negedge clk); ta_valid = 1; ta_sel = 0;
    @(negedge clk); ta_valid = 0;
    finish_task();
    checks++;
    if (n_rel[0] != 1 || n_start != 1 || last_hdr[102:71] != 22 || expw.size() != 0) begin
      failures++; $display("ERROR: multi-packet task");
    end
    // 3. both offered: chained work from CB 2 first
    n_start = 0;
    load(1, 2, 33, 1, 4);
    load(0, 1, 44, 1, 3);
    // expected order: the CB words, then the TB words
    @(negedge clk); ta_valid = 1; ta_sel = 1; cc_valid = 1; cc_sel = 2;
    #1;
    checks++;
    if (!cc_accept || ta_accept) begin failures++; $display("ERROR: chaining not preferred"); end
    @(negedge clk); cc_valid = 0;
    finish_task();
    checks++;
    if (n_start != 1 || last_hdr[102:71] != 33 || n_chain != 1 || n_rel[1] != 1) begin
      failures++; $display("ERROR: chained task");
    end
    // 4. PG busy: no start
    n_start = 0;
    pg_ready = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_in != 5 + 6 + 4) begin failures++; $display("ERROR: started while PG busy (%0d words)", n_in); end
    pg_ready = 1;
    finish_task();
    @(negedge clk); ta_valid = 0;
    checks++;
    if (n_start != 1 || last_hdr[102:71] != 44 || n_rel[1] != 2 || expw.size() != 0) begin
      failures++; $display("ERROR: last task");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
