// Self-checking test of packet_generator for the channel with HWA ID 9.
// The HWA result stream is driven with random gaps and the output buffers
// report random "full" cycles. Checks: an invocation with chaining depth d>0
// writes a header with depth d-1, the PG's own HWA ID and the original
// chaining index into the chaining buffer, followed by the result words, the
// last one marked as packet tail and end of packet; an invocation with depth
// 0 writes a result packet addressed to the requesting processor into the
// packet output buffer; a result sent to memory is addressed to the memory
// node and followed by exactly one notifying command to the processor, which
// is held back until the packet output buffer is empty; nothing is written
// while the target buffer is full; pg_ready is low while a packet is formed.
module tb_packet_generator;
  import hwa_pkg::*;
  localparam int MY_ID = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pg_start = 0, pg_ready;
  logic [FLIT_W-1:0] pg_hdr = '0;
  logic hwa_out_valid = 0, hwa_out_last = 0, hwa_out_ready;
  logic [DATA_W-1:0] hwa_out_data = '0;
  logic pob_full = 0, pob_empty = 1, pob_wr, pob_eop;
  logic [FLIT_W-1:0] pob_data, cb_data, notify_flit;
  logic cb_full = 0, cb_wr, cb_eop;
  logic notify_valid, notify_ready = 1, chain_evt, result_evt;

  packet_generator #(.MY_ID(MY_ID)) dut (.*);

  int checks = 0, failures = 0;
  logic [FLIT_W-1:0] pobq [$], cbq [$], ntq [$];
  logic pob_eopq [$], cb_eopq [$];
  bit hold_empty = 0;

  always @(posedge clk) if (rst_n) begin
    if (pob_wr) begin
      checks++;
      if (pob_full) begin failures++; $display("ERROR: POB write while full"); end
      pobq.push_back(pob_data); pob_eopq.push_back(pob_eop);
    end
    if (cb_wr) begin
      checks++;
      if (cb_full) begin failures++; $display("ERROR: CB write while full"); end
      cbq.push_back(cb_data); cb_eopq.push_back(cb_eop);
    end
    if (notify_valid && notify_ready) begin
      checks++;
      if (!pob_empty) begin failures++; $display("ERROR: notify before the POB drained"); end
      ntq.push_back(notify_flit);
    end
  end

  // random back-pressure
  always @(negedge clk) begin
    pob_full <= ($urandom_range(0, 3) == 0);
    cb_full  <= ($urandom_range(0, 3) == 0);
    pob_empty <= !hold_empty;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one invocation: give the header, stream nw words, check the output
  task automatic run(int tag, int depth, logic [5:0] cidx, logic [1:0] dir, int src, int nw);
    head_flit_t h, g;
    logic [FLIT_W-1:0] q [$];
    logic e [$];
    h = '0; h.pkt_head = 1; h.task_head = 1; h.task_tail = 1; h.src_id = SRC_W'(src);
    h.hwa_id = 5'd3; h.cdepth = CDEPTH_W'(depth); h.cindex = cidx; h.dir = dir;
    h.start_addr = ADDR_W'(tag); h.prio = 2'd1;
    wait (pg_ready);
    @(negedge clk); pg_start = 1; pg_hdr = h;
    @(negedge clk); pg_start = 0;
    checks++;
    if (pg_ready) begin failures++; $display("ERROR: pg_ready while busy"); end
    hold_empty = dir[1];
    for (int i = 0; i < nw; i++) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      hwa_out_valid = 1; hwa_out_data = {32'(tag), 32'(i), 64'h5A5A}; hwa_out_last = (i == nw - 1);
      @(posedge clk);
      while (!hwa_out_ready) @(posedge clk);
      @(negedge clk); hwa_out_valid = 0; hwa_out_last = 0;
    end
    if (dir[1]) begin
      repeat (6) @(negedge clk);
      checks++;
      if (ntq.size() != 0) begin failures++; $display("ERROR: notify while the POB is not empty"); end
      hold_empty = 0;
      repeat (4) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    if (depth != 0) begin q = cbq; e = cb_eopq; end
    else            begin q = pobq; e = pob_eopq; end
    checks++;
    if (q.size() != nw + 1 || (depth != 0 ? pobq.size() : cbq.size()) != 0) begin
      failures++; $display("ERROR: tag %0d wrote %0d flits (pob %0d cb %0d)", tag, q.size(), pobq.size(), cbq.size());
    end else begin
      g = head_flit_t'(q[0]);
      checks++;
      if (!g.pkt_head || g.pkt_tail || g.cmd || g.hwa_id != MY_ID || g.start_addr != ADDR_W'(tag) || e[0]) begin
        failures++; $display("ERROR: tag %0d header", tag);
      end
      checks++;
      if (depth != 0) begin
        if (int'(g.cdepth) != depth - 1 || g.cindex != cidx || g.src_id != SRC_W'(src)) begin
          failures++; $display("ERROR: tag %0d chained header depth %0d", tag, g.cdepth);
        end
      end else begin
        if (g.route != (dir[1] ? MMU_NODE : proc_node(SRC_W'(src))) || !g.task_head || !g.task_tail) begin
          failures++; $display("ERROR: tag %0d result route %0d", tag, g.route);
        end
      end
      for (int i = 0; i < nw; i++) begin
        body_flit_t b;
        b = body_flit_t'(q[i + 1]);
        checks++;
        if (b.pkt_head || b.data != {32'(tag), 32'(i), 64'h5A5A} || b.pkt_tail != (i == nw - 1)
            || e[i + 1] != (i == nw - 1)) begin
          failures++; $display("ERROR: tag %0d word %0d", tag, i);
        end
      end
    end
    checks++;
    if (dir[1] && depth == 0) begin
      if (ntq.size() != 1) begin failures++; $display("ERROR: %0d notifications", ntq.size()); end
      else begin
        g = head_flit_t'(ntq[0]);
        if (!g.cmd || g.payload[1:0] != CMD_NOTIFY || g.route != proc_node(SRC_W'(src))
            || g.start_addr != ADDR_W'(tag) || !g.pkt_head || !g.pkt_tail) begin
          failures++; $display("ERROR: notification contents");
        end
      end
    end else if (ntq.size() != 0) begin
      failures++; $display("ERROR: unexpected notification");
    end
    pobq.delete(); cbq.delete(); ntq.delete(); pob_eopq.delete(); cb_eopq.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 0, 6'b0, 2'b00, 2, 3);        // result to processor 2
    run(2, 1, 6'b00_00_01, 2'b00, 7, 4); // chained, one hop left
    run(3, 3, 6'b11_10_01, 2'b10, 0, 2); // chained, memory dir ignored until the end
    run(4, 0, 6'b0, 2'b10, 5, 5);        // result to memory + notify
    for (int k = 0; k < 40; k++)
      run(100 + k, $urandom_range(0, 3), 6'($urandom), 2'($urandom), $urandom_range(0, 7), $urandom_range(1, 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
