// Self-checking test of the hierarchical packet sender (and with it of both
// arbitration levels, ps_level1 and ps_level2) with eight channels in two
// clusters of four. Each channel is modelled by a grant-buffer queue (one
// flit per command) and a packet-output-buffer queue (result packets).
// Checks: every flit leaves exactly once and in order per channel; result
// packets leave as unbroken runs from head to tail; a command waiting
// together with result packets leaves first; among result packets offered
// together the highest priority leaves first; the router input buffer model
// (16 entries, room signalled while fewer than 15 are used) never
// overflows under random drain; from an idle state a command flit appears
// within 4 cycles and a result packet of N flits is out within N+4 cycles
// (the paper's PS latency for payload packets is N+4 with the PS4
// strategy).
module tb_packet_sender;
  import hwa_pkg::*;
  localparam int NCH = 8, PS_CH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCH-1:0] grt_rdy, grt_rden, d_rdy, acc_rden;
  logic [NCH-1:0][FLIT_W-1:0] grt_data, acc_data;
  logic tx_room, out_en, cmd_first_evt;
  logic [FLIT_W-1:0] data_out;

  packet_sender #(.NCH(NCH), .PS_CH(PS_CH)) dut (.*);

  int checks = 0, failures = 0;

  // channel models
  logic [FLIT_W-1:0] gq [NCH][$];
  logic [FLIT_W-1:0] pq [NCH][$];
  int npk [NCH];            // complete packets in pq
  int cseq [NCH], rseq [NCH], ecseq [NCH], erseq [NCH];
  always_comb
    for (int c = 0; c < NCH; c++) begin
      grt_rdy[c]  = gq[c].size() != 0;
      grt_data[c] = grt_rdy[c] ? gq[c][0] : '0;
      d_rdy[c]    = npk[c] != 0;
      acc_data[c] = pq[c].size() != 0 ? pq[c][0] : '0;
    end
  // reads are sampled at the rising edge and applied at the falling edge,
  // so the model never changes its outputs in the DUT's sampling step
  logic [NCH-1:0] g_pop = '0, a_pop = '0;
  always @(posedge clk) begin g_pop <= rst_n ? grt_rden : '0; a_pop <= rst_n ? acc_rden : '0; end
  always @(negedge clk)
    for (int c = 0; c < NCH; c++) begin
      if (g_pop[c]) begin
        checks++;
        if (gq[c].size() == 0) begin failures++; $display("ERROR: grant read from empty ch %0d", c); end
        else void'(gq[c].pop_front());
      end
      if (a_pop[c]) begin
        checks++;
        if (pq[c].size() == 0) begin failures++; $display("ERROR: POB read from empty ch %0d", c); end
        else begin
          if (pq[c][0][128]) npk[c]--;
          void'(pq[c].pop_front());
        end
      end
    end

  task automatic add_cmd(int c);
    head_flit_t h;
    h = '0; h.pkt_head = 1; h.pkt_tail = 1; h.cmd = 1; h.hwa_id = HWAID_W'(c);
    h.start_addr = ADDR_W'(cseq[c]++); h.payload = HPAYLD_W'(CMD_GRANT);
    gq[c].push_back(h);
  endtask

  task automatic add_pkt(int c, int prio, int nw);
    head_flit_t h;
    body_flit_t b;
    h = '0; h.pkt_head = 1; h.hwa_id = HWAID_W'(c); h.prio = PRIO_W'(prio);
    h.start_addr = ADDR_W'(rseq[c]); h.data_size = SIZE_W'(nw);
    pq[c].push_back(h);
    for (int i = 0; i < nw; i++) begin
      b = '0; b.pkt_tail = (i == nw - 1); b.data = {32'(c), 32'(rseq[c]), 32'(i), 32'(nw)};
      pq[c].push_back(b);
    end
    rseq[c]++;
    npk[c]++;
  endtask

  // router input buffer model
  int rib = 0, max_rib = 0;
  bit drain_fast = 1;
  assign tx_room = rib < 15;
  // output monitor
  int cur_ch = -1, cur_i = 0, cur_n = 0, n_out = 0, n_cmd = 0, n_pkt = 0, last_t = 0;
  head_flit_t first_res;
  int first_is_cmd = -1;
  bit first_res_set = 0;
  always @(posedge clk) if (rst_n) begin
    int d;
    d = (drain_fast ? $urandom_range(0, 3) != 0 : $urandom_range(0, 4) == 0);
    if (out_en) begin
      head_flit_t h;
      body_flit_t b;
      h = head_flit_t'(data_out);
      b = body_flit_t'(data_out);
      n_out++;
      last_t = $time;
      checks++;
      if (rib >= 16) begin failures++; $display("ERROR: router input buffer overflow"); end
      if (first_is_cmd < 0) first_is_cmd = (h.pkt_head && h.cmd);
      if (cur_ch < 0) begin
        checks++;
        if (!h.pkt_head) begin failures++; $display("ERROR: body flit outside a packet"); end
        else if (h.cmd) begin
          n_cmd++;
          if (int'(h.start_addr) != ecseq[h.hwa_id]) begin failures++; $display("ERROR: command order ch %0d", h.hwa_id); end
          ecseq[h.hwa_id]++;
        end else begin
          if (!first_res_set) begin first_res = h; first_res_set = 1; end
          if (int'(h.start_addr) != erseq[h.hwa_id]) begin failures++; $display("ERROR: packet order ch %0d", h.hwa_id); end
          cur_ch = h.hwa_id; cur_i = 0; cur_n = h.data_size;
        end
      end else begin
        checks++;
        if (b.pkt_head || b.data != {32'(cur_ch), 32'(erseq[cur_ch]), 32'(cur_i), 32'(cur_n)}
            || b.pkt_tail != (cur_i == cur_n - 1)) begin
          failures++; $display("ERROR: packet of ch %0d broken at flit %0d t=%0t got %h", cur_ch, cur_i, $time, data_out);
        end
        cur_i++;
        if (b.pkt_tail) begin erseq[cur_ch]++; cur_ch = -1; n_pkt++; end
      end
    end
    rib <= rib + (out_en ? 1 : 0) - ((d && rib > 0) ? 1 : 0);
    if (rib > max_rib) max_rib = rib;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_empty();
    int k;
    k = 0;
    while (k < 5000) begin
      bit e;
      e = 1;
      for (int c = 0; c < NCH; c++) if (gq[c].size() != 0 || pq[c].size() != 0) e = 0;
      if (e && cur_ch < 0) break;
      @(negedge clk); k++;
    end
    repeat (8) @(negedge clk);
  endtask

  initial begin
    int t0, nb;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    // latency of a command from idle
    add_cmd(6); t0 = $time;
    wait_empty();
    checks++;
    if (n_cmd != 1 || (last_t - t0) / 10 > 4) begin failures++; $display("ERROR: command latency %0d", (last_t - t0) / 10); end
    // latency of a 5-flit result packet (head + 4 words) from idle
    add_pkt(3, 0, 4); t0 = $time;
    wait_empty();
    checks++;
    if (n_pkt != 1 || (last_t - t0) / 10 > 5 + 4) begin failures++; $display("ERROR: packet latency %0d", (last_t - t0) / 10); end
    // commands first: results in all channels and one command together
    first_is_cmd = -1;
    for (int c = 0; c < NCH; c++) add_pkt(c, 1, 3);
    add_cmd(2);
    wait_empty();
    checks++;
    if (first_is_cmd != 1) begin failures++; $display("ERROR: command not sent first"); end
    // priority: low priority in ch 0, high in ch 6 (other cluster) and ch 1
    first_res_set = 0;
    add_pkt(0, 0, 2); add_pkt(6, 3, 2);
    wait_empty();
    checks++;
    if (first_res.hwa_id != 6) begin failures++; $display("ERROR: priority order, first from ch %0d", first_res.hwa_id); end
    first_res_set = 0;
    add_pkt(0, 1, 2); add_pkt(1, 2, 2); add_pkt(2, 0, 2);
    wait_empty();
    checks++;
    if (first_res.hwa_id != 1) begin failures++; $display("ERROR: priority within a cluster, first from ch %0d", first_res.hwa_id); end
    // random traffic with slow drain
    drain_fast = 0;
    nb = 0;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) add_cmd($urandom_range(0, NCH - 1));
      if ($urandom_range(0, 5) == 0) begin add_pkt($urandom_range(0, NCH - 1), $urandom_range(0, 3), $urandom_range(1, 18)); nb++; end
    end
    drain_fast = 1;
    wait_empty();
    checks++;
    if (max_rib < 14) begin failures++; $display("ERROR: back-pressure never exercised (max %0d)", max_rib); end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (ecseq[c] != cseq[c] || erseq[c] != rseq[c]) begin failures++; $display("ERROR: ch %0d lost flits", c); end
    end
    $display("sent %0d commands and %0d packets, %0d flits", n_cmd, n_pkt, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
