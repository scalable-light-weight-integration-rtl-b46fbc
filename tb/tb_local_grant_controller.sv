// Self-checking test of local_grant_controller with a real request buffer
// (sync_fifo) in front and a model of the grant buffer behind it.
// Scenarios: a request with the RB empty and a free task buffer bypasses
// the RB and is granted one cycle later (latency 1) with TB 0; a second
// gets TB 1; further requests wait in the RB while both TBs are busy and
// are granted first come first served as TBs are released; a request whose
// input comes from memory is granted towards the memory node; a notifying
// flit is passed through when no grant is made; no grant while the LGB has
// no room.
module tb_local_grant_controller;
  import hwa_pkg::*;
  localparam int NUM_TB = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_in_valid = 0, rb_empty, rb_rd, rb_wr, rb_full;
  logic [FLIT_W-1:0] req_in_flit = '0, rb_data, notify_flit = '0, lgb_data;
  logic [NUM_TB-1:0] tb_release = '0, tb_busy;
  logic notify_valid = 0, notify_ready, lgb_room = 1, lgb_wr, bypass_evt;
  logic [3:0] rb_count;

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(8)) u_rb (.clk, .rst_n, .wr_en(rb_wr), .wr_data(req_in_flit),
    .rd_en(rb_rd), .rd_data(rb_data), .empty(rb_empty), .full(rb_full), .count(rb_count));

  local_grant_controller #(.NUM_TB(NUM_TB)) dut (.*);

  int checks = 0, failures = 0, n_bypass = 0;
  head_flit_t got [$];
  // the LGB write is registered: sample it at the falling edge
  always @(negedge clk) if (rst_n && lgb_wr) got.push_back(head_flit_t'(lgb_data));
  always @(posedge clk) if (rst_n && bypass_evt) n_bypass++;

  function automatic logic [FLIT_W-1:0] req(int src, int hwa, int tag, logic [1:0] dir);
    head_flit_t h;
    h = '0; h.route = FPGA_NODE; h.pkt_head = 1; h.pkt_tail = 1; h.src_id = SRC_W'(src);
    h.hwa_id = HWAID_W'(hwa); h.cmd = 1; h.dir = dir; h.start_addr = ADDR_W'(tag);
    h.data_size = 10'd64; h.payload = HPAYLD_W'(CMD_REQUEST);
    return h;
  endfunction

  task automatic send(logic [FLIT_W-1:0] f);
    @(negedge clk); req_in_valid = 1; req_in_flit = f;
    @(negedge clk); req_in_valid = 0;
    #1;
  endtask

  task automatic expect_grant(int tag, int tb, logic [ROUTE_W-1:0] route);
    checks++;
    if (got.size() == 0) begin failures++; $display("ERROR: no grant for tag %0d", tag); return; end
    if (int'(got[0].start_addr) != tag || int'(got[0].tb_id) != tb || got[0].route != route
        || !got[0].cmd || got[0].payload[1:0] != CMD_GRANT || !got[0].pkt_head || !got[0].pkt_tail
        || got[0].data_size != 10'd64) begin
      failures++; $display("ERROR: grant tag %0d tb %0d route %0d, expected %0d %0d %0d",
                           got[0].start_addr, got[0].tb_id, got[0].route, tag, tb, route);
    end
    void'(got.pop_front());
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    head_flit_t n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // bypass: request presented for one cycle, grant written at the next edge
    send(req(2, 7, 101, 2'b00));
    checks++;
    if (got.size() != 1 || !rb_empty || n_bypass != 1) begin
      failures++; $display("ERROR: bypass grant not one cycle after the request");
    end
    expect_grant(101, 0, proc_node(3'd2));
    send(req(5, 7, 102, 2'b01));          // input from memory
    expect_grant(102, 1, MMU_NODE);
    checks++;
    if (tb_busy != 2'b11) begin failures++; $display("ERROR: status table %b", tb_busy); end
    // three more wait in the RB
    send(req(1, 7, 103, 2'b00));
    send(req(6, 7, 104, 2'b00));
    send(req(0, 7, 105, 2'b00));
    repeat (5) @(negedge clk);
    #1;
    checks++;
    if (got.size() != 0 || rb_count != 3) begin failures++; $display("ERROR: granted without a free TB"); end
    // a notification passes while no grant is possible
    n = req(3, 7, 200, 2'b00); n.payload = HPAYLD_W'(CMD_NOTIFY);
    @(negedge clk); notify_valid = 1; notify_flit = n;
    @(posedge clk); while (!notify_ready) @(posedge clk);
    @(negedge clk); notify_valid = 0;
    #1;
    checks++;
    if (got.size() != 1 || got[0].payload[1:0] != CMD_NOTIFY) begin failures++; $display("ERROR: notify"); end
    else void'(got.pop_front());
    // release TB 1: the oldest waiting request (103) gets it
    @(negedge clk); tb_release = 2'b10;
    @(negedge clk); tb_release = 2'b00;
    repeat (2) @(negedge clk);
    #1;
    expect_grant(103, 1, proc_node(3'd1));
    // no room in the LGB: no grant
    lgb_room = 0;
    @(negedge clk); tb_release = 2'b01;
    @(negedge clk); tb_release = 2'b00;
    repeat (3) @(negedge clk);
    #1;
    checks++;
    if (got.size() != 0) begin failures++; $display("ERROR: grant without LGB room"); end
    lgb_room = 1;
    repeat (2) @(negedge clk);
    #1;
    expect_grant(104, 0, proc_node(3'd6));
    @(negedge clk); tb_release = 2'b11;
    @(negedge clk); tb_release = 2'b00;
    repeat (2) @(negedge clk);
    #1;
    expect_grant(105, 0, proc_node(3'd0));
    checks++;
    if (n_bypass != 2) begin failures++; $display("ERROR: bypass count %0d", n_bypass); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
