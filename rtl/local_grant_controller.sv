// Local grant controller (LGC) of one HWA channel: the request-and-grant
// mechanism that hands task buffers to requesting processors.
//
// A request is a single command flit carrying the requester's Source ID,
// the HWA ID, direction, start address and data size. Requests are served
// first come, first served. The oldest one is the head of the request buffer
// (RB); when the RB is empty, a request arriving from the packet receiver
// bypasses it and is considered in the same cycle. A status table with one
// busy bit per task buffer (TB) is updated every cycle: a bit is set when
// its TB is granted and cleared when the HWA controller has read the whole
// task out of it (tb_release). When the considered request finds a free TB
// (lowest index first) and the local grant buffer (LGB) has room, the LGC
// writes one grant flit into the LGB one cycle later (latency 1 cycle). The
// grant is addressed to the requesting processor for direct access, or to
// the memory node (MMU) when the direction field says that input data comes
// from memory, and carries the granted Task buffer ID. No grant is issued
// while every TB is busy; the request then waits in the RB. In a cycle with
// no grant, a notifying command from the packet generator may be written
// into the LGB instead. The paper describes the RB, bypass, status table,
// FCFS order and TB-availability rule; the lowest-free TB choice and the
// notify sharing of the LGB are this design's choice.
module local_grant_controller
  import hwa_pkg::*;
#(
  parameter int NUM_TB = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // request from the packet receiver (bypass path) and RB control
  input  logic              req_in_valid,
  input  logic [FLIT_W-1:0] req_in_flit,
  input  logic              rb_empty,
  input  logic [FLIT_W-1:0] rb_data,
  output logic              rb_rd,
  output logic              rb_wr,
  // task buffer status
  input  logic [NUM_TB-1:0] tb_release,
  output logic [NUM_TB-1:0] tb_busy,
  // notifying commands from the packet generator
  input  logic              notify_valid,
  input  logic [FLIT_W-1:0] notify_flit,
  output logic              notify_ready,
  // local grant buffer write
  input  logic              lgb_room,      // LGB can take two more flits
  output logic              lgb_wr,
  output logic [FLIT_W-1:0] lgb_data,
  // event for statistics
  output logic              bypass_evt
);
  head_flit_t        src, g;
  logic              src_valid, any_free, grant;
  logic [NUM_TB-1:0] pick;

  assign src_valid = !rb_empty || req_in_valid;
  assign src       = head_flit_t'(!rb_empty ? rb_data : req_in_flit);
  assign any_free  = (~tb_busy) != '0;

  always_comb begin
    pick = '0;
    for (int i = NUM_TB - 1; i >= 0; i--)
      if (!tb_busy[i]) pick = NUM_TB'(1) << i;
  end

  assign grant        = src_valid && any_free && lgb_room;
  assign rb_rd        = grant && !rb_empty;
  assign rb_wr        = req_in_valid && !(grant && rb_empty);
  assign bypass_evt   = grant && rb_empty;
  assign notify_ready = !grant && lgb_room;

  always_comb begin
    g           = src;
    g.route     = src.dir[0] ? MMU_NODE : proc_node(src.src_id);
    g.pkt_head  = 1'b1;
    g.pkt_tail  = 1'b1;
    g.cmd       = 1'b1;
    g.task_head = 1'b0;
    g.task_tail = 1'b0;
    g.tb_id     = '0;
    for (int i = 0; i < NUM_TB; i++)
      if (pick[i]) g.tb_id = TBID_W'(i);
    g.payload   = HPAYLD_W'(CMD_GRANT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tb_busy  <= '0;
      lgb_wr   <= 1'b0;
      lgb_data <= '0;
    end else begin
      tb_busy <= (tb_busy & ~tb_release) | (grant ? pick : '0);
      lgb_wr  <= grant || (notify_valid && notify_ready);
      if (grant)                             lgb_data <= g;
      else if (notify_valid && notify_ready) lgb_data <= notify_flit;
    end
  end

  a_release_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (tb_release & ~tb_busy) == '0);
endmodule
