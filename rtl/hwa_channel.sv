// HWA channel: everything that serves one hardware accelerator.
//
// Request path: request flits from the packet receiver go to the local grant
// controller (LGC), directly when the request buffer (RB) is empty, through
// the RB otherwise. The LGC writes grant and notifying command flits into the
// local grant buffer (LGB), which the packet sender drains (Grt_rdy,
// Grt_data, Grt_rden).
// Task path: payload flits from the packet receiver go to the task buffer
// (TB) named in their head flit. A TB reports a ready task once the packet
// tail of a packet whose head flit had Task tail set is stored; the task
// arbiter (TA) picks one round-robin, the HWA controller (HWAC) streams it
// into the HWA and releases the TB, the packet generator (PG) collects the
// results into the packet output buffer (POB), which the packet sender drains
// a whole packet at a time (D_rdy, Acc_data, Acc_rden).
// Chaining path: when the depth in the header is non-zero the PG writes into
// this channel's chaining buffer (CB) instead. The CB's head flit and a
// ready flag are shown to the chaining controllers (CC) of the whole group;
// the one whose HWA is next in the chain makes its HWAC read the CB through
// the group wiring (cb_grp_* ports). The flag is held low while a reader is
// in the middle of a CB packet, so other controllers never decode a data
// flit as a header. One clock runs the whole channel; the paper lets the
// HWAC, PG and HWA run on a clock of their own, which this design does not
// do. The block structure follows the paper's channel figure; buffer depths
// are derived from its block-RAM counts or chosen here.
module hwa_channel
  import hwa_pkg::*;
#(
  parameter int MY_ID    = 0,
  parameter int NUM_TB   = 2,
  parameter int GRP      = 4,
  parameter int TB_DEPTH = 512,
  parameter int POB_DEPTH = 512,
  parameter int CB_DEPTH = 512,
  parameter int RB_DEPTH = 8,
  parameter int LGB_DEPTH = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // from / to packet receiver
  input  logic                           req_wr,
  input  logic [NUM_TB-1:0]              tb_wr,
  input  logic [FLIT_W-1:0]              pr_data,
  output logic                           req_ready,
  output logic [NUM_TB-1:0]              tb_ready,
  // to / from packet sender
  output logic                           grt_rdy,
  output logic [FLIT_W-1:0]              grt_data,
  input  logic                           grt_rden,
  output logic                           d_rdy,
  output logic [FLIT_W-1:0]              acc_data,
  input  logic                           acc_rden,
  // this channel's chaining buffer, seen by the group
  output logic                           cb_own_ready,
  output logic [FLIT_W-1:0]              cb_own_head,
  output logic                           cb_own_eop,
  input  logic                           cb_own_rd,      // OR of the group's reads
  // the group's chaining buffers, seen by this channel
  input  logic [GRP-1:0]                 cb_grp_ready,
  input  logic [GRP-1:0][FLIT_W-1:0]     cb_grp_head,
  input  logic [GRP-1:0]                 cb_grp_eop,
  output logic [GRP-1:0]                 cb_grp_rd,
  // accelerator
  input  logic                           hwa_idle,
  input  logic                           hwa_done,
  output logic                           hwa_in_valid,
  output logic [DATA_W-1:0]              hwa_in_data,
  output logic                           hwa_in_last,
  input  logic                           hwa_out_valid,
  input  logic [DATA_W-1:0]              hwa_out_data,
  input  logic                           hwa_out_last,
  output logic                           hwa_out_ready,
  // events for statistics
  output logic                           ev_bypass,
  output logic                           ev_req_wait,
  output logic                           ev_chain_in,
  output logic                           ev_chain_out,
  output logic                           ev_result
);
  localparam int TW = $clog2(NUM_TB);

  // ---------------- request and grant ----------------
  logic              rb_empty, rb_full, rb_rd, rb_wr;
  logic [FLIT_W-1:0] rb_data;
  logic [$clog2(RB_DEPTH):0] rb_count;
  logic              lgb_empty, lgb_full, lgb_wr;
  logic [FLIT_W-1:0] lgb_wdata;
  logic [$clog2(LGB_DEPTH):0] lgb_count;
  logic [NUM_TB-1:0] tb_release, tb_busy;
  logic              notify_valid, notify_ready;
  logic [FLIT_W-1:0] notify_flit;

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(RB_DEPTH)) u_rb (
    .clk, .rst_n, .wr_en(rb_wr), .wr_data(pr_data), .rd_en(rb_rd),
    .rd_data(rb_data), .empty(rb_empty), .full(rb_full), .count(rb_count));

  assign req_ready = rb_count <= ($clog2(RB_DEPTH)+1)'(RB_DEPTH - 2);

  local_grant_controller #(.NUM_TB(NUM_TB)) u_lgc (
    .clk, .rst_n,
    .req_in_valid(req_wr), .req_in_flit(pr_data),
    .rb_empty, .rb_data, .rb_rd, .rb_wr,
    .tb_release, .tb_busy,
    .notify_valid, .notify_flit, .notify_ready,
    .lgb_room(lgb_count <= ($clog2(LGB_DEPTH)+1)'(LGB_DEPTH - 2)),
    .lgb_wr, .lgb_data(lgb_wdata),
    .bypass_evt(ev_bypass));

  assign ev_req_wait = !rb_empty && (tb_busy == '1);

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(LGB_DEPTH)) u_lgb (
    .clk, .rst_n, .wr_en(lgb_wr), .wr_data(lgb_wdata), .rd_en(grt_rden),
    .rd_data(grt_data), .empty(lgb_empty), .full(lgb_full), .count(lgb_count));

  assign grt_rdy = !lgb_empty;

  // ---------------- task buffers ----------------
  logic [NUM_TB-1:0][FLIT_W-1:0] tb_data;
  logic [NUM_TB-1:0]             tb_eop, tb_unit, tb_rd, tb_in_use, tb_afull;
  logic [NUM_TB-1:0]             cur_task_tail;
  head_flit_t                    pr_hf;
  assign pr_hf = head_flit_t'(pr_data);

  for (genvar t = 0; t < NUM_TB; t++) begin : g_tb
    logic wr_eop;
    // the last flit of a task: packet tail of a packet whose head had Task tail
    assign wr_eop = pr_hf.pkt_tail && (pr_hf.pkt_head ? pr_hf.task_tail : cur_task_tail[t]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cur_task_tail[t] <= 1'b0;
      else if (tb_wr[t] && pr_hf.pkt_head) cur_task_tail[t] <= pr_hf.task_tail;
    end

    pkt_fifo #(.WIDTH(FLIT_W), .DEPTH(TB_DEPTH)) u_tb (
      .clk, .rst_n, .wr_en(tb_wr[t]), .wr_data(pr_data), .wr_eop,
      .rd_en(tb_rd[t]), .rd_data(tb_data[t]), .rd_eop(tb_eop[t]),
      .empty(), .full(), .almost_full(tb_afull[t]), .unit_ready(tb_unit[t]), .count());

    assign tb_ready[t] = !tb_afull[t];
  end

  logic          ta_valid, ta_accept;
  logic [TW-1:0] ta_sel;

  task_arbiter #(.NUM_TB(NUM_TB)) u_ta (
    .clk, .rst_n, .tb_ready(tb_unit), .tb_in_use, .accept(ta_accept),
    .ta_valid, .ta_sel);

  // ---------------- chaining ----------------
  logic                   cc_valid, cc_accept;
  logic [$clog2(GRP)-1:0] cc_sel;

  chaining_controller #(.GRP(GRP), .MY_ID(MY_ID)) u_cc (
    .clk, .rst_n, .cb_ready(cb_grp_ready), .cb_head(cb_grp_head),
    .accept(cc_accept), .cc_valid, .cc_sel);

  // ---------------- HWA controller and packet generator ----------------
  logic              pg_start, pg_ready;
  logic [FLIT_W-1:0] pg_hdr;

  hwa_controller #(.NUM_TB(NUM_TB), .GRP(GRP)) u_hwac (
    .clk, .rst_n,
    .ta_valid, .ta_sel, .ta_accept, .tb_data, .tb_eop, .tb_rd, .tb_in_use, .tb_release,
    .cc_valid, .cc_sel, .cc_accept, .cb_data(cb_grp_head), .cb_eop(cb_grp_eop), .cb_rd(cb_grp_rd),
    .hwa_idle, .hwa_done, .hwa_in_valid, .hwa_in_data, .hwa_in_last,
    .pg_ready, .pg_start, .pg_hdr,
    .chain_evt(ev_chain_in));

  logic              pob_full, pob_empty, pob_wr, pob_eop, cb_full, cb_wr, cb_eop, cb_unit;
  logic [FLIT_W-1:0] pob_wdata, cb_wdata;

  packet_generator #(.MY_ID(MY_ID)) u_pg (
    .clk, .rst_n, .pg_start, .pg_hdr, .pg_ready,
    .hwa_out_valid, .hwa_out_data, .hwa_out_last, .hwa_out_ready,
    .pob_full, .pob_empty, .pob_wr, .pob_data(pob_wdata), .pob_eop,
    .cb_full, .cb_wr, .cb_data(cb_wdata), .cb_eop,
    .notify_valid, .notify_flit, .notify_ready,
    .chain_evt(ev_chain_out), .result_evt(ev_result));

  pkt_fifo #(.WIDTH(FLIT_W), .DEPTH(POB_DEPTH)) u_pob (
    .clk, .rst_n, .wr_en(pob_wr), .wr_data(pob_wdata), .wr_eop(pob_eop),
    .rd_en(acc_rden), .rd_data(acc_data), .rd_eop(),
    .empty(pob_empty), .full(pob_full), .almost_full(), .unit_ready(d_rdy), .count());

  logic cb_unit_raw, cb_lock;

  pkt_fifo #(.WIDTH(FLIT_W), .DEPTH(CB_DEPTH)) u_cb (
    .clk, .rst_n, .wr_en(cb_wr), .wr_data(cb_wdata), .wr_eop(cb_eop),
    .rd_en(cb_own_rd), .rd_data(cb_own_head), .rd_eop(cb_own_eop),
    .empty(), .full(cb_full), .almost_full(), .unit_ready(cb_unit_raw), .count());

  // lock the CB between the read of its header and the read of its last flit
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      cb_lock <= 1'b0;
    else if (cb_own_rd && cb_own_eop) cb_lock <= 1'b0;
    else if (cb_own_rd)               cb_lock <= 1'b1;
  end

  assign cb_unit      = cb_unit_raw;
  assign cb_own_ready = cb_unit && !cb_lock;
endmodule
