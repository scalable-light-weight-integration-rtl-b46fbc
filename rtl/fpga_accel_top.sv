// FPGA multi-accelerator interface: the FPGA node of a network-on-chip
// multiprocessor, holding NUM_CH hardware accelerators (HWAs) behind one
// router port.
//
// Flits from the router enter the router output buffer, a dual-clock FIFO
// from the router clock (clk_noc) to the interface clock (clk). Distributed
// packet receivers, each serving PR_CH channels, take the packets addressed
// to their channels: request commands go to a channel's grant logic,
// payload packets to the task buffer the grant named. Each HWA channel
// grants task buffers to requesters, runs its accelerator on complete
// tasks, and either returns the results as a result packet or, when the
// task asks for chaining, passes them to the next HWA of its chaining group
// of GRP channels without leaving the FPGA. The hierarchical packet sender
// (first-level clusters of PS_CH channels, one second level) collects grant,
// notifying and result packets and writes them into the router input
// buffer, a dual-clock FIFO back to clk_noc.
// The router itself and the accelerators are outside this module: the
// router side is a FIFO write port and a FIFO read port, and each HWA is
// attached through a word-stream interface (hwa_* ports). The ev_* outputs
// pulse on the design's mechanisms (request-buffer bypass, a request waiting
// for a task buffer, chained input taken, chained output written, result
// packet written, a command sent ahead of a waiting result) and are meant
// for counting in simulation. Defaults are the paper's main configuration:
// 32 channels, PR4 and PS4 strategies, two task buffers per channel.
module fpga_accel_top
  import hwa_pkg::*;
#(
  parameter int NUM_CH     = 32,
  parameter int PR_CH      = 4,
  parameter int PS_CH      = 4,
  parameter int NUM_TB     = 2,
  parameter int GRP        = 4,
  parameter int TB_DEPTH   = 512,
  parameter int POB_DEPTH  = 512,
  parameter int CB_DEPTH   = 512,
  parameter int RB_DEPTH   = 8,
  parameter int LGB_DEPTH  = 8,
  parameter int RBUF_DEPTH = 16
) (
  input  logic                        clk_noc,
  input  logic                        rst_noc_n,
  input  logic                        clk,
  input  logic                        rst_n,
  // router -> FPGA (router output buffer write port)
  input  logic                        rx_wr,
  input  logic [FLIT_W-1:0]           rx_data,
  output logic                        rx_full,
  // FPGA -> router (router input buffer read port)
  input  logic                        tx_rd,
  output logic [FLIT_W-1:0]           tx_data,
  output logic                        tx_empty,
  // accelerators
  input  logic [NUM_CH-1:0]              hwa_idle,
  input  logic [NUM_CH-1:0]              hwa_done,
  output logic [NUM_CH-1:0]              hwa_in_valid,
  output logic [NUM_CH-1:0][DATA_W-1:0]  hwa_in_data,
  output logic [NUM_CH-1:0]              hwa_in_last,
  input  logic [NUM_CH-1:0]              hwa_out_valid,
  input  logic [NUM_CH-1:0][DATA_W-1:0]  hwa_out_data,
  input  logic [NUM_CH-1:0]              hwa_out_last,
  output logic [NUM_CH-1:0]              hwa_out_ready,
  // mechanism events
  output logic [NUM_CH-1:0]              ev_bypass,
  output logic [NUM_CH-1:0]              ev_req_wait,
  output logic [NUM_CH-1:0]              ev_chain_in,
  output logic [NUM_CH-1:0]              ev_chain_out,
  output logic [NUM_CH-1:0]              ev_result,
  output logic                           ev_cmd_first
);
  localparam int NPR  = NUM_CH / PR_CH;
  localparam int NGRP = NUM_CH / GRP;

  // ---------------- router output buffer ----------------
  logic              rob_empty, rob_rd;
  logic [FLIT_W-1:0] rob_data;

  async_fifo #(.WIDTH(FLIT_W), .DEPTH(RBUF_DEPTH)) u_router_out_buf (
    .wclk(clk_noc), .wrst_n(rst_noc_n), .wr_en(rx_wr), .wr_data(rx_data),
    .wfull(rx_full), .walmost_full(),
    .rclk(clk), .rrst_n(rst_n), .rd_en(rob_rd), .rd_data(rob_data), .rempty(rob_empty));

  // ---------------- distributed packet receivers ----------------
  logic [NPR-1:0]                pr_rd;
  logic [NPR-1:0][FLIT_W-1:0]    pr_data;
  logic [NUM_CH-1:0]             req_wr, req_ready;
  logic [NUM_CH-1:0][NUM_TB-1:0] tb_wr, tb_ready;

  for (genvar p = 0; p < NPR; p++) begin : g_pr
    packet_receiver #(.NCH(PR_CH), .NUM_TB(NUM_TB), .BASE_ID(p*PR_CH)) u_pr (
      .clk, .rst_n,
      .rx_empty(rob_empty), .rx_data(rob_data), .rx_rd_en(pr_rd[p]),
      .req_ready(req_ready[p*PR_CH +: PR_CH]),
      .tb_ready (tb_ready [p*PR_CH +: PR_CH]),
      .req_wr   (req_wr   [p*PR_CH +: PR_CH]),
      .tb_wr    (tb_wr    [p*PR_CH +: PR_CH]),
      .data_out (pr_data[p]));
  end

  assign rob_rd = |pr_rd;

  // ---------------- HWA channels ----------------
  logic [NUM_CH-1:0]              grt_rdy, grt_rden, d_rdy, acc_rden;
  logic [NUM_CH-1:0][FLIT_W-1:0]  grt_data, acc_data;
  logic [NUM_CH-1:0]              cb_ready, cb_eop, cb_pop;
  logic [NUM_CH-1:0][FLIT_W-1:0]  cb_head;
  logic [NUM_CH-1:0][GRP-1:0]     cb_rd_req;   // [reader][member of its group]

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    localparam int BASE = (c / GRP) * GRP;
    hwa_channel #(
      .MY_ID(c), .NUM_TB(NUM_TB), .GRP(GRP), .TB_DEPTH(TB_DEPTH),
      .POB_DEPTH(POB_DEPTH), .CB_DEPTH(CB_DEPTH), .RB_DEPTH(RB_DEPTH), .LGB_DEPTH(LGB_DEPTH)
    ) u_ch (
      .clk, .rst_n,
      .req_wr(req_wr[c]), .tb_wr(tb_wr[c]), .pr_data(pr_data[c / PR_CH]),
      .req_ready(req_ready[c]), .tb_ready(tb_ready[c]),
      .grt_rdy(grt_rdy[c]), .grt_data(grt_data[c]), .grt_rden(grt_rden[c]),
      .d_rdy(d_rdy[c]), .acc_data(acc_data[c]), .acc_rden(acc_rden[c]),
      .cb_own_ready(cb_ready[c]), .cb_own_head(cb_head[c]), .cb_own_eop(cb_eop[c]),
      .cb_own_rd(cb_pop[c]),
      .cb_grp_ready(cb_ready[BASE +: GRP]), .cb_grp_head(cb_head[BASE +: GRP]),
      .cb_grp_eop(cb_eop[BASE +: GRP]), .cb_grp_rd(cb_rd_req[c]),
      .hwa_idle(hwa_idle[c]), .hwa_done(hwa_done[c]),
      .hwa_in_valid(hwa_in_valid[c]), .hwa_in_data(hwa_in_data[c]), .hwa_in_last(hwa_in_last[c]),
      .hwa_out_valid(hwa_out_valid[c]), .hwa_out_data(hwa_out_data[c]),
      .hwa_out_last(hwa_out_last[c]), .hwa_out_ready(hwa_out_ready[c]),
      .ev_bypass(ev_bypass[c]), .ev_req_wait(ev_req_wait[c]),
      .ev_chain_in(ev_chain_in[c]), .ev_chain_out(ev_chain_out[c]), .ev_result(ev_result[c]));
  end

  // a chaining buffer is popped by whichever channel of its group reads it
  always_comb begin
    cb_pop = '0;
    for (int c = 0; c < NUM_CH; c++)
      for (int j = 0; j < GRP; j++)
        if (cb_rd_req[c][j]) cb_pop[(c / GRP) * GRP + j] = 1'b1;
  end

  // ---------------- hierarchical packet sender ----------------
  logic              ps_en, rib_afull;
  logic [FLIT_W-1:0] ps_data;

  packet_sender #(.NCH(NUM_CH), .PS_CH(PS_CH)) u_ps (
    .clk, .rst_n,
    .grt_rdy, .grt_data, .grt_rden, .d_rdy, .acc_data, .acc_rden,
    .tx_room(!rib_afull), .out_en(ps_en), .data_out(ps_data),
    .cmd_first_evt(ev_cmd_first));

  // ---------------- router input buffer ----------------
  async_fifo #(.WIDTH(FLIT_W), .DEPTH(RBUF_DEPTH)) u_router_in_buf (
    .wclk(clk), .wrst_n(rst_n), .wr_en(ps_en), .wr_data(ps_data),
    .wfull(), .walmost_full(rib_afull),
    .rclk(clk_noc), .rrst_n(rst_noc_n), .rd_en(tx_rd), .rd_data(tx_data), .rempty(tx_empty));

  initial assert (NUM_CH % PR_CH == 0 && NUM_CH % GRP == 0)
    else $error("fpga_accel_top: NUM_CH must be a multiple of PR_CH and GRP");
endmodule
