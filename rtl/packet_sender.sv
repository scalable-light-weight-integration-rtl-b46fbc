// Packet sender (PS), hierarchical strategy: NCH channels are split into
// clusters of PS_CH channels, each served by a first-level PS, and one
// second-level PS arbitrates among the clusters and writes the router input
// buffer. The defaults, 32 channels in clusters of four (eight first-level
// PSs), are the configuration the paper reports as fastest (PS4). Command
// packets (grants and notifications, one flit) always go before result
// packets; result packets are chosen by priority, then round-robin, at both
// levels. A packet leaves as an unbroken run of flits, at most one flit per
// cycle. From a channel's D_rdy or Grt_rdy to the first flit on Data_out
// takes four cycles when the sender is idle (candidate register, second
// level decision, go register, output register), so a packet of N flits is
// out after N+4 cycles, which matches the paper's PS latency for payload
// packets; a command flit needs the same four cycles here, where the paper
// gives one.
module packet_sender
  import hwa_pkg::*;
#(
  parameter int NCH   = 32,
  parameter int PS_CH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NCH-1:0]             grt_rdy,
  input  logic [NCH-1:0][FLIT_W-1:0] grt_data,
  output logic [NCH-1:0]             grt_rden,
  input  logic [NCH-1:0]             d_rdy,
  input  logic [NCH-1:0][FLIT_W-1:0] acc_data,
  output logic [NCH-1:0]             acc_rden,
  input  logic                       tx_room,
  output logic                       out_en,
  output logic [FLIT_W-1:0]          data_out,
  output logic                       cmd_first_evt
);
  localparam int M = NCH / PS_CH;

  logic [M-1:0]               cmd_req, res_req, go_cmd, go_res, fvalid, flast;
  logic [M-1:0][PRIO_W-1:0]   res_prio;
  logic [M-1:0][FLIT_W-1:0]   fdata;
  logic                       out_ready;

  for (genvar c = 0; c < M; c++) begin : g_l1
    ps_level1 #(.N(PS_CH)) u_l1 (
      .clk, .rst_n,
      .grt_rdy (grt_rdy [c*PS_CH +: PS_CH]),
      .grt_data(grt_data[c*PS_CH +: PS_CH]),
      .grt_rden(grt_rden[c*PS_CH +: PS_CH]),
      .d_rdy   (d_rdy   [c*PS_CH +: PS_CH]),
      .acc_data(acc_data[c*PS_CH +: PS_CH]),
      .acc_rden(acc_rden[c*PS_CH +: PS_CH]),
      .cmd_req(cmd_req[c]), .res_req(res_req[c]), .res_prio(res_prio[c]),
      .go_cmd(go_cmd[c]), .go_res(go_res[c]), .out_ready,
      .flit_valid(fvalid[c]), .flit(fdata[c]), .flit_last(flast[c]));
  end

  ps_level2 #(.M(M)) u_l2 (
    .clk, .rst_n, .cmd_req, .res_req, .res_prio, .go_cmd, .go_res, .out_ready,
    .flit_valid(fvalid), .flit(fdata), .flit_last(flast),
    .tx_room, .out_en, .data_out, .cmd_first_evt);

  initial assert (NCH % PS_CH == 0) else $error("packet_sender: NCH must be a multiple of PS_CH");
endmodule
