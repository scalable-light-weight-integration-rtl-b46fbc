// Packet receiver (PR): takes flits out of the router output buffer and
// dispatches them to the HWA channels it serves.
//
// Several PRs share the router output buffer (distributed PR strategy, four
// channels per PR by default). All of them see the buffer's head flit and
// Empty flag; the PR whose channel range [BASE_ID, BASE_ID+NCH) contains the
// head flit's HWA ID takes the packet and raises Rd_en, the others stay idle.
// The FSM has two states. In IDLE it decodes a head flit: a command packet
// (request, always a single flit) is written to the channel's request input;
// a payload packet's head flit is written to the task buffer named by the
// Task buffer ID field and, unless it is also the packet tail, the FSM moves
// to BODY and forwards every following flit to the same task buffer up to
// the packet tail. Flits of one packet are assumed to arrive back to back
// (wormhole delivery), so body flits, which carry no HWA ID, belong to the PR
// that is in BODY. A flit is only read when its target can accept it
// (Ready); the write towards the channel is registered, so a command reaches
// the channel one cycle after it is read (the paper's command latency of 1
// cycle) and a payload packet of N flits is written within N+1 cycles.
// Interface names follow the paper's figure (Ready, Data_in, Empty, Rd_en,
// Wr_en, Data_out); the two-state FSM and the dispatch rule are this
// design's choice.
module packet_receiver
  import hwa_pkg::*;
#(
  parameter int NCH     = 4,
  parameter int NUM_TB  = 2,
  parameter int BASE_ID = 0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // router output buffer
  input  logic                       rx_empty,
  input  logic [FLIT_W-1:0]          rx_data,
  output logic                       rx_rd_en,
  // towards the channels (Ready / Wr_en / Data_out)
  input  logic [NCH-1:0]             req_ready,
  input  logic [NCH-1:0][NUM_TB-1:0] tb_ready,
  output logic [NCH-1:0]             req_wr,
  output logic [NCH-1:0][NUM_TB-1:0] tb_wr,
  output logic [FLIT_W-1:0]          data_out
);
  typedef enum logic {S_IDLE, S_BODY} state_e;

  localparam int CW = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int TW = (NUM_TB > 1) ? $clog2(NUM_TB) : 1;

  state_e      state;
  logic [CW-1:0] cur_ch;
  logic [TW-1:0] cur_tb;

  head_flit_t  hf;
  logic        mine;
  logic [CW-1:0] hd_ch;
  logic [TW-1:0] hd_tb;
  logic        take;

  assign hf    = head_flit_t'(rx_data);
  assign mine  = (int'(hf.hwa_id) >= BASE_ID) && (int'(hf.hwa_id) < BASE_ID + NCH);
  assign hd_ch = CW'(int'(hf.hwa_id) - BASE_ID);
  assign hd_tb = TW'(hf.tb_id);

  always_comb begin
    take = 1'b0;
    if (!rx_empty) begin
      if (state == S_IDLE) begin
        if (hf.pkt_head && mine) begin
          if (hf.cmd) take = req_ready[hd_ch];
          else        take = tb_ready[hd_ch][hd_tb];
        end
      end else begin
        take = tb_ready[cur_ch][cur_tb];
      end
    end
  end

  assign rx_rd_en = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur_ch   <= '0;
      cur_tb   <= '0;
      req_wr   <= '0;
      tb_wr    <= '0;
      data_out <= '0;
    end else begin
      req_wr <= '0;
      tb_wr  <= '0;
      if (take) data_out <= rx_data;
      case (state)
        S_IDLE: if (take) begin
          if (hf.cmd) begin
            req_wr[hd_ch] <= 1'b1;
          end else begin
            tb_wr[hd_ch][hd_tb] <= 1'b1;
            cur_ch <= hd_ch;
            cur_tb <= hd_tb;
            if (!hf.pkt_tail) state <= S_BODY;
          end
        end
        S_BODY: if (take) begin
          tb_wr[cur_ch][cur_tb] <= 1'b1;
          if (hf.pkt_tail) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a command packet is a single flit
  a_cmd_single: assert property (@(posedge clk) disable iff (!rst_n)
    (take && state == S_IDLE && hf.cmd) |-> hf.pkt_tail);
endmodule
