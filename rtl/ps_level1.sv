// First-level packet sender: arbitration within one cluster of N HWA
// channels (four by default, the paper's PS4 strategy).
//
// Every cycle in which it is idle it registers two candidates: the next
// channel with a command flit waiting in its local grant buffer (Grt_rdy),
// chosen round-robin, and the channel whose packet output buffer holds a
// complete result packet (D_rdy) with the highest Packet priority in its
// head flit, ties broken round-robin. The candidates are offered to the
// second level (cmd_req, res_req, res_prio); these registers are the
// pipeline cut between the two levels. When the second level answers with
// go_cmd or go_res (the feedback path), the cluster streams the chosen
// command flit (Grt_rden) or all flits of the chosen result packet up to
// its tail (Acc_rden), one per cycle while out_ready is high. One idle
// cycle follows each packet so that the candidates are re-evaluated after
// the buffers have moved. The round-robin and priority-based round-robin
// policies follow the paper; the handshake with the second level is this
// design's choice.
module ps_level1
  import hwa_pkg::*;
#(
  parameter int N = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // from the N channels
  input  logic [N-1:0]               grt_rdy,
  input  logic [N-1:0][FLIT_W-1:0]   grt_data,
  output logic [N-1:0]               grt_rden,
  input  logic [N-1:0]               d_rdy,
  input  logic [N-1:0][FLIT_W-1:0]   acc_data,
  output logic [N-1:0]               acc_rden,
  // to / from the second level
  output logic                       cmd_req,
  output logic                       res_req,
  output logic [PRIO_W-1:0]          res_prio,
  input  logic                       go_cmd,
  input  logic                       go_res,
  input  logic                       out_ready,
  output logic                       flit_valid,
  output logic [FLIT_W-1:0]          flit,
  output logic                       flit_last
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  typedef enum logic [1:0] {S_ARB, S_CMD, S_RES, S_HOLD} state_e;

  state_e        state;
  logic [IW-1:0] cmd_ptr, res_ptr;       // last served channel
  logic [IW-1:0] cmd_idx, res_idx;       // registered candidates
  logic          cmd_v, res_v;
  logic [PRIO_W-1:0] res_p;

  // combinational candidate search
  logic          c_found, r_found;
  logic [IW-1:0] c_pick, r_pick;
  logic [PRIO_W-1:0] pmax;

  logic [31:0] ci, ri;
  head_flit_t rh, ph;
  always_comb begin
    c_found = 1'b0;
    c_pick  = cmd_ptr;
    for (int k = 1; k <= N; k++) begin
      ci = (int'(cmd_ptr) + k) % N;
      if (!c_found && grt_rdy[ci]) begin
        c_found = 1'b1;
        c_pick  = IW'(ci);
      end
    end

    pmax = '0;
    for (int i = 0; i < N; i++) begin
      ph = head_flit_t'(acc_data[i]);
      if (d_rdy[i] && ph.prio > pmax) pmax = ph.prio;
    end
    r_found = 1'b0;
    r_pick  = res_ptr;
    for (int k = 1; k <= N; k++) begin
      ri = (int'(res_ptr) + k) % N;
      rh = head_flit_t'(acc_data[ri]);
      if (!r_found && d_rdy[ri] && rh.prio == pmax) begin
        r_found = 1'b1;
        r_pick  = IW'(ri);
      end
    end
  end

  assign cmd_req  = (state == S_ARB) && cmd_v;
  assign res_req  = (state == S_ARB) && res_v;
  assign res_prio = res_p;

  body_flit_t cur;
  always_comb begin
    grt_rden   = '0;
    acc_rden   = '0;
    flit_valid = 1'b0;
    flit       = '0;
    flit_last  = 1'b0;
    cur        = body_flit_t'(acc_data[res_idx]);
    if (state == S_CMD && out_ready) begin
      grt_rden[cmd_idx] = 1'b1;
      flit_valid        = 1'b1;
      flit              = grt_data[cmd_idx];
      flit_last         = 1'b1;
    end else if (state == S_RES && out_ready) begin
      acc_rden[res_idx] = 1'b1;
      flit_valid        = 1'b1;
      flit              = acc_data[res_idx];
      flit_last         = cur.pkt_tail;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_ARB;
      cmd_ptr <= IW'(N - 1);
      res_ptr <= IW'(N - 1);
      cmd_idx <= '0;
      res_idx <= '0;
      cmd_v   <= 1'b0;
      res_v   <= 1'b0;
      res_p   <= '0;
    end else begin
      case (state)
        S_ARB: begin
          if (go_cmd && cmd_v) begin
            state <= S_CMD;
          end else if (go_res && res_v) begin
            state <= S_RES;
          end else begin
            cmd_v   <= c_found;
            cmd_idx <= c_pick;
            res_v   <= r_found;
            res_idx <= r_pick;
            res_p   <= pmax;
          end
        end
        S_CMD: if (out_ready) begin
          cmd_ptr <= cmd_idx;
          state   <= S_HOLD;
        end
        S_RES: if (out_ready && cur.pkt_tail) begin
          res_ptr <= res_idx;
          state   <= S_HOLD;
        end
        S_HOLD: begin
          cmd_v   <= c_found;
          cmd_idx <= c_pick;
          res_v   <= r_found;
          res_idx <= r_pick;
          res_p   <= pmax;
          state   <= S_ARB;
        end
        default: state <= S_ARB;
      endcase
    end
  end

  a_go_onehot: assert property (@(posedge clk) disable iff (!rst_n) !(go_cmd && go_res));
endmodule
