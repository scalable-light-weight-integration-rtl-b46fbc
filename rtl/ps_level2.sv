// Second-level packet sender: arbitration among M first-level clusters and
// the write port into the router input buffer.
//
// When idle it looks at the registered requests of the first-level
// clusters. Command packets are served before result packets; among
// commands the clusters are served round-robin, among results the cluster
// offering the highest Packet priority wins, ties round-robin. The winner is
// told to start (go_cmd / go_res, registered), and the level then forwards
// the cluster's flits into a registered output (Data_out with Out_en) until
// the last flit of the packet, so a packet always leaves as an unbroken
// sequence of flits. out_ready follows the router input buffer, which must
// have room for two more flits because of that output register. The
// ordering rules follow the paper; the handshake is this design's choice.
module ps_level2
  import hwa_pkg::*;
#(
  parameter int M = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [M-1:0]               cmd_req,
  input  logic [M-1:0]               res_req,
  input  logic [M-1:0][PRIO_W-1:0]   res_prio,
  output logic [M-1:0]               go_cmd,
  output logic [M-1:0]               go_res,
  output logic                       out_ready,
  input  logic [M-1:0]               flit_valid,
  input  logic [M-1:0][FLIT_W-1:0]   flit,
  input  logic [M-1:0]               flit_last,
  // router input buffer
  input  logic                       tx_room,
  output logic                       out_en,
  output logic [FLIT_W-1:0]          data_out,
  // event for statistics: a result packet waited while a command went first
  output logic                       cmd_first_evt
);
  localparam int IW = (M > 1) ? $clog2(M) : 1;
  typedef enum logic {S_IDLE, S_BUSY} state_e;

  state_e        state;
  logic [IW-1:0] sel, cmd_ptr, res_ptr;
  logic          c_found, r_found;
  logic [IW-1:0] c_pick, r_pick;
  logic [PRIO_W-1:0] pmax;

  logic [31:0] ci, ri;
  always_comb begin
    c_found = 1'b0;
    c_pick  = cmd_ptr;
    for (int k = 1; k <= M; k++) begin
      ci = (int'(cmd_ptr) + k) % M;
      if (!c_found && cmd_req[ci]) begin
        c_found = 1'b1;
        c_pick  = IW'(ci);
      end
    end
    pmax = '0;
    for (int i = 0; i < M; i++)
      if (res_req[i] && res_prio[i] > pmax) pmax = res_prio[i];
    r_found = 1'b0;
    r_pick  = res_ptr;
    for (int k = 1; k <= M; k++) begin
      ri = (int'(res_ptr) + k) % M;
      if (!r_found && res_req[ri] && res_prio[ri] == pmax) begin
        r_found = 1'b1;
        r_pick  = IW'(ri);
      end
    end
  end

  assign out_ready     = (state == S_BUSY) && tx_room;
  assign cmd_first_evt = (state == S_IDLE) && c_found && r_found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sel      <= '0;
      cmd_ptr  <= IW'(M - 1);
      res_ptr  <= IW'(M - 1);
      go_cmd   <= '0;
      go_res   <= '0;
      out_en   <= 1'b0;
      data_out <= '0;
    end else begin
      go_cmd <= '0;
      go_res <= '0;
      out_en <= 1'b0;
      case (state)
        S_IDLE: begin
          if (c_found) begin
            go_cmd[c_pick] <= 1'b1;
            sel            <= c_pick;
            cmd_ptr        <= c_pick;
            state          <= S_BUSY;
          end else if (r_found) begin
            go_res[r_pick] <= 1'b1;
            sel            <= r_pick;
            res_ptr        <= r_pick;
            state          <= S_BUSY;
          end
        end
        S_BUSY: begin
          if (flit_valid[sel] && tx_room) begin
            out_en   <= 1'b1;
            data_out <= flit[sel];
            if (flit_last[sel]) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
