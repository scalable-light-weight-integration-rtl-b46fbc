// HWA controller (HWAC): feeds one accelerator from a task buffer or from a
// chaining buffer of its group and hands the finished invocation to the
// packet generator.
//
// When the HWA is idle and the packet generator is free, the controller
// takes work, giving chained work (offered by the chaining controller)
// priority over new tasks (offered by the task arbiter), so that a running
// chain never stalls and chaining buffers cannot overflow. It then pops the
// first flit, the head flit, and keeps its header (source, priority,
// direction, chaining depth and index, start address). Every following flit
// is popped one per cycle; data flits go to the HWA as a 128-bit word stream
// (hwa_in_valid / hwa_in_data / hwa_in_last), and the head flits of later
// packets of a multi-packet task are dropped. The flit the buffer marks as
// the end of the task ends the stream; for a task buffer the controller then
// releases the buffer to the grant controller's status table. It waits for
// hwa_done and passes the header to the packet generator with pg_start. The
// HWA is expected to take one input word per cycle while it is fed. The
// order of these steps and the chaining priority follow the paper; the word
// stream interface to the HWA is this design's choice, the paper leaves the
// accelerator's ports open.
module hwa_controller
  import hwa_pkg::*;
#(
  parameter int NUM_TB = 2,
  parameter int GRP    = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // task arbiter and task buffers
  input  logic                           ta_valid,
  input  logic [$clog2(NUM_TB)-1:0]      ta_sel,
  output logic                           ta_accept,
  input  logic [NUM_TB-1:0][FLIT_W-1:0]  tb_data,
  input  logic [NUM_TB-1:0]              tb_eop,
  output logic [NUM_TB-1:0]              tb_rd,
  output logic [NUM_TB-1:0]              tb_in_use,
  output logic [NUM_TB-1:0]              tb_release,
  // chaining controller and the group's chaining buffers
  input  logic                           cc_valid,
  input  logic [$clog2(GRP)-1:0]         cc_sel,
  output logic                           cc_accept,
  input  logic [GRP-1:0][FLIT_W-1:0]     cb_data,
  input  logic [GRP-1:0]                 cb_eop,
  output logic [GRP-1:0]                 cb_rd,
  // accelerator
  input  logic                           hwa_idle,
  input  logic                           hwa_done,
  output logic                           hwa_in_valid,
  output logic [DATA_W-1:0]              hwa_in_data,
  output logic                           hwa_in_last,
  // packet generator
  input  logic                           pg_ready,
  output logic                           pg_start,
  output logic [FLIT_W-1:0]              pg_hdr,
  // event for statistics
  output logic                           chain_evt
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA, S_WAIT} state_e;
  localparam int TW = $clog2(NUM_TB);
  localparam int GW = $clog2(GRP);

  state_e         state;
  logic           from_cb;
  logic [TW-1:0]  tsel;
  logic [GW-1:0]  csel;
  logic [FLIT_W-1:0] hdr;

  logic [FLIT_W-1:0] cur;
  logic              cur_eop;
  body_flit_t        bf;

  assign cur     = from_cb ? cb_data[csel] : tb_data[tsel];
  assign cur_eop = from_cb ? cb_eop[csel]  : tb_eop[tsel];
  assign bf      = body_flit_t'(cur);

  logic pop;
  assign pop = (state == S_HDR) || (state == S_DATA);

  always_comb begin
    tb_rd = '0;
    cb_rd = '0;
    if (pop) begin
      if (from_cb) cb_rd[csel] = 1'b1;
      else         tb_rd[tsel] = 1'b1;
    end
  end

  assign tb_in_use    = (state != S_IDLE && !from_cb) ? (NUM_TB'(1) << tsel) : '0;
  assign tb_release   = (state == S_DATA && !from_cb && cur_eop) ? (NUM_TB'(1) << tsel) : '0;
  assign hwa_in_valid = (state == S_DATA) && !bf.pkt_head;
  assign hwa_in_data  = bf.data;
  assign hwa_in_last  = (state == S_DATA) && cur_eop;

  logic can_start;
  assign can_start = (state == S_IDLE) && hwa_idle && pg_ready;
  assign cc_accept = can_start && cc_valid;
  assign ta_accept = can_start && !cc_valid && ta_valid;
  assign chain_evt = cc_accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      from_cb  <= 1'b0;
      tsel     <= '0;
      csel     <= '0;
      hdr      <= '0;
      pg_start <= 1'b0;
      pg_hdr   <= '0;
    end else begin
      pg_start <= 1'b0;
      case (state)
        S_IDLE: begin
          if (cc_accept) begin
            from_cb <= 1'b1;
            csel    <= cc_sel;
            state   <= S_HDR;
          end else if (ta_accept) begin
            from_cb <= 1'b0;
            tsel    <= ta_sel;
            state   <= S_HDR;
          end
        end
        S_HDR: begin
          hdr   <= cur;
          state <= S_DATA;
        end
        S_DATA: if (cur_eop) state <= S_WAIT;
        S_WAIT: if (hwa_done) begin
          pg_start <= 1'b1;
          pg_hdr   <= hdr;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_hdr_is_head: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HDR) |-> (bf.pkt_head && !cur_eop));
  a_last_is_data: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_DATA && cur_eop) |-> !bf.pkt_head);
endmodule
