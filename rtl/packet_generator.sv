// Packet generator (PG): turns the results of one HWA invocation into either
// a result packet or a chained packet.
//
// On pg_start it receives the invocation header from the HWA controller and
// checks the Chaining depth. If the depth is non-zero the results are for
// the next HWA of the chain: the PG writes a header flit with the depth
// decreased by one and its own HWA ID into the chaining buffer (CB),
// followed by one flit per result word, the last one marked as packet tail.
// If the depth is zero the PG forms the result packet in the packet output
// buffer (POB): a head flit addressed to the requesting processor, or to the
// memory node when the direction field sends results to memory, then the
// result words as body flits and a tail flit. Packets are formed while the
// HWA streams its results (hwa_out_valid / hwa_out_ready / hwa_out_last),
// one word per cycle when the target buffer has room. After a result packet
// that went to memory the PG issues a notifying command for the requester,
// carrying the start address, through the grant controller's buffer; it
// waits until the packet output buffer is empty, so the notification cannot
// overtake its result packet in the packet sender, where commands go first. The
// depth check and the decrement follow the paper; the flit layout of result
// and notifying packets is this design's choice. The fixed fields of the
// notifying flit (head/tail/type marks, HWA ID, zero depth, command code in
// the payload bits) are constants, so synthesis reports those output bits
// as tied.
module packet_generator
  import hwa_pkg::*;
#(
  parameter int MY_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pg_start,
  input  logic [FLIT_W-1:0] pg_hdr,
  output logic              pg_ready,
  // HWA result stream
  input  logic              hwa_out_valid,
  input  logic [DATA_W-1:0] hwa_out_data,
  input  logic              hwa_out_last,
  output logic              hwa_out_ready,
  // packet output buffer
  input  logic              pob_full,
  input  logic              pob_empty,
  output logic              pob_wr,
  output logic [FLIT_W-1:0] pob_data,
  output logic              pob_eop,
  // chaining buffer
  input  logic              cb_full,
  output logic              cb_wr,
  output logic [FLIT_W-1:0] cb_data,
  output logic              cb_eop,
  // notifying command
  output logic              notify_valid,
  output logic [FLIT_W-1:0] notify_flit,
  input  logic              notify_ready,
  // events for statistics
  output logic              chain_evt,
  output logic              result_evt
);
  typedef enum logic [1:0] {S_IDLE, S_HEAD, S_DATA, S_NOTIFY} state_e;

  state_e     state;
  head_flit_t hdr;
  logic       chain;
  logic [ROUTE_W-1:0] dest;

  head_flit_t head_out, ntf, start_hdr;
  body_flit_t body_out;
  logic       room, wr;

  assign start_hdr = head_flit_t'(pg_hdr);
  assign dest  = hdr.dir[1] ? MMU_NODE : proc_node(hdr.src_id);
  assign room  = chain ? !cb_full : !pob_full;

  always_comb begin
    head_out          = hdr;
    head_out.hwa_id   = HWAID_W'(MY_ID);
    head_out.pkt_head = 1'b1;
    head_out.pkt_tail = 1'b0;
    head_out.cmd      = 1'b0;
    head_out.payload  = '0;
    if (chain) begin
      head_out.route  = '0;
      head_out.cdepth = hdr.cdepth - 1'b1;
    end else begin
      head_out.route     = dest;
      head_out.task_head = 1'b1;
      head_out.task_tail = 1'b1;
      head_out.cdepth    = '0;
    end
    body_out.route    = chain ? '0 : dest;
    body_out.pkt_head = 1'b0;
    body_out.pkt_tail = hwa_out_last;
    body_out.data     = hwa_out_data;

    ntf           = hdr;
    ntf.route     = proc_node(hdr.src_id);
    ntf.hwa_id    = HWAID_W'(MY_ID);
    ntf.pkt_head  = 1'b1;
    ntf.pkt_tail  = 1'b1;
    ntf.cmd       = 1'b1;
    ntf.task_head = 1'b0;
    ntf.task_tail = 1'b0;
    ntf.cdepth    = '0;
    ntf.payload   = HPAYLD_W'(CMD_NOTIFY);
  end

  assign pg_ready      = (state == S_IDLE);
  assign hwa_out_ready = (state == S_DATA) && room;
  assign wr            = (state == S_HEAD && room) || (state == S_DATA && room && hwa_out_valid);

  assign pob_wr   = wr && !chain;
  assign cb_wr    = wr && chain;
  assign pob_data = (state == S_HEAD) ? FLIT_W'(head_out) : FLIT_W'(body_out);
  assign cb_data  = pob_data;
  assign pob_eop  = (state == S_DATA) && hwa_out_last;
  assign cb_eop   = pob_eop;

  // the notification waits until the result packet has left the POB, so
  // that the higher command priority cannot let it overtake the result
  assign notify_valid = (state == S_NOTIFY) && pob_empty;
  assign notify_flit  = ntf;
  assign chain_evt    = cb_wr && cb_eop;
  assign result_evt   = pob_wr && pob_eop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      hdr   <= '0;
      chain <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (pg_start) begin
          hdr   <= start_hdr;
          chain <= (start_hdr.cdepth != '0);
          state <= S_HEAD;
        end
        S_HEAD: if (room) state <= S_DATA;
        S_DATA: if (room && hwa_out_valid && hwa_out_last)
                  state <= (!chain && hdr.dir[1]) ? S_NOTIFY : S_IDLE;
        S_NOTIFY: if (notify_valid && notify_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
