// Chaining controller (CC) of one HWA channel: finds chained work addressed
// to this channel in the chaining buffers of its chaining group.
//
// Every chaining buffer (CB) of the group shows its head flit, which is the
// header written by the packet generator that produced the chained data,
// and a flag saying a whole chained packet is stored. For each such buffer
// the CC derives the next HWA of the chain: the group part of the producer's
// HWA ID (the upper bits) with the 2-bit index taken from the Chaining index
// slot selected by the remaining Chaining depth in the header. It compares
// this ID with its own channel's HWA ID, chooses one of the matching buffers
// round-robin and offers it to the HWA controller, registered (one cycle, as
// the paper gives for the CC). The pointer moves when the HWA controller
// accepts. The ID derivation from index and depth and the round-robin choice
// follow the paper; the group size of four (set by the 2-bit index width)
// and the slot order are this design's reading of the header format.
module chaining_controller
  import hwa_pkg::*;
#(
  parameter int GRP   = 4,
  parameter int MY_ID = 0
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [GRP-1:0]                 cb_ready,
  input  logic [GRP-1:0][FLIT_W-1:0]     cb_head,
  input  logic                           accept,
  output logic                           cc_valid,
  output logic [$clog2(GRP)-1:0]         cc_sel
);
  localparam int GW = $clog2(GRP);

  logic [GRP-1:0] match;
  head_flit_t     hh [GRP];
  logic [HWAID_W-1:0] next_id [GRP];
  logic [GW-1:0]  last, choice;
  logic           found;

  always_comb begin
    for (int j = 0; j < GRP; j++) begin
      hh[j]      = head_flit_t'(cb_head[j]);
      next_id[j] = {hh[j].hwa_id[HWAID_W-1:CSLOT_W], chain_slot(hh[j].cindex, hh[j].cdepth)};
      match[j]   = cb_ready[j] && (next_id[j] == HWAID_W'(MY_ID));
    end
  end

  logic [31:0] idx;

  always_comb begin
    found  = 1'b0;
    choice = last;
    for (int k = 1; k <= GRP; k++) begin
      idx = (int'(last) + k) % GRP;
      if (!found && match[idx]) begin
        found  = 1'b1;
        choice = GW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= GW'(GRP - 1);
      cc_valid <= 1'b0;
      cc_sel   <= '0;
    end else begin
      if (accept && cc_valid) begin
        last     <= cc_sel;
        cc_valid <= 1'b0;
      end else begin
        cc_valid <= found;
        cc_sel   <= choice;
      end
    end
  end
endmodule
