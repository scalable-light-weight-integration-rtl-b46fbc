// Single-clock first-word-fall-through FIFO, used for the request buffer (RB)
// and the local grant buffer (LGB) of every HWA channel.
//
// Storage is a register array addressed by read and write pointers one bit
// wider than the address, so that full and empty are told apart by the extra
// bit. rd_data always shows the oldest entry while empty is low; rd_en pops
// it at the clock edge. A write and a read may happen in the same cycle. A
// write while full and a read while empty are ignored (and flagged by
// assertions). count gives the number of stored entries. The paper only says
// that these buffers are FIFOs built from distributed memory; depth and the
// show-ahead read are this design's choice.
module sync_fifo #(
  parameter int WIDTH = 137,
  parameter int DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign count   = wptr - rptr;
  assign empty   = (wptr == rptr);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("sync_fifo: DEPTH must be a power of two");

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
