// Packet-aware single-clock FIFO, used for the task buffers (TB), the packet
// output buffer (POB) and the chaining buffer (CB) of every HWA channel.
//
// Flits are stored first-word-fall-through like sync_fifo. Along with each
// flit the writer marks whether it closes a unit (wr_eop): for a task buffer
// that is the last flit of the task (packet tail together with task tail), for
// the POB and CB the packet tail. A counter of complete units is incremented
// when such a flit is written and decremented when it is read, and
// unit_ready tells the consumer (task arbiter, packet sender or chaining
// controller) that a whole task or packet can be read without waiting.
// almost_full leaves one free slot so that a writer with one registered
// pipeline stage cannot overrun it. The paper builds these buffers in block
// RAM: the default depth of 512 flits is what two 36-kbit block RAMs give at
// a 137-bit width (two BRAMs per TB, POB and CB in the paper's resource
// tables). The paper makes these buffers cross into a per-HWA clock; here
// they are single-clock.
module pkt_fifo #(
  parameter int WIDTH = 137,
  parameter int DEPTH = 512
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [WIDTH-1:0]       wr_data,
  input  logic                   wr_eop,
  input  logic                   rd_en,
  output logic [WIDTH-1:0]       rd_data,
  output logic                   rd_eop,
  output logic                   empty,
  output logic                   full,
  output logic                   almost_full,
  output logic                   unit_ready,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH:0]   mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic [AW:0]      units;
  logic             do_wr, do_rd;

  assign count       = wptr - rptr;
  assign empty       = (wptr == rptr);
  assign full        = (count == (AW+1)'(DEPTH));
  assign almost_full = (count >= (AW+1)'(DEPTH-1));
  assign do_wr       = wr_en && !full;
  assign do_rd       = rd_en && !empty;
  assign {rd_eop, rd_data} = mem[rptr[AW-1:0]];
  assign unit_ready  = (units != '0);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= {wr_eop, wr_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      units <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      units <= units + (AW+1)'(do_wr && wr_eop) - (AW+1)'(do_rd && rd_eop);
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("pkt_fifo: DEPTH must be a power of two");

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
