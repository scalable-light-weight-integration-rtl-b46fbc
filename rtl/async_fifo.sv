// Dual-clock first-word-fall-through FIFO, used for the router output buffer
// (router clock in, FPGA interface clock out) and the router input buffer
// (FPGA interface clock in, router clock out).
//
// The classic gray-pointer scheme: each side keeps a binary pointer one bit
// wider than the address and a gray copy of it; the gray copy is passed to
// the other clock through a two-stage register synchronizer, which is the
// synchronizer the paper names for its clock crossings. Full is computed in
// the write clock against the synchronized read pointer, empty in the read
// clock against the synchronized write pointer, so both are pessimistic and
// never wrong. walmost_full is raised with one slot left, for a writer that
// has one registered stage in front of the FIFO. Each side has its own
// active-low reset, which must be asserted together at start-up. The paper
// says only that these buffers are asynchronous FIFOs; the depth is this
// design's choice.
module async_fifo #(
  parameter int WIDTH = 137,
  parameter int DEPTH = 16
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wfull,
  output logic             walmost_full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rempty
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write clock
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read clock
  logic [AW:0] rbin_w, wcount;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side ----------------
  assign rbin_w       = gray2bin(rgray_w2);
  assign wcount       = wbin - rbin_w;
  assign wfull        = (wcount == (AW+1)'(DEPTH));
  assign walmost_full = (wcount >= (AW+1)'(DEPTH-1));

  always_ff @(posedge wclk) begin
    if (wr_en && !wfull) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !wfull) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // ---------------- read side ----------------
  assign rempty  = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rempty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("async_fifo: DEPTH must be a power of two");

  a_no_overflow:  assert property (@(posedge wclk) disable iff (!wrst_n) !(wr_en && wfull));
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) !(rd_en && rempty));
endmodule
