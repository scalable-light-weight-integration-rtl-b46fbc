// Task arbiter (TA): picks the next task buffer for the HWA controller.
//
// A task buffer is a candidate when it holds a complete task (its
// unit_ready flag) and the HWA controller is not already reading it. Among
// the candidates the arbiter chooses round-robin, starting after the buffer
// it granted last. The choice is registered, so the HWA controller sees it
// one cycle after the buffer became ready (the paper gives the TA a latency
// of one cycle). The pointer moves when the HWA controller accepts the
// offered buffer. The round-robin policy follows the paper; the pointer
// update rule is this design's choice.
module task_arbiter #(
  parameter int NUM_TB = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NUM_TB-1:0]         tb_ready,
  input  logic [NUM_TB-1:0]         tb_in_use,
  input  logic                      accept,
  output logic                      ta_valid,
  output logic [$clog2(NUM_TB)-1:0] ta_sel
);
  localparam int TW = $clog2(NUM_TB);

  logic [TW-1:0]     last;
  logic [NUM_TB-1:0] cand;
  logic              found;
  logic [TW-1:0]     choice;

  assign cand = tb_ready & ~tb_in_use;

  logic [31:0] idx;

  always_comb begin
    found  = 1'b0;
    choice = last;
    for (int k = 1; k <= NUM_TB; k++) begin
      idx = (int'(last) + k) % NUM_TB;
      if (!found && cand[idx]) begin
        found  = 1'b1;
        choice = TW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= TW'(NUM_TB - 1);
      ta_valid <= 1'b0;
      ta_sel   <= '0;
    end else begin
      if (accept && ta_valid) begin
        last     <= ta_sel;
        ta_valid <= 1'b0;
      end else begin
        ta_valid <= found;
        ta_sel   <= choice;
      end
    end
  end
endmodule
