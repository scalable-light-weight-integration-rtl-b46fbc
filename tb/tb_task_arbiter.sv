// Self-checking test of task_arbiter with four task buffers: the offer
// appears one cycle after a buffer becomes ready (the paper's TA latency of
// one cycle), ready buffers are served round-robin, a buffer in use is never
// offered, and nothing is offered when no buffer is ready.
module tb_task_arbiter;
  localparam int NUM_TB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NUM_TB-1:0] tb_ready = '0, tb_in_use = '0;
  logic accept = 0, ta_valid;
  logic [1:0] ta_sel;

  task_arbiter #(.NUM_TB(NUM_TB)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // accept the current offer and check it is the expected buffer
  task automatic take(int exp);
    @(negedge clk);
    checks++;
    if (!ta_valid || int'(ta_sel) != exp) begin
      failures++; $display("ERROR: offer %0d/%0d, expected %0d", ta_valid, ta_sel, exp);
    end
    accept = 1;
    @(negedge clk);
    accept = 0;
  endtask

  initial begin
    int last;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (ta_valid) begin failures++; $display("ERROR: offer with nothing ready"); end
    // latency: ready set at a negedge, offer visible after the next posedge
    tb_ready = 4'b0100;
    #1;
    checks++;
    if (ta_valid) begin failures++; $display("ERROR: offer in the same cycle"); end
    @(posedge clk); #1;
    checks++;
    if (!ta_valid || ta_sel != 2) begin failures++; $display("ERROR: offer not after one cycle"); end
    take(2);
    // all ready: round-robin order continues after 2
    tb_ready = 4'b1111;
    @(negedge clk);
    take(3); take(0); take(1); take(2); take(3);
    // in-use buffer is skipped
    tb_in_use = 4'b0001;
    @(negedge clk);
    take(1);
    tb_in_use = 4'b0000;
    // random check against a model
    last = 1;
    for (int i = 0; i < 300; i++) begin
      int exp;
      tb_ready = 4'($urandom_range(0, 15));
      tb_in_use = 4'($urandom_range(0, 15)) & 4'($urandom_range(0, 15));
      @(negedge clk);
      exp = -1;
      for (int k = 1; k <= NUM_TB; k++)
        if (exp < 0 && tb_ready[(last + k) % NUM_TB] && !tb_in_use[(last + k) % NUM_TB]) exp = (last + k) % NUM_TB;
      checks++;
      if ((exp < 0) == ta_valid || (exp >= 0 && int'(ta_sel) != exp)) begin
        failures++; $display("ERROR: random offer %0d/%0d expected %0d", ta_valid, ta_sel, exp);
      end
      if (exp >= 0 && $urandom_range(0, 1) == 1) begin
        accept = 1;
        last = exp;
        @(negedge clk);
        accept = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
