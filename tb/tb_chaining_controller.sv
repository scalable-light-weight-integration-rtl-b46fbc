// Self-checking test of chaining_controller for the channel with HWA ID 6
// in the group of HWAs 4..7. Chaining buffer heads are built with various
// depths and indexes; the controller must flag exactly those whose next HWA
// (group part of the producer's ID, index slot chosen by the remaining
// depth) is 6, offer them round-robin one cycle later, and ignore buffers
// without a complete packet.
module tb_chaining_controller;
  import hwa_pkg::*;
  localparam int GRP = 4, MY_ID = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [GRP-1:0] cb_ready = '0;
  logic [GRP-1:0][FLIT_W-1:0] cb_head = '0;
  logic accept = 0, cc_valid;
  logic [1:0] cc_sel;

  chaining_controller #(.GRP(GRP), .MY_ID(MY_ID)) dut (.*);

  int checks = 0, failures = 0, n_match = 0;

  function automatic logic [FLIT_W-1:0] hdr(int producer, int depth, logic [5:0] cidx);
    head_flit_t h;
    h = '0; h.pkt_head = 1; h.hwa_id = HWAID_W'(producer);
    h.cdepth = CDEPTH_W'(depth); h.cindex = cidx;
    return h;
  endfunction

  // independent model of the next-HWA rule
  function automatic bit targets_me(int producer, int depth, logic [5:0] cidx);
    int slot;
    slot = (int'(cidx) >> (2 * depth)) & 3;
    return ((producer / 4) * 4 + slot) == MY_ID;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // depth 0 remaining, slot 0 = 2 -> HWA 6: match
    @(negedge clk);
    cb_head[0] = hdr(4, 0, 6'b00_00_10); cb_ready[0] = 1;
    // depth 1 remaining, slot 1 = 2 -> HWA 6: match
    cb_head[1] = hdr(5, 1, 6'b00_10_01); cb_ready[1] = 1;
    // depth 2 remaining, slot 2 = 3 -> HWA 7: no match
    cb_head[3] = hdr(7, 2, 6'b11_10_01); cb_ready[3] = 1;
    @(negedge clk);
    checks++;
    if (!cc_valid || cc_sel != 0) begin failures++; $display("ERROR: first offer %0d/%0d", cc_valid, cc_sel); end
    accept = 1; @(negedge clk); accept = 0;
    cb_ready[0] = 0;
    @(negedge clk);
    checks++;
    if (!cc_valid || cc_sel != 1) begin failures++; $display("ERROR: second offer %0d/%0d", cc_valid, cc_sel); end
    accept = 1; @(negedge clk); accept = 0;
    cb_ready[1] = 0;
    @(negedge clk);
    checks++;
    if (cc_valid) begin failures++; $display("ERROR: offered a buffer for HWA 7"); end
    // a matching head without a complete packet is not offered
    cb_head[2] = hdr(6, 0, 6'b00_00_10); cb_ready[2] = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (cc_valid) begin failures++; $display("ERROR: offered an incomplete buffer"); end
    // random against the model
    last = 1;
    for (int i = 0; i < 400; i++) begin
      int exp;
      bit m [GRP];
      for (int j = 0; j < GRP; j++) begin
        int p, d;
        logic [5:0] ci;
        p = 4 + $urandom_range(0, 3); d = $urandom_range(0, 2); ci = 6'($urandom);
        cb_head[j] = hdr(p, d, ci);
        cb_ready[j] = $urandom_range(0, 1);
        m[j] = cb_ready[j] && targets_me(p, d, ci);
      end
      @(negedge clk);
      exp = -1;
      for (int k = 1; k <= GRP; k++) if (exp < 0 && m[(last + k) % GRP]) exp = (last + k) % GRP;
      checks++;
      if ((exp >= 0) != cc_valid || (exp >= 0 && int'(cc_sel) != exp)) begin
        failures++; $display("ERROR: random offer %0d/%0d expected %0d", cc_valid, cc_sel, exp);
      end
      if (exp >= 0) begin
        n_match++;
        accept = 1; last = exp;
        @(negedge clk);
        accept = 0;
      end
    end
    checks++;
    if (n_match == 0) begin failures++; $display("ERROR: no random matches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
