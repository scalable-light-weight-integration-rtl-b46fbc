// Shared flit format, field positions and helper functions of the FPGA
// multi-accelerator interface.
//
// A flit is 137 bits. Every flit carries routing information in bits 136:130
// and the packet head/tail pair in bits 129:128. A head flit additionally
// carries the invocation header in bits 127:61 (source, HWA ID, packet type,
// task head/tail, task buffer ID, chaining depth and index, priority,
// direction, start address, data size) and 61 payload bits. Body and tail
// flits carry 128 payload bits. The bit positions follow the paper's head-flit
// table; the encodings of the individual fields (which bit of a pair means
// head, which value of the type bit means command, the command codes in the
// payload bits, routing = destination node number) are this design's choice.
package hwa_pkg;

  localparam int FLIT_W    = 137;
  localparam int DATA_W    = 128;   // payload bits of a body/tail flit
  localparam int ROUTE_W   = 7;
  localparam int SRC_W     = 3;
  localparam int HWAID_W   = 5;
  localparam int TBID_W    = 2;
  localparam int CDEPTH_W  = 2;
  localparam int CIDX_W    = 6;     // three 2-bit chaining indexes
  localparam int CSLOT_W   = 2;
  localparam int PRIO_W    = 2;
  localparam int DIR_W     = 2;
  localparam int ADDR_W    = 32;
  localparam int SIZE_W    = 10;
  localparam int HPAYLD_W  = 61;

  // Head flit, MSB first: field widths add up to 137.
  typedef struct packed {
    logic [ROUTE_W-1:0]  route;      // 136:130 destination node
    logic                pkt_head;   // 129
    logic                pkt_tail;   // 128
    logic [SRC_W-1:0]    src_id;     // 127:125 requesting processor
    logic [HWAID_W-1:0]  hwa_id;     // 124:120
    logic                cmd;        // 119     1 = command, 0 = payload
    logic                task_head;  // 118
    logic                task_tail;  // 117
    logic [TBID_W-1:0]   tb_id;      // 116:115
    logic [CDEPTH_W-1:0] cdepth;     // 114:113 remaining chaining hops
    logic [CIDX_W-1:0]   cindex;     // 112:107 three 2-bit HWA indexes
    logic [PRIO_W-1:0]   prio;       // 106:105
    logic [DIR_W-1:0]    dir;        // 104:103 [0]: input from memory, [1]: result to memory
    logic [ADDR_W-1:0]   start_addr; // 102:71
    logic [SIZE_W-1:0]   data_size;  // 70:61
    logic [HPAYLD_W-1:0] payload;    // 60:0
  } head_flit_t;

  // Body / tail flit.
  typedef struct packed {
    logic [ROUTE_W-1:0] route;
    logic               pkt_head;
    logic               pkt_tail;
    logic [DATA_W-1:0]  data;
  } body_flit_t;

  // Command codes carried in payload[1:0] of a single-flit command packet.
  typedef enum logic [1:0] {
    CMD_REQUEST = 2'd0,
    CMD_GRANT   = 2'd1,
    CMD_NOTIFY  = 2'd2
  } cmd_code_e;

  // Network node of the FPGA in the 3x3 mesh and of the memory/MMU node.
  localparam logic [ROUTE_W-1:0] FPGA_NODE = 7'd4;
  localparam logic [ROUTE_W-1:0] MMU_NODE  = 7'd9;

  // Processor with source ID s sits on mesh node s, skipping the FPGA node.
  function automatic logic [ROUTE_W-1:0] proc_node(input logic [SRC_W-1:0] s);
    logic [ROUTE_W-1:0] n;
    n = ROUTE_W'(s);
    return (n >= FPGA_NODE) ? n + 7'd1 : n;
  endfunction

  // Chaining index slot read for a given remaining depth: slot d holds the
  // HWA that runs when d hops remain after it.
  function automatic logic [CSLOT_W-1:0] chain_slot(input logic [CIDX_W-1:0] idx,
                                                    input logic [CDEPTH_W-1:0] d);
    return idx[CSLOT_W*d +: CSLOT_W];
  endfunction

endpackage
