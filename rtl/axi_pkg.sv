// AXI4 channel types for the DMA's port to external (DDR4) memory.
// Five channels (AW, W, B, AR, R), each with a valid/ready handshake, bundled
// into one request struct (master -> slave) and one response struct
// (slave -> master). Widths (32-bit address and data, 4-bit id) are this
// design's choice; the channel fields and encodings are those of AXI4.
package axi_pkg;

  localparam int unsigned AXI_AW  = 32;
  localparam int unsigned AXI_DW  = 32;
  localparam int unsigned AXI_SW  = AXI_DW / 8;
  localparam int unsigned AXI_IDW = 4;

  localparam logic [1:0] BURST_INCR = 2'b01;
  localparam logic [1:0] RESP_OKAY  = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [AXI_AW-1:0]  addr;
    logic [7:0]         len;    // beats - 1
    logic [2:0]         size;   // log2(bytes per beat)
    logic [1:0]         burst;
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DW-1:0]  data;
    logic [AXI_SW-1:0]  strb;
    logic               last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [1:0]         resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [AXI_DW-1:0]  data;
    logic [1:0]         resp;
    logic               last;
  } axi_r_t;

  typedef struct packed {
    logic    aw_valid;
    axi_ax_t aw;
    logic    w_valid;
    axi_w_t  w;
    logic    b_ready;
    logic    ar_valid;
    axi_ax_t ar;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    logic    b_valid;
    axi_b_t  b;
    logic    ar_ready;
    logic    r_valid;
    axi_r_t  r;
  } axi_rsp_t;

endpackage
