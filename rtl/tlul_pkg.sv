// TL-UL (TileLink Uncached Lightweight) channel types.
// The interconnect between the DMA and the worker scratchpads speaks TL-UL:
// channel A carries Get / PutFullData / PutPartialData requests from the host,
// channel D carries AccessAck / AccessAckData responses back. Both channels use
// a valid/ready handshake. The field set and the 32-bit address and data widths
// follow the common TL-UL layout; the widths themselves are this design's choice.
package tlul_pkg;

  localparam int unsigned TL_AW  = 32;  // address width
  localparam int unsigned TL_DW  = 32;  // data width
  localparam int unsigned TL_DBW = TL_DW / 8;
  localparam int unsigned TL_SZW = 2;   // log2(bytes) of a beat
  localparam int unsigned TL_AIW = 8;   // source id width
  localparam int unsigned TL_DIW = 1;   // sink id width

  typedef enum logic [2:0] {
    PutFullData    = 3'h0,
    PutPartialData = 3'h1,
    Get            = 3'h4
  } tl_a_op_e;

  typedef enum logic [2:0] {
    AccessAck     = 3'h0,
    AccessAckData = 3'h1
  } tl_d_op_e;

  // host -> device: channel A plus the D-channel ready
  typedef struct packed {
    logic               a_valid;
    tl_a_op_e           a_opcode;
    logic [2:0]         a_param;
    logic [TL_SZW-1:0]  a_size;
    logic [TL_AIW-1:0]  a_source;
    logic [TL_AW-1:0]   a_address;
    logic [TL_DBW-1:0]  a_mask;
    logic [TL_DW-1:0]   a_data;
    logic               d_ready;
  } tl_h2d_t;

  // device -> host: channel D plus the A-channel ready
  typedef struct packed {
    logic               d_valid;
    tl_d_op_e           d_opcode;
    logic [2:0]         d_param;
    logic [TL_SZW-1:0]  d_size;
    logic [TL_AIW-1:0]  d_source;
    logic [TL_DIW-1:0]  d_sink;
    logic [TL_DW-1:0]   d_data;
    logic               d_error;
    logic               a_ready;
  } tl_d2h_t;

  localparam tl_h2d_t TL_H2D_IDLE = '{a_opcode: Get, default: '0};
  localparam tl_d2h_t TL_D2H_IDLE = '{d_opcode: AccessAck, default: '0};

endpackage
