// Dual-ported scratchpad memory (SPM) of a worker core.
//
// Each worker core owns two of these, an instruction SPM and a data SPM. Port
// A faces the TL-UL interconnect, through which only the DMA of the management
// core reaches the memory; port B faces the worker core. Because the two ports
// are independent, the DMA can fill or drain a scratchpad while the core keeps
// executing from it, with no stall and no arbitration on either side: the
// core always sees the same fixed latency, which is what makes its execution
// time analysable on its own.
//
// Port A (TL-UL device): a Get or Put is accepted whenever the response slot is
// free or being emptied in the same cycle, and is answered one cycle later
// (AccessAckData with the word read, or AccessAck). The address is taken
// modulo SIZE_BYTES; the crossbar only forwards addresses inside the window.
// Port B (core): Ibex-style req/gnt/rvalid. A request is granted in the cycle
// it is made and its rvalid/rdata follow one cycle later.
//
// Dual porting follows the paper; the word width, the split of the per-core
// megabyte into two equal halves, the core-side protocol and the collision rule
// are this design's choices. If both ports write the same byte in one cycle the
// core port wins. A read returns the value from before a same-cycle write.
module spm
  import tlul_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 524288
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // port A: TL-UL device
  input  tl_h2d_t     tl_i,
  output tl_d2h_t     tl_o,
  // port B: worker core
  input  logic        core_req_i,
  input  logic        core_we_i,
  input  logic [3:0]  core_be_i,
  input  logic [31:0] core_addr_i,
  input  logic [31:0] core_wdata_i,
  output logic        core_gnt_o,
  output logic        core_rvalid_o,
  output logic [31:0] core_rdata_o,
  output logic        core_err_o
);

  localparam int unsigned WORDS = SIZE_BYTES / 4;
  localparam int unsigned IW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  // ---------------- port A: TL-UL ----------------
  logic              d_pend_q;
  logic              d_data_q_is_get;
  logic [TL_AIW-1:0] d_source_q;
  logic [TL_SZW-1:0] d_size_q;
  logic [31:0]       a_rdata_q;

  logic          a_fire;
  logic          a_put;
  logic [IW-1:0] a_idx;

  assign tl_o.a_ready = !d_pend_q || tl_i.d_ready;
  assign a_fire       = tl_i.a_valid && tl_o.a_ready;
  assign a_put        = (tl_i.a_opcode == PutFullData) || (tl_i.a_opcode == PutPartialData);
  assign a_idx        = tl_i.a_address[IW+1:2];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      d_pend_q        <= 1'b0;
      d_data_q_is_get <= 1'b0;
      d_source_q      <= '0;
      d_size_q        <= '0;
    end else if (a_fire) begin
      d_pend_q        <= 1'b1;
      d_data_q_is_get <= !a_put;
      d_source_q      <= tl_i.a_source;
      d_size_q        <= tl_i.a_size;
    end else if (tl_i.d_ready) begin
      d_pend_q        <= 1'b0;
    end
  end

  assign tl_o.d_valid  = d_pend_q;
  assign tl_o.d_opcode = d_data_q_is_get ? AccessAckData : AccessAck;
  assign tl_o.d_param  = '0;
  assign tl_o.d_size   = d_size_q;
  assign tl_o.d_source = d_source_q;
  assign tl_o.d_sink   = '0;
  assign tl_o.d_data   = a_rdata_q;
  assign tl_o.d_error  = 1'b0;

  // ---------------- port B: core ----------------
  logic [IW-1:0] c_idx;
  logic [31:0]   c_rdata_q;
  logic          c_rvalid_q;

  assign c_idx         = core_addr_i[IW+1:2];
  assign core_gnt_o    = core_req_i;
  assign core_rvalid_o = c_rvalid_q;
  assign core_rdata_o  = c_rdata_q;
  assign core_err_o    = 1'b0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) c_rvalid_q <= 1'b0;
    else         c_rvalid_q <= core_req_i;
  end

  // ---------------- the array: two read/write ports ----------------
  always_ff @(posedge clk_i) begin
    if (a_fire) a_rdata_q <= mem[a_idx];
    if (core_req_i) c_rdata_q <= mem[c_idx];
    for (int b = 0; b < 4; b++) begin
      if (a_fire && a_put && tl_i.a_mask[b]) mem[a_idx][8*b +: 8] <= tl_i.a_data[8*b +: 8];
      if (core_req_i && core_we_i && core_be_i[b]) mem[c_idx][8*b +: 8] <= core_wdata_i[8*b +: 8];
    end
  end

endmodule
