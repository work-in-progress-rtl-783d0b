// Memory tile of one worker core: its instruction SPM and its data SPM.
//
// A worker core (an Ibex RV32 core with a Vicuna vector unit) executes its
// subtask only from these two local memories. Both are dual-ported: the
// interconnect side (tl_i[0]/tl_o[0] for the I-SPM, tl_i[1]/tl_o[1] for the
// D-SPM) is used by the DMA to load code, weights and inputs and to collect
// results, while the core side is used by the core. The core itself is not
// part of this RTL; its instruction port (read only) and data port, both with
// the Ibex req/gnt/rvalid protocol and one cycle of read latency, are the
// tile's ports. The instruction port cannot write: the I-SPM is loaded by DMA.
module worker_tile
  import tlul_pkg::*;
#(
  parameter int unsigned ISPM_BYTES = 524288,
  parameter int unsigned DSPM_BYTES = 524288
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  tl_h2d_t     tl_i [2],
  output tl_d2h_t     tl_o [2],
  // instruction port of the core
  input  logic        instr_req_i,
  input  logic [31:0] instr_addr_i,
  output logic        instr_gnt_o,
  output logic        instr_rvalid_o,
  output logic [31:0] instr_rdata_o,
  output logic        instr_err_o,
  // data port of the core (scalar and vector loads/stores)
  input  logic        data_req_i,
  input  logic        data_we_i,
  input  logic [3:0]  data_be_i,
  input  logic [31:0] data_addr_i,
  input  logic [31:0] data_wdata_i,
  output logic        data_gnt_o,
  output logic        data_rvalid_o,
  output logic [31:0] data_rdata_o,
  output logic        data_err_o
);

  spm #(.SIZE_BYTES(ISPM_BYTES)) u_ispm (
    .clk_i, .rst_ni,
    .tl_i          (tl_i[0]),
    .tl_o          (tl_o[0]),
    .core_req_i    (instr_req_i),
    .core_we_i     (1'b0),
    .core_be_i     (4'h0),
    .core_addr_i   (instr_addr_i),
    .core_wdata_i  (32'h0),
    .core_gnt_o    (instr_gnt_o),
    .core_rvalid_o (instr_rvalid_o),
    .core_rdata_o  (instr_rdata_o),
    .core_err_o    (instr_err_o)
  );

  spm #(.SIZE_BYTES(DSPM_BYTES)) u_dspm (
    .clk_i, .rst_ni,
    .tl_i          (tl_i[1]),
    .tl_o          (tl_o[1]),
    .core_req_i    (data_req_i),
    .core_we_i     (data_we_i),
    .core_be_i     (data_be_i),
    .core_addr_i   (data_addr_i),
    .core_wdata_i  (data_wdata_i),
    .core_gnt_o    (data_gnt_o),
    .core_rvalid_o (data_rvalid_o),
    .core_rdata_o  (data_rdata_o),
    .core_err_o    (data_err_o)
  );

endmodule
