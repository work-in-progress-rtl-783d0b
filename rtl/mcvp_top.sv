// Multicore vector processor platform for time-predictable neural network
// inference.
//
// N_CORES worker tiles each hold an instruction scratchpad and a data
// scratchpad, from which a worker core (Ibex with a Vicuna vector unit)
// executes its part of the network without touching any shared resource.
// All movement of code and data between the scratchpads and the shared
// external DRAM, and between scratchpads of different cores, is done by one
// DMA that belongs to the management core and follows a schedule fixed at
// compile time. The DMA is the only master on the TL-UL crossbar and the only
// master on the AXI4 port to DRAM, so no two accesses ever compete and every
// core's timing can be analysed in isolation.
//
// Inside: worker_tile x N_CORES, tlul_xbar (1 host, 2*N_CORES devices), dma,
// timer and mgmt_csr (the management core's custom CSRs for DMA and timer).
// Not inside, brought out as ports: the worker cores' instruction and data
// memory ports (Ibex req/gnt/rvalid, addresses taken within each SPM), the
// management core's CSR bus, and the AXI4 master port to external memory.
// timer_irq_o is the timer's compare interrupt and dma_done_o the DMA's
// completion pulse, both meant for the management core.
//
// The structure (the architecture's block diagram: cores with I-/D-SPM,
// an interconnect, a DMA with a timer in the management core, external
// memory) and the default of 16 cores with 1 MiB of scratchpad each follow
// the paper; the even I/D split and the address map are this design's.
module mcvp_top
  import tlul_pkg::*;
  import axi_pkg::*;
  import mcvp_pkg::*;
#(
  parameter int unsigned N_CORES    = 16,
  parameter int unsigned ISPM_BYTES = 524288,
  parameter int unsigned DSPM_BYTES = 524288,
  parameter int unsigned BURST      = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // worker core instruction ports
  input  logic        instr_req_i    [N_CORES],
  input  logic [31:0] instr_addr_i   [N_CORES],
  output logic        instr_gnt_o    [N_CORES],
  output logic        instr_rvalid_o [N_CORES],
  output logic [31:0] instr_rdata_o  [N_CORES],
  output logic        instr_err_o    [N_CORES],
  // worker core data ports
  input  logic        data_req_i     [N_CORES],
  input  logic        data_we_i      [N_CORES],
  input  logic [3:0]  data_be_i      [N_CORES],
  input  logic [31:0] data_addr_i    [N_CORES],
  input  logic [31:0] data_wdata_i   [N_CORES],
  output logic        data_gnt_o     [N_CORES],
  output logic        data_rvalid_o  [N_CORES],
  output logic [31:0] data_rdata_o   [N_CORES],
  output logic        data_err_o     [N_CORES],
  // management core CSR bus
  input  csr_req_t    csr_i,
  output logic [31:0] csr_rdata_o,
  output logic        csr_hit_o,
  output logic        timer_irq_o,
  output logic        dma_done_o,
  // external memory
  output axi_req_t    axi_o,
  input  axi_rsp_t    axi_i
);

  localparam int unsigned N_DEV = 2 * N_CORES;

  // ---------------- management core: CSRs, DMA, timer ----------------
  logic [31:0] dma_src, dma_dst, dma_len;
  logic        dma_start, dma_busy, dma_done, dma_err;
  logic        tmr_en, tmr_irq_en, tmr_clr, tmr_wr_lo, tmr_wr_hi, tmr_match;
  logic [31:0] tmr_wdata;
  logic [63:0] tmr_cmp, tmr_count;

  mgmt_csr u_csr (
    .clk_i, .rst_ni,
    .csr_i, .csr_rdata_o, .csr_hit_o,
    .dma_src_o    (dma_src),
    .dma_dst_o    (dma_dst),
    .dma_len_o    (dma_len),
    .dma_start_o  (dma_start),
    .dma_busy_i   (dma_busy),
    .dma_done_i   (dma_done),
    .dma_err_i    (dma_err),
    .tmr_en_o     (tmr_en),
    .tmr_irq_en_o (tmr_irq_en),
    .tmr_clr_o    (tmr_clr),
    .tmr_wr_lo_o  (tmr_wr_lo),
    .tmr_wr_hi_o  (tmr_wr_hi),
    .tmr_wdata_o  (tmr_wdata),
    .tmr_cmp_o    (tmr_cmp),
    .tmr_count_i  (tmr_count),
    .tmr_match_i  (tmr_match)
  );

  timer #(.W(64)) u_timer (
    .clk_i, .rst_ni,
    .en_i     (tmr_en),
    .clr_i    (tmr_clr),
    .wr_lo_i  (tmr_wr_lo),
    .wr_hi_i  (tmr_wr_hi),
    .wdata_i  (tmr_wdata),
    .cmp_i    (tmr_cmp),
    .irq_en_i (tmr_irq_en),
    .count_o  (tmr_count),
    .match_o  (tmr_match),
    .irq_o    (timer_irq_o)
  );

  tl_h2d_t dma_tl_h2d;
  tl_d2h_t dma_tl_d2h;

  dma #(.BURST(BURST)) u_dma (
    .clk_i, .rst_ni,
    .cfg_src_i (dma_src),
    .cfg_dst_i (dma_dst),
    .cfg_len_i (dma_len),
    .start_i   (dma_start),
    .busy_o    (dma_busy),
    .done_o    (dma_done),
    .err_o     (dma_err),
    .tl_o      (dma_tl_h2d),
    .tl_i      (dma_tl_d2h),
    .axi_o,
    .axi_i
  );

  assign dma_done_o = dma_done;

  // ---------------- interconnect ----------------
  tl_h2d_t dev_h2d [N_DEV];
  tl_d2h_t dev_d2h [N_DEV];

  tlul_xbar #(
    .N_TILES    (N_CORES),
    .ISPM_BYTES (ISPM_BYTES),
    .DSPM_BYTES (DSPM_BYTES)
  ) u_xbar (
    .clk_i, .rst_ni,
    .host_i (dma_tl_h2d),
    .host_o (dma_tl_d2h),
    .dev_o  (dev_h2d),
    .dev_i  (dev_d2h)
  );

  // ---------------- worker tiles ----------------
  for (genvar c = 0; c < N_CORES; c++) begin : g_tile
    tl_h2d_t t_h2d [2];
    tl_d2h_t t_d2h [2];
    assign t_h2d[0] = dev_h2d[2*c];
    assign t_h2d[1] = dev_h2d[2*c+1];
    assign dev_d2h[2*c]   = t_d2h[0];
    assign dev_d2h[2*c+1] = t_d2h[1];

    worker_tile #(
      .ISPM_BYTES (ISPM_BYTES),
      .DSPM_BYTES (DSPM_BYTES)
    ) u_tile (
      .clk_i, .rst_ni,
      .tl_i           (t_h2d),
      .tl_o           (t_d2h),
      .instr_req_i    (instr_req_i[c]),
      .instr_addr_i   (instr_addr_i[c]),
      .instr_gnt_o    (instr_gnt_o[c]),
      .instr_rvalid_o (instr_rvalid_o[c]),
      .instr_rdata_o  (instr_rdata_o[c]),
      .instr_err_o    (instr_err_o[c]),
      .data_req_i     (data_req_i[c]),
      .data_we_i      (data_we_i[c]),
      .data_be_i      (data_be_i[c]),
      .data_addr_i    (data_addr_i[c]),
      .data_wdata_i   (data_wdata_i[c]),
      .data_gnt_o     (data_gnt_o[c]),
      .data_rvalid_o  (data_rvalid_o[c]),
      .data_rdata_o   (data_rdata_o[c]),
      .data_err_o     (data_err_o[c])
    );
  end

endmodule
