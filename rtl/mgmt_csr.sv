// Custom control and status registers of the management core.
//
// The management core runs the communication schedule that the compiler
// generates: at each scheduled time it programs the next DMA transfer. It
// does so with ordinary Zicsr instructions (csrr, csrw) on a small set of
// custom CSRs, listed with their fields in mcvp_pkg, which this block holds
// and connects to the DMA and the timer.
//
// CSR bus: csr_i.valid marks an access; reads are combinational
// (csr_rdata_o, csr_hit_o in the same cycle), writes take effect at the clock
// edge. csr_hit_o is low for a number that is not one of these registers, so
// the core can raise an illegal-instruction exception. The core performs the
// Zicsr set/clear read-modify-write itself and writes the final value.
// Writing DMA_CTRL with bit 0 set sends a one-cycle start pulse to the DMA;
// the DMA samples DMA_SRC/DST/LEN in that cycle. The done and error bits of
// DMA_STATUS are sticky: set by the DMA's done pulse, cleared by writing 1 or
// by the next start. The compare register resets to all ones so the timer
// does not match before software sets it.
//
// That the core reaches DMA and timer through custom CSRs follows the paper;
// the register numbers, fields and the bus are this design's choices.
module mgmt_csr
  import mcvp_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  csr_req_t    csr_i,
  output logic [31:0] csr_rdata_o,
  output logic        csr_hit_o,
  // DMA
  output logic [31:0] dma_src_o,
  output logic [31:0] dma_dst_o,
  output logic [31:0] dma_len_o,
  output logic        dma_start_o,
  input  logic        dma_busy_i,
  input  logic        dma_done_i,
  input  logic        dma_err_i,
  // timer
  output logic        tmr_en_o,
  output logic        tmr_irq_en_o,
  output logic        tmr_clr_o,
  output logic        tmr_wr_lo_o,
  output logic        tmr_wr_hi_o,
  output logic [31:0] tmr_wdata_o,
  output logic [63:0] tmr_cmp_o,
  input  logic [63:0] tmr_count_i,
  input  logic        tmr_match_i
);

  logic [31:0] src_q, dst_q, len_q;
  logic [63:0] cmp_q;
  logic        en_q, irq_en_q;
  logic        done_q, err_q;

  logic wr;
  assign wr = csr_i.valid && csr_i.we;

  function automatic logic wr_to(logic w, logic [11:0] a, csr_addr_e r);
    return w && (a == r);
  endfunction

  assign dma_start_o = wr_to(wr, csr_i.addr, CSR_DMA_CTRL) && csr_i.wdata[0] && !dma_busy_i;
  assign tmr_clr_o   = wr_to(wr, csr_i.addr, CSR_TMR_CTRL) && csr_i.wdata[2];
  assign tmr_wr_lo_o = wr_to(wr, csr_i.addr, CSR_TMR_LO);
  assign tmr_wr_hi_o = wr_to(wr, csr_i.addr, CSR_TMR_HI);
  assign tmr_wdata_o = csr_i.wdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q    <= '0;
      dst_q    <= '0;
      len_q    <= '0;
      cmp_q    <= '1;
      en_q     <= 1'b0;
      irq_en_q <= 1'b0;
      done_q   <= 1'b0;
      err_q    <= 1'b0;
    end else begin
      if (wr_to(wr, csr_i.addr, CSR_DMA_SRC)) src_q <= csr_i.wdata;
      if (wr_to(wr, csr_i.addr, CSR_DMA_DST)) dst_q <= csr_i.wdata;
      if (wr_to(wr, csr_i.addr, CSR_DMA_LEN)) len_q <= csr_i.wdata;
      if (wr_to(wr, csr_i.addr, CSR_CMP_LO))  cmp_q[31:0]  <= csr_i.wdata;
      if (wr_to(wr, csr_i.addr, CSR_CMP_HI))  cmp_q[63:32] <= csr_i.wdata;
      if (wr_to(wr, csr_i.addr, CSR_TMR_CTRL)) begin
        en_q     <= csr_i.wdata[0];
        irq_en_q <= csr_i.wdata[1];
      end
      // sticky status: cleared by write-1 or a new start, set by the DMA
      if (wr_to(wr, csr_i.addr, CSR_DMA_STATUS)) begin
        if (csr_i.wdata[1]) done_q <= 1'b0;
        if (csr_i.wdata[2]) err_q  <= 1'b0;
      end
      if (dma_start_o) begin
        done_q <= 1'b0;
        err_q  <= 1'b0;
      end
      if (dma_done_i) begin
        done_q <= 1'b1;
        if (dma_err_i) err_q <= 1'b1;
      end
    end
  end

  assign dma_src_o    = src_q;
  assign dma_dst_o    = dst_q;
  assign dma_len_o    = len_q;
  assign tmr_cmp_o    = cmp_q;
  assign tmr_en_o     = en_q;
  assign tmr_irq_en_o = irq_en_q;

  always_comb begin
    csr_hit_o   = csr_i.valid;
    csr_rdata_o = '0;
    unique case (csr_i.addr)
      CSR_DMA_SRC:    csr_rdata_o = src_q;
      CSR_DMA_DST:    csr_rdata_o = dst_q;
      CSR_DMA_LEN:    csr_rdata_o = len_q;
      CSR_DMA_CTRL:   csr_rdata_o = '0;
      CSR_DMA_STATUS: csr_rdata_o = {29'b0, err_q, done_q, dma_busy_i};
      CSR_TMR_LO:     csr_rdata_o = tmr_count_i[31:0];
      CSR_TMR_HI:     csr_rdata_o = tmr_count_i[63:32];
      CSR_CMP_LO:     csr_rdata_o = cmp_q[31:0];
      CSR_CMP_HI:     csr_rdata_o = cmp_q[63:32];
      CSR_TMR_CTRL:   csr_rdata_o = {30'b0, irq_en_q, en_q};
      CSR_TMR_STATUS: csr_rdata_o = {31'b0, tmr_match_i};
      default:        csr_hit_o   = 1'b0;
    endcase
  end

endmodule
