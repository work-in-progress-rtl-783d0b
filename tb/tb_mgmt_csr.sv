// Self-checking testbench of the management core's custom CSRs.
// Drives the CSR bus as the management core would (csrw / csrr) and checks:
// read-back of every register, the hit flag for known and unknown numbers,
// the one-cycle DMA start pulse (and that it is suppressed while busy), the
// sticky done/error bits (set by the DMA, cleared by write-1 or a new start),
// the live busy bit, the timer control pulses and fields, and the reset value
// of the compare register.
module tb_mgmt_csr;
  import mcvp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  csr_req_t    csr;
  logic [31:0] rdata;
  logic        hit;
  logic [31:0] src, dst, len, twdata;
  logic        start, busy, done, err;
  logic        ten, tirq_en, tclr, twlo, twhi, tmatch;
  logic [63:0] tcmp, tcount;

  mgmt_csr dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_i(csr), .csr_rdata_o(rdata), .csr_hit_o(hit),
    .dma_src_o(src), .dma_dst_o(dst), .dma_len_o(len), .dma_start_o(start),
    .dma_busy_i(busy), .dma_done_i(done), .dma_err_i(err),
    .tmr_en_o(ten), .tmr_irq_en_o(tirq_en), .tmr_clr_o(tclr), .tmr_wr_lo_o(twlo),
    .tmr_wr_hi_o(twhi), .tmr_wdata_o(twdata), .tmr_cmp_o(tcmp),
    .tmr_count_i(tcount), .tmr_match_i(tmatch)
  );

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int n_start = 0;
  always @(posedge clk) if (start) n_start++;

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    csr = '0;
  endtask

  task automatic csr_read(input logic [11:0] a, output logic [31:0] d, output logic h);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b0, addr: a, wdata: 32'h0};
    #1;
    d = rdata;
    h = hit;
    @(negedge clk);
    csr = '0;
  endtask

  logic [31:0] d;
  logic        h;

  initial begin
    csr = '0; busy = 0; done = 0; err = 0; tcount = 64'h1234_5678_9ABC_DEF0; tmatch = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(tcmp == '1, "compare resets to all ones");
    csr_read(CSR_CMP_LO, d, h);
    check(h && d == 32'hFFFF_FFFF, "CMP_LO reset read");
    // configuration registers
    csr_write(CSR_DMA_SRC, 32'h8000_0100);
    csr_write(CSR_DMA_DST, 32'h1008_0040);
    csr_write(CSR_DMA_LEN, 32'd256);
    check(src == 32'h8000_0100 && dst == 32'h1008_0040 && len == 32'd256, "DMA config outputs");
    csr_read(CSR_DMA_SRC, d, h); check(h && d == 32'h8000_0100, "DMA_SRC read");
    csr_read(CSR_DMA_DST, d, h); check(h && d == 32'h1008_0040, "DMA_DST read");
    csr_read(CSR_DMA_LEN, d, h); check(h && d == 32'd256, "DMA_LEN read");
    // unknown CSR number
    csr_read(12'h7C5, d, h); check(!h, "no hit for 0x7C5");
    csr_read(12'h300, d, h); check(!h, "no hit for mstatus");
    // start pulse
    csr_write(CSR_DMA_CTRL, 32'h0);
    check(n_start == 0, "no start when bit 0 clear");
    csr_write(CSR_DMA_CTRL, 32'h1);
    check(n_start == 1, "one start pulse");
    busy = 1;
    csr_read(CSR_DMA_STATUS, d, h); check(h && d == 32'h1, "busy visible");
    csr_write(CSR_DMA_CTRL, 32'h1);
    check(n_start == 1, "start ignored while busy");
    // done with error
    @(negedge clk); busy = 0; done = 1; err = 1;
    @(negedge clk); done = 0; err = 0;
    csr_read(CSR_DMA_STATUS, d, h); check(d == 32'h6, "done and error sticky");
    repeat (3) @(negedge clk);
    csr_read(CSR_DMA_STATUS, d, h); check(d == 32'h6, "still sticky");
    csr_write(CSR_DMA_STATUS, 32'h4);
    csr_read(CSR_DMA_STATUS, d, h); check(d == 32'h2, "error cleared by write 1");
    csr_write(CSR_DMA_CTRL, 32'h1);
    check(n_start == 2, "second start");
    csr_read(CSR_DMA_STATUS, d, h); check(d == 32'h0, "start clears done");
    @(negedge clk); done = 1;
    @(negedge clk); done = 0;
    csr_read(CSR_DMA_STATUS, d, h); check(d == 32'h2, "done without error");
    csr_write(CSR_DMA_STATUS, 32'h2);
    csr_read(CSR_DMA_STATUS, d, h); check(d == 32'h0, "done cleared by write 1");
    // timer
    csr_read(CSR_TMR_LO, d, h); check(h && d == 32'h9ABC_DEF0, "TMR_LO reads count");
    csr_read(CSR_TMR_HI, d, h); check(h && d == 32'h1234_5678, "TMR_HI reads count");
    csr_write(CSR_CMP_LO, 32'h0000_1000);
    csr_write(CSR_CMP_HI, 32'h0000_0002);
    check(tcmp == 64'h0000_0002_0000_1000, "compare output");
    csr_write(CSR_TMR_CTRL, 32'h3);
    check(ten && tirq_en, "enable and irq enable");
    csr_read(CSR_TMR_CTRL, d, h); check(d == 32'h3, "TMR_CTRL read");
    tmatch = 1;
    csr_read(CSR_TMR_STATUS, d, h); check(h && d == 32'h1, "match visible");
    // one-cycle pulses seen on the bus cycle itself
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: CSR_TMR_CTRL, wdata: 32'h5};
    #1 check(tclr, "clear pulse");
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: CSR_TMR_LO, wdata: 32'hABCD};
    #1 check(twlo && !twhi && twdata == 32'hABCD && !tclr, "count low write pulse");
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: CSR_TMR_HI, wdata: 32'h1};
    #1 check(twhi && !twlo, "count high write pulse");
    @(negedge clk);
    csr = '0;
    #1 check(!twhi && !twlo && !tclr && !start, "pulses end");
    check(ten && !tirq_en, "TMR_CTRL fields after write 0x5");
    // a read must not write
    csr_read(CSR_DMA_SRC, d, h);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b0, addr: CSR_DMA_SRC, wdata: 32'hDEAD_BEEF};
    @(negedge clk);
    csr = '0;
    check(src == 32'h8000_0100, "read leaves the register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
