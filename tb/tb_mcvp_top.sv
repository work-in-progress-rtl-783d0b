// End-to-end testbench of the multicore platform at its default size
// (16 worker tiles, 512 KiB I-SPM + 512 KiB D-SPM each).
//
// It plays one statically scheduled inference step, a fully connected layer
// split into one GEMM tile per core. The testbench acts as the management
// core (it issues the CSR accesses that core would issue) and as the worker
// cores (behavioural processes on the cores' memory ports):
//   1. For each core, at a release time set in the timer compare register,
//      the DMA copies the core's program into its I-SPM, the shared int8 input
//      vector and the core's int8 weight row into its D-SPM.
//   2. As soon as its data is in place the core fetches its program through the
//      instruction port (checked word by word), computes the int8 dot product
//      from its D-SPM and writes the 32-bit result back. It does so while the
//      DMA is already loading the next core (dual-ported SPMs).
//   3. The DMA gathers every core's result into core 0's D-SPM (SPM to SPM,
//      communication between cores) and then stores the gathered vector to
//      external memory (SPM to external), where it is compared with results
//      computed here.
// Also exercised and counted: a transfer whose source straddles a 4 KiB
// boundary (split into legal AXI bursts), a start while busy (ignored), an
// access to an unmapped address (error status), and the sticky done bit.
// Each mechanism must occur at least once.
module tb_mcvp_top;
  import tlul_pkg::*;
  import axi_pkg::*;
  import mcvp_pkg::*;

  localparam int unsigned NC   = 16;
  localparam int unsigned PW   = 32;   // program words per core
  localparam int unsigned VW   = 64;   // input / weight words (256 int8 each)
  localparam int unsigned EXTW = 65536;

  localparam logic [31:0] EXT_PROG = EXT_BASE + 32'h0000_0000;  // + c*0x100
  localparam logic [31:0] EXT_X    = EXT_BASE + 32'h0002_0F80;  // straddles 4 KiB
  localparam logic [31:0] EXT_W    = EXT_BASE + 32'h0003_0000;  // + c*0x100
  localparam logic [31:0] EXT_Y    = EXT_BASE + 32'h0004_0000;
  localparam logic [31:0] D_X      = 32'h0000_0000;  // D-SPM offsets
  localparam logic [31:0] D_W      = 32'h0000_0400;
  localparam logic [31:0] D_Y      = 32'h0000_0800;
  localparam logic [31:0] D_GATHER = 32'h0000_1000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_req [NC], instr_gnt [NC], instr_rvalid [NC], instr_err [NC];
  logic [31:0] instr_addr [NC], instr_rdata [NC];
  logic        data_req [NC], data_we [NC], data_gnt [NC], data_rvalid [NC], data_err [NC];
  logic [3:0]  data_be [NC];
  logic [31:0] data_addr [NC], data_wdata [NC], data_rdata [NC];
  csr_req_t    csr;
  logic [31:0] csr_rdata;
  logic        csr_hit, timer_irq, dma_done;
  axi_req_t    axi_req;
  axi_rsp_t    axi_rsp;
  int          n_rd_b, n_wr_b, n_4k;

  mcvp_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_req_i(instr_req), .instr_addr_i(instr_addr), .instr_gnt_o(instr_gnt),
    .instr_rvalid_o(instr_rvalid), .instr_rdata_o(instr_rdata), .instr_err_o(instr_err),
    .data_req_i(data_req), .data_we_i(data_we), .data_be_i(data_be), .data_addr_i(data_addr),
    .data_wdata_i(data_wdata), .data_gnt_o(data_gnt), .data_rvalid_o(data_rvalid),
    .data_rdata_o(data_rdata), .data_err_o(data_err),
    .csr_i(csr), .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .timer_irq_o(timer_irq), .dma_done_o(dma_done),
    .axi_o(axi_req), .axi_i(axi_rsp)
  );

  axi_mem_model #(.WORDS(EXTW)) u_ext (
    .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp),
    .n_rd_bursts(n_rd_b), .n_wr_bursts(n_wr_b), .n_4k_cross(n_4k)
  );

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- reference data ----------------
  function automatic logic [31:0] prog_word(int c, int i);
    return {7'(c), 5'(i), 20'h00093} ^ (32'(i) << 20);
  endfunction
  function automatic logic [31:0] x_word(int i);
    return 32'h9E37_79B9 * 32'(i + 1);
  endfunction
  function automatic logic [31:0] w_word(int c, int i);
    return 32'h85EB_CA6B * 32'(c * 131 + i + 7) ^ 32'h2545_F491;
  endfunction
  function automatic logic signed [31:0] dot4(logic [31:0] a, logic [31:0] b);
    logic signed [31:0] s = 0;
    for (int k = 0; k < 4; k++) s += 32'($signed(a[8*k +: 8])) * 32'($signed(b[8*k +: 8]));
    return s;
  endfunction
  function automatic logic [31:0] expected_y(int c);
    logic signed [31:0] s = 0;
    for (int i = 0; i < VW; i++) s += dot4(x_word(i), w_word(c, i));
    return s;
  endfunction

  function automatic logic [31:0] ispm(int c);
    return SPM_BASE + 32'(c) * TILE_STRIDE;
  endfunction
  function automatic logic [31:0] dspm(int c);
    return SPM_BASE + 32'(c) * TILE_STRIDE + DSPM_OFFSET;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_ext2spm = 0, n_spm2spm = 0, n_spm2ext = 0, n_timer_release = 0;
  int n_overlap = 0, n_busy_ignored = 0, n_err = 0, n_split = 0, n_dma_done = 0;
  logic dma_running = 1'b0;  // between the start write and the first idle status read
  always @(posedge clk) begin
    if (dma_done) n_dma_done++;
    for (int c = 0; c < NC; c++)
      if ((data_req[c] || instr_req[c]) && dma_running) n_overlap++;
  end

  // ---------------- management core: CSR accesses ----------------
  task automatic csr_write(input csr_addr_e a, input logic [31:0] d);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    csr = '0;
  endtask

  task automatic csr_read(input csr_addr_e a, output logic [31:0] d);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b0, addr: a, wdata: 32'h0};
    #1;
    d = csr_rdata;
    check(csr_hit, "CSR hit");
    @(negedge clk);
    csr = '0;
  endtask

  // wait for the timer to reach the release time, then start one transfer
  task automatic release_at(input logic [31:0] t);
    csr_write(CSR_CMP_HI, 32'h0);
    csr_write(CSR_CMP_LO, t);
    while (!timer_irq) @(negedge clk);
    n_timer_release++;
  endtask

  task automatic dma_copy(input logic [31:0] s, input logic [31:0] d, input int words,
                          output logic err);
    logic [31:0] st;
    csr_write(CSR_DMA_SRC, s);
    csr_write(CSR_DMA_DST, d);
    csr_write(CSR_DMA_LEN, 32'(words * 4));
    csr_write(CSR_DMA_CTRL, 32'h1);
    dma_running = 1'b1;
    do csr_read(CSR_DMA_STATUS, st); while (st[0]);
    dma_running = 1'b0;
    check(st[1], "DMA_STATUS done set");
    err = st[2];
    if (is_ext_addr(s) && !is_ext_addr(d)) n_ext2spm++;
    if (!is_ext_addr(s) && !is_ext_addr(d)) n_spm2spm++;
    if (!is_ext_addr(s) && is_ext_addr(d)) n_spm2ext++;
  endtask

  // ---------------- worker cores ----------------
  logic go [NC] = '{default: 1'b0};
  logic finished [NC] = '{default: 1'b0};
  int   core_errors = 0;

  for (genvar c = 0; c < NC; c++) begin : g_core
    initial begin
      instr_req[c] = 0; instr_addr[c] = 0;
      data_req[c] = 0; data_we[c] = 0; data_be[c] = 0; data_addr[c] = 0; data_wdata[c] = 0;
      finished[c] = 0;
      wait (go[c] === 1'b1);
      @(negedge clk);
      // fetch the program
      for (int i = 0; i < PW; i++) begin
        instr_req[c] = 1; instr_addr[c] = 32'(i * 4);
        @(negedge clk);
        instr_req[c] = 0;
        if (!(instr_rvalid[c] && instr_rdata[c] == prog_word(c, i))) begin
          core_errors++;
          if (core_errors < 4) $display("core %0d fetch %0d got %h exp %h", c, i, instr_rdata[c], prog_word(c, i));
        end
      end
      // y = sum over int8 x[i] * w[i]
      begin
        logic signed [31:0] acc;
        logic [31:0] xv, wv;
        acc = 0;
        for (int i = 0; i < VW; i++) begin
          data_req[c] = 1; data_we[c] = 0; data_addr[c] = D_X + 32'(i * 4);
          @(negedge clk);
          xv = data_rdata[c];
          data_addr[c] = D_W + 32'(i * 4);
          @(negedge clk);
          wv = data_rdata[c];
          data_req[c] = 0;
          acc += dot4(xv, wv);
        end
        data_req[c] = 1; data_we[c] = 1; data_be[c] = 4'hF;
        data_addr[c] = D_Y; data_wdata[c] = acc;
        @(negedge clk);
        data_req[c] = 0; data_we[c] = 0;
      end
      finished[c] = 1;
    end
  end

  // ---------------- the schedule ----------------
  initial begin
    logic e;
    logic [31:0] st, t, rb0;
    for (int c = 0; c < NC; c++) go[c] = 0;
    csr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // external memory image: programs, input vector, weights
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < PW; i++) u_ext.mem[((EXT_PROG + 32'(c * 256 + i * 4)) >> 2) % EXTW] = prog_word(c, i);
      for (int i = 0; i < VW; i++) u_ext.mem[((EXT_W + 32'(c * 256 + i * 4)) >> 2) % EXTW] = w_word(c, i);
    end
    for (int i = 0; i < VW; i++) u_ext.mem[((EXT_X + 32'(i * 4)) >> 2) % EXTW] = x_word(i);

    csr_write(CSR_TMR_CTRL, 32'h5);  // clear and enable the timer
    csr_write(CSR_TMR_CTRL, 32'h3);  // count, interrupt enabled
    // phase 1: load every core at its release time; cores start as soon as loaded
    for (int c = 0; c < NC; c++) begin
      release_at(32'(200 + c * 400));
      rb0 = 32'(n_rd_b);
      dma_copy(EXT_PROG + 32'(c * 256), ispm(c), PW, e);
      check(!e, "program load");
      dma_copy(EXT_X, dspm(c) + D_X, VW, e);
      check(!e, "input load");
      // 64 words from 0x...0F80 cross 4 KiB once: 16+16 words on one side, so 2+2 bursts
      if (n_rd_b - int'(rb0) == 2 + 4) n_split++;
      dma_copy(EXT_W + 32'(c * 256), dspm(c) + D_W, VW, e);
      check(!e, "weight load");
      go[c] = 1;
    end
    // wait for the worker cores
    for (int c = 0; c < NC; c++) wait (finished[c] === 1'b1);
    csr_read(CSR_TMR_LO, t);
    // a start while busy is ignored
    csr_write(CSR_DMA_SRC, EXT_W);
    csr_write(CSR_DMA_DST, dspm(NC - 1) + 32'h2000);
    csr_write(CSR_DMA_LEN, 32'd256);
    csr_write(CSR_DMA_CTRL, 32'h1);
    csr_write(CSR_DMA_DST, dspm(0) + 32'h3000);
    csr_write(CSR_DMA_CTRL, 32'h1);  // busy: must be ignored
    do csr_read(CSR_DMA_STATUS, st); while (st[0]);
    // core 0 is idle now: read the word the ignored transfer would have written
    @(negedge clk);
    data_req[0] = 1; data_we[0] = 0; data_addr[0] = 32'h3000;
    @(negedge clk);
    data_req[0] = 0;
    if (data_rdata[0] != w_word(0, 0)) n_busy_ignored++;
    data_req[NC-1] = 1; data_we[NC-1] = 0; data_addr[NC-1] = 32'h2000;  // the accepted one landed
    @(negedge clk);
    data_req[NC-1] = 0;
    check(data_rdata[NC-1] == w_word(0, 0), "accepted transfer landed");
    csr_write(CSR_DMA_STATUS, 32'h6);
    csr_read(CSR_DMA_STATUS, st);
    check(st == 32'h0, "sticky bits cleared");
    // phase 2: gather results in core 0's D-SPM (communication between cores)
    for (int c = 0; c < NC; c++) begin
      release_at(t + 32'(100 + c * 50));
      dma_copy(dspm(c) + D_Y, dspm(0) + D_GATHER + 32'(c * 4), 1, e);
      check(!e, "gather");
    end
    // phase 3: store the result vector to external memory
    dma_copy(dspm(0) + D_GATHER, EXT_Y, NC, e);
    check(!e, "store");
    for (int c = 0; c < NC; c++)
      begin
        check(u_ext.mem[((EXT_Y + 32'(c * 4)) >> 2) % EXTW] == expected_y(c), "layer output");
      end
    // an unmapped address reports an error
    dma_copy(SPM_BASE + 32'(NC) * TILE_STRIDE, EXT_Y + 32'h100, 4, e);
    if (e) n_err++;

    $display("core_errors=%0d", core_errors);
    check(core_errors == 0, "instruction fetches and data reads of all cores");
    check(n_4k == 0, "no AXI burst crosses 4 KiB");
    check(n_ext2spm > 0, "mechanism: external to SPM transfer");
    check(n_spm2spm > 0, "mechanism: SPM to SPM transfer");
    check(n_spm2ext > 0, "mechanism: SPM to external transfer");
    check(n_timer_release >= 2 * NC, "mechanism: timer release");
    check(n_overlap > 0, "mechanism: core access during DMA transfer");
    check(n_split > 0, "mechanism: 4 KiB burst split");
    check(n_busy_ignored > 0, "mechanism: start while busy ignored");
    check(n_err > 0, "mechanism: error status");
    check(n_dma_done > 0, "mechanism: done pulse");
    $display("ext2spm=%0d spm2spm=%0d spm2ext=%0d releases=%0d overlap_cycles=%0d split=%0d busy_ignored=%0d err=%0d done=%0d cycles=%0d",
             n_ext2spm, n_spm2spm, n_spm2ext, n_timer_release, n_overlap, n_split,
             n_busy_ignored, n_err, n_dma_done, t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
