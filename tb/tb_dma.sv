// Self-checking testbench of the DMA copy engine.
// The DMA drives a 2-tile crossbar (four 4 KiB scratchpads) on its TL-UL
// side and a behavioural AXI4 memory (16 KiB, random handshake stalls, an
// error region from 0xF000_0000) on its AXI4 side. All memories are
// preloaded with random words, mirrored in a reference map. Random
// transfers in all four directions (external to SPM, SPM to external, SPM to
// SPM, external to external) of 1 to 200 words are run and every destination
// word is compared with the reference. Also checked: no AXI burst crosses a
// 4 KiB boundary and the number of bursts matches the expected chunking; the
// exact cycle count of SPM-to-SPM copies (1 + sum over chunks of 2*k + 5);
// error reporting for unmapped TL addresses, AXI SLVERR on read and write,
// misaligned requests; zero length; a start while busy is ignored.
module tb_dma;
  import tlul_pkg::*;
  import axi_pkg::*;
  import mcvp_pkg::*;

  localparam int unsigned NT    = 2;
  localparam int unsigned SZ    = 4096;
  localparam int unsigned EXTW  = 4096;  // external words
  localparam int unsigned BURST = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] src, dst, len;
  logic        start, busy, done, err;
  tl_h2d_t     tl_h2d;
  tl_d2h_t     tl_d2h;
  axi_req_t    axi_req;
  axi_rsp_t    axi_rsp;
  tl_h2d_t     dev_o [2*NT];
  tl_d2h_t     dev_i [2*NT];
  int          n_rd_b, n_wr_b, n_4k;

  dma #(.BURST(BURST)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_src_i(src), .cfg_dst_i(dst), .cfg_len_i(len),
    .start_i(start), .busy_o(busy), .done_o(done), .err_o(err),
    .tl_o(tl_h2d), .tl_i(tl_d2h), .axi_o(axi_req), .axi_i(axi_rsp)
  );

  tlul_xbar #(.N_TILES(NT), .ISPM_BYTES(SZ), .DSPM_BYTES(SZ)) u_xbar (
    .clk_i(clk), .rst_ni(rst_n), .host_i(tl_h2d), .host_o(tl_d2h), .dev_o, .dev_i
  );

  for (genvar d = 0; d < 2*NT; d++) begin : g_dev
    logic        g, rv, e;
    logic [31:0] rd;
    spm #(.SIZE_BYTES(SZ)) u_spm (
      .clk_i(clk), .rst_ni(rst_n), .tl_i(dev_o[d]), .tl_o(dev_i[d]),
      .core_req_i(1'b0), .core_we_i(1'b0), .core_be_i(4'h0), .core_addr_i(32'h0),
      .core_wdata_i(32'h0), .core_gnt_o(g), .core_rvalid_o(rv), .core_rdata_o(rd),
      .core_err_o(e)
    );
  end

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

  // ---------- address helpers: region r = 0..3 SPM devices, 4 = external ----------
  function automatic logic [31:0] region_addr(int r, int w);
    if (r == 4) return EXT_BASE + 32'(w * 4);
    return SPM_BASE + 32'(r / 2) * TILE_STRIDE + ((r % 2) ? DSPM_OFFSET : 0) + 32'(w * 4);
  endfunction

  function automatic int region_words(int r);
    return (r == 4) ? EXTW : SZ / 4;
  endfunction

  function automatic logic [31:0] peek(int r, int w);
    case (r)
      0: return g_dev[0].u_spm.mem[w];
      1: return g_dev[1].u_spm.mem[w];
      2: return g_dev[2].u_spm.mem[w];
      3: return g_dev[3].u_spm.mem[w];
      default: return u_ext.mem[w];
    endcase
  endfunction

  task automatic poke(int r, int w, logic [31:0] v);
    case (r)
      0: g_dev[0].u_spm.mem[w] = v;
      1: g_dev[1].u_spm.mem[w] = v;
      2: g_dev[2].u_spm.mem[w] = v;
      3: g_dev[3].u_spm.mem[w] = v;
      default: u_ext.mem[w] = v;
    endcase
  endtask

  // ---------- run one transfer ----------
  int cyc;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input logic [31:0] s, input logic [31:0] d, input logic [31:0] l,
                     output logic e, output int cycles);
    int t0;
    @(negedge clk);
    src = s; dst = d; len = l; start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
    e = err;
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  // expected chunks, for burst and cycle counts
  function automatic int n_chunks(logic [31:0] s, logic [31:0] d, int words, output int tl_cycles);
    int n = 0;
    tl_cycles = 1;
    while (words > 0) begin
      int k = words;
      if (k > BURST) k = BURST;
      if (k > 1024 - int'(s[11:2])) k = 1024 - int'(s[11:2]);
      if (k > 1024 - int'(d[11:2])) k = 1024 - int'(d[11:2]);
      tl_cycles += 2 * k + 5;
      s += 32'(k * 4); d += 32'(k * 4); words -= k; n++;
    end
    return n;
  endfunction

  int dir_count [4];  // ext->spm, spm->ext, spm->spm, ext->ext

  initial begin
    logic e;
    int cycles, tlc, rb0, wb0;
    src = 0; dst = 0; len = 0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 5; r++)
      for (int w = 0; w < region_words(r); w++) poke(r, w, $urandom);

    for (int it = 0; it < 120; it++) begin
      int rs, rd, ws, wd, nw, nch;
      logic [31:0] snap [];
      rs = $urandom % 5;
      rd = $urandom % 5;
      if (rs == rd) rd = (rd + 1) % 5;
      if (it % 10 == 3) begin rs = 4; rd = 4; end  // external to external
      nw = 1 + $urandom % 200;
      ws = $urandom % (region_words(rs) - nw);
      wd = $urandom % (region_words(rd) - nw);
      if (rs == rd && (ws < wd + nw) && (wd < ws + nw)) wd = (ws + nw) % (region_words(rd) - nw);
      if (rs == rd && (ws < wd + nw) && (wd < ws + nw)) continue;
      snap = new[nw];
      for (int i = 0; i < nw; i++) snap[i] = peek(rs, ws + i);
      nch = n_chunks(region_addr(rs, ws), region_addr(rd, wd), nw, tlc);
      rb0 = n_rd_b; wb0 = n_wr_b;
      run(region_addr(rs, ws), region_addr(rd, wd), 32'(nw * 4), e, cycles);
      check(!e, "no error on a legal transfer");
      for (int i = 0; i < nw; i++) check(peek(rd, wd + i) == snap[i], "destination word");
      if (rs == 4) check(n_rd_b - rb0 == nch, "AXI read bursts = chunks");
      if (rd == 4) check(n_wr_b - wb0 == nch, "AXI write bursts = chunks");
      if (rs != 4 && rd != 4) check(cycles == tlc, "SPM-to-SPM cycle count");
      dir_count[(rs == 4 && rd != 4) ? 0 : (rs != 4 && rd == 4) ? 1 : (rs != 4) ? 2 : 3]++;
    end
    check(n_4k == 0, "no AXI burst crosses 4 KiB");
    for (int k = 0; k < 4; k++) check(dir_count[k] > 0, "every direction exercised");

    // errors
    run(32'h1000_2000, region_addr(0, 0), 32'd16, e, cycles);
    check(e, "unmapped TL source reports error");
    run(32'hF000_0000, region_addr(1, 0), 32'd16, e, cycles);
    check(e, "AXI read SLVERR reports error");
    run(region_addr(1, 0), 32'hF000_0100, 32'd16, e, cycles);
    check(e, "AXI write SLVERR reports error");
    begin
      logic [31:0] prev_w;
      prev_w = peek(2, 5);
      run(region_addr(0, 0) + 2, region_addr(2, 5), 32'd8, e, cycles);
      check(e && cycles == 1, "misaligned source rejected at once");
      check(peek(2, 5) == prev_w, "misaligned copy writes nothing");
      run(region_addr(0, 0), region_addr(2, 5), 32'd6, e, cycles);
      check(e && peek(2, 5) == prev_w, "misaligned length rejected");
    end
    run(region_addr(0, 0), region_addr(2, 5), 32'd0, e, cycles);
    check(!e && cycles == 1, "zero length completes at once");
    // a start while busy is ignored
    begin
      logic [31:0] prev_w;
      int dones;
      dones = 0;
      prev_w = peek(3, 100);
      @(negedge clk);
      src = region_addr(4, 0); dst = region_addr(2, 0); len = 32'd64; start = 1;
      @(negedge clk);
      src = region_addr(4, 0); dst = region_addr(3, 100); len = 32'd4;
      repeat (3) @(negedge clk);
      start = 0;
      while (busy) begin
        if (done) dones++;
        @(negedge clk);
      end
      if (done) dones++;
      check(peek(3, 100) == prev_w && dones == 1, "start while busy ignored");
      for (int i = 0; i < 16; i++) check(peek(2, i) == peek(4, i), "first transfer done");
    end
    $display("dirs ext>spm=%0d spm>ext=%0d spm>spm=%0d ext>ext=%0d rd_bursts=%0d wr_bursts=%0d",
             dir_count[0], dir_count[1], dir_count[2], dir_count[3], n_rd_b, n_wr_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
