// Self-checking testbench of the TL-UL crossbar.
// Four tiles (eight scratchpads of 4 KiB) hang off the crossbar; a TL-UL host
// driver issues random Gets and Puts, mostly to mapped addresses in all eight
// windows and some to unmapped ones (past the end of an SPM, past the last
// tile, below the SPM region). A reference map of the address space predicts
// every read; after each Put the target scratchpad's array is inspected to
// confirm the word landed in the right device. Unmapped accesses must return
// d_error and reach no device. D-channel back-pressure is random. The time
// from request to response is checked to be two cycles for a mapped access
// whose response is taken at once.
module tb_tlul_xbar;
  import tlul_pkg::*;
  import mcvp_pkg::*;

  localparam int unsigned NT = 4;
  localparam int unsigned SZ = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tl_h2d_t host_i;
  tl_d2h_t host_o;
  tl_h2d_t dev_o [2*NT];
  tl_d2h_t dev_i [2*NT];

  tlul_xbar #(.N_TILES(NT), .ISPM_BYTES(SZ), .DSPM_BYTES(SZ)) dut (
    .clk_i(clk), .rst_ni(rst_n), .host_i, .host_o, .dev_o, .dev_i
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

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // count requests that reach any device
  int n_dev_req = 0;
  always @(posedge clk) for (int d = 0; d < 2*NT; d++)
    if (dev_o[d].a_valid && dev_i[d].a_ready) n_dev_req++;

  function automatic logic [31:0] peek(int d, int w);
    case (d)
      0: return g_dev[0].u_spm.mem[w];
      1: return g_dev[1].u_spm.mem[w];
      2: return g_dev[2].u_spm.mem[w];
      3: return g_dev[3].u_spm.mem[w];
      4: return g_dev[4].u_spm.mem[w];
      5: return g_dev[5].u_spm.mem[w];
      6: return g_dev[6].u_spm.mem[w];
      default: return g_dev[7].u_spm.mem[w];
    endcase
  endfunction

  task automatic access(input logic put, input logic [31:0] addr, input logic [31:0] wd,
                        input logic [7:0] src, input logic fast,
                        output logic [31:0] rd, output logic er, output int lat);
    @(negedge clk);
    host_i.a_valid   = 1'b1;
    host_i.a_opcode  = put ? PutFullData : Get;
    host_i.a_address = addr;
    host_i.a_data    = wd;
    host_i.a_mask    = 4'hF;
    host_i.a_size    = 2'd2;
    host_i.a_source  = src;
    host_i.d_ready   = fast ? 1'b1 : 1'(($urandom % 2));
    lat = 0;
    while (!host_o.a_ready) begin
      @(negedge clk);
      lat++;
    end
    @(negedge clk);
    lat++;
    host_i.a_valid = 1'b0;
    while (!(host_o.d_valid && host_i.d_ready)) begin
      host_i.d_ready = fast ? 1'b1 : 1'(($urandom % 2));
      #1;
      if (host_o.d_valid && host_i.d_ready) break;
      @(negedge clk);
      lat++;
    end
    rd = host_o.d_data;
    er = host_o.d_error;
    check(host_o.d_source == src, "d_source returned");
    check(host_o.d_opcode == (put ? AccessAck : AccessAckData), "d_opcode");
    @(negedge clk);
    lat++;
    host_i.d_ready = 1'b0;
  endtask

  logic [31:0] model [logic [31:0]];
  int n_err = 0, n_put = 0, n_get = 0, n_slow = 0;

  initial begin
    host_i = TL_H2D_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      logic [31:0] a, rd, wd;
      logic put, er, mapped, fast;
      int lat, d, w, kind;
      kind = $urandom % 10;
      d = $urandom % (2*NT);
      w = $urandom % 64;
      mapped = 1;
      a = SPM_BASE + 32'(d/2) * TILE_STRIDE + ((d % 2) ? DSPM_OFFSET : 0) + 32'(w*4);
      if (kind == 0) begin
        a = SPM_BASE + 32'(d/2) * TILE_STRIDE + ((d % 2) ? DSPM_OFFSET : 0) + SZ + 32'(w*4);
        mapped = 0;
      end else if (kind == 1) begin
        a = SPM_BASE + NT * TILE_STRIDE + 32'(w*4);
        mapped = 0;
      end else if (kind == 2) begin
        a = 32'h0000_1000 + 32'(w*4);
        mapped = 0;
      end
      put = ($urandom % 2) == 1 || !model.exists(a) && mapped && ($urandom % 2 == 1);
      wd = $urandom;
      fast = ($urandom % 2) == 1;
      if (!fast) n_slow++;
      access(put, a, wd, 8'(it), fast, rd, er, lat);
      check(er == !mapped, "d_error iff unmapped");
      if (er) n_err++;
      if (mapped && fast) check(lat == 2, "two cycles per mapped access");
      if (mapped && put) begin
        model[a] = wd;
        n_put++;
        check(peek(d, w) == wd, "Put reached the addressed SPM");
      end else if (mapped && model.exists(a)) begin
        n_get++;
        check(rd == model[a], "Get returns the stored word");
      end
    end
    check(n_err > 0 && n_put > 0 && n_get > 0 && n_slow > 0, "all cases exercised");
    check(n_dev_req == n_put + n_get + (1500 - n_err - n_put - n_get), "unmapped requests reach no device");
    $display("puts=%0d gets=%0d errors=%0d", n_put, n_get, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
