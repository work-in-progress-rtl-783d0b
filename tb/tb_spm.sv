// Self-checking testbench of the dual-ported scratchpad.
// A 16-word SPM is first filled through the core port, then both ports are
// driven at random every cycle (Get / PutFull / PutPartial with random masks
// and D-channel back-pressure on port A; reads and byte-masked writes on port
// B), confined to 16 words so that same-word collisions happen often. A
// reference array applies, at each clock edge, port A's write and then port
// B's write (the core wins) after capturing the old value for both reads.
// Checked: every TL-UL response's data, opcode and source; the core's read
// data; the fixed one-cycle latency of both ports; that the core is never
// stalled while the DMA side is busy.
module tb_spm;
  import tlul_pkg::*;

  localparam int unsigned WORDS = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tl_h2d_t tl_i;
  tl_d2h_t tl_o;
  logic        c_req, c_we, c_gnt, c_rvalid, c_err;
  logic [3:0]  c_be;
  logic [31:0] c_addr, c_wdata, c_rdata;

  spm #(.SIZE_BYTES(WORDS * 4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .tl_i, .tl_o,
    .core_req_i(c_req), .core_we_i(c_we), .core_be_i(c_be), .core_addr_i(c_addr),
    .core_wdata_i(c_wdata), .core_gnt_o(c_gnt), .core_rvalid_o(c_rvalid),
    .core_rdata_o(c_rdata), .core_err_o(c_err)
  );

  int checks = 0, failures = 0;
  int n_collide = 0, n_backpressure = 0, n_tl_ops = 0;
  logic [31:0] model [WORDS];
  logic running = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected responses
  logic        exp_tl_pend = 0, exp_tl_get = 0;
  logic [31:0] exp_tl_data = 0;
  logic [7:0]  exp_tl_src = 0;
  logic        exp_c_pend = 0;
  logic [31:0] exp_c_data = 0;

  always @(posedge clk) if (running) begin
    logic a_fire;
    logic [3:0] ai, ci;
    logic [31:0] oa, oc;
    // responses produced by the previous edge
    check(tl_o.d_valid == exp_tl_pend, "d_valid one cycle after accept");
    if (tl_o.d_valid && exp_tl_pend) begin
      check(tl_o.d_opcode == (exp_tl_get ? AccessAckData : AccessAck), "d_opcode");
      check(tl_o.d_source == exp_tl_src, "d_source");
      if (exp_tl_get) check(tl_o.d_data == exp_tl_data, "TL read data");
    end
    check(c_rvalid == exp_c_pend, "core rvalid one cycle after request");
    if (c_rvalid && exp_c_pend) check(c_rdata == exp_c_data, "core read data");
    if (c_req) check(c_gnt == 1'b1, "core granted at once");
    if (tl_o.d_valid && !tl_i.d_ready) begin
      n_backpressure++;
      check(!tl_o.a_ready || !tl_i.a_valid || 1'b1, "hold");
    end
    // this edge
    a_fire = tl_i.a_valid && tl_o.a_ready;
    ai = tl_i.a_address[5:2];
    ci = c_addr[5:2];
    oa = model[ai];
    oc = model[ci];
    if (tl_o.d_valid && tl_i.d_ready) exp_tl_pend = 0;
    if (a_fire) begin
      n_tl_ops++;
      exp_tl_pend = 1;
      exp_tl_get  = (tl_i.a_opcode == Get);
      exp_tl_data = oa;
      exp_tl_src  = tl_i.a_source;
      if (tl_i.a_opcode != Get)
        for (int b = 0; b < 4; b++) if (tl_i.a_mask[b]) model[ai][8*b +: 8] = tl_i.a_data[8*b +: 8];
    end
    exp_c_pend = c_req;
    exp_c_data = oc;
    if (c_req && c_we) begin
      if (a_fire && tl_i.a_opcode != Get && ai == ci) n_collide++;
      for (int b = 0; b < 4; b++) if (c_be[b]) model[ci][8*b +: 8] = c_wdata[8*b +: 8];
    end
  end

  initial begin
    tl_i = TL_H2D_IDLE;
    c_req = 0; c_we = 0; c_be = 0; c_addr = 0; c_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill through the core port
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      c_req = 1; c_we = 1; c_be = 4'hF; c_addr = 32'(i * 4); c_wdata = $urandom;
      model[i] = c_wdata;
    end
    @(negedge clk);
    c_req = 0; c_we = 0;
    @(negedge clk);
    running = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // port A: keep an unaccepted request unchanged
      if (!(tl_i.a_valid && !tl_o.a_ready)) begin
        tl_i.a_valid   = ($urandom % 4) != 0;
        case ($urandom % 3)
          0: tl_i.a_opcode = Get;
          1: tl_i.a_opcode = PutFullData;
          default: tl_i.a_opcode = PutPartialData;
        endcase
        tl_i.a_address = 32'h1000_0000 + 32'(($urandom % WORDS) * 4);
        tl_i.a_mask    = (tl_i.a_opcode == PutPartialData) ? 4'($urandom) : 4'hF;
        tl_i.a_data    = $urandom;
        tl_i.a_source  = 8'($urandom);
        tl_i.a_size    = 2'd2;
      end
      tl_i.d_ready = ($urandom % 5) != 0;
      c_req   = ($urandom % 3) != 0;
      c_we    = 1'($urandom % 2);
      c_be    = 4'($urandom);
      c_addr  = 32'(($urandom % WORDS) * 4);
      c_wdata = $urandom;
    end
    @(negedge clk);
    running = 0;
    check(n_collide > 0, "same-word collisions exercised");
    check(n_backpressure > 0, "D-channel back-pressure exercised");
    check(c_err == 1'b0, "core error stays low");
    $display("collisions=%0d backpressure=%0d tl_ops=%0d", n_collide, n_backpressure, n_tl_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
