// Self-checking testbench of one worker tile (I-SPM + D-SPM).
// Loads a program image into the I-SPM and a data block into the D-SPM
// through the two TL-UL ports, then lets a core-side driver fetch the program
// through the instruction port while the TL side keeps writing into the D-SPM
// (both in the same cycles), and finally reads back through TL what the core
// wrote into the D-SPM. Checks the data seen on each port, that the
// instruction port cannot write, that the two memories are separate, and the
// one-cycle read latency of the core ports.
module tb_worker_tile;
  import tlul_pkg::*;

  localparam int unsigned SZ = 1024;
  localparam int unsigned NW = SZ / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tl_h2d_t tl_i [2];
  tl_d2h_t tl_o [2];
  logic        i_req, i_gnt, i_rvalid, i_err;
  logic [31:0] i_addr, i_rdata;
  logic        d_req, d_we, d_gnt, d_rvalid, d_err;
  logic [3:0]  d_be;
  logic [31:0] d_addr, d_wdata, d_rdata;

  worker_tile #(.ISPM_BYTES(SZ), .DSPM_BYTES(SZ)) dut (
    .clk_i(clk), .rst_ni(rst_n), .tl_i, .tl_o,
    .instr_req_i(i_req), .instr_addr_i(i_addr), .instr_gnt_o(i_gnt),
    .instr_rvalid_o(i_rvalid), .instr_rdata_o(i_rdata), .instr_err_o(i_err),
    .data_req_i(d_req), .data_we_i(d_we), .data_be_i(d_be), .data_addr_i(d_addr),
    .data_wdata_i(d_wdata), .data_gnt_o(d_gnt), .data_rvalid_o(d_rvalid),
    .data_rdata_o(d_rdata), .data_err_o(d_err)
  );

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [31:0] prog(int i);  return 32'h0000_0013 ^ (32'(i) << 7);   endfunction
  function automatic logic [31:0] dat(int i);   return 32'hA5A5_0000 + 32'(i * 3);      endfunction
  function automatic logic [31:0] res(int i);   return 32'h5000_0000 | 32'(i * i);      endfunction

  task automatic tl_put(input int p, input int w, input logic [31:0] v);
    tl_i[p].a_valid = 1; tl_i[p].a_opcode = PutFullData; tl_i[p].a_address = 32'(w * 4);
    tl_i[p].a_data = v; tl_i[p].a_mask = 4'hF; tl_i[p].a_size = 2'd2; tl_i[p].d_ready = 1;
    @(negedge clk);
    tl_i[p].a_valid = 0;
    check(tl_o[p].d_valid && tl_o[p].d_opcode == AccessAck, "Put acknowledged");
  endtask

  task automatic tl_get(input int p, input int w, output logic [31:0] v);
    tl_i[p].a_valid = 1; tl_i[p].a_opcode = Get; tl_i[p].a_address = 32'(w * 4);
    tl_i[p].a_mask = 4'hF; tl_i[p].a_size = 2'd2; tl_i[p].d_ready = 1;
    @(negedge clk);
    tl_i[p].a_valid = 0;
    check(tl_o[p].d_valid && tl_o[p].d_opcode == AccessAckData, "Get answered next cycle");
    v = tl_o[p].d_data;
  endtask

  logic [31:0] v;
  int n_overlap = 0;

  initial begin
    tl_i[0] = TL_H2D_IDLE; tl_i[1] = TL_H2D_IDLE;
    i_req = 0; i_addr = 0; d_req = 0; d_we = 0; d_be = 0; d_addr = 0; d_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NW; i++) tl_put(0, i, prog(i));
    for (int i = 0; i < NW; i++) tl_put(1, i, dat(i));
    // core fetches the program while the DMA side overwrites the upper half of the D-SPM
    fork
      begin
        for (int i = 0; i < NW; i++) begin
          i_req = 1; i_addr = 32'(i * 4);
          #1 check(i_gnt, "fetch granted at once");
          @(negedge clk);
          i_req = 0;
          check(i_rvalid && i_rdata == prog(i), "fetched instruction");
        end
      end
      begin
        for (int i = NW/2; i < NW; i++) begin
          tl_put(1, i, res(i));
          n_overlap++;
        end
      end
    join
    // the instruction port can not write
    i_req = 1; i_addr = 32'h10;
    d_we = 1; d_be = 4'hF; d_wdata = 32'hDEAD_BEEF;  // data port idle (no req)
    @(negedge clk);
    i_req = 0; d_we = 0; d_be = 0;
    tl_get(0, 4, v);
    check(v == prog(4), "I-SPM unchanged by the instruction port");
    // core reads its data and writes results with byte enables
    for (int i = 0; i < NW/2; i++) begin
      d_req = 1; d_we = 0; d_addr = 32'(i * 4);
      @(negedge clk);
      check(d_rvalid && d_rdata == dat(i), "core reads D-SPM");
      d_we = 1; d_be = 4'b0011; d_wdata = res(i);
      @(negedge clk);
      d_req = 0; d_we = 0;
    end
    for (int i = NW/2; i < NW; i++) begin
      d_req = 1; d_addr = 32'(i * 4);
      @(negedge clk);
      d_req = 0;
      check(d_rvalid && d_rdata == res(i), "core sees what the DMA wrote");
    end
    for (int i = 0; i < NW/2; i++) begin
      tl_get(1, i, v);
      check(v == {dat(i)[31:16], res(i)[15:0]}, "DMA reads the core's byte-masked result");
    end
    for (int i = 0; i < 8; i++) begin
      tl_get(0, i, v);
      check(v == prog(i), "I-SPM separate from D-SPM");
    end
    check(n_overlap == NW/2 && !i_err && !d_err, "overlapped traffic, no errors");
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
