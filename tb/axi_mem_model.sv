// Behavioural model of the external DDR4 memory behind its AXI4 slave port.
// It is not synthesizable design: it stands for the DRAM and its vendor
// controller in testbenches only.
//
// Single-outstanding AXI4 slave for INCR bursts of 32-bit beats. Ready and
// valid signals are delayed at random (1 in STALL_DIV cycles stalls) so the
// master's handshakes are exercised. Word address = (addr / 4) mod WORDS.
// Bursts starting at or above ERR_BASE answer SLVERR and write nothing.
// The model counts read and write bursts and bursts that cross a 4 KiB
// boundary (illegal in AXI4), for the testbench to check.
module axi_mem_model
  import axi_pkg::*;
#(
  parameter int unsigned WORDS     = 16384,
  parameter logic [31:0] ERR_BASE  = 32'hF000_0000,
  parameter int unsigned STALL_DIV = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o,
  output int       n_rd_bursts,
  output int       n_wr_bursts,
  output int       n_4k_cross
);

  logic [31:0] mem [WORDS];

  function automatic logic go();
    return ($urandom % STALL_DIV) != 0;
  endfunction

  function automatic int unsigned widx(logic [31:0] a);
    return (a >> 2) % WORDS;
  endfunction

  function automatic logic crosses(axi_ax_t ax);
    return (int'(ax.addr[11:0]) + (int'(ax.len) + 1) * 4) > 4096;
  endfunction

  // read channel
  logic        r_busy, w_busy, b_pend;
  logic [31:0] r_addr, w_addr;
  logic [7:0]  r_left;
  logic        r_err, w_err;
  logic        ar_rdy, aw_rdy, w_rdy;
  logic        rv_q;
  logic [31:0] rd_q;

  always_comb begin
    rsp_o          = '0;
    rsp_o.ar_ready = ar_rdy && !r_busy;
    rsp_o.aw_ready = aw_rdy && !w_busy && !b_pend;
    rsp_o.w_ready  = w_rdy && w_busy;
    rsp_o.b_valid  = b_pend;
    rsp_o.b.resp   = w_err ? RESP_SLVERR : RESP_OKAY;
    rsp_o.r_valid  = rv_q;
    rsp_o.r.data   = rd_q;
    rsp_o.r.resp   = r_err ? RESP_SLVERR : RESP_OKAY;
    rsp_o.r.last   = (r_left == 0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_busy <= 0; w_busy <= 0; b_pend <= 0; rv_q <= 0;
      n_rd_bursts <= 0; n_wr_bursts <= 0; n_4k_cross <= 0;
      ar_rdy <= 0; aw_rdy <= 0; w_rdy <= 0;
      r_addr <= 0; w_addr <= 0; r_left <= 0; r_err <= 0; w_err <= 0; rd_q <= 0;
    end else begin
      ar_rdy <= go();
      aw_rdy <= go();
      w_rdy  <= go();
      // AR
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        r_busy <= 1; r_addr <= req_i.ar.addr; r_left <= req_i.ar.len;
        r_err  <= (req_i.ar.addr >= ERR_BASE);
        n_rd_bursts <= n_rd_bursts + 1;
        if (crosses(req_i.ar)) n_4k_cross <= n_4k_cross + 1;
      end
      // R beats
      if (r_busy && !rv_q && go()) begin
        rv_q <= 1; rd_q <= mem[widx(r_addr)];
      end else if (rv_q && req_i.r_ready) begin
        rv_q <= 0;
        if (r_left == 0) r_busy <= 0;
        else begin
          r_left <= r_left - 1;
          r_addr <= r_addr + 4;
        end
      end
      // AW
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        w_busy <= 1; w_addr <= req_i.aw.addr;
        w_err  <= (req_i.aw.addr >= ERR_BASE);
        n_wr_bursts <= n_wr_bursts + 1;
        if (crosses(req_i.aw)) n_4k_cross <= n_4k_cross + 1;
      end
      // W beats
      if (req_i.w_valid && rsp_o.w_ready) begin
        if (!w_err) mem[widx(w_addr)] <= req_i.w.data;
        w_addr <= w_addr + 4;
        if (req_i.w.last) begin
          w_busy <= 0; b_pend <= 1;
        end
      end
      if (b_pend && req_i.b_ready) b_pend <= 0;
    end
  end

endmodule
