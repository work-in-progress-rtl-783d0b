// TL-UL crossbar from the DMA to the scratchpads of all worker cores.
//
// The DMA is the only component that can start a transfer on the
// interconnect, so this crossbar has a single host port and needs no
// arbitration: it decodes the address of each channel-A request, forwards it
// to one of 2*N_TILES devices (device 2c is the I-SPM of core c, device 2c+1
// its D-SPM) and returns that device's channel-D response. An address that
// maps to no scratchpad is answered by an internal error responder with
// d_error = 1 and is forwarded nowhere.
//
// One request is in flight at a time, but a new request is accepted in the
// cycle the previous response is taken, so a host that keeps d_ready high
// moves one word per cycle. Responses therefore return strictly in order and
// every access takes a fixed, analysable number of cycles (with the SPMs
// here: request in one cycle, response in the next). Address windows follow mcvp_pkg: a 1 MiB window per tile,
// the I-SPM at its bottom and the D-SPM at DSPM_OFFSET. The single-host
// structure follows from the paper; the address map and the one-outstanding
// rule are this design's choices. Apart from a_valid and d_ready, every
// field of a device's channel A is the host's field wired straight through
// (only the valid qualifies it), so most output bits of this module are plain
// wires by design.
//
// Lint note: Verilator reports slot_free as circular (UNOPTFLAT). The loop
// exists only at the granularity of whole structs: slot_free gates
// dev_o[].a_valid, an SPM's a_ready depends on its d_ready (in the same
// struct), and slot_free reads the device's d_valid (in the same struct as
// a_ready). Bit by bit there is no loop: d_ready here comes only from
// pend_q/err_q/sel_q and the host's d_ready, and an SPM's d_valid is a
// register. Splitting the bundles into single signals would remove the
// warning at the cost of the struct interface, so it stands.
module tlul_xbar
  import tlul_pkg::*;
  import mcvp_pkg::*;
#(
  parameter int unsigned N_TILES    = 16,
  parameter int unsigned ISPM_BYTES = 524288,
  parameter int unsigned DSPM_BYTES = 524288,
  localparam int unsigned N_DEV     = 2 * N_TILES
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t host_i,
  output tl_d2h_t host_o,
  output tl_h2d_t dev_o [N_DEV],
  input  tl_d2h_t dev_i [N_DEV]
);

  localparam int unsigned SW = (N_DEV > 1) ? $clog2(N_DEV) : 1;

  // ---------------- address decode ----------------
  logic          hit;
  logic [SW-1:0] sel;

  always_comb begin
    logic [31:0] off;
    logic [31:0] tile;
    logic [31:0] in_tile;
    off     = host_i.a_address - SPM_BASE;
    tile    = off / TILE_STRIDE;
    in_tile = off % TILE_STRIDE;
    hit = 1'b0;
    sel = '0;
    if (host_i.a_address >= SPM_BASE && tile < N_TILES) begin
      if (in_tile < DSPM_OFFSET) begin
        hit = (in_tile < ISPM_BYTES);
        sel = SW'(2 * tile);
      end else begin
        hit = (in_tile - DSPM_OFFSET < DSPM_BYTES);
        sel = SW'(2 * tile + 1);
      end
    end
  end

  // ---------------- one outstanding request ----------------
  logic              pend_q;
  logic              err_q;
  logic [SW-1:0]     sel_q;
  logic              err_get_q;
  logic [TL_AIW-1:0] err_src_q;
  logic [TL_SZW-1:0] err_size_q;
  logic              a_ready;
  logic              a_fire;
  logic              d_fire;
  logic              d_valid;

  logic slot_free;  // no response pending, or the pending one leaves now
  assign d_valid   = pend_q && (err_q || dev_i[sel_q].d_valid);
  assign d_fire    = d_valid && host_i.d_ready;
  assign slot_free = !pend_q || d_fire;
  assign a_ready   = slot_free && (!hit || dev_i[sel].a_ready);
  assign a_fire    = host_i.a_valid && a_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q     <= 1'b0;
      err_q      <= 1'b0;
      sel_q      <= '0;
      err_get_q  <= 1'b0;
      err_src_q  <= '0;
      err_size_q <= '0;
    end else if (a_fire) begin
      pend_q     <= 1'b1;
      err_q      <= !hit;
      sel_q      <= sel;
      err_get_q  <= (host_i.a_opcode == Get);
      err_src_q  <= host_i.a_source;
      err_size_q <= host_i.a_size;
    end else if (d_fire) begin
      pend_q     <= 1'b0;
    end
  end

  // requests out
  always_comb begin
    for (int d = 0; d < N_DEV; d++) begin
      dev_o[d]         = host_i;
      dev_o[d].a_valid = host_i.a_valid && slot_free && hit && (sel == SW'(d));
      dev_o[d].d_ready = host_i.d_ready && pend_q && !err_q && (sel_q == SW'(d));
    end
  end

  // response back
  always_comb begin
    if (err_q) begin
      host_o          = TL_D2H_IDLE;
      host_o.d_valid  = d_valid;
      host_o.d_opcode = err_get_q ? AccessAckData : AccessAck;
      host_o.d_source = err_src_q;
      host_o.d_size   = err_size_q;
      host_o.d_error  = 1'b1;
    end else begin
      host_o         = dev_i[sel_q];
      host_o.d_valid = d_valid;
    end
    host_o.a_ready = a_ready;
  end

  // TL-UL rule: a request that is not yet accepted stays unchanged
  a_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    host_i.a_valid && !host_o.a_ready |=> host_i.a_valid && $stable(host_i.a_address)
                                          && $stable(host_i.a_opcode));

endmodule
