// Copy engine of the management core (the platform's DMA).
//
// The DMA is the only component that touches external memory and the only
// initiator on the scratchpad interconnect, which is what keeps the worker
// cores free from interference. It copies LEN bytes from SRC to DST. Each
// address is routed by region: addresses with bit 31 set go to external memory
// over the AXI4 master port, all others go to the TL-UL crossbar. External to
// SPM, SPM to external, SPM to SPM (communication between cores) and
// external to external copies all use the same engine.
//
// How it works: the transfer is cut into chunks of at most BURST words that
// cross no 4 KiB boundary on either side. For each chunk the engine first reads
// all words into an internal buffer (one AXI4 INCR burst, or one TL-UL Get per
// word), then writes them out (one AXI4 INCR burst with its write response, or
// one TL-UL PutFullData per word). On TL-UL the requests are pipelined: a new
// Get or Put is issued in the cycle the previous response arrives, one word
// per cycle. On AXI4 one burst is outstanding at a time. With fixed memory
// latencies the transfer time is therefore a fixed function of the length,
// which the schedule can use as its worst case: an SPM-to-SPM copy takes
// 1 + sum over chunks of (2*k + 5) cycles from start to done, k words each.
//
// Interface: cfg_src_i, cfg_dst_i and cfg_len_i are sampled on start_i while
// idle (start_i while busy is ignored). busy_o is high from the cycle after the
// start until done_o, a one-cycle pulse. err_o is valid with done_o: set if a
// response carried an error (AXI SLVERR/DECERR, TL-UL d_error) or if an
// address or the length was not a multiple of 4 (then nothing is copied).
// A zero length completes at once without error.
//
// The paper uses a modified iDMA with an AXI4 port to DDR4 and a TL-UL port to
// the crossbar; the chunked read-then-write engine here is this design's own,
// built for the same job.
module dma
  import tlul_pkg::*;
  import axi_pkg::*;
  import mcvp_pkg::*;
#(
  parameter int unsigned BURST = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] cfg_src_i,
  input  logic [31:0] cfg_dst_i,
  input  logic [31:0] cfg_len_i,
  input  logic        start_i,
  output logic        busy_o,
  output logic        done_o,
  output logic        err_o,
  // TL-UL host port to the crossbar
  output tl_h2d_t     tl_o,
  input  tl_d2h_t     tl_i,
  // AXI4 master port to external memory
  output axi_req_t    axi_o,
  input  axi_rsp_t    axi_i
);

  localparam int unsigned CW = $clog2(BURST + 1);  // chunk length width
  localparam int unsigned IW = (BURST > 1) ? $clog2(BURST) : 1;

  typedef enum logic [3:0] {
    IDLE, CHUNK,
    RD_AR, RD_R, RD_T,
    WR_SEL, WR_AW, WR_W, WR_B, WR_T,
    NEXT, DONE
  } state_e;

  state_e        state_q;
  logic [31:0]   src_q, dst_q;
  logic [29:0]   rem_q;        // words left
  logic [CW-1:0] chunk_q;      // words in this chunk
  logic [IW-1:0] idx_q;        // word within the chunk (responses / beats)
  logic [CW-1:0] req_q;        // TL-UL requests issued in this chunk
  logic          err_q;
  logic [31:0]   buf_q [BURST];

  // ---------------- chunk length ----------------
  function automatic logic [10:0] words_to_4k(logic [31:0] a);
    return 11'd1024 - {1'b0, a[11:2]};
  endfunction

  logic [31:0] chunk_d;
  always_comb begin
    chunk_d = {2'b0, rem_q};
    if (chunk_d > BURST) chunk_d = BURST;
    if (chunk_d > 32'(words_to_4k(src_q))) chunk_d = 32'(words_to_4k(src_q));
    if (chunk_d > 32'(words_to_4k(dst_q))) chunk_d = 32'(words_to_4k(dst_q));
  end

  logic last_word;
  assign last_word = (CW'(idx_q) + CW'(1)) == chunk_q;

  logic          tl_req;       // a TL-UL request is still to be issued
  logic [IW-1:0] req_idx;
  assign tl_req  = ((state_q == RD_T) || (state_q == WR_T)) && (req_q != chunk_q);
  assign req_idx = IW'(req_q);

  logic [31:0] src_word, dst_word;
  assign src_word = src_q + 32'({req_idx, 2'b00});
  assign dst_word = dst_q + 32'({req_idx, 2'b00});

  // ---------------- state machine ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      src_q   <= '0;
      dst_q   <= '0;
      rem_q   <= '0;
      chunk_q <= '0;
      idx_q   <= '0;
      req_q   <= '0;
      err_q   <= 1'b0;
    end else begin
      if (tl_req && tl_i.a_ready) req_q <= req_q + 1'b1;
      unique case (state_q)
        IDLE: if (start_i) begin
          src_q <= cfg_src_i;
          dst_q <= cfg_dst_i;
          rem_q <= cfg_len_i[31:2];
          err_q <= 1'b0;
          if (|{cfg_src_i[1:0], cfg_dst_i[1:0], cfg_len_i[1:0]}) begin
            err_q   <= 1'b1;
            state_q <= DONE;
          end else if (cfg_len_i == 0) begin
            state_q <= DONE;
          end else begin
            state_q <= CHUNK;
          end
        end
        CHUNK: begin
          chunk_q <= CW'(chunk_d);
          idx_q   <= '0;
          req_q   <= '0;
          state_q <= is_ext_addr(src_q) ? RD_AR : RD_T;
        end
        // ---- read side, AXI4 ----
        RD_AR: if (axi_i.ar_ready) state_q <= RD_R;
        RD_R: if (axi_i.r_valid) begin
          buf_q[idx_q] <= axi_i.r.data;
          if (axi_i.r.resp[1]) err_q <= 1'b1;
          idx_q <= idx_q + 1'b1;
          if (axi_i.r.last) state_q <= WR_SEL;
        end
        // ---- read side, TL-UL ----
        RD_T: if (tl_i.d_valid) begin
          buf_q[idx_q] <= tl_i.d_data;
          if (tl_i.d_error) err_q <= 1'b1;
          idx_q <= idx_q + 1'b1;
          if (last_word) state_q <= WR_SEL;
        end
        // ---- write side ----
        WR_SEL: begin
          idx_q   <= '0;
          req_q   <= '0;
          state_q <= is_ext_addr(dst_q) ? WR_AW : WR_T;
        end
        WR_AW: if (axi_i.aw_ready) state_q <= WR_W;
        WR_W: if (axi_i.w_ready) begin
          idx_q <= idx_q + 1'b1;
          if (last_word) state_q <= WR_B;
        end
        WR_B: if (axi_i.b_valid) begin
          if (axi_i.b.resp[1]) err_q <= 1'b1;
          state_q <= NEXT;
        end
        WR_T: if (tl_i.d_valid) begin
          if (tl_i.d_error) err_q <= 1'b1;
          idx_q <= idx_q + 1'b1;
          if (last_word) state_q <= NEXT;
        end
        NEXT: begin
          src_q   <= src_q + 32'({chunk_q, 2'b00});
          dst_q   <= dst_q + 32'({chunk_q, 2'b00});
          rem_q   <= rem_q - 30'(chunk_q);
          state_q <= (rem_q == 30'(chunk_q)) ? DONE : CHUNK;
        end
        DONE:    state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != IDLE);
  assign done_o = (state_q == DONE);
  assign err_o  = (state_q == DONE) && err_q;

  // ---------------- TL-UL requests ----------------
  always_comb begin
    tl_o           = TL_H2D_IDLE;
    tl_o.a_size    = 2'd2;
    tl_o.a_mask    = '1;
    tl_o.a_valid   = tl_req;
    tl_o.a_opcode  = (state_q == WR_T) ? PutFullData : Get;
    tl_o.a_address = (state_q == WR_T) ? dst_word : src_word;
    tl_o.a_data    = buf_q[req_idx];
    tl_o.a_source  = TL_AIW'(req_q);
    tl_o.d_ready   = (state_q == RD_T) || (state_q == WR_T);
  end

  // ---------------- AXI4 requests ----------------
  always_comb begin
    axi_o          = '0;
    axi_o.ar_valid = (state_q == RD_AR);
    axi_o.ar.addr  = src_q;
    axi_o.ar.len   = 8'(chunk_q - 1'b1);
    axi_o.ar.size  = 3'd2;
    axi_o.ar.burst = BURST_INCR;
    axi_o.r_ready  = (state_q == RD_R);
    axi_o.aw_valid = (state_q == WR_AW);
    axi_o.aw.addr  = dst_q;
    axi_o.aw.len   = 8'(chunk_q - 1'b1);
    axi_o.aw.size  = 3'd2;
    axi_o.aw.burst = BURST_INCR;
    axi_o.w_valid  = (state_q == WR_W);
    axi_o.w.data   = buf_q[idx_q];
    axi_o.w.strb   = '1;
    axi_o.w.last   = last_word;
    axi_o.b_ready  = (state_q == WR_B);
  end

  // a burst must fit the buffer and AXI4 limits
  // TL-UL responses come back in order: the source tag is the word index
  tl_in_order: assert property (@(posedge clk_i) disable iff (!rst_ni)
    tl_i.d_valid && tl_o.d_ready |-> tl_i.d_source == TL_AIW'(idx_q));

  burst_fits: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == RD_AR |-> chunk_q >= CW'(1) && 32'(chunk_q) <= BURST);

endmodule
