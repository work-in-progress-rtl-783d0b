// Schedule timer of the management core.
//
// The static schedule computed at compile time gives the time at which every
// transfer starts. The management core reads this 64-bit cycle counter and
// compares it with a 64-bit compare value to launch each transfer on time.
// match_o is high while count >= compare (a compare value written too late
// therefore fires at once); irq_o is match_o gated by irq_en_i, so the core
// may sleep until the next scheduled time instead of polling.
//
// Interface: en_i counts one per clock; clr_i sets the count to zero; wr_lo_i
// and wr_hi_i load one 32-bit half from wdata_i (clear wins over a load, a load
// wins over counting). Outputs are registered count and combinational match.
// The paper names the timer and says it is configured from the schedule; the
// counter/compare structure and its width are this design's choice, modelled
// on the RISC-V mtime/mtimecmp pair.
module timer #(
  parameter int unsigned W = 64
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,
  input  logic         clr_i,
  input  logic         wr_lo_i,
  input  logic         wr_hi_i,
  input  logic [31:0]  wdata_i,
  input  logic [W-1:0] cmp_i,
  input  logic         irq_en_i,
  output logic [W-1:0] count_o,
  output logic         match_o,
  output logic         irq_o
);

  logic [W-1:0] count_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      count_q <= '0;
    end else if (clr_i) begin
      count_q <= '0;
    end else if (wr_lo_i || wr_hi_i) begin
      if (wr_lo_i) count_q[31:0] <= wdata_i;
      if (wr_hi_i) count_q[W-1:32] <= wdata_i[W-33:0];
    end else if (en_i) begin
      count_q <= count_q + 1'b1;
    end
  end

  assign count_o = count_q;
  assign match_o = (count_q >= cmp_i);
  assign irq_o   = match_o && irq_en_i;

endmodule
