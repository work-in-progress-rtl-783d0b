// Self-checking testbench of the schedule timer.
// Checks counting against a cycle count kept by the testbench, the enable,
// clear and 32-bit half writes (and their priority), carry from the low into
// the high half, and that match/irq rise exactly in the cycle the count reaches
// the compare value (count >= compare), with irq gated by its enable.
module tb_timer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        en, clr, wr_lo, wr_hi, irq_en, match, irq;
  logic [31:0] wdata;
  logic [63:0] cmp, count;

  timer dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .clr_i(clr), .wr_lo_i(wr_lo),
    .wr_hi_i(wr_hi), .wdata_i(wdata), .cmp_i(cmp), .irq_en_i(irq_en),
    .count_o(count), .match_o(match), .irq_o(irq)
  );

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: count=%0h", what, $time, count);
    end
  endtask

  logic [63:0] ref_cnt;
  int n_match_edges = 0;

  initial begin
    en = 0; clr = 0; wr_lo = 0; wr_hi = 0; irq_en = 0; wdata = 0; cmp = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(count == 0, "reset value");
    check(!match && !irq, "no match with compare all ones");
    // count 100 cycles
    en = 1;
    repeat (100) @(negedge clk);
    check(count == 100, "counts one per cycle");
    en = 0;
    repeat (5) @(negedge clk);
    check(count == 100, "holds when disabled");
    // compare: match exactly when count reaches cmp
    cmp = 64'd150; en = 1; irq_en = 0;
    ref_cnt = 100;
    for (int i = 0; i < 80; i++) begin
      check(match == (ref_cnt >= 150), "match iff count >= compare");
      check(irq == 1'b0, "irq masked");
      @(negedge clk);
      ref_cnt++;
    end
    irq_en = 1;
    #1 check(irq == 1'b1, "irq when enabled and matched");
    // late compare fires at once
    cmp = 64'd10;
    #1 check(match, "late compare matches at once");
    // carry into the high half
    en = 0;
    wdata = 32'hFFFF_FFFE; wr_lo = 1; wr_hi = 1;
    @(negedge clk);
    wr_lo = 0; wr_hi = 0;
    check(count == 64'hFFFF_FFFE_FFFF_FFFE, "both halves written");
    wdata = 32'h0000_0001; wr_hi = 1;
    @(negedge clk);
    wr_hi = 0;
    check(count == 64'h0000_0001_FFFF_FFFE, "high half written alone");
    en = 1;
    repeat (3) @(negedge clk);
    check(count == 64'h0000_0002_0000_0001, "carry into the high half");
    // load beats counting, clear beats load
    wdata = 32'd7; wr_lo = 1;
    @(negedge clk);
    wr_lo = 0;
    check(count[31:0] == 32'd7, "load beats count");
    clr = 1; wr_lo = 1; wdata = 32'd99;
    @(negedge clk);
    clr = 0; wr_lo = 0;
    check(count == 0, "clear beats load");
    // schedule-style use: several release times in a row
    for (int k = 1; k <= 5; k++) begin
      int waited;
      cmp = 64'(k * 37);
      #1;
      irq_en = 1;
      waited = 0;
      while (!irq && waited < 1000) begin
        @(negedge clk);
        waited++;
      end
      check(count == 64'(k * 37), "irq in the cycle the release time is reached");
      n_match_edges++;
    end
    check(n_match_edges == 5, "all release times reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
