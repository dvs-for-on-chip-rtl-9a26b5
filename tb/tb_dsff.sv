// tb_dsff - self-checking test of one double sampling flop.
//
// Clock period 666 ps (1.5 GHz), clk_del is clk delayed by 220 ps (a third of
// the cycle). The test drives d at chosen times relative to the capture edge:
// early arrivals must be captured with no error; an arrival 100 ps after the
// edge (too late for clk, in time for clk_del) must raise error_l and be
// restored from the shadow sample at the next edge, even when d has changed
// again by then; with chk_en low a mismatch must not raise
// error_l and the flop must take d.
`timescale 1ps/1fs
module tb_dsff;

  logic clk = 1'b0, clk_del, chk_en, d;
  logic q, error_l;
  int   checks = 0, failures = 0;

  assign #220 clk_del = clk;
  always #333 clk = ~clk;

  // restore is driven like the bank does for a one-flop bank: by error_l.
  logic restore;
  assign restore = error_l;
  dsff dut (.clk, .clk_del, .chk_en, .restore, .d, .q, .error_l);

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %t", what, got, exp, $realtime);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk_en = 1'b0;
    d      = 1'b0;
    repeat (2) @(posedge clk);
    #300 chk_en = 1'b1;
    @(posedge clk);
    // 1) early data: captured by both samples, no error
    for (int n = 0; n < 8; n++) begin
      logic v;
      v = 1'($urandom);
      @(posedge clk); #300;
      d = v;                      // 300 ps after an edge: meets the next edge
      @(posedge clk); #1;
      check("early q", q, v);
      #400;                       // past clk_del, before the next edge
      check("early no error", error_l, 1'b0);
    end
    // 2) late data: arrives 100 ps after the edge it was meant for
    for (int n = 0; n < 8; n++) begin
      logic v;
      v = ~q;
      @(posedge clk); #100;
      d = v;
      #50  check("late: main missed it", q, ~v);
      #150 check("late: error raised", error_l, 1'b1);   // 300 ps after the edge
      #100 d = ~v;                // d changes again before the restoring edge
      @(posedge clk); #1;
      check("late: restored from the shadow, not from d", q, v);
      #50 d = v;
      #250 check("late: error cleared", error_l, 1'b0);
      #250;
    end
    // 3) compare masked: same late arrival, chk_en = 0
    @(posedge clk); #1 chk_en = 1'b0;
    begin
      logic v;
      v = ~q;
      #99 d = v;
      #200 check("masked: no error", error_l, 1'b0);
      @(posedge clk); #1;
      check("masked: q takes d", q, v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
