// tb_supply_delay - self-checking test of the regulator delay and limits.
//
// At the full 3000-cycle delay the testbench asks for supply steps and checks
// that vdd_mv stays put for 2999 cycles and moves by exactly 20 mV at cycle
// 3000; that DV_HOLD changes nothing; that the supply stops at vmin_mv going
// down and at 1200 mV going up; and that it starts at 1200 mV after reset.
`timescale 1ps/1fs
module tb_supply_delay;
  import dvs_pkg::*;

  localparam int unsigned SETTLE = 3000;

  logic clk = 1'b0, rst_n = 1'b0, dv_valid = 1'b0, pending;
  dv_e  dv = DV_HOLD;
  mv_t  vmin_mv = mv_t'(1140), vdd_mv;
  int checks = 0, failures = 0;

  always #333 clk = ~clk;

  supply_delay #(.SETTLE(SETTLE)) dut (.clk, .rst_n, .dv, .dv_valid, .vmin_mv, .vdd_mv, .pending);

  initial begin
    #(666 * 80000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (vdd %0d)", what, vdd_mv); end
  endtask

  // Request one step and check the exact cycle it lands on.
  task automatic step(dv_e d, int exp_after);
    int v_start;
    v_start = int'(vdd_mv);
    @(negedge clk);
    dv = d; dv_valid = 1'b1;
    @(negedge clk);
    dv_valid = 1'b0; dv = DV_HOLD;
    for (int c = 1; c < SETTLE; c++) begin
      if (int'(vdd_mv) != v_start) begin
        check($sformatf("%s: no change before %0d cycles (cycle %0d)", d.name(), SETTLE, c), 1'b0);
        break;
      end
      @(negedge clk);
    end
    check($sformatf("%s: unchanged at cycle %0d", d.name(), SETTLE - 1), int'(vdd_mv) == v_start);
    @(negedge clk);
    check($sformatf("%s: %0d -> %0d mV after %0d cycles", d.name(), v_start, exp_after, SETTLE),
          int'(vdd_mv) == exp_after);
    check("no step pending", !pending);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check("starts at 1200 mV", vdd_mv == 1200);
    step(DV_DOWN, 1180);
    step(DV_DOWN, 1160);
    step(DV_DOWN, 1140);
    step(DV_DOWN, 1140);       // at the minimum
    step(DV_UP,   1160);
    step(DV_UP,   1180);
    step(DV_UP,   1200);
    step(DV_UP,   1200);       // at the nominal voltage
    // DV_HOLD: nothing happens and nothing is pending
    @(negedge clk) dv_valid = 1'b1; dv = DV_HOLD;
    @(negedge clk) dv_valid = 1'b0;
    check("hold leaves nothing pending", !pending);
    repeat (SETTLE + 5) @(negedge clk);
    check("hold keeps the supply", vdd_mv == 1200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
