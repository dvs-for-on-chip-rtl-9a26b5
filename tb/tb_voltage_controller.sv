// tb_voltage_controller - self-checking test of the dV decision.
//
// With the full 10,000-cycle window the band is 100..200 errors (1 %..2 %).
// The testbench presents window sums around both edges of the band and at the
// extremes, and checks dV (-20 mV below 100, 0 from 100 to 200, +20 mV above
// 200), that dv_valid pulses exactly one cycle after sum_valid, and that dv
// keeps its value between windows.
`timescale 1ps/1fs
module tb_voltage_controller;
  import dvs_pkg::*;

  localparam int unsigned WINDOW = 10000;
  localparam int unsigned CW     = $clog2(WINDOW + 1);

  logic clk = 1'b0, rst_n = 1'b0, sum_valid = 1'b0;
  logic [CW-1:0] err_sum = '0;
  dv_e  dv;
  logic dv_valid;
  int checks = 0, failures = 0;

  always #333 clk = ~clk;

  voltage_controller #(.WINDOW(WINDOW)) dut (.clk, .rst_n, .err_sum, .sum_valid, .dv, .dv_valid);

  initial begin
    #(666 * 2000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dv_e ref_dv(int s);
    if (100 * s < WINDOW)      return DV_DOWN;   // below 1 %
    else if (50 * s > WINDOW)  return DV_UP;     // above 2 %
    else                       return DV_HOLD;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int sums [] = '{0, 1, 99, 100, 101, 150, 199, 200, 201, 202, 5000, 10000, 42, 180, 260};

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check("reset dv", dv == DV_HOLD && !dv_valid);
    foreach (sums[i]) begin
      @(negedge clk);
      err_sum   = CW'(sums[i]);
      sum_valid = 1'b1;
      @(negedge clk);
      sum_valid = 1'b0;
      check($sformatf("dv_valid one cycle after sum_valid (sum %0d)", sums[i]), dv_valid);
      check($sformatf("sum %0d -> dv %s", sums[i], dv.name()), dv == ref_dv(sums[i]));
      err_sum = CW'($urandom_range(0, WINDOW));   // ignored while sum_valid is low
      repeat (3) begin
        @(negedge clk);
        check("dv_valid low between windows", !dv_valid);
        check("dv held between windows", dv == ref_dv(sums[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
