// tb_dvs_bus_top - end-to-end test of the DVS read bus at reduced loop sizes.
//
// The top is run with a 1000-cycle error window and a 300-cycle regulator
// delay (instead of 10,000 and 3000) so that the control loop takes many steps in a
// short run; everything else is at its default. dvs_env drives it, checks
// every word, every window count and every supply step against its own
// reference, and counts the mechanisms (see dvs_env).
`timescale 1ps/1fs
module tb_dvs_bus_top;

  localparam int unsigned W      = 32;
  localparam int unsigned WINDOW = 1000;
  localparam int unsigned SETTLE = 300;
  localparam int unsigned CW     = $clog2(WINDOW + 1);

  logic clk, clk_del, rst_n, tx_ready, rx_valid, error, err_sum_valid, supply_pending;
  logic [W-1:0] tx_data, rx_data;
  logic [10:0] vmin_mv, vdd_mv;
  logic [CW-1:0] err_sum;
  logic [31:0] flush_cnt;
  logic [7:0] corner_pct, ir_drop_pct;

  dvs_bus_top #(.WIDTH(W), .WINDOW(WINDOW), .SETTLE(SETTLE)) dut (.*);

  dvs_env #(.WIDTH(W), .WINDOW(WINDOW), .SETTLE(SETTLE), .CYCLES(200000)) env (.*);

endmodule
