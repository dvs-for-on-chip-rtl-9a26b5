// tb_dvs_bus_full - the DVS read bus at its full size, end to end.
//
// dvs_bus_top with every parameter at its default: 32 wires, a 10,000-cycle
// error window and a 3000-cycle (2 us) regulator delay. dvs_env runs it for
// 2,000,000 cycles (1.33 ms at 1.5 GHz, 200 windows): the first half at the
// slow corner with 10 % IR drop, the second at a fast corner with no IR drop,
// with the switching activity changing every 15,000 cycles. Every word, every
// window count and every supply step is checked (see dvs_env).
`timescale 1ps/1fs
module tb_dvs_bus_full;

  localparam int unsigned W  = 32;
  localparam int unsigned CW = $clog2(10000 + 1);

  logic clk, clk_del, rst_n, tx_ready, rx_valid, error, err_sum_valid, supply_pending;
  logic [W-1:0] tx_data, rx_data;
  logic [10:0] vmin_mv, vdd_mv;
  logic [CW-1:0] err_sum;
  logic [31:0] flush_cnt;
  logic [7:0] corner_pct, ir_drop_pct;

  dvs_bus_top dut (.*);

  dvs_env #(.WIDTH(W), .WINDOW(10000), .SETTLE(3000), .CYCLES(2000000), .PHASE(15000)) env (.*);

endmodule
