// tb_workload_typical - ten program-like traces through the full-size DVS bus.
//
// dvs_bus_top at its defaults (10,000-cycle window, 3000-cycle regulator
// delay) runs ten programs back to back, 1,000,000 cycles each, starting from
// 1.2 V, at the corner: typical process, 100 C, no IR drop (the corner of the supply trace over ten programs); the regulator minimum is 800 mV, where the shadow samples still meet their setup time at typical process with 10 % IR drop.
// The programs are synthetic: each has its own switching activity (see
// dvs_env), standing in for the memory read traces of ten benchmarks. Every
// word, window count and supply step is checked; the error rate and mean
// supply of each program are printed.
`timescale 1ps/1fs
module tb_workload_typical;

  localparam int unsigned W  = 32;
  localparam int unsigned CW = $clog2(10000 + 1);

  logic clk, clk_del, rst_n, tx_ready, rx_valid, error, err_sum_valid, supply_pending;
  logic [W-1:0] tx_data, rx_data;
  logic [10:0] vmin_mv, vdd_mv;
  logic [CW-1:0] err_sum;
  logic [31:0] flush_cnt;
  logic [7:0] corner_pct, ir_drop_pct;

  dvs_bus_top dut (.*);

  dvs_env #(.WIDTH(W), .WINDOW(10000), .SETTLE(3000), .CYCLES(10000000), .PHASE(50000),
            .VMIN(800), .CORNER_A(92), .IR_A(0), .CORNER_B(92), .IR_B(0),
            .PROGRAMS(10), .NEED_FLOOR(1'b0)) env (.*);

  // Backstop watchdog, beyond the environment's own (which stops the run
  // after twice its cycle count): should never fire.
  initial begin
    #(64'd666 * 64'd25_000_000);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

endmodule
