// dvs_bus_top - DVS memory read bus with timing error correction.
//
// The memory drives words onto a long repeated bus whose supply is lowered
// until a small share of cycles show timing errors. Errors are caught and
// corrected at the receiver by double sampling flops, so the bus never has to
// be designed with worst-case voltage margin:
//
//   memory -> launch_reg -> dvs_read_bus -> dsff_bank -> load_stage -> core
//                  ^  stall                    | error
//                  +---------------------------+
//                                              v
//   dvs_read_bus.vdd <- supply_delay <- voltage_controller <- error_counter
//
// error_counter counts error cycles over a window, voltage_controller asks for
// -20 mV below 1 %, +20 mV above 2 %, and supply_delay applies the step to
// the bus supply after the regulator's 2 us. Each error costs one cycle: the
// launch register holds its word, the wrong word is flushed from the load
// stage and the bank restores the correct value from its shadow samples.
//
// Ports: clk and clk_del (clk delayed by at most a third of a cycle; the delay
// line is not part of this RTL), rst_n (asynchronous, active low), the memory
// side tx_data/tx_ready (a word is taken at each edge with tx_ready high), the
// core side rx_data/rx_valid, the static minimum supply vmin_mv, and two
// inputs that only the bus model reads: corner_pct and ir_drop_pct, the
// operating corner. Observation outputs: error, err_sum/err_sum_valid,
// vdd_mv, flush_cnt, supply_pending (a step is waiting in the regulator).
//
// The structure follows the described system; the source-side register and
// stall path are this design's own way of providing the one-cycle penalty.
`timescale 1ps/1fs
module dvs_bus_top
  import dvs_pkg::*;
#(
  parameter int unsigned WIDTH  = dvs_pkg::BUS_W,
  parameter int unsigned WINDOW = dvs_pkg::WINDOW_CYCLES,
  parameter int unsigned SETTLE = dvs_pkg::SETTLE_CYCLES,
  localparam int unsigned CW    = $clog2(WINDOW + 1)
) (
  input  logic             clk,
  input  logic             clk_del,
  input  logic             rst_n,
  // memory side
  input  logic [WIDTH-1:0] tx_data,
  output logic             tx_ready,
  // core side
  output logic [WIDTH-1:0] rx_data,
  output logic             rx_valid,
  // supply control
  input  mv_t              vmin_mv,
  output mv_t              vdd_mv,
  output logic             error,
  output logic [CW-1:0]    err_sum,
  output logic             err_sum_valid,
  output logic [31:0]      flush_cnt,
  output logic             supply_pending,
  // operating corner, read by the bus model only
  input  logic [7:0]       corner_pct,
  input  logic [7:0]       ir_drop_pct
);

  logic [WIDTH-1:0] bus_in, bus_out, bank_q;
  logic             bank_valid, stall;
  dv_e              dv;
  logic             dv_valid;

  launch_reg #(.WIDTH(WIDTH)) u_launch (
    .clk, .rst_n, .tx_data, .stall, .tx_ready, .bus_q(bus_in)
  );

  dvs_read_bus #(.WIDTH(WIDTH)) u_bus (
    .bus_in, .vdd_mv, .corner_pct, .ir_drop_pct, .bus_out
  );

  dsff_bank #(.WIDTH(WIDTH)) u_bank (
    .clk, .clk_del, .rst_n, .bus_d(bus_out), .q(bank_q), .q_valid(bank_valid),
    .error, .stall
  );

  load_stage #(.WIDTH(WIDTH)) u_load (
    .clk, .rst_n, .in_data(bank_q), .in_valid(bank_valid), .flush(error),
    .out_data(rx_data), .out_valid(rx_valid), .flush_cnt
  );

  error_counter #(.WINDOW(WINDOW)) u_cnt (
    .clk, .rst_n, .error, .err_sum, .sum_valid(err_sum_valid)
  );

  voltage_controller #(.WINDOW(WINDOW)) u_ctrl (
    .clk, .rst_n, .err_sum, .sum_valid(err_sum_valid), .dv, .dv_valid
  );

  supply_delay #(.SETTLE(SETTLE)) u_sup (
    .clk, .rst_n, .dv, .dv_valid, .vmin_mv, .vdd_mv, .pending(supply_pending)
  );

endmodule
