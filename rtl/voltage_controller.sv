// voltage_controller - decides the supply step from one window's error count.
//
// At the end of every window the controller compares the number of error
// cycles with the target band: below 1 % of the window it asks for
// dV = -20 mV, above 2 % for dV = +20 mV, otherwise dV = 0. This is a bang-bang
// controller with a dead band, not a proportional one.
//
// Interface: sum_valid/err_sum come from error_counter. dv and dv_valid are
// registered: dv_valid pulses one cycle after sum_valid, with the decision in
// dv (DV_HOLD is reported too). The thresholds are computed from WINDOW:
// LO = WINDOW*1%, HI = WINDOW*2%, and the comparisons are strict (sum < LO,
// sum > HI). rst_n is asynchronous, active low.
//
// The two comparisons, their order and the +/-20 mV steps follow the control
// loop of the bus; the registered output and the encoding are this design's.
`timescale 1ps/1fs
module voltage_controller
  import dvs_pkg::*;
#(
  parameter int unsigned WINDOW = dvs_pkg::WINDOW_CYCLES,
  localparam int unsigned CW    = $clog2(WINDOW + 1),
  localparam int unsigned LO    = WINDOW * LO_PERMILLE / 1000,
  localparam int unsigned HI    = WINDOW * HI_PERMILLE / 1000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] err_sum,
  input  logic          sum_valid,
  output dv_e           dv,
  output logic          dv_valid
);

  dv_e decision;

  always_comb begin
    if (err_sum < CW'(LO))       decision = DV_DOWN;   // sum error < 1 %
    else if (err_sum > CW'(HI))  decision = DV_UP;     // sum error > 2 %
    else                         decision = DV_HOLD;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv       <= DV_HOLD;
      dv_valid <= 1'b0;
    end else begin
      dv_valid <= sum_valid;
      if (sum_valid) dv <= decision;
    end
  end

endmodule
