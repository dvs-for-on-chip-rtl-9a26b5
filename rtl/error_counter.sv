// error_counter - counts timing errors over a fixed window of cycles.
//
// Every cycle in which the bank's error signal is high adds one to the count
// (one error is one cycle with at least one flop in error). After WINDOW
// cycles the total, including the last cycle, is copied to err_sum, sum_valid
// pulses high for one cycle and the count restarts from zero, so successive
// windows do not overlap and no cycle is lost.
//
// Timing: sum_valid is high in the cycle after the WINDOW-th cycle of a
// window; err_sum holds its value until the next window ends. rst_n is an
// asynchronous active-low reset that starts a fresh window.
//
// The 10,000-cycle window, the count of error cycles and the reset after each
// window follow the control loop of the bus; the pulse handshake to the
// controller is this design's own choice.
`timescale 1ps/1fs
module error_counter #(
  parameter int unsigned WINDOW = dvs_pkg::WINDOW_CYCLES,
  localparam int unsigned CW    = $clog2(WINDOW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          error,      // OR of the bank's local errors
  output logic [CW-1:0] err_sum,    // errors in the last complete window
  output logic          sum_valid   // one-cycle pulse: a new err_sum
);

  logic [CW-1:0] cycle_cnt;   // cycles seen in this window, minus one
  logic [CW-1:0] err_cnt;     // errors seen in this window so far

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle_cnt <= '0;
      err_cnt   <= '0;
      err_sum   <= '0;
      sum_valid <= 1'b0;
    end else if (cycle_cnt == CW'(WINDOW - 1)) begin
      err_sum   <= err_cnt + CW'(error);
      sum_valid <= 1'b1;
      cycle_cnt <= '0;
      err_cnt   <= '0;
    end else begin
      sum_valid <= 1'b0;
      cycle_cnt <= cycle_cnt + 1'b1;
      err_cnt   <= err_cnt + CW'(error);
    end
  end

endmodule
