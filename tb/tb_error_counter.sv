// tb_error_counter - self-checking test of the windowed error counter.
//
// Runs the counter at its full 10,000-cycle window for five windows with a
// different random error density in each (including an all-zero and an
// all-one window). The testbench counts the errors itself and checks that
// sum_valid pulses exactly once every WINDOW cycles, right after the clock
// edge that ends the window's last cycle, with err_sum equal to its own count.
`timescale 1ps/1fs
module tb_error_counter;

  localparam int unsigned WINDOW = 10000;
  localparam int unsigned CW     = $clog2(WINDOW + 1);

  logic clk = 1'b0, rst_n = 1'b0, error = 1'b0;
  logic [CW-1:0] err_sum;
  logic sum_valid;
  int checks = 0, failures = 0;

  always #333 clk = ~clk;

  error_counter #(.WINDOW(WINDOW)) dut (.clk, .rst_n, .error, .err_sum, .sum_valid);

  initial begin
    #(666 * 70000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dens [5] = '{0, 100, 3, 50, 7};   // error probability in % (100 = always)
  int exp_sum [5];
  int win = 0, pulses = 0;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int w = 0; w < 5; w++) begin
      exp_sum[w] = 0;
      for (int c = 0; c < WINDOW; c++) begin
        error = ($urandom_range(0, 99) < dens[w]);
        if (error) exp_sum[w]++;
        @(negedge clk);
        // sum_valid must be low except right after the last cycle of a window
        checks++;
        if (sum_valid !== (c == WINDOW - 1)) begin
          failures++;
          $display("FAIL sum_valid=%0b in window %0d cycle %0d", sum_valid, w, c);
        end
        if (sum_valid) begin
          checks++;
          if (err_sum != CW'(exp_sum[w])) begin
            failures++;
            $display("FAIL window %0d sum %0d expected %0d", w, err_sum, exp_sum[w]);
          end
        end
      end
    end
    error = 1'b0;
    @(negedge clk);
    checks++;
    if (sum_valid || err_sum != CW'(exp_sum[4])) begin
      failures++;
      $display("FAIL after last window: sum %0d valid %0b expected %0d", err_sum, sum_valid, exp_sum[4]);
    end
    $display("window sums: %0d %0d %0d %0d %0d", exp_sum[0], exp_sum[1], exp_sum[2], exp_sum[3], exp_sum[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
