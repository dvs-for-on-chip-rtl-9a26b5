// tb_load_stage - self-checking test of the memory unit's load register.
//
// Random words are offered with random valid and flush; a flushed word must
// never appear, a valid unflushed word must appear one cycle later with
// out_valid high, out_data must hold between accepted words, and flush_cnt
// must count the flushes.
`timescale 1ps/1fs
module tb_load_stage;

  localparam int unsigned W = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] in_data = '0, out_data;
  logic in_valid = 1'b0, flush = 1'b0, out_valid;
  logic [31:0] flush_cnt;
  int checks = 0, failures = 0;

  always #333 clk = ~clk;

  load_stage #(.WIDTH(W)) dut (.clk, .rst_n, .in_data, .in_valid, .flush, .out_data, .out_valid, .flush_cnt);

  initial begin
    #(666 * 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [W-1:0] last;
    int nflush;
    last = '0;
    nflush = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check("reset", !out_valid && flush_cnt == 0);
    for (int n = 0; n < 2000; n++) begin
      logic take;
      // the bank never marks a word valid while it flags an error
      flush    = ($urandom_range(0, 3) == 0);
      in_valid = !flush && ($urandom_range(0, 4) != 0);
      in_data  = $urandom;
      take     = in_valid && !flush;
      if (flush) nflush++;
      @(negedge clk);
      check("out_valid", out_valid == take);
      if (take) last = in_data;
      check("out_data", out_data == last);
      check("flush count", flush_cnt == 32'(nflush));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
