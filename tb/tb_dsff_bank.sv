// tb_dsff_bank - self-checking test of the 32-bit double sampling bank.
//
// The testbench plays the sender and the bus. A launch register sends one
// random word per cycle and holds it when the bank asserts stall. Each word
// gets a random "late" mask: those wires arrive 800 ps after launch (after the
// next main edge at 666 ps, before the shadow edge at 886 ps), the others at
// 300 ps. A reference model predicts which words cause an error (a late wire
// that actually changes, unless the word was held for a recovery cycle) and
// the checks are: every word reaches q_valid exactly once, in order and
// correct; error fires for exactly the predicted words; stall equals error;
// and the run takes exactly one extra cycle per error.
`timescale 1ps/1fs
module tb_dsff_bank;

  localparam int unsigned W = 32;
  localparam int NWORDS     = 400;

  logic clk = 1'b0, clk_del, rst_n = 1'b0;
  logic [W-1:0] bus_d = '0, q;
  logic q_valid, error, stall;
  int checks = 0, failures = 0;

  assign #220 clk_del = clk;
  always #333 clk = ~clk;

  dsff_bank #(.WIDTH(W)) dut (.clk, .clk_del, .rst_n, .bus_d, .q, .q_valid, .error, .stall);

  logic [W-1:0] words [NWORDS];
  logic [W-1:0] late  [NWORDS];
  logic         exp_err [NWORDS];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive one word onto the bus with per-wire arrival times.
  task automatic launch(logic [W-1:0] w, logic [W-1:0] lm);
    for (int i = 0; i < W; i++) begin
      automatic int   b = i;
      automatic logic v = w[i];
      automatic int   dl = lm[i] ? 800 : 300;
      fork
        begin #(dl) bus_d[b] = v; end
      join_none
    end
  endtask

  int sent = 0, recv = 0, nerr = 0, exp_nerr = 0, cycles = 0;
  logic started = 1'b0;

  initial begin
    logic [W-1:0] prev;
    logic         prev_err;
    prev = '0;
    prev_err = 1'b0;
    for (int n = 0; n < NWORDS; n++) begin
      words[n] = $urandom;
      late[n]  = ($urandom_range(0, 3) == 0) ? W'($urandom) & W'($urandom) : '0;
      exp_err[n] = !prev_err && ((late[n] & (words[n] ^ prev)) != '0);
      if (exp_err[n]) exp_nerr++;
      prev_err = exp_err[n];
      prev = words[n];
    end
    repeat (3) @(posedge clk);
    #10 rst_n = 1'b1;
    @(negedge clk);
    started = 1'b1;
  end

  // Sender: one word per edge unless stalled.
  always @(posedge clk) begin
    if (started && !stall && sent < NWORDS) begin
      launch(words[sent], late[sent]);
      sent++;
    end
  end

  // Receiver checks, sampled just before each edge.
  always @(posedge clk) begin
    if (started && recv < NWORDS) begin
      cycles++;
      checks++;
      if (cycles > 2 && stall !== error) begin failures++; $display("FAIL stall != error"); end
      if (cycles <= 2) begin
        // bank filling: the first word is launched at cycle 1, valid in q at cycle 3
      end else if (error) begin
        nerr++;
        check("error only where predicted", exp_err[recv]);
        check("no valid during error", !q_valid);
      end else begin
        check("valid when no error", q_valid);
        check($sformatf("word %0d value q=%h exp=%h late=%h experr=%0b prev=%0b", recv, q, words[recv], late[recv], exp_err[recv], recv>0 ? exp_err[recv-1] : 1'b0), q == words[recv]);
        recv++;
      end
    end
  end

  initial begin
    wait (recv == NWORDS);
    check($sformatf("error count %0d expected %0d", nerr, exp_nerr), nerr == exp_nerr);
    check("some errors happened", nerr > 10);
    // two cycles to fill the bus and the bank, then one cycle per word plus one per error
    check($sformatf("cycles %0d expected %0d", cycles, NWORDS + nerr + 2), cycles == NWORDS + nerr + 2);
    $display("words=%0d errors=%0d cycles=%0d", recv, nerr, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
