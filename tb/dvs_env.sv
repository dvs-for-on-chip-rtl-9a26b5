// dvs_env - stimulus and reference checker for the whole DVS read bus.
//
// Used by the system testbenches, which instantiate dvs_bus_top and connect it
// here. The environment
//   * makes clk (666 ps, 1.5 GHz) and clk_del (clk delayed by 220 ps, a third
//     of the cycle) and the reset;
//   * plays the memory: it offers a new word whenever tx_ready is high and
//     keeps every word it handed over in a scoreboard queue. Each new word
//     toggles every bit of the previous one with a probability that changes
//     at random every PHASE cycles between 1/16, 1/8, 1/4 and 1/2, so the
//     switching activity, and with it the error rate, varies as it does
//     between the phases of a program;
//   * sets the operating corner: by default the first half of the run at the
//     slow corner with 10 % IR drop (the corner the bus was sized for), the
//     second half at a fast corner (70 %) with no IR drop, so the loop has to
//     move the supply down until it reaches the minimum;
//   * with PROGRAMS > 0, splits the run into that many "programs", each with
//     its own activity level (a base toggle probability from a fixed list of
//     ten, varied by one step every PHASE cycles), and reports the error rate
//     and mean supply of each;
//   * checks every received word against the scoreboard (order and value),
//     that the memory is stalled in exactly the cycles with an error, that
//     each window's err_sum equals its own count of error cycles, and that
//     vdd_mv follows its own model of the controller and regulator cycle by
//     cycle (decision from the count, step SETTLE+2 cycles after the window
//     ends, limits at vmin and 1200 mV);
//   * counts how often each mechanism happened: corrected errors (= stalls and
//     flushes), steps down, steps up, hold decisions, requests refused at the
//     minimum. A mechanism that never happened counts as a failure.
// It prints the TB_RESULT line and stops the simulation after CYCLES cycles;
// a watchdog stops it after twice that time.
`timescale 1ps/1fs
module dvs_env #(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned WINDOW = 10000,
  parameter int unsigned SETTLE = 3000,
  parameter int unsigned CYCLES = 100000,
  parameter int unsigned VMIN   = 880,
  parameter int unsigned PHASE  = 1500,   // cycles between activity changes
  parameter int unsigned CORNER_A = 100,  // corner of the first part of the run
  parameter int unsigned IR_A     = 10,
  parameter int unsigned CORNER_B = 70,   // corner after SWITCH_AT cycles
  parameter int unsigned IR_B     = 0,
  parameter int unsigned SWITCH_AT = CYCLES / 2,
  parameter int unsigned PROGRAMS = 0,    // >0: run split into programs
  parameter bit          NEED_FLOOR = 1'b1, // the minimum supply must be reached
  localparam int unsigned CW    = $clog2(WINDOW + 1)
) (
  output logic             clk,
  output logic             clk_del,
  output logic             rst_n,
  output logic [WIDTH-1:0] tx_data,
  input  logic             tx_ready,
  input  logic [WIDTH-1:0] rx_data,
  input  logic             rx_valid,
  output logic [10:0]      vmin_mv,
  input  logic [10:0]      vdd_mv,
  input  logic             error,
  input  logic [CW-1:0]    err_sum,
  input  logic             err_sum_valid,
  input  logic [31:0]      flush_cnt,
  output logic [7:0]       corner_pct,
  output logic [7:0]       ir_drop_pct
);

  localparam int VNOM = 1200, VSTEP = 20;

  int checks = 0, failures = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  initial clk = 1'b0;
  always #333 clk = ~clk;
  assign #220 clk_del = clk;

  initial begin
    #(real'(CYCLES) * 666.0 * 2.0 + 100000.0);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory side -------------------------------------------------------
  logic [WIDTH-1:0] sb [$];
  int cyc = 0;            // clock edges since reset was released
  int n_words = 0, n_recv = 0, n_err = 0, n_stall = 0;
  int n_down = 0, n_up = 0, n_hold = 0, n_floor = 0, n_windows = 0;

  int act_shift = 1;      // toggle probability 2^-act_shift

  // programs: base activity (toggle probability 2^-base), per-program stats
  localparam int NP = (PROGRAMS > 0) ? PROGRAMS : 1;
  int  prog_base [10] = '{3, 2, 1, 1, 3, 3, 2, 2, 3, 2};
  int  p_cyc [NP];
  int  p_err [NP];
  real p_vdd [NP];
  function automatic int cur_prog();
    int k;
    k = (cyc - 1) / int'(CYCLES / NP);
    return (k >= NP) ? NP - 1 : k;
  endfunction
  initial for (int k = 0; k < NP; k++) begin p_cyc[k] = 0; p_err[k] = 0; p_vdd[k] = 0.0; end

  function automatic logic [WIDTH-1:0] next_word(logic [WIDTH-1:0] prev);
    logic [WIDTH-1:0] m;
    m = '1;
    for (int k = 0; k < act_shift; k++) m &= WIDTH'($urandom);
    return prev ^ m;
  endfunction

  initial begin
    rst_n       = 1'b0;
    tx_data     = '0;
    vmin_mv     = 11'(VMIN);
    corner_pct  = 8'(CORNER_A);
    ir_drop_pct = 8'(IR_A);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    tx_data = WIDTH'($urandom);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (cyc == SWITCH_AT) begin
        corner_pct  <= 8'(CORNER_B);
        ir_drop_pct <= 8'(IR_B);
      end
      check("stall exactly on error cycles", tx_ready == !error);
      if (error) n_err++;
      if (!tx_ready) n_stall++;
      if (cyc % PHASE == 0) begin
        if (PROGRAMS == 0) act_shift = $urandom_range(1, 4);
        else act_shift = prog_base[cur_prog() % 10] + $urandom_range(0, 1);
      end
      if (PROGRAMS > 0) begin
        p_cyc[cur_prog()]++;
        if (error) p_err[cur_prog()]++;
        p_vdd[cur_prog()] += real'(vdd_mv);
      end
      if (tx_ready) begin
        sb.push_back(tx_data);
        n_words++;
        tx_data <= next_word(tx_data);
      end
    end
  end

  // ---- core side -----------------------------------------------------------
  always @(negedge clk) begin
    if (rst_n && rx_valid) begin
      logic [WIDTH-1:0] exp;
      if (sb.size() == 0) begin
        check("word received that was never sent", 1'b0);
      end else begin
        exp = sb.pop_front();
        check($sformatf("word %0d: got %h expected %h", n_recv, rx_data, exp), rx_data == exp);
      end
      n_recv++;
    end
  end

  // ---- control loop reference ----------------------------------------------
  int win_cnt = 0, win_cyc = 0;
  int exp_sum = -1;
  int vdd_ref = VNOM;
  int apply_at = -1, apply_dir = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      // regulator step lands at this edge
      if (cyc == apply_at) begin
        if (apply_dir < 0) begin
          if (vdd_ref - VSTEP >= VMIN) vdd_ref -= VSTEP;
          else n_floor++;
        end else if (vdd_ref + VSTEP <= VNOM) vdd_ref += VSTEP;
        apply_at = -1;
      end
      win_cyc++;
      if (error) win_cnt++;
      if (win_cyc == WINDOW) begin
        n_windows++;
        exp_sum = win_cnt;
        if (100 * win_cnt < WINDOW)     begin apply_dir = -1; apply_at = cyc + 2 + SETTLE; n_down++; end
        else if (50 * win_cnt > WINDOW) begin apply_dir =  1; apply_at = cyc + 2 + SETTLE; n_up++;   end
        else n_hold++;
        win_cyc = 0;
        win_cnt = 0;
      end
    end
  end

  always @(negedge clk) begin
    if (rst_n && cyc > 0) begin
      checks++;
      if (int'(vdd_mv) != vdd_ref) begin
        failures++;
        if (failures < 20) $display("FAIL vdd %0d expected %0d at cycle %0d", vdd_mv, vdd_ref, cyc);
      end
      if (exp_sum >= 0 && win_cyc == 0) begin
        check("sum_valid at window end", err_sum_valid);
        check($sformatf("window sum %0d expected %0d", err_sum, exp_sum), int'(err_sum) == exp_sum);
      end else
        check("no sum_valid inside a window", !err_sum_valid);
    end
  end

  // ---- end of run -----------------------------------------------------------
  int vmin_seen = VNOM;
  always @(negedge clk) if (rst_n && cyc > 0 && int'(vdd_mv) < vmin_seen) vmin_seen = int'(vdd_mv);

  initial begin
    wait (cyc == CYCLES);
    @(negedge clk);
    check("flush count = error count", flush_cnt == 32'(n_err));
    check("every taken word received or in flight", n_words == n_recv + sb.size());
    check("at most three words in flight", sb.size() <= 3);
    check("one cycle lost per error", n_words == cyc - n_err);
    check("timing errors corrected", n_err > 0);
    check("memory stalled", n_stall > 0);
    check("supply stepped down", n_down > 0);
    check("supply stepped up", n_up > 0);
    check("hold decision (rate in band)", n_hold > 0);
    if (NEED_FLOOR) check("minimum supply reached and held", n_floor > 0 && vmin_seen == VMIN);
    check("supply never below the minimum", vmin_seen >= VMIN);
    if (PROGRAMS > 0)
      for (int k = 0; k < NP; k++)
        $display("program %0d: base activity 1/%0d, %0d cycles, error rate %.2f %%, mean supply %.0f mV",
                 k + 1, 1 << prog_base[k % 10], p_cyc[k], 100.0 * real'(p_err[k]) / real'(p_cyc[k]),
                 p_vdd[k] / real'(p_cyc[k]));
    $display("cycles=%0d words=%0d errors=%0d (%.2f %%) stalls=%0d windows=%0d",
             cyc, n_recv, n_err, 100.0 * real'(n_err) / real'(cyc), n_stall, n_windows);
    $display("steps down=%0d up=%0d holds=%0d refused at vmin=%0d lowest vdd=%0d mV final vdd=%0d mV",
             n_down, n_up, n_hold, n_floor, vmin_seen, vdd_mv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
