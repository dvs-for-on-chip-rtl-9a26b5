// tb_dvs_read_bus - self-checking test of the bus delay model.
//
// Each case starts from a settled bus, applies one transition pattern and
// measures when the victim wire changes at the far end. Expected delays were
// worked out by hand from the delay formula in the model's header
// (600 ps * corner * s(V)/s(1080 mV) * (0.4 + 0.6*(1+0.5m)/3) + 65 ps):
//   1.2 V, 10 % IR drop, slow corner:  both neighbours opposite (m=4) 665 ps,
//     one quiet one opposite (m=3) 605 ps, both quiet (m=2) 545 ps,
//     both the same way (m=0) 425 ps, wire next to a shield with its other
//     neighbour opposite (m=3) 605 ps, last wire of a group likewise 605 ps;
//   1.2 V, no IR drop, m=4: 618.50 ps;  1.0 V, 10 % IR drop, m=4: 768.23 ps;
//   corner 80 %, 1.2 V, 10 % IR drop, m=4: 545 ps.
`timescale 1ps/1fs
module tb_dvs_read_bus;

  localparam int unsigned W = 32;

  logic [W-1:0] bus_in = '0, bus_out;
  logic [10:0]  vdd_mv = 11'd1200;
  logic [7:0]   corner_pct = 8'd100, ir_drop_pct = 8'd10;
  int checks = 0, failures = 0;

  dvs_read_bus #(.WIDTH(W)) dut (.bus_in, .vdd_mv, .corner_pct, .ir_drop_pct, .bus_out);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // From the settled value 'from', switch to 'to' and time wire 'victim'.
  task automatic measure(string what, logic [W-1:0] from, logic [W-1:0] to,
                         int victim, real exp_ps);
    realtime t0, dt;
    bus_in = from;
    #2000;
    checks++;
    if (bus_out !== from) begin
      failures++;
      $display("FAIL %s: bus did not settle to %h (%h)", what, from, bus_out);
    end
    t0 = $realtime;
    bus_in = to;
    @(bus_out[victim]);
    dt = $realtime - t0;
    checks++;
    if (dt < exp_ps - 0.5 || dt > exp_ps + 0.5) begin
      failures++;
      $display("FAIL %s: delay %.2f ps expected %.2f ps", what, dt, exp_ps);
    end else
      $display("ok   %s: %.2f ps", what, dt);
    #2000;
    checks++;
    if (bus_out !== to) begin
      failures++;
      $display("FAIL %s: bus did not settle to %h (%h)", what, to, bus_out);
    end
  endtask

  initial begin
    // wire 1 is the victim, its neighbours are wires 0 and 2 (group 0..3)
    measure("pattern I, m=4",          32'h0000_0005, 32'h0000_0002, 1, 665.0);
    measure("pattern II, m=3",         32'h0000_0004, 32'h0000_0002, 1, 605.0);
    measure("neighbours quiet, m=2",   32'h0000_0000, 32'h0000_0002, 1, 545.0);
    measure("neighbours same way, m=0",32'h0000_0000, 32'h0000_0007, 1, 425.0);
    measure("next to a shield, m=3",   32'h0000_0002, 32'h0000_0001, 0, 605.0);
    measure("group top wire, m=3",     32'h0000_0004, 32'h0000_0008, 3, 605.0);
    measure("wire 5, pattern I",       32'h0000_0050, 32'h0000_0020, 5, 665.0);
    measure("falling victim, m=4",     32'h0000_0002, 32'h0000_0005, 1, 665.0);
    ir_drop_pct = 8'd0;
    measure("no IR drop, m=4",         32'h0000_0005, 32'h0000_0002, 1, 618.50);
    ir_drop_pct = 8'd10;
    vdd_mv = 11'd1000;
    measure("1.0 V, m=4",              32'h0000_0005, 32'h0000_0002, 1, 768.23);
    vdd_mv = 11'd1200;
    corner_pct = 8'd80;
    measure("faster corner, m=4",      32'h0000_0005, 32'h0000_0002, 1, 545.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
