// tb_read_bus_modified - the bus model configured as the modified bus with a
// larger coupling ratio.
//
// The alternative bus geometry has Cc/Cg 1.95 times that of the original bus
// (closer wires) while its repeaters are resized so the worst-case delay is
// unchanged; the catch is that the fastest patterns become faster, which
// tightens the hold constraint of the shadow sample. The model normalises its
// coupling term by Cg + 4*Cc, so setting CC_CG = 1.95 * 0.5 = 0.975 gives
// exactly that bus. Expected delays, worked out by hand from
// 600 ps * (0.4 + 0.6*(1 + 0.975m)/4.9) + 65 ps at 1.2 V, 10 % IR drop,
// slow corner: m=4 665.00 ps (unchanged), m=3 593.37 ps, m=2 521.73 ps,
// m=0 378.47 ps (against 425 ps on the original bus).
// The 1.95 factor and the unchanged worst case follow the bus study; the
// base ratio 0.5 is this model's own.
`timescale 1ps/1fs
module tb_read_bus_modified;

  localparam int unsigned W = 32;

  logic [W-1:0] bus_in = '0, bus_out;
  logic [10:0]  vdd_mv = 11'd1200;
  logic [7:0]   corner_pct = 8'd100, ir_drop_pct = 8'd10;
  int checks = 0, failures = 0;

  dvs_read_bus #(.WIDTH(W), .CC_CG(0.975)) dut (.bus_in, .vdd_mv, .corner_pct, .ir_drop_pct, .bus_out);

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
    measure("pattern I, m=4",          32'h0000_0005, 32'h0000_0002, 1, 665.00);
    measure("pattern II, m=3",         32'h0000_0004, 32'h0000_0002, 1, 593.37);
    measure("neighbours quiet, m=2",   32'h0000_0000, 32'h0000_0002, 1, 521.73);
    measure("neighbours same way, m=0",32'h0000_0000, 32'h0000_0007, 1, 378.47);
    measure("next to a shield, m=3",   32'h0000_0002, 32'h0000_0001, 0, 593.37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
