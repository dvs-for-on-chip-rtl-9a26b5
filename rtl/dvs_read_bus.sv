// dvs_read_bus - behavioural model of the 6 mm, 32-bit repeated read bus.
// This is a behavioural model (not synthesizable): the bus is wires and
// repeaters, and what matters for the design is its delay.
//
// Each wire has four repeaters spaced 1.5 mm apart and a grounded shield runs
// after every 4 wires, so a wire's neighbours are either other data wires of
// its group or a quiet shield. A transition on bus_in[i] reaches bus_out[i]
// after a delay that depends on
//   * the neighbours (the Miller effect of the coupling capacitance Cc): each
//     neighbour adds 0*Cc if it switches the same way, 1*Cc if it is quiet or
//     a shield, and 2*Cc if it switches the opposite way, so the worst case is
//     Cg + 4*Cc (both neighbours opposite) and one quiet neighbour is faster by
//     R*Cc;
//   * the supply: delay scales with V/(V-Vt)^alpha (alpha-power law) at the
//     effective voltage V = vdd_mv * (1 - ir_drop_pct/100);
//   * the process and temperature corner, as a delay scale corner_pct
//     (100 = slow process at 100 C).
// delay = T_WC_PS * corner_pct/100 * s(V)/s(V_WC)
//         * (GATE_FRAC + (1-GATE_FRAC) * (1 + m*CC_CG) / (1 + 4*CC_CG))
//         + T_SLACK_PS
// where m is the coupling count above and V_WC = 1.2 V less 10 % IR drop, so
// the worst case at the slow corner with 10 % IR drop and 1.2 V is 600 ps, the
// value the repeaters are sized for. The repeaters were sized leaving 10 % of
// the cycle for flop setup time and clock skew; T_SLACK_PS (65 ps, just under
// 10 % of 666 ps) adds that allowance, so bus_out changes when the flop can
// first use the value and the worst case at the design point lands 1 ps
// before the clock edge. GATE_FRAC is the share of the delay in the
// repeaters themselves, which no neighbour affects.
//
// Taken from the bus description: 32 wires, shields every 4 wires, the 600 ps
// worst case at slow process, 100 C, 10 % IR drop, the coupling model with the
// Cg + 4Cc worst case and the R*Cc step to the next pattern, the 10 % slack. This model's own
// numbers, chosen because the delay tables behind the bus study are not
// available: Vt = 300 mV, alpha = 1.3, Cc/Cg = 0.5, GATE_FRAC = 0.4 and the
// corner scale. They keep the shortest delay above a third of a 1.5 GHz cycle
// at the corners used, which the shadow sample needs.
//
// Timing: transport delay per wire. If a transition would land after a newer
// one on the same wire (possible only when the supply or corner changes
// sharply, e.g. before reset), it is dropped, so the far end always settles
// to the value last driven.
`timescale 1ps/1fs
module dvs_read_bus #(
  parameter int unsigned WIDTH        = dvs_pkg::BUS_W,
  parameter int unsigned SHIELD_EVERY = dvs_pkg::SHIELD_EVERY,
  parameter real         T_WC_PS      = 600.0,   // worst-case delay the bus is sized for
  parameter real         V_WC_MV      = 1080.0,  // 1.2 V less 10 % IR drop
  parameter real         VT_MV        = 300.0,
  parameter real         ALPHA        = 1.3,
  parameter real         CC_CG        = 0.5,
  parameter real         GATE_FRAC    = 0.4,
  parameter real         T_SLACK_PS   = 65.0     // flop setup + clock skew allowance
) (
  input  logic [WIDTH-1:0] bus_in,       // driver end (node "in")
  input  logic [10:0]      vdd_mv,       // bus supply in mV
  input  logic [7:0]       corner_pct,   // process/temperature delay scale, %
  input  logic [7:0]       ir_drop_pct,  // local supply droop, %
  output logic [WIDTH-1:0] bus_out       // receiver end (node "out")
);

  // Declaration initialisers: the model starts settled at all-zero, the
  // value the driving register resets to.
  logic [WIDTH-1:0] prev_in = '0;
  logic [WIDTH-1:0] out_r   = '0;
  int unsigned      seq    [WIDTH] = '{default: 0};  // transitions scheduled per wire
  int unsigned      landed [WIDTH] = '{default: 0};  // newest transition that has landed

  assign bus_out = out_r;

  function automatic real speed(real v_mv);
    real v;
    v = (v_mv < VT_MV + 50.0) ? VT_MV + 50.0 : v_mv;
    return v / ((v - VT_MV) ** ALPHA);
  endfunction

  // Direction of a wire's transition: +1 rising, -1 falling, 0 quiet.
  function automatic int dir(logic n, logic o);
    return (n == o) ? 0 : (n ? 1 : -1);
  endfunction

  // Coupling count m of wire i for the transition prev -> next.
  function automatic int coupling(int i, logic [WIDTH-1:0] nx, logic [WIDTH-1:0] pv);
    int m, di, dn;
    m  = 0;
    di = dir(nx[i], pv[i]);
    // lower neighbour: a shield below the first wire of each group
    if (i % SHIELD_EVERY == 0) m += 1;
    else begin
      dn = dir(nx[i-1], pv[i-1]);
      m += (dn == 0) ? 1 : ((dn == di) ? 0 : 2);
    end
    // upper neighbour: a shield above the last wire of each group and the bus
    if (i % SHIELD_EVERY == SHIELD_EVERY - 1 || i == WIDTH - 1) m += 1;
    else begin
      dn = dir(nx[i+1], pv[i+1]);
      m += (dn == 0) ? 1 : ((dn == di) ? 0 : 2);
    end
    return m;
  endfunction

  function automatic real wire_delay(int m);
    real v_eff, cfac;
    v_eff = real'(vdd_mv) * (1.0 - real'(ir_drop_pct) / 100.0);
    cfac  = (1.0 + real'(m) * CC_CG) / (1.0 + 4.0 * CC_CG);
    return T_WC_PS * real'(corner_pct) / 100.0 * speed(v_eff) / speed(V_WC_MV)
           * (GATE_FRAC + (1.0 - GATE_FRAC) * cfac) + T_SLACK_PS;
  endfunction

  always @(bus_in) begin
    for (int i = 0; i < WIDTH; i++) begin
      if (bus_in[i] != prev_in[i]) begin
        automatic logic [$clog2(WIDTH)-1:0] b = $clog2(WIDTH)'(i);
        automatic logic v = bus_in[i];
        automatic real  d = wire_delay(coupling(i, bus_in, prev_in));
        automatic int unsigned s = seq[i] + 1;
        seq[i] = s;
        fork
          begin
            #(d);
            // an older transition that lands after a newer one is dropped
            if (s > landed[b]) begin
              landed[b]  = s;
              out_r[b]   = v;
            end
          end
        join_none
      end
    end
    prev_in = bus_in;
  end

endmodule
