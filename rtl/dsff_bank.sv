// dsff_bank - the bank of double sampling flops at the end of the read bus.
//
// WIDTH dsff cells capture the bus. Their local errors are ORed into one error
// signal per cycle; this is the signal the error counter counts, and it starts
// the one-cycle recovery:
//   cycle k   : q holds word n, the shadow samples disagree, error = 1.
//               q_valid = 0, so the next stage does not take the wrong word
//               (it is flushed), and stall = 1 asks the sender to keep word
//               n+1 on the bus for one more cycle.
//   edge k+1  : every cell reloads its shadow sample (cells without error
//               keep their value); q = word n, correct.
//   cycle k+1 : recovery cycle. The compare is masked because the shadow now
//               samples the held word n+1 while q holds word n. q_valid = 1.
//   edge k+2  : q = word n+1 from the bus, which has been stable for two cycles.
// Every error therefore costs exactly one cycle and no word is sent twice.
//
// Interface: bus_d is sampled on posedge clk and posedge clk_del; q, q_valid,
// error and stall are valid before the next posedge clk. stall is
// combinational from the cells' samples. The bus is assumed to carry one word
// every cycle. rst_n is an asynchronous active-low reset of the control state;
// the compare is masked until the first edge after reset, and q_valid stays
// low until the first word launched after reset has been captured (the edge
// after that), so the bus's reset value is never delivered.
//
// The ORing of the local errors, the one-cycle penalty and the flush of the
// next stage follow the bus scheme; the stall of the sender, the masking of
// the compare in the recovery cycle and the valid flag are this design's own
// way of making that penalty exact.
`timescale 1ps/1fs
module dsff_bank #(
  parameter int unsigned WIDTH = dvs_pkg::BUS_W
) (
  input  logic             clk,
  input  logic             clk_del,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] bus_d,    // receiver end of the bus
  output logic [WIDTH-1:0] q,        // captured word
  output logic             q_valid,  // q is correct and may be taken at the next edge
  output logic             error,    // OR of all local errors (timing error this cycle)
  output logic             stall     // sender must hold its word at the next edge
);

  logic [WIDTH-1:0] error_l;
  logic             armed;      // first edge after reset seen: compare valid
  logic             filled;     // first launched word captured: q valid
  logic             recover_q;  // this is the cycle after a correction
  logic             chk_en;

  assign chk_en = armed & ~recover_q;

  for (genvar i = 0; i < WIDTH; i++) begin : g_cell
    dsff u_cell (
      .clk     (clk),
      .clk_del (clk_del),
      .chk_en  (chk_en),
      .restore (error),
      .d       (bus_d[i]),
      .q       (q[i]),
      .error_l (error_l[i])
    );
  end

  assign error   = |error_l;
  assign stall   = error;
  assign q_valid = filled & ~error;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed     <= 1'b0;
      filled    <= 1'b0;
      recover_q <= 1'b0;
    end else begin
      armed     <= 1'b1;
      filled    <= armed;
      recover_q <= error;
    end
  end

  // An error is always followed by a recovery cycle without one.
  a_no_back_to_back: assert property (@(posedge clk) disable iff (!rst_n)
                                      recover_q |-> !error);

endmodule
