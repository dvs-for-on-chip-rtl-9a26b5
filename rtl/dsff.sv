// dsff - one double sampling flip-flop.
//
// The flop samples its input twice: on the rising edge of the main clock clk
// (the main flop) and on the rising edge of clk_del, a copy of clk delayed by
// up to a third of the cycle (the shadow sample). When a wire arrives too late
// for clk but in time for clk_del, the two samples differ and error_l, the XOR
// of the main output and the shadow sample, goes high. At the next clk edge a
// multiplexer in front of the main storage then loads the shadow sample instead
// of d, so the correct value is restored without resending it on the bus.
// The multiplexer is steered by restore, which the bank drives with the OR of
// all local errors: a flop in error reloads its shadow sample, and a flop
// without error, whose shadow sample equals q, keeps its value. Steering each
// multiplexer by its own error_l alone would let the flops that were right
// take the next word while the others are restored, splitting the word.
//
// Timing: q changes on posedge clk; the shadow sample changes on posedge
// clk_del. error_l compares the two and is meaningful from posedge clk_del to
// the next posedge clk; it is only used at posedge clk. chk_en masks the
// compare; the bank drives it low while it is not armed and in the cycle that
// follows a correction, when the shadow already holds the next word.
// restore is sampled at posedge clk together with d.
//
// The XOR-based error, the restore multiplexer and the delayed shadow clock
// follow the flop described for the bus. The circuit there uses a master-slave
// flop with a shadow latch; this RTL uses two edge-triggered samples, which is
// the same cycle-level behaviour; chk_en and the bank-wide restore select are
// this design's own.
// The flop has no reset: it is a data flop and the bank masks its compare
// until the first word has been captured.
`timescale 1ps/1fs
module dsff (
  input  logic clk,      // main clock
  input  logic clk_del,  // delayed clock for the shadow sample
  input  logic chk_en,   // compare enable
  input  logic restore,  // reload the shadow sample at this edge
  input  logic d,        // bus wire at the receiver
  output logic q,        // flop output
  output logic error_l   // local error: q differs from the shadow sample
);

  logic shadow;

  always_ff @(posedge clk_del) shadow <= d;

  assign error_l = chk_en & (q ^ shadow);

  // Restore multiplexer: reload the shadow sample when the bank saw an error.
  always_ff @(posedge clk) q <= restore ? shadow : d;

endmodule
