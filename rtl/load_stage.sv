// load_stage - the next stage after the bank: the memory unit's load register.
//
// The bank's output goes to the execution core's memory unit, where load data
// is held before it is committed. This register takes the bank's word at every
// clock edge at which the word is marked valid. A word that was captured with
// a timing error is never marked valid: it is flushed, and the corrected copy
// arrives one cycle later. The register also counts flushes.
//
// Interface: in_data/in_valid from dsff_bank (q/q_valid), flush = the bank's
// error. out_data/out_valid are registered: out_valid is high for one cycle per
// accepted word. flush_cnt counts flushed words (wraps). rst_n asynchronous.
//
// Only the existence of this stage and the flush of the wrong word come from
// the bus scheme; the register, the valid flag and the counter are this
// design's own.
`timescale 1ps/1fs
module load_stage #(
  parameter int unsigned WIDTH = dvs_pkg::BUS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] in_data,
  input  logic             in_valid,
  input  logic             flush,
  output logic [WIDTH-1:0] out_data,
  output logic             out_valid,
  output logic [31:0]      flush_cnt
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_data  <= '0;
      out_valid <= 1'b0;
      flush_cnt <= '0;
    end else begin
      out_valid <= in_valid & ~flush;
      if (in_valid && !flush) out_data <= in_data;
      if (flush) flush_cnt <= flush_cnt + 1'b1;
    end
  end

  a_flush_not_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                      flush |-> !in_valid);

endmodule
