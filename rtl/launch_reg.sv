// launch_reg - the register that drives the bus at the memory end.
//
// It loads a new word from the memory at every clock edge unless the bank at
// the far end asks for a stall, in which case the word on the bus is held for
// one more cycle; this is how the one-cycle error penalty reaches the sender.
// tx_ready tells the memory whether its word is taken at the next edge.
//
// Interface: tx_data is taken at posedge clk when tx_ready = 1; bus_q drives
// the bus. Reset clears the bus to zero (asynchronous, active low). This
// register is this design's own: the source end of the bus is not described.
`timescale 1ps/1fs
module launch_reg #(
  parameter int unsigned WIDTH = dvs_pkg::BUS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] tx_data,
  input  logic             stall,
  output logic             tx_ready,
  output logic [WIDTH-1:0] bus_q
);

  assign tx_ready = rst_n & ~stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        bus_q <= '0;
    else if (!stall)   bus_q <= tx_data;
  end

endmodule
