// supply_delay - the supply the bus sees, SETTLE cycles after each decision.
//
// The regulator moves the supply at about 1 us per 10 mV, so a 20 mV step
// becomes effective 2 us, 3000 cycles at 1.5 GHz, after the controller decides
// it. This block holds the bus supply vdd_mv and applies each DV_UP/DV_DOWN
// request exactly SETTLE cycles after its dv_valid pulse, in one step of
// VSTEP mV. The supply never goes below vmin_mv, the minimum the regulator is
// set to allow for the process corner (chosen so the shadow samples always
// meet their setup time), nor above the nominal VNOM. It starts at VNOM.
//
// Interface: dv/dv_valid from voltage_controller; vmin_mv is a static setting.
// vdd_mv is registered; pending is high while a step waits. A new request
// while one is pending replaces it and restarts the wait (with a 10,000-cycle
// window and a 3000-cycle wait this does not happen). rst_n is asynchronous.
//
// The 2 us delay, the 20 mV step, the minimum voltage and the start at 1.2 V
// follow the bus's control loop. The ceiling at the nominal voltage and the
// single step after the wait (instead of a ramp) are this design's choices.
`timescale 1ps/1fs
module supply_delay
  import dvs_pkg::*;
#(
  parameter int unsigned SETTLE = dvs_pkg::SETTLE_CYCLES,
  parameter int unsigned VNOM   = dvs_pkg::VNOM_MV,
  parameter int unsigned VSTEP  = dvs_pkg::VSTEP_MV,
  localparam int unsigned TW    = $clog2(SETTLE + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  dv_e  dv,
  input  logic dv_valid,
  input  mv_t  vmin_mv,   // lowest supply the regulator may set
  output mv_t  vdd_mv,    // supply applied to the bus
  output logic pending    // a step is waiting for the regulator
);

  logic [TW-1:0] timer;
  dv_e           pend_dv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vdd_mv  <= mv_t'(VNOM);
      pending <= 1'b0;
      timer   <= '0;
      pend_dv <= DV_HOLD;
    end else if (dv_valid && dv != DV_HOLD) begin
      pending <= 1'b1;
      pend_dv <= dv;
      timer   <= TW'(SETTLE - 1);
    end else if (pending) begin
      if (timer == '0) begin
        pending <= 1'b0;
        if (pend_dv == DV_DOWN && vdd_mv >= vmin_mv + mv_t'(VSTEP))
          vdd_mv <= vdd_mv - mv_t'(VSTEP);
        else if (pend_dv == DV_UP && vdd_mv + mv_t'(VSTEP) <= mv_t'(VNOM))
          vdd_mv <= vdd_mv + mv_t'(VSTEP);
      end else begin
        timer <= timer - 1'b1;
      end
    end
  end

  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                               vdd_mv <= mv_t'(VNOM));

endmodule
