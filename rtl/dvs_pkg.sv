// Shared constants and types of the DVS read bus.
//
// The numbers here are the operating point of the bus studied: a 32-bit read
// bus clocked at 1.5 GHz with a nominal supply of 1.2 V, supply steps of 20 mV,
// an error-counting window of 10,000 cycles with a 1 %..2 % target band, and a
// regulator that needs 2 us (3000 cycles) to move the supply by one step.
// Voltages are carried as unsigned millivolts in 11 bits (0..2047 mV), which is
// this design's own encoding.
`timescale 1ps/1fs
package dvs_pkg;

  localparam int unsigned BUS_W         = 32;     // data wires on the bus
  localparam int unsigned SHIELD_EVERY  = 4;      // a shield after every 4 wires
  localparam int unsigned VNOM_MV       = 1200;   // nominal supply
  localparam int unsigned VSTEP_MV      = 20;     // one controller step
  localparam int unsigned WINDOW_CYCLES = 10000;  // error counting window, cycles
  localparam int unsigned LO_PERMILLE   = 10;     // 1 % lower bound of the band
  localparam int unsigned HI_PERMILLE   = 20;     // 2 % upper bound of the band
  localparam int unsigned SETTLE_CYCLES = 3000;   // 2 us at 1.5 GHz

  typedef logic [10:0] mv_t;                      // supply voltage in mV

  // Supply change requested by the controller for one window.
  typedef enum logic [1:0] {
    DV_HOLD = 2'd0,   // error rate inside the band: dV = 0
    DV_DOWN = 2'd1,   // error rate below 1 %: dV = -20 mV
    DV_UP   = 2'd2    // error rate above 2 %: dV = +20 mV
  } dv_e;

endpackage
