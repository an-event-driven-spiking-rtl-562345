`timescale 1ps/1fs
// cim_pkg: sizes, device values and circuit constants shared by the spiking
// SOT-MRAM compute-in-memory macro.
//
// Array size, MTJ resistance and TMR, the clamp voltages and the two
// capacitors are the values quoted for the macro (128 x 128 cells, 1 MOhm
// low-resistance state, 100 % TMR, V_in,clamp = 300 mV, V_clamp = 400 mV,
// 200 fF). The mirror ratio K_MIRROR, the reference current I_COM and the
// spike width SPIKE_PW_PS are this design's own choices. Analog quantities are
// SI units held in `real`; time is in picoseconds (every file uses a 1 ps time
// unit).
package cim_pkg;
  localparam int N_ROWS = 128;
  localparam int N_COLS = 128;
  localparam int W_BITS = 2;            // bits stored per 3T-2MTJ cell

  typedef logic [W_BITS-1:0] weight_t;  // bit 0: J1, bit 1: J2; 1 = low resistance

  // Device
  localparam real R_LRS    = 1.0e6;     // J1 low-resistance state, ohm
  localparam real TMR      = 1.0;       // R_HRS = R_LRS * (1 + TMR)
  localparam real J2_RATIO = 2.0;       // J2 has twice the resistance of J1

  // Spike modulation unit
  localparam real V_IN_CLAMP = 0.3;     // V_in while the row event is active
  localparam real V_CLAMP    = 0.4;     // V_in at rest, and RBL[1] clamp
  localparam real V_READ     = V_CLAMP - V_IN_CLAMP;

  // Output spike generator
  localparam real C_RT     = 200.0e-15;
  localparam real C_COM    = 200.0e-15;
  localparam real K_MIRROR = 1.0;       // own choice
  localparam real I_COM    = 5.0e-6;    // own choice
  localparam real SPIKE_PW_PS = 50.0;   // own choice: inverter delay of a spike generator

  // Input coding used by the testbenches: 0.2 ns per LSB of an 8-bit input.
  localparam int  IN_BITS   = 8;
  localparam real T_BIT_PS  = 200.0;

  localparam real PS = 1.0e-12;         // seconds per time unit
endpackage
