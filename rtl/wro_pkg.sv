// Shared constants and types of the waveform ring-oscillator PUF (wRO-PUF).
//
// The device ID is built from K ring-oscillator pairs, each delivering an
// L-bit piece ID_k, so the ID is L*K bits long. The defaults are the
// twelve 32-bit pairs (384-bit ID) used on the two Spartan devices; the
// Cyclone V build used eight 16-bit pairs. The thermometer's counter widths
// (12-bit window counter, 16-bit RO3 counter) are the ones drawn in the
// thermometer schematic. Everything else here (controller states, number
// of EN cycles) is this design's own choice.
package wro_pkg;

  timeunit 1ps;
  timeprecision 1ps;

  // Number of RO pairs and bits per pair (ID length L*K).
  localparam int unsigned K_PAIRS_DEF  = 12;
  localparam int unsigned L_RO_DEF     = 32;

  // Thermometer: system-clock window counter and RO3 event counter widths.
  localparam int unsigned WIN_BITS_DEF = 12;
  localparam int unsigned CNT_BITS_DEF = 16;

  // Sampling controller: system clocks with EN=1 per sample, and clocks to
  // wait after EN falls before the output flip-flops are declared valid.
  localparam int unsigned EN_CYCLES_DEF    = 2;
  localparam int unsigned SETTLE_CYCLES_DEF = 2;

  // States of the sampling controller.
  typedef enum logic [1:0] {
    SMP_IDLE,    // EN=0, rings stopped and held at 0
    SMP_RUN,     // EN=1, rings oscillate, RO2 clocks the shift registers
    SMP_SETTLE   // EN=0 again, waiting for the output flip-flops
  } smp_state_e;

  // States of the thermometer.
  typedef enum logic [1:0] {
    THM_CLEAR,   // RO3 counter held cleared, RO3 stopped
    THM_WINDOW,  // RO3 runs for 2**WIN_BITS system clocks
    THM_SETTLE,  // RO3 stopped, counter given time to come to rest
    THM_IDLE     // result held
  } thm_state_e;

endpackage
