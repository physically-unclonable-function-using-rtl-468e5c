// Basic unit of the waveform ring-oscillator PUF (one RO pair).
//
// RO1's output is the data, RO2's output is the clock: an L-stage shift
// register clocked by the rising edges of RO2 shifts in the level of RO1, so
// after n edges stage j holds RO1 as sampled on RO2 edge n-j (stage 0 is the
// newest sample). Because both rings run near 1 GHz, far above the system
// clock, a second row of L flip-flops on the system clock registers the
// shift-register stages as out[0]..out[L-1]; out[j] is the stage j tap.
// This is the circuit of the paper's basic-unit schematic, drawn there for
// L = 8. The shift register stops when EN falls, because RO2 then produces
// no more rising edges, and the output row then settles one system clock
// later to the waveform captured in the EN=1 window.
//
// Neither row has a reset, as in the schematic: the shift register is
// fully overwritten by any EN window holding at least L edges of RO2, and
// the output row by the next system clock. Outputs are meaningful only
// after such a window (the sampling controller's id_valid).
//
// Ports: clk (system clock), ro1 (sampled ring), ro2 (sampling ring),
// out (L-bit ID piece, registered on clk).
module wro_unit #(
  parameter int unsigned L = wro_pkg::L_RO_DEF  // ID bits from this pair
) (
  input  logic         clk,
  input  logic         ro1,
  input  logic         ro2,
  output logic [L-1:0] out
);
  logic [L-1:0] shreg;

  // RO2-clocked shift register: stage 0 takes RO1, stage j takes stage j-1.
  always_ff @(posedge ro2) shreg <= {shreg[L-2:0], ro1};

  // Output flip-flops on the system clock.
  always_ff @(posedge clk) out <= shreg;

  initial assert (L >= 2) else $error("wro_unit: L must be at least 2");

endmodule
