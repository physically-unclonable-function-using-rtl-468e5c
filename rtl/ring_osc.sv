// Behavioural model of one ring oscillator (RO) of the wRO-PUF. Not
// synthesizable: on an FPGA the ring is a NAND and a chain of inverting LUTs
// closed into a loop, which no RTL can describe as a circuit.
//
// How it behaves: while EN is 0 the NAND holds the ring still and the output
// is 0. When EN rises the ring starts; the output first rises HALF_PS after
// EN and then toggles every HALF_PS, a period of 2*HALF_PS. HALF_PS is the
// "time to the first rising edge" t that differs from ring to ring with
// process variation; it is a parameter so that each instance can be given
// its own. With the first-rising-edge time taken as the half period, sampling
// one ring by another reproduces the beat patterns of two rings whose
// t1/t2 is 1.2 or 1.1.
//
// Delay select: sel adds sel*SEL_STEP_PS to the half period, standing for
// the multiplexer that chooses between inverter chains of different length
// (the selectable-delay ring). The number of settings and the step are this
// model's choice.
//
// Timing detail of the model: when EN falls the output is forced to 0 at
// the ring's next scheduled transition (at most HALF_PS later) rather than
// at once; the ring then stays at 0 until EN rises again. It never produces
// a rising edge after EN has fallen.
//
// Ports: en (ring enable, NAND input), sel (delay select), ro_out (ring
// output).
module ring_osc #(
  parameter int unsigned HALF_PS     = 500,  // time to first rising edge, ps
  parameter int unsigned SEL_STEP_PS = 64    // extra half-period per sel step, ps
) (
  input  logic       en,
  input  logic [1:0] sel,
  output logic       ro_out
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned D0 = HALF_PS;
  localparam int unsigned D1 = HALF_PS + 1 * SEL_STEP_PS;
  localparam int unsigned D2 = HALF_PS + 2 * SEL_STEP_PS;
  localparam int unsigned D3 = HALF_PS + 3 * SEL_STEP_PS;

  initial assert (HALF_PS > 0) else $error("ring_osc: HALF_PS must be positive");

  always begin
    ro_out = 1'b0;
    wait (en);
    while (en) begin
      case (sel)
        2'd0:    #(D0);
        2'd1:    #(D1);
        2'd2:    #(D2);
        default: #(D3);
      endcase
      if (en) ro_out = ~ro_out;
    end
  end

endmodule
