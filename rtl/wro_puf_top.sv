// Top level of the waveform ring-oscillator PUF (wRO-PUF) with its
// ring-oscillator thermometer.
//
// The device ID is made of K RO pairs. In each pair, ring RO2 samples ring
// RO1 from the moment both are enabled: the time each ring needs to its
// first rising edge, and hence the pattern RO2 sees, depends on process
// variation of that pair's gates and wires. Pair k's first L samples form
// the piece ID_k, and the device ID is the concatenation
//     id = {ID_1, ID_2, ..., ID_K}       (ID_1 in the most significant bits),
// L*K bits long (384 with the default twelve 32-bit pairs). A third ring,
// RO3, with its two counters forms the thermometer whose count, temp_id,
// is read next to the ID so that a changed ID can be matched to a changed
// temperature.
//
// Structure: sample_ctrl drives one EN shared by all 2K pair rings;
// K wro_unit instances (shift register on RO2, output flip-flops on clk)
// capture the pieces; thermometer gates RO3 and counts it.
//
// The rings are behavioural models (ring_osc), so this top simulates the
// whole device but is not itself synthesizable; on an FPGA each ring_osc is
// a NAND plus inverting LUTs. Each ring gets its own time to first rising
// edge, standing for process variation: RO_HALF_PS plus a fixed
// pseudo-random offset below RO_SPREAD_PS, drawn from a hash of the ring's
// index. RO1 half periods are made even and RO2 half periods odd (in ps),
// which keeps every RO1 transition off every RO2 rising edge, so the
// modelled samples are never a tie. ro_sel selects the delay setting of all
// pair rings and of RO3 alike.
//
// Ports: clk (system clock, 50 MHz in the reference setup), rst_n
// (asynchronous, active low); puf_start/puf_busy/id_valid/id for the PUF
// (Output2); temp_start/temp_busy/temp_valid/temp_ovf/temp_id for the
// thermometer (Output1); ro_sel (ring delay select).
// Timing: id_valid rises EN_CYCLES+SETTLE_CYCLES clocks after puf_start is
// accepted; temp_valid 2**WIN_BITS+3 clocks after temp_start (and once after
// reset).
module wro_puf_top
  import wro_pkg::*;
#(
  parameter int unsigned K             = K_PAIRS_DEF,   // RO pairs
  parameter int unsigned L             = L_RO_DEF,      // bits per pair
  parameter int unsigned EN_CYCLES     = EN_CYCLES_DEF,
  parameter int unsigned SETTLE_CYCLES = SETTLE_CYCLES_DEF,
  parameter int unsigned WIN_BITS      = WIN_BITS_DEF,
  parameter int unsigned CNT_BITS      = CNT_BITS_DEF,
  parameter int unsigned RO_HALF_PS    = 440,   // pair rings: ~1 GHz
  parameter int unsigned RO_SPREAD_PS  = 120,
  parameter int unsigned RO3_HALF_PS   = 1650,  // RO3: ~300 MHz
  parameter int unsigned SEL_STEP_PS   = 64,
  parameter int unsigned SEED          = 32'h5EED_1234
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          ro_sel,
  // PUF ID (Output2)
  input  logic                puf_start,
  output logic                puf_busy,
  output logic                id_valid,
  output logic [K*L-1:0]      id,
  // thermometer (Output1)
  input  logic                temp_start,
  output logic                temp_busy,
  output logic                temp_valid,
  output logic                temp_ovf,
  output logic [CNT_BITS-1:0] temp_id
);

  // Half period of ring number idx (0..2K-1: RO1 of pair k is 2k, RO2 is
  // 2k+1). A small integer hash spreads the values over RO_SPREAD_PS.
  function automatic int unsigned ring_half_ps(input int unsigned idx);
    logic [31:0] h;
    h = SEED ^ (idx * 32'h9E37_79B9);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    ring_half_ps = RO_HALF_PS + (h % RO_SPREAD_PS);
    // RO1 even, RO2 odd
    ring_half_ps = (ring_half_ps & ~32'd1) | (idx & 32'd1);
  endfunction

  logic en;

  sample_ctrl #(
    .EN_CYCLES    (EN_CYCLES),
    .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (puf_start),
    .en      (en),
    .busy    (puf_busy),
    .id_valid(id_valid)
  );

  for (genvar k = 0; k < K; k++) begin : g_pair
    logic         ro1, ro2;
    logic [L-1:0] piece;

    ring_osc #(.HALF_PS(ring_half_ps(2*k)),   .SEL_STEP_PS(SEL_STEP_PS))
      u_ro1 (.en(en), .sel(ro_sel), .ro_out(ro1));
    ring_osc #(.HALF_PS(ring_half_ps(2*k+1)), .SEL_STEP_PS(SEL_STEP_PS))
      u_ro2 (.en(en), .sel(ro_sel), .ro_out(ro2));

    wro_unit #(.L(L)) u_unit (.clk(clk), .ro1(ro1), .ro2(ro2), .out(piece));

    // ID = {ID_1, ..., ID_K}: pair 0 (ID_1) in the top bits.
    assign id[(K-k)*L-1 -: L] = piece;
  end

  logic ro3, ro3_en;

  ring_osc #(.HALF_PS(RO3_HALF_PS), .SEL_STEP_PS(SEL_STEP_PS))
    u_ro3 (.en(ro3_en), .sel(ro_sel), .ro_out(ro3));

  thermometer #(
    .WIN_BITS(WIN_BITS),
    .CNT_BITS(CNT_BITS)
  ) u_thermo (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (temp_start),
    .ro3       (ro3),
    .ro3_en    (ro3_en),
    .temp_id   (temp_id),
    .temp_ovf  (temp_ovf),
    .temp_valid(temp_valid),
    .busy      (temp_busy)
  );

  initial assert (SEL_STEP_PS % 2 == 0)
    else $error("wro_puf_top: SEL_STEP_PS must be even to keep ring parities");

endmodule
