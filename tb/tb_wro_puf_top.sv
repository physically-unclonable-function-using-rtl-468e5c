// End-to-end testbench of the wRO-PUF device at its default size (12 RO
// pairs of 32 bits, 384-bit ID, 12-bit/16-bit thermometer) and a 50 MHz
// system clock.
//
// The expected ID is worked out here from the ring timing alone: the
// testbench recomputes each ring's time to first rising edge t (the same
// hash of the ring index that the top's parameters define), and then the
// RO pair theory: sample n of a pair is RO1 at RO2's n-th rising edge,
// floor((2n-1)*t2/t1) mod 2, N samples fit in the EN window
// ((2n-1)*t2 < window), and the output row holds samples N..N-L+1. The
// expected temperature ID is the number of RO3 rising edges, (2n-1)*t3,
// that fit in 4096 system clocks.
//
// Mechanisms exercised and counted: ID sampling (EN pulse), ID repeated
// over several samples, start ignored while busy, each ring delay setting,
// thermometer measurement after reset and on request, and a slower RO3
// giving a smaller count.
module tb_wro_puf_top;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned K    = 12;
  localparam int unsigned L    = 32;
  localparam int unsigned TCLK = 20000;   // 50 MHz
  localparam int unsigned WIN  = 2 * TCLK; // EN_CYCLES = 2
  // ring timing of the top's defaults
  localparam int unsigned RO_HALF_PS   = 440;
  localparam int unsigned RO_SPREAD_PS = 120;
  localparam int unsigned RO3_HALF_PS  = 1650;
  localparam int unsigned SEL_STEP_PS  = 64;
  localparam logic [31:0] SEED         = 32'h5EED_1234;

  logic           clk = 0, rst_n = 0;
  logic [1:0]     ro_sel = 0;
  logic           puf_start = 0, temp_start = 0;
  logic           puf_busy, id_valid, temp_busy, temp_valid, temp_ovf;
  logic [K*L-1:0] id;
  logic [15:0]    temp_id;
  int checks = 0, failures = 0;

  always #(TCLK / 2) clk = ~clk;

  wro_puf_top dut (
    .clk, .rst_n, .ro_sel,
    .puf_start, .puf_busy, .id_valid, .id,
    .temp_start, .temp_busy, .temp_valid, .temp_ovf, .temp_id
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic longint half_ps(input int unsigned idx, input logic [1:0] sel);
    logic [31:0] h;
    longint v;
    h = SEED ^ (idx * 32'h9E37_79B9);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    v = RO_HALF_PS + (h % RO_SPREAD_PS);
    v = (v / 2) * 2 + (idx % 2);
    return v + sel * SEL_STEP_PS;
  endfunction

  // expected ID and the mask of bits the EN window defines
  logic [K*L-1:0] exp_id, exp_mask;
  task automatic expected(input logic [1:0] sel);
    for (int k = 0; k < K; k++) begin
      longint h1, h2, n_edges;
      h1 = half_ps(2 * k, sel);
      h2 = half_ps(2 * k + 1, sel);
      n_edges = (WIN / h2 + 1) / 2;        // (2n-1)*h2 < WIN, never equal
      check(WIN % h2 != 0 || (WIN / h2) % 2 == 0, "no RO2 edge on the EN edge");
      for (int j = 0; j < L; j++) begin
        longint n = n_edges - j;
        int b = (K - 1 - k) * L + j;       // ID_1 (pair 0) in the top bits
        exp_mask[b] = (n >= 1);
        exp_id[b]   = (n >= 1) ? 1'(((2 * n - 1) * h2 / h1) % 2) : 1'b0;
      end
    end
  endtask

  function automatic int exp_count(input longint h3);
    longint w = 4096 * longint'(TCLK);
    return int'((w / h3 + 1) / 2);
  endfunction

  // mechanism counters
  int n_samples = 0, n_repeat_same = 0, n_busy_ignored = 0, n_sel = 0;
  int n_temp = 0, n_temp_slower = 0;

  int busy_cycles = 0;
  always @(posedge clk) if (puf_busy) busy_cycles++;

  task automatic sample_id(output int lat);
    @(negedge clk) puf_start = 1;
    @(negedge clk) puf_start = 0;
    lat = 1;
    while (!id_valid) begin
      @(negedge clk);
      lat++;
    end
  endtask

  logic [K*L-1:0] id0, id_first;
  int lat, ones, pairs_diff;
  real diff;

  initial begin
    repeat (3) @(negedge clk);
    check(!id_valid && !puf_busy, "idle in reset");
    rst_n = 1;

    // thermometer runs once after reset
    wait (temp_valid);
    check(int'(temp_id) == exp_count(RO3_HALF_PS), "temperature ID after reset");
    $display("temperature ID %0d (expected %0d)", temp_id, exp_count(RO3_HALF_PS));
    n_temp++;

    // PUF ID at the default delay setting
    expected(2'd0);
    check(exp_mask == '1, "EN window covers all 32 samples of every pair");
    busy_cycles = 0;
    sample_id(lat);
    n_samples++;
    check(lat == 2 + 2 + 1, "id_valid 4 clocks after start");
    check(busy_cycles == 4, "busy for 2 EN clocks and 2 settle clocks");
    check(id == exp_id, "device ID");
    for (int k = 0; k < K; k++)
      check(id[(K-k)*L-1 -: L] == exp_id[(K-k)*L-1 -: L], "piece ID_k");
    id_first = id;
    $display("ID = %h", id);

    // repeated sampling (EN=0/EN=1 again) gives the same ID in this model
    for (int t = 0; t < 4; t++) begin
      sample_id(lat);
      n_samples++;
      check(id == id_first, "repeat sample");
      if (id == id_first) n_repeat_same++;
    end

    // start while busy is ignored: one EN pulse only
    busy_cycles = 0;
    @(negedge clk) puf_start = 1;
    @(negedge clk) puf_start = 1;
    @(negedge clk) puf_start = 0;
    wait (id_valid);
    @(negedge clk);
    check(busy_cycles == 4, "second start while busy ignored");
    if (busy_cycles == 4) n_busy_ignored++;
    check(id == id_first, "ID after ignored start");

    // delay settings of the rings
    for (int s = 1; s < 4; s++) begin
      ro_sel = 2'(s);
      expected(2'(s));
      sample_id(lat);
      n_samples++;
      check((id & exp_mask) == (exp_id & exp_mask), "ID at delay setting");
      check(id != id_first, "delay setting changes the ID");
      if (id != id_first) n_sel++;
    end

    // slower RO3 (what a temperature rise does): smaller count
    @(negedge clk) temp_start = 1;
    @(negedge clk) temp_start = 0;
    wait (temp_valid);
    check(int'(temp_id) == exp_count(RO3_HALF_PS + 3 * SEL_STEP_PS), "temperature ID, slow RO3");
    check(!temp_ovf, "no counter overflow");
    if (int'(temp_id) < exp_count(RO3_HALF_PS)) n_temp_slower++;
    n_temp++;

    // figures of merit of the default-setting ID (printed only)
    ones = $countones(id_first);
    $display("uniformity %0d/%0d ones", ones, K * L);
    pairs_diff = 0;
    for (int i = 0; i < K - 1; i++)
      for (int j = i + 1; j < K; j++)
        pairs_diff += $countones(id_first[(K-i)*L-1 -: L] ^ id_first[(K-j)*L-1 -: L]);
    diff = 400.0 * pairs_diff / (L * K * K);
    $display("diffusiveness %0.1f %%", diff);

    $display("mechanisms: samples=%0d repeat_same=%0d busy_ignored=%0d sel_changes=%0d temp=%0d temp_slower=%0d",
             n_samples, n_repeat_same, n_busy_ignored, n_sel, n_temp, n_temp_slower);
    check(n_samples > 0 && n_repeat_same > 0 && n_busy_ignored > 0 && n_sel > 0 &&
          n_temp > 1 && n_temp_slower > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
