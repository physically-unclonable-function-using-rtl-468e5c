// Test environment for one wRO-PUF device of a given size and system clock,
// used by the workload testbench. It runs the device through reset, one
// thermometer measurement, one ID sample and a repeat sample, and compares
// the ID and the temperature ID with values it works out from the ring
// timing (same method as the end-to-end testbench: sample n of a pair is
// floor((2n-1)*t2/t1) mod 2, N samples fit in the EN window, the output row
// holds samples N..N-L+1; RO3 edges (2n-1)*t3 inside 2**12 clocks).
// It reports its own check and failure counts and raises done.
module puf_env #(
  parameter int unsigned K         = 8,
  parameter int unsigned L         = 16,
  parameter int unsigned TCLK      = 10000,  // ps
  parameter int unsigned EN_CYCLES = 2,
  parameter string       NAME      = "device"
) (
  output logic done,
  output int   checks,
  output int   failures
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint      WIN          = longint'(EN_CYCLES) * TCLK;
  localparam int unsigned RO_HALF_PS   = 440;
  localparam int unsigned RO_SPREAD_PS = 120;
  localparam int unsigned RO3_HALF_PS  = 1650;
  localparam logic [31:0] SEED         = 32'h5EED_1234;

  logic           clk = 0, rst_n = 0;
  logic           puf_start = 0, temp_start = 0;
  logic           puf_busy, id_valid, temp_busy, temp_valid, temp_ovf;
  logic [K*L-1:0] id, id_first;
  logic [15:0]    temp_id;

  always #(TCLK / 2) clk = ~clk;

  wro_puf_top #(.K(K), .L(L), .EN_CYCLES(EN_CYCLES)) dut (
    .clk, .rst_n, .ro_sel(2'd0),
    .puf_start, .puf_busy, .id_valid, .id,
    .temp_start, .temp_busy, .temp_valid, .temp_ovf, .temp_id
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: %s at %0t", NAME, what, $time);
    end
  endtask

  function automatic longint half_ps(input int unsigned idx);
    logic [31:0] h;
    longint v;
    h = SEED ^ (idx * 32'h9E37_79B9);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    v = RO_HALF_PS + (h % RO_SPREAD_PS);
    return (v / 2) * 2 + (idx % 2);
  endfunction

  logic [K*L-1:0] exp_id;
  int lat;

  initial begin
    done = 0;
    checks = 0;
    failures = 0;
    for (int k = 0; k < K; k++) begin
      longint h1, h2, n_edges;
      h1 = half_ps(2 * k);
      h2 = half_ps(2 * k + 1);
      n_edges = (WIN / h2 + 1) / 2;
      check(n_edges >= L, "EN window holds L samples");
      for (int j = 0; j < L; j++)
        exp_id[(K - 1 - k) * L + j] = 1'(((2 * (n_edges - j) - 1) * h2 / h1) % 2);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (temp_valid);
    check(int'(temp_id) == int'((4096 * longint'(TCLK) / RO3_HALF_PS + 1) / 2), "temperature ID");
    for (int t = 0; t < 2; t++) begin
      @(negedge clk) puf_start = 1;
      @(negedge clk) puf_start = 0;
      lat = 1;
      while (!id_valid) begin
        @(negedge clk);
        lat++;
      end
      check(lat == EN_CYCLES + 2 + 1, "ID latency");
      check(id == exp_id, "device ID");
      if (t == 0) id_first = id;
      else check(id == id_first, "repeat sample");
    end
    $display("%s: K=%0d L=%0d ID bits=%0d, clock %0d ps, ID=%h, temperature ID %0d",
             NAME, K, L, K * L, TCLK, id, temp_id);
    done = 1;
  end
endmodule
