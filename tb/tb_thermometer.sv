// Testbench of the thermometer. The testbench plays RO3: a square wave with
// a chosen period that runs only while ro3_en is high, counting its own
// rising edges. Checks: the window lasts exactly 2**WIN_BITS clocks, the
// temperature ID equals the number of edges the testbench made, a slower
// ring (higher temperature) gives a smaller count, a measurement runs after
// reset and on each start, and a counter of reduced width saturates and
// flags temp_ovf.
module tb_thermometer;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned TCLK = 20000;   // 50 MHz

  logic clk = 0, rst_n = 0, start = 0;
  int checks = 0, failures = 0;
  always #(TCLK / 2) clk = ~clk;

  // full-size instance (12-bit window, 16-bit counter)
  logic        ro3 = 0, ro3_en;
  logic [15:0] temp_id;
  logic        temp_ovf, temp_valid, busy;
  thermometer dut (.clk, .rst_n, .start, .ro3, .ro3_en, .temp_id, .temp_ovf, .temp_valid, .busy);

  // small instance to reach saturation: 4-bit window, 6-bit counter
  logic       ro3s = 0, ro3s_en;
  logic [5:0] tid_s;
  logic       ovf_s, val_s, busy_s;
  thermometer #(.WIN_BITS(4), .CNT_BITS(6)) dut_s (.clk, .rst_n, .start, .ro3(ro3s), .ro3_en(ro3s_en),
    .temp_id(tid_s), .temp_ovf(ovf_s), .temp_valid(val_s), .busy(busy_s));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // test-side RO3: half period set per measurement
  int unsigned half_ps = 1650;
  int          edges = 0;
  int          edges_s = 0;
  always begin
    wait (ro3_en);
    while (ro3_en) begin
      #(half_ps);
      if (ro3_en) begin
        ro3 = ~ro3;
        if (ro3) edges++;
      end
    end
    ro3 = 0;
  end
  always begin
    wait (ro3s_en);
    while (ro3s_en) begin
      #(777);
      if (ro3s_en) begin
        ro3s = ~ro3s;
        if (ro3s) edges_s++;
      end
    end
    ro3s = 0;
  end

  int win_cycles = 0;
  always @(posedge clk) if (ro3_en) win_cycles++;

  task automatic measure(input bit use_start, output int count, output int lat);
    edges = 0; edges_s = 0; win_cycles = 0; lat = 0;
    if (use_start) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
    end
    while (!temp_valid) begin
      @(negedge clk);
      lat++;
    end
    count = temp_id;
    check(win_cycles == 4096, "window of 2**12 clocks");
    check(int'(temp_id) == edges, "count equals RO3 edges");
    check(!temp_ovf, "no overflow at full size");
    if (int'(temp_id) != edges) $display("  got %0d exp %0d", temp_id, edges);
  endtask

  int c_cold, c_hot, c_again, lat;

  initial begin
    repeat (2) @(negedge clk);
    check(!ro3_en && !temp_valid, "idle in reset");
    rst_n = 1;
    // first measurement after reset, ~303 MHz ring
    measure(0, c_cold, lat);
    check(c_cold > 24000 && c_cold < 25000, "count near 4096*20ns/3.3ns");
    // small instance has finished long ago: 16 clocks * 20 ns / 1.554 ns > 63
    check(val_s && ovf_s && tid_s == 6'h3F, "small counter saturates");
    check(edges_s > 63, "small ring ran past the counter range");
    // slower ring (hotter): smaller count; measured on start
    half_ps = 1750;
    measure(1, c_hot, lat);
    check(c_hot < c_cold, "slower ring gives smaller count");
    if (lat != 4096 + 3 + 1) $display("  lat %0d", lat);
    check(lat == 4096 + 3 + 1, "latency 2**WIN_BITS+3 clocks after start");
    // same ring again: same count (noise-free model)
    half_ps = 1650;
    measure(1, c_again, lat);
    check(c_again == c_cold, "repeatable");
    // start ignored while busy
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (10) @(negedge clk);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (temp_valid);
    @(negedge clk);
    check(!busy && temp_id == 16'(c_cold), "start while busy ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
