// Testbench of the ring-oscillator model: held at 0 while disabled, first
// rising edge HALF_PS after enable, period 2*HALF_PS, delay select adds
// sel*SEL_STEP_PS to the half period, no rising edge after disable.
module tb_ring_osc;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned H    = 500;
  localparam int unsigned STEP = 64;

  logic       en;
  logic [1:0] sel;
  logic       ro;
  int checks = 0, failures = 0;

  ring_osc #(.HALF_PS(H), .SEL_STEP_PS(STEP)) dut (.en(en), .sel(sel), .ro_out(ro));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int     rises;
  longint last_rise;
  always @(posedge ro) begin
    rises++;
    last_rise = $time;
  end

  task automatic run_case(input logic [1:0] s);
    longint t0;
    int unsigned h;
    h = H + s * STEP;
    sel = s;
    en  = 0;
    #5000;
    check(ro == 0, "held at 0 while disabled");
    rises = 0;
    en = 1;
    t0 = $time;
    #(h - 1);
    check(ro == 0, "still 0 just before first edge");
    #2;
    check(ro == 1, "1 just after first edge");
    check(rises == 1 && last_rise == t0 + h, "first rising edge at HALF");
    // ten more periods
    #(20 * h);
    check(rises == 11, "one rising edge per 2*HALF");
    check(last_rise == t0 + 21 * h, "edge position after 10 periods");
    // disable: output returns to 0, no further rising edge
    #(h / 2);
    en = 0;
    rises = 0;
    #(3 * h);
    check(ro == 0, "back to 0 after disable");
    #(10 * h);
    check(rises == 0, "no rising edge while disabled");
  endtask

  initial begin
    en = 0;
    sel = 0;
    rises = 0;
    for (int s = 0; s < 4; s++) run_case(2'(s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
