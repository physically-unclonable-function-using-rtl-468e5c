// Testbench of the basic wRO-PUF unit. The testbench itself draws RO1 and
// RO2 as ideal square waves started together (no ring model involved), then
// checks the output row against samples it computes from the waveforms:
// sample n (n = 1, 2, ...) is RO1 at RO2's n-th rising edge, time
// (2n-1)*H2, which is floor((2n-1)*H2/H1) mod 2, and out[j] must equal
// sample N-j after N edges. Cases: t1/t2 = 1.2 and 1.1, t1 < t2 and
// random data. It also checks that the outputs change only on the system
// clock.
module tb_wro_unit;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned L = 32;

  logic         clk = 0, ro1 = 0, ro2 = 0;
  logic [L-1:0] out;
  int checks = 0, failures = 0;

  wro_unit #(.L(L)) dut (.clk(clk), .ro1(ro1), .ro2(ro2), .out(out));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic clk_pulse();
    #1000 clk = 1;
    #1000 clk = 0;
  endtask

  function automatic bit sample(input longint h1, input longint h2, input int n);
    return bit'(((2 * n - 1) * h2 / h1) % 2);
  endfunction

  // Run two square waves with half periods h1 (RO1) and h2 (RO2) for
  // nedges rising edges of RO2, then compare after a system clock.
  task automatic run_pair(input longint h1, input longint h2, input int nedges, input string name);
    longint t, next1, next2;
    int n;
    logic [L-1:0] exp_out, held_row;
    ro1 = 0; ro2 = 0;
    #100;
    t = 0; next1 = h1; next2 = h2; n = 0;
    while (n < nedges) begin
      if (next1 < next2) begin
        #(next1 - t); t = next1; ro1 = ~ro1; next1 += h1;
      end else begin
        #(next2 - t); t = next2; ro2 = ~ro2; next2 += h2;
        if (ro2) n++;
      end
    end
    #1; ro1 = 0; #1; ro2 = 0;   // stop the rings (falling edges only)
    held_row = out;
    check(out == held_row, {name, ": output row holds before the clock"});
    clk_pulse();
    for (int j = 0; j < L; j++) exp_out[j] = sample(h1, h2, nedges - j);
    check(out == exp_out, {name, ": captured waveform"});
    if (out != exp_out) $display("  got %b\n  exp %b", out, exp_out);
  endtask

  logic [L-1:0] ref_sr;
  logic [L-1:0] first;

  initial begin
    clk_pulse();
    // t1/t2 = 1.2, first 32 samples: initial bit 0 since t1 > t2
    run_pair(600, 500, L, "t1/t2=1.2");
    check(out[L-1] == 1'b0, "t1>t2 starts with 0");
    first = out;
    // t1/t2 = 1.1 (times 1.1 and 1 kept off each other: 1101 vs 1001)
    run_pair(1101, 1001, L, "t1/t2=1.1");
    check(out != first, "different ratio, different pattern");
    // t1 < t2: the first sample is 1
    run_pair(451, 500, L, "t1<t2");
    check(out[L-1] == 1'b1, "t1<t2 starts with 1");
    // more edges than stages: the row holds the last L samples
    run_pair(600, 500, L + 7, "longer window");

    // random data, one RO2 edge at a time, checking the clock boundary
    ref_sr = out;
    for (int i = 0; i < 200; i++) begin
      logic [L-1:0] held;
      ro1 = 1'($urandom);
      #100 ro2 = 1;
      ref_sr = {ref_sr[L-2:0], ro1};
      #100 ro2 = 0;
      held = out;
      #10;
      check(out == held, "no change between system clocks");
      if (i % 3 == 0) begin
        clk_pulse();
        check(out == ref_sr, "random shift");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
