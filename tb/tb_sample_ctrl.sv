// Testbench of the sampling controller: EN high for exactly EN_CYCLES
// clocks after the accepting edge, id_valid EN_CYCLES+SETTLE_CYCLES clocks
// after it, busy over that span, start ignored while busy, id_valid
// cleared by the next start. Two parameter sets: the defaults (2, 2) and
// (5, 3).
module tb_sample_ctrl;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, rst_n = 0;
  logic start_a = 0, start_b = 0;
  logic en_a, busy_a, v_a, en_b, busy_b, v_b;
  int checks = 0, failures = 0;

  always #10000 clk = ~clk;

  sample_ctrl dut_a (.clk, .rst_n, .start(start_a), .en(en_a), .busy(busy_a), .id_valid(v_a));
  sample_ctrl #(.EN_CYCLES(5), .SETTLE_CYCLES(3))
    dut_b (.clk, .rst_n, .start(start_b), .en(en_b), .busy(busy_b), .id_valid(v_b));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Pulse start for one clock, then watch en/busy/id_valid cycle by cycle.
  // poke_busy: also pulse start again while busy (must be ignored).
  task automatic run(input bit which, input int enc, input int sc, input bit poke_busy);
    int en_cnt, busy_cnt, lat;
    bit seen_valid;
    @(negedge clk);
    if (which) start_b = 1; else start_a = 1;
    @(negedge clk);
    start_a = 0; start_b = 0;
    en_cnt = 0; busy_cnt = 0; lat = 0; seen_valid = 0;
    for (int c = 1; c <= enc + sc + 4; c++) begin
      logic e, b, v;
      e = which ? en_b : en_a;
      b = which ? busy_b : busy_a;
      v = which ? v_b : v_a;
      if (e) en_cnt++;
      if (b) busy_cnt++;
      if (c <= enc) check(e == 1, "en high in window");
      else          check(e == 0, "en low after window");
      if (v && !seen_valid) begin
        seen_valid = 1;
        lat = c;
      end
      if (c == 2 && poke_busy) begin
        if (which) start_b = 1; else start_a = 1;
      end
      @(negedge clk);
      start_a = 0; start_b = 0;
    end
    check(en_cnt == enc, "EN_CYCLES clocks of en");
    check(busy_cnt == enc + sc, "busy span");
    check(seen_valid && lat == enc + sc + 1, "id_valid latency");
    check((which ? v_b : v_a) == 1, "id_valid holds");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    check(en_a == 0 && v_a == 0 && busy_a == 0, "reset state");
    rst_n = 1;
    @(negedge clk);
    run(0, 2, 2, 0);
    run(0, 2, 2, 1);
    run(1, 5, 3, 0);
    run(1, 5, 3, 1);
    // next start clears id_valid on the accepting edge
    @(negedge clk) start_a = 1;
    @(negedge clk) start_a = 0;
    check(v_a == 0 && en_a == 1, "start clears id_valid and raises en");
    repeat (6) @(negedge clk);
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
