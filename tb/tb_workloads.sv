// Workload testbench: the device configurations of the reference
// measurements other than the default one (12 pairs x 32 bits at 50 MHz,
// covered by the end-to-end testbench):
//   - 8 pairs x 16 bits (128-bit ID) at a 100 MHz system clock,
//   - 8 pairs x 32 bits (256-bit ID, 16 rings, 512 flip-flops) at 50 MHz,
//   - 12 pairs x 32 bits at 100 MHz, which needs a 4-clock EN window
//     because two 10 ns clocks hold only about 20 RO2 edges.
module tb_workloads;
  timeunit 1ps;
  timeprecision 1ps;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;
  int   checks, failures;

  puf_env #(.K(8),  .L(16), .TCLK(10000), .EN_CYCLES(2), .NAME("8x16 @100MHz"))
    e0 (.done(d0), .checks(c0), .failures(f0));
  puf_env #(.K(8),  .L(32), .TCLK(20000), .EN_CYCLES(2), .NAME("8x32 @50MHz"))
    e1 (.done(d1), .checks(c1), .failures(f1));
  puf_env #(.K(12), .L(32), .TCLK(10000), .EN_CYCLES(4), .NAME("12x32 @100MHz"))
    e2 (.done(d2), .checks(c2), .failures(f2));

  initial begin
    wait (d0 && d1 && d2);
    checks   = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
