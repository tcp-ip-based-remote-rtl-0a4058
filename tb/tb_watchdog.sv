// tb_watchdog: self-checking test of the watchdog timer.
// With TIMEOUT = 100 it checks that an unkicked watchdog fires exactly every 100
// clocks, that kicks and hold keep it quiet, and that the count restarts after hold.
// The hold during an upgrade follows the published advice to adjust the watchdog while
// the flash is written; the timeout value is shortened here from its default.
module tb_watchdog;
  localparam int unsigned T = 100;
  logic clk = 1'b0, rst_n = 1'b0, kick = 1'b0, hold = 1'b0, wdt_reset;
  int checks = 0, failures = 0;
  int fires;

  watchdog #(.TIMEOUT(T)) dut (.clk, .rst_n, .kick, .hold, .wdt_reset);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // count cycles until the first pulse, up to limit
  task automatic cycles_to_fire(output int n, input int limit);
    n = 0;
    while (n < limit) begin
      @(posedge clk); #1; n++;
      if (wdt_reset) return;
    end
    n = -1;
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // free running: the pulse is seen T clocks after reset release
    cycles_to_fire(n, 1000); expect_eq("first timeout", n, T);
    cycles_to_fire(n, 1000); expect_eq("period", n, T);
    // kicking every 50 cycles: never fires
    fires = 0;
    for (int i = 0; i < 1000; i++) begin
      kick = (i % 50 == 0);
      @(posedge clk); #1;
      if (wdt_reset) fires++;
    end
    kick = 1'b0;
    expect_eq("kicked", fires, 0);
    // hold for 5000 cycles: never fires
    hold = 1'b1; fires = 0;
    repeat (5000) begin @(posedge clk); #1; if (wdt_reset) fires++; end
    expect_eq("held", fires, 0);
    hold = 1'b0;
    cycles_to_fire(n, 1000); expect_eq("after hold", n, T);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
