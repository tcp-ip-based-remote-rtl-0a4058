// watchdog: hardware watchdog timer, held off during a firmware upgrade.
//
// A counter runs on every clock. `kick` restarts it; when it reaches TIMEOUT cycles
// without a kick, wdt_reset pulses for one clock and the count restarts. While `hold`
// is high (an upgrade session is erasing or writing flash, which can take many
// seconds) the counter is kept at zero, so the long flash operations cannot trip it,
// and it restarts from zero when the session ends. That the watchdog must be adjusted
// during image writing comes from the field experience with the upgrade; holding the
// count, and the 1 s default (50 000 000 cycles of a 50 MHz clock), are this design's
// choices.
module watchdog #(
  parameter int unsigned TIMEOUT = 50_000_000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic kick,
  input  logic hold,
  output logic wdt_reset
);
  logic [31:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      wdt_reset <= 1'b0;
    end else begin
      wdt_reset <= 1'b0;
      if (hold || kick) begin
        cnt <= '0;
      end else if (cnt == TIMEOUT - 1) begin
        cnt       <= '0;
        wdt_reset <= 1'b1;
      end else begin
        cnt <= cnt + 32'd1;
      end
    end
  end
endmodule
