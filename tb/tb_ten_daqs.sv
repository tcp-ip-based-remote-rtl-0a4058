// tb_ten_daqs: ten RPC-DAQ boards upgraded at the same time, as on the test bench.
//
// Ten copies of the top, each with its own flash, remote-update model and server
// thread, run one upgrade each in parallel. Board i receives an image of a different
// size into slot (i mod 3) + 1, records it with set-image and reloads the factory
// image, which must then boot the new image. The LEDs of every board must then show
// that image's pattern (image 1: 01, image 2: 10, image 3: 11). Watchdog timeout is
// shortened; every other parameter of the top is at its default.
//
// Timing: 10 ns clock. The flash and remote-update models run with short delays (flash
// programming 2 to 4 cycles per word, differing between boards, so the boards drift
// apart; reload 1000 cycles), and a watchdog stops the run with a failure if the boards have not all finished.
// The count of ten boards upgraded together follows the original test bench; the
// image sizes, slots and the server's behaviour are choices of this testbench.
module tb_ten_daqs;
  import rfu_pkg::*;
  localparam int N = 10;

  logic clk = 1'b0;
  int checks = 0, failures = 0;
  bit finished [N];

  always #5 clk = ~clk;

  task automatic expect_eq(string what, int board, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL board %0d %s: got %h expected %h", board, what, got, exp);
    end
  endtask

  for (genvar g = 0; g < N; g++) begin : board
    logic rst_n, sock_open = 1'b0;
    logic rx_valid, rx_ready, tx_valid, tx_last, tx_ready, sock_close;
    logic [15:0] rx_data, tx_data;
    logic fl_req_valid, fl_req_ready, fl_rsp_valid;
    flash_req_t fl_req;
    flash_rsp_t fl_rsp;
    logic cmd_set_image = 1'b0, cmd_reconfig = 1'b0, cmd_done, cmd_ok;
    logic [1:0] cmd_img = '0;
    logic factory_mode, config_error;
    logic [1:0] app_image, boot_image;
    logic [22:0] reconfig_addr, cfg_addr;
    logic [15:0] cfg_data;
    logic reconfig_trigger, wdt_reset, led1, led2, rfu_busy, rfu_done_ok, rfu_done_fail;

    rpc_daq_rfu_top #(.WDT_TIMEOUT(5000)) dut (
      .clk, .rst_n, .sock_open, .rx_valid, .rx_data, .rx_ready,
      .tx_valid, .tx_data, .tx_last, .tx_ready, .sock_close,
      .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
      .cmd_set_image, .cmd_reconfig, .cmd_img, .cmd_done, .cmd_ok,
      .factory_mode, .config_error, .app_image, .reconfig_addr, .reconfig_trigger,
      .wdt_kick(1'b1), .wdt_reset, .led1, .led2,
      .rfu_busy, .rfu_done_ok, .rfu_done_fail, .boot_image
    );
    epcs64_model #(.DELAY_READ(2), .DELAY_PROG(2 + g % 3), .DELAY_ERASE(40)) u_flash (
      .clk, .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp, .cfg_addr, .cfg_data
    );
    reconfig_ctrl_model #(.LOAD_CYCLES(1000)) u_rcfg (
      .clk, .reconfig_trigger, .reconfig_addr, .cfg_addr, .cfg_data,
      .rst_n, .factory_mode, .config_error, .app_image
    );
    rfu_backend_model u_be (
      .clk, .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_last, .tx_ready
    );

    task automatic command(bit set, logic [1:0] img, output bit ok);
      @(negedge clk);
      cmd_set_image = set; cmd_reconfig = !set; cmd_img = img;
      @(negedge clk);
      cmd_set_image = 1'b0; cmd_reconfig = 1'b0;
      while (!cmd_done) @(negedge clk);
      ok = cmd_ok;
    endtask

    initial begin
      bit ok;
      logic [15:0] fin_st;
      int unsigned img, size;
      finished[g] = 1'b0;
      img  = g % 3 + 1;
      size = 6000 + 2 * 1111 * g;          // 6000 .. 25998 bytes, 5 to 21 packets
      repeat (10) @(posedge clk);
      while (!rst_n) @(posedge clk);
      sock_open = 1'b1;
      u_be.rx_gap = (g % 2 == 1);
      u_be.upload(img, size, 0, fin_st);
      expect_eq("FIN status", g, fin_st, ST_OK);
      command(1'b1, 2'(img), ok);
      expect_eq("set-image", g, ok, 1);
      command(1'b0, 2'd0, ok);
      repeat (20) @(posedge clk);
      while (!rst_n) @(posedge clk);
      repeat (20) @(posedge clk);
      while (!rst_n) @(posedge clk);
      repeat (20) @(posedge clk);
      expect_eq("running image", g, {factory_mode, app_image}, {1'b0, 2'(img)});
      expect_eq("leds", g, {led1, led2}, (img == 1) ? 2'b01 : (img == 2) ? 2'b10 : 2'b11);
      finished[g] = 1'b1;
    end
  end

  initial begin
    int done;
    do begin
      repeat (100) @(posedge clk);
      done = 0;
      foreach (finished[i]) done += int'(finished[i]);
    end while (done < N);
    $display("all %0d boards upgraded", N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
