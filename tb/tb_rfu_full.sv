// tb_rfu_full: one complete upgrade with every parameter of the top at its default.
//
// A full 2 MB image (2 097 152 bytes, 1639 DATA packets, the last one half full) is
// sent to image slot 3, which fills the slot exactly. Checked: all 32 sectors are
// erased, every ACK is a success with the packet's number, all 1 048 576 words are in
// flash, nothing is written past the slot, FIN succeeds; then set-image 3 and a
// factory reload make the boot selector start image 3 (LEDs 11).
// Timing: the flash model answers in a few clocks (real flash takes seconds to erase),
// so the run covers about 7 million clocks. The 2 MB slot and 1280-byte packets follow
// the published system.
module tb_rfu_full;
  import rfu_pkg::*;
  localparam int unsigned SIZE = 32'h200000;

  logic clk = 1'b0, rst_n, sock_open = 1'b0;
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
  int checks = 0, failures = 0;

  rpc_daq_rfu_top dut (
    .clk, .rst_n, .sock_open, .rx_valid, .rx_data, .rx_ready,
    .tx_valid, .tx_data, .tx_last, .tx_ready, .sock_close,
    .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
    .cmd_set_image, .cmd_reconfig, .cmd_img, .cmd_done, .cmd_ok,
    .factory_mode, .config_error, .app_image, .reconfig_addr, .reconfig_trigger,
    .wdt_kick(1'b1), .wdt_reset, .led1, .led2,
    .rfu_busy, .rfu_done_ok, .rfu_done_fail, .boot_image
  );
  epcs64_model #(.DELAY_READ(2), .DELAY_PROG(2), .DELAY_ERASE(100)) u_flash (
    .clk, .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp, .cfg_addr, .cfg_data
  );
  reconfig_ctrl_model u_rcfg (
    .clk, .reconfig_trigger, .reconfig_addr, .cfg_addr, .cfg_data,
    .rst_n, .factory_mode, .config_error, .app_image
  );
  rfu_backend_model u_be (
    .clk, .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_last, .tx_ready
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

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
    logic [15:0] s, st;
    int mism, bad_acks;
    int unsigned npk;
    npk = (SIZE + 1279) / 1280;
    repeat (10) @(posedge clk);
    while (!rst_n) @(posedge clk);
    repeat (10) @(posedge clk);
    sock_open = 1'b1;
    u_be.send_begin(16'd3, SIZE);
    u_be.get_ack(s, st, ok);
    expect_eq("begin", st, ST_OK);
    expect_eq("sectors erased", u_flash.n_erase, 32);
    expect_eq("packets", npk, 1639);
    bad_acks = 0;
    for (int unsigned k = 1; k <= npk; k++) begin
      u_be.send_data(3, SIZE, 16'(k), 1'b0);
      u_be.get_ack(s, st, ok);
      if (!ok || s != 16'(k) || st != ST_OK) bad_acks++;
    end
    expect_eq("data acks", bad_acks, 0);
    u_be.send_fin();
    u_be.get_ack(s, st, ok);
    expect_eq("fin", st, ST_OK);
    expect_eq("words programmed", u_flash.n_prog, SIZE / 2);
    mism = 0;
    for (int i = 0; i < SIZE / 2; i++)
      if (u_flash.mem[(IMAGE3_BASE >> 1) + i] != u_be.image_word(3, i, SIZE / 2)) mism++;
    expect_eq("image 3 in flash", mism, 0);
    mism = 0;
    for (int i = 0; i < 32768; i++)
      if (u_flash.mem[((IMAGE3_BASE + SIZE) >> 1) + i] != 16'hFFFF) mism++;
    expect_eq("spare sector untouched", mism, 0);
    command(1'b1, 2'd3, ok); expect_eq("set image 3", ok, 1);
    command(1'b0, 2'd0, ok);
    repeat (20) @(posedge clk);
    while (!rst_n) @(posedge clk);
    repeat (20) @(posedge clk);
    while (!rst_n) @(posedge clk);
    repeat (20) @(posedge clk);
    expect_eq("image 3 running", {factory_mode, app_image}, {1'b0, 2'd3});
    expect_eq("leds", {led1, led2}, 2'b11);
    expect_eq("no config error", u_rcfg.n_errors, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
