// tb_rpc_daq_rfu_top: end-to-end test of the remote firmware upgrade logic.
//
// The top is surrounded by a back-end server model, a flash model and a model of the
// FPGA's remote-update block, which resets the top when it reconfigures. The story:
//   1. power-up in factory mode with no boot image recorded: nothing is loaded;
//   2. image 1 (20 000 bytes, 16 packets) is uploaded; on the way one packet has a
//      bad checksum and is resent, one is sent twice, one arrives out of order;
//      the watchdog is never kicked and must stay quiet while the session is open;
//   3. set-image 1, then a reload of the factory image: the boot selector finds
//      image 1, the image loads, the LEDs show 01;
//   4. only half of image 2 is sent: FIN fails; set-image 2 and a factory reload:
//      image 2 fails to configure, the factory image comes back and does not retry;
//   5. the direct reconfigure command loads image 1 again.
// Each mechanism is counted and a mechanism that never happened is a failure.
// Timing: short model delays and a 3000-clock watchdog keep the run brief. The flow
// (upload, select, reboot, half-image fallback) follows the published tests; the
// particular sizes and faults injected are this testbench's choice.
module tb_rpc_daq_rfu_top;
  import rfu_pkg::*;
  localparam int unsigned WDT = 3000;
  localparam int unsigned SIZE = 20000;

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

  // mechanism counters
  int m_erase_ok = 0, m_write_ok = 0, m_checksum_retry = 0, m_duplicate = 0, m_seq_error = 0;
  int m_fin_ok = 0, m_fin_fail = 0, m_set_image = 0, m_boot_select = 0, m_cfg_fallback = 0;
  int m_direct_reconfig = 0, m_wdt_held = 0, m_wdt_fired_idle = 0, m_wdt_fired_busy = 0;
  int busy_run = 0;

  rpc_daq_rfu_top #(.WDT_TIMEOUT(WDT)) dut (
    .clk, .rst_n, .sock_open, .rx_valid, .rx_data, .rx_ready,
    .tx_valid, .tx_data, .tx_last, .tx_ready, .sock_close,
    .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
    .cmd_set_image, .cmd_reconfig, .cmd_img, .cmd_done, .cmd_ok,
    .factory_mode, .config_error, .app_image, .reconfig_addr, .reconfig_trigger,
    .wdt_kick(1'b0), .wdt_reset, .led1, .led2,
    .rfu_busy, .rfu_done_ok, .rfu_done_fail, .boot_image
  );
  epcs64_model #(.DELAY_READ(2), .DELAY_PROG(2), .DELAY_ERASE(50)) u_flash (
    .clk, .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp, .cfg_addr, .cfg_data
  );
  reconfig_ctrl_model #(.LOAD_CYCLES(500)) u_rcfg (
    .clk, .reconfig_trigger, .reconfig_addr, .cfg_addr, .cfg_data,
    .rst_n, .factory_mode, .config_error, .app_image
  );
  rfu_backend_model u_be (
    .clk, .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_last, .tx_ready
  );

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && wdt_reset && rfu_busy) m_wdt_fired_busy++;
    if (rst_n && wdt_reset && !rfu_busy) m_wdt_fired_idle++;
    busy_run = rfu_busy ? busy_run + 1 : 0;
    if (busy_run == 2 * WDT) m_wdt_held++;
    if (rst_n && reconfig_trigger && factory_mode && !cmd_done) m_boot_select++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic ack(string what, logic [15:0] eseq, logic [15:0] est);
    logic [15:0] s, st; bit ok;
    u_be.get_ack(s, st, ok);
    expect_eq({what, " framing"}, ok, 1);
    expect_eq({what, " seq"}, s, eseq);
    expect_eq({what, " status"}, st, est);
  endtask

  task automatic command(bit set, logic [1:0] img, output bit ok);
    @(negedge clk);
    cmd_set_image = set; cmd_reconfig = !set; cmd_img = img;
    @(negedge clk);
    cmd_set_image = 1'b0; cmd_reconfig = 1'b0;
    while (!cmd_done) @(negedge clk);
    ok = cmd_ok;
  endtask

  // wait until the remote-update model has finished all reloads
  task automatic settle();
    repeat (20) @(posedge clk);
    while (!rst_n) @(posedge clk);
    repeat (400) @(posedge clk);
    while (!rst_n) @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    bit ok;
    logic [15:0] fin_st;
    int mism;
    int mech [13];
    settle();
    // 1. power-up
    expect_eq("power-up factory", factory_mode, 1);
    expect_eq("power-up leds", {led1, led2}, 2'b00);
    expect_eq("power-up no load", u_rcfg.n_loads, 0);
    // 2. upload image 1 with errors on the way
    sock_open = 1'b1;
    u_be.send_begin(16'd1, SIZE);  ack("begin", 0, ST_OK);
    if (u_flash.n_erase == 1) m_erase_ok++;
    for (int k = 1; k <= 16; k++) begin
      if (k == 3) begin
        u_be.send_data(1, SIZE, 16'(k), 1'b1); ack("corrupt", 16'(k), ST_CHECKSUM);
        m_checksum_retry++;
      end
      if (k == 7) begin
        u_be.send_data(1, SIZE, 16'd9, 1'b0); ack("early", 16'd9, ST_SEQUENCE);
        m_seq_error++;
      end
      u_be.send_data(1, SIZE, 16'(k), 1'b0); ack("data", 16'(k), ST_OK);
      m_write_ok++;
      if (k == 5) begin
        u_be.send_data(1, SIZE, 16'(k), 1'b0); ack("dup", 16'(k), ST_OK);
        m_duplicate++;
      end
    end
    u_be.send_fin(); ack("fin", 16'd16, ST_OK);
    m_fin_ok++;
    mism = 0;
    for (int i = 0; i < SIZE / 2; i++)
      if (u_flash.mem[(IMAGE1_BASE >> 1) + i] != u_be.image_word(1, i, SIZE / 2)) mism++;
    expect_eq("image 1 in flash", mism, 0);
    expect_eq("no watchdog reset during upgrade", m_wdt_fired_busy, 0);
    // 3. select image 1 and reload the factory image
    command(1'b1, 2'd1, ok); expect_eq("set image 1", ok, 1); m_set_image++;
    command(1'b0, 2'd0, ok); expect_eq("reload factory", ok, 1);
    settle();
    expect_eq("image 1 running", {factory_mode, app_image}, {1'b0, 2'd1});
    expect_eq("image 1 leds", {led1, led2}, 2'b01);
    // 4. half of image 2
    sock_open = 1'b1;
    u_be.upload(2, SIZE, 8, fin_st);
    expect_eq("half image FIN", fin_st, ST_MISSING);
    if (fin_st == ST_MISSING) m_fin_fail++;
    command(1'b1, 2'd2, ok); expect_eq("set image 2", ok, 1); m_set_image++;
    command(1'b0, 2'd0, ok);
    settle();
    expect_eq("fallback to factory", factory_mode, 1);
    expect_eq("config error seen", config_error, 1);
    expect_eq("fallback leds", {led1, led2}, 2'b00);
    expect_eq("one config error", u_rcfg.n_errors, 1);
    if (factory_mode && config_error && u_rcfg.n_errors == 1) m_cfg_fallback++;
    // no retry after the error
    repeat (2000) @(posedge clk);
    expect_eq("no retry", u_rcfg.n_errors, 1);
    // 5. direct reconfigure to image 1
    command(1'b0, 2'd1, ok); expect_eq("direct reconfig", ok, 1);
    settle();
    expect_eq("image 1 again", app_image, 1);
    expect_eq("image 1 leds again", {led1, led2}, 2'b01);
    if (app_image == 1 && !factory_mode) m_direct_reconfig++;
    // idle long enough for the (unkicked) watchdog to fire
    repeat (2 * WDT) @(posedge clk);
    // mechanisms
    $display("mechanisms: erase=%0d write=%0d checksum_retry=%0d duplicate=%0d seq_error=%0d fin_ok=%0d fin_fail=%0d",
             m_erase_ok, m_write_ok, m_checksum_retry, m_duplicate, m_seq_error, m_fin_ok, m_fin_fail);
    $display("mechanisms: set_image=%0d boot_select=%0d cfg_fallback=%0d direct_reconfig=%0d wdt_held=%0d wdt_fired_idle=%0d",
             m_set_image, m_boot_select, m_cfg_fallback, m_direct_reconfig, m_wdt_held, m_wdt_fired_idle);
    mech = '{m_erase_ok, m_write_ok, m_checksum_retry, m_duplicate, m_seq_error,
             m_fin_ok, m_fin_fail, m_set_image, m_boot_select, m_cfg_fallback,
             m_direct_reconfig, m_wdt_held, m_wdt_fired_idle};
    foreach (mech[i]) begin
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
