// rpc_daq_rfu_top: remote firmware upgrade logic of one RPC-DAQ FPGA.
//
// Joins the parts that let a back-end server rewrite an RPC-DAQ's configuration flash
// over Ethernet and choose which image the FPGA boots:
//   rfu_engine           TCP upgrade protocol (BEGIN / DATA / FIN, ACKs), erases and
//                        programs one application image region of the flash
//   boot_selector        factory boot image choice, set-image and reconfigure commands
//   flash_arbiter        shares the flash command port (boot_selector first)
//   watchdog             held while an upgrade session is open
//   led_image_indicator  two LEDs show which image is running
// Outside this module, and reached through its ports: the Ethernet controller with
// its TCP socket (rx_* / tx_* word streams, sock_open / sock_close), the serial flash
// controller and flash (fl_* command port), the UDP command decoder (cmd_*) and the
// FPGA's remote-update block (reconfig_addr / reconfig_trigger in, factory_mode /
// config_error / app_image out of it). A reconfiguration reloads the FPGA: the
// remote-update block is expected to pulse rst_n and present the new mode.
// All ports are synchronous to clk; rst_n is an asynchronous active-low reset.
// Timing: the top adds no registers on its own; latencies are those of rfu_engine
// (ACKs after erase / program) and boot_selector (boot trigger after the log read).
// The partition, protocol and boot flow follow the published system; replacing the
// soft processor's software by these hardware blocks, and the arbiter, are this
// design's choices.
module rpc_daq_rfu_top
  import rfu_pkg::*;
#(
  parameter int unsigned WDT_TIMEOUT = 50_000_000,
  parameter int unsigned N_SLOTS     = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // RFU TCP socket
  input  logic        sock_open,
  input  logic        rx_valid,
  input  logic [15:0] rx_data,
  output logic        rx_ready,
  output logic        tx_valid,
  output logic [15:0] tx_data,
  output logic        tx_last,
  input  logic        tx_ready,
  output logic        sock_close,
  // flash command port
  output logic        fl_req_valid,
  output flash_req_t  fl_req,
  input  logic        fl_req_ready,
  input  logic        fl_rsp_valid,
  input  flash_rsp_t  fl_rsp,
  // decoded UDP commands
  input  logic        cmd_set_image,
  input  logic        cmd_reconfig,
  input  logic [1:0]  cmd_img,
  output logic        cmd_done,
  output logic        cmd_ok,
  // remote-update (reconfiguration) block
  input  logic        factory_mode,
  input  logic        config_error,
  input  logic [1:0]  app_image,
  output logic [22:0] reconfig_addr,
  output logic        reconfig_trigger,
  // status
  input  logic        wdt_kick,
  output logic        wdt_reset,
  output logic        led1,
  output logic        led2,
  output logic        rfu_busy,
  output logic        rfu_done_ok,
  output logic        rfu_done_fail,
  output logic [1:0]  boot_image
);
  logic       bs_req_valid, bs_req_ready, bs_rsp_valid;
  flash_req_t bs_req;
  logic       en_req_valid, en_req_ready, en_rsp_valid;
  flash_req_t en_req;
  flash_rsp_t m_rsp;

  rfu_engine u_engine (
    .clk, .rst_n, .sock_open,
    .rx_valid, .rx_data, .rx_ready,
    .tx_valid, .tx_data, .tx_last, .tx_ready,
    .fl_req_valid(en_req_valid), .fl_req(en_req), .fl_req_ready(en_req_ready),
    .fl_rsp_valid(en_rsp_valid), .fl_rsp(m_rsp),
    .busy(rfu_busy), .sock_close, .done_ok(rfu_done_ok), .done_fail(rfu_done_fail)
  );

  boot_selector #(.N_SLOTS(N_SLOTS)) u_boot (
    .clk, .rst_n, .factory_mode, .config_error,
    .cmd_set_image, .cmd_reconfig, .cmd_img,
    .fl_req_valid(bs_req_valid), .fl_req(bs_req), .fl_req_ready(bs_req_ready),
    .fl_rsp_valid(bs_rsp_valid), .fl_rsp(m_rsp),
    .reconfig_addr, .reconfig_trigger,
    .cmd_done, .cmd_ok, .boot_image
  );

  flash_arbiter u_arb (
    .clk, .rst_n,
    .m0_req_valid(bs_req_valid), .m0_req(bs_req), .m0_req_ready(bs_req_ready), .m0_rsp_valid(bs_rsp_valid),
    .m1_req_valid(en_req_valid), .m1_req(en_req), .m1_req_ready(en_req_ready), .m1_rsp_valid(en_rsp_valid),
    .m_rsp,
    .s_req_valid(fl_req_valid), .s_req(fl_req), .s_req_ready(fl_req_ready),
    .s_rsp_valid(fl_rsp_valid), .s_rsp(fl_rsp)
  );

  watchdog #(.TIMEOUT(WDT_TIMEOUT)) u_wdt (
    .clk, .rst_n, .kick(wdt_kick), .hold(rfu_busy), .wdt_reset
  );

  led_image_indicator u_led (
    .factory_mode, .app_image, .led1, .led2
  );
endmodule
