// tb_boot_selector: self-checking test of the factory boot image selection.
//
// With a flash model and N_SLOTS = 4 it checks: an empty log boots nothing; set-image
// writes the log slot by slot; a factory boot reads the last entry and loads the
// matching base address (0x1A0000 / 0x3B0000 / 0x5C0000) into the reconfiguration
// register with a one-clock trigger; entry 0 keeps the factory image; no boot attempt
// after a configuration error or outside factory mode; the direct reconfigure command
// triggers at once; a full log refuses set-image but still boots from its last entry.
// The boot trigger must come 1 + slots_read*(read delay + 2) clocks after reset.
// Base addresses follow the published memory map; the slot log, the no-retry rule and
// the timing are this design's own and are checked as such.
module tb_boot_selector;
  import rfu_pkg::*;
  localparam int unsigned DR = 3, NS = 4;
  localparam int unsigned SLOT0 = 32'h7F8000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic factory_mode = 1'b1, config_error = 1'b0;
  logic cmd_set_image = 1'b0, cmd_reconfig = 1'b0;
  logic [1:0] cmd_img = '0;
  logic fl_req_valid, fl_req_ready, fl_rsp_valid;
  flash_req_t fl_req;
  flash_rsp_t fl_rsp;
  logic [22:0] reconfig_addr;
  logic reconfig_trigger, cmd_done, cmd_ok;
  logic [1:0] boot_image;
  logic [15:0] cfg_data;
  int checks = 0, failures = 0;
  int cyc = 0, n_trig = 0, trig_cyc = -1, rst_cyc = 0;

  boot_selector #(.N_SLOTS(NS)) dut (
    .clk, .rst_n, .factory_mode, .config_error, .cmd_set_image, .cmd_reconfig, .cmd_img,
    .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
    .reconfig_addr, .reconfig_trigger, .cmd_done, .cmd_ok, .boot_image
  );
  epcs64_model #(.DELAY_READ(DR), .DELAY_PROG(2), .DELAY_ERASE(5)) u_flash (
    .clk, .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
    .cfg_addr(23'd0), .cfg_data
  );

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (reconfig_trigger) begin n_trig++; trig_cyc <= cyc; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  // reset with the given mode, then wait long enough for the boot scan to end
  task automatic reboot(logic fm, logic ce);
    @(negedge clk); rst_n = 1'b0; factory_mode = fm; config_error = ce;
    n_trig = 0; trig_cyc = -1;
    @(negedge clk); rst_n = 1'b1; rst_cyc = cyc;
    repeat (100) @(posedge clk);
  endtask

  task automatic command(bit set, logic [1:0] img, output bit ok);
    @(negedge clk);
    cmd_set_image = set; cmd_reconfig = !set; cmd_img = img;
    @(negedge clk);
    cmd_set_image = 1'b0; cmd_reconfig = 1'b0;
    if (!cmd_done) begin
      while (!cmd_done) @(negedge clk);
    end
    ok = cmd_ok;
  endtask

  function automatic logic [15:0] slot(int i);
    return u_flash.mem[(SLOT0 >> 1) + i];
  endfunction

  initial begin
    bit ok;
    reboot(1'b1, 1'b0);
    expect_eq("empty: no trigger", n_trig, 0);
    expect_eq("empty: boot image", boot_image, 0);
    command(1'b1, 2'd2, ok);
    expect_eq("set 2 ok", ok, 1);
    expect_eq("slot0", slot(0), 16'd2);
    expect_eq("slot1 free", slot(1), 16'hFFFF);
    expect_eq("set does not trigger", n_trig, 0);
    command(1'b1, 2'd3, ok);
    expect_eq("set 3 ok", ok, 1);
    expect_eq("slot1", slot(1), 16'd3);
    // boot: reads slots 0,1 and the free slot 2
    reboot(1'b1, 1'b0);
    expect_eq("boot 3 trigger", n_trig, 1);
    expect_eq("boot 3 addr", reconfig_addr, 23'h5C0000);
    expect_eq("boot 3 image", boot_image, 3);
    expect_eq("boot 3 latency", trig_cyc - rst_cyc, 1 + 3 * (DR + 2));
    command(1'b1, 2'd1, ok);
    reboot(1'b1, 1'b0);
    expect_eq("boot 1 addr", reconfig_addr, 23'h1A0000);
    expect_eq("boot 1 trigger", n_trig, 1);
    // config error: stay in factory
    reboot(1'b1, 1'b1);
    expect_eq("cfg error: no trigger", n_trig, 0);
    // application mode: no boot scan
    reboot(1'b0, 1'b0);
    expect_eq("app mode: no trigger", n_trig, 0);
    // direct reconfigure
    command(1'b0, 2'd2, ok);
    expect_eq("reconfig ok", ok, 1);
    @(posedge clk); @(negedge clk);
    expect_eq("reconfig trigger", n_trig, 1);
    expect_eq("reconfig addr", reconfig_addr, 23'h3B0000);
    command(1'b0, 2'd0, ok);
    @(posedge clk);
    expect_eq("reconfig factory addr", reconfig_addr, 23'h000000);
    // fill the log: slots 0..2 used, slot 3 takes 0 (factory), a 5th set fails
    command(1'b1, 2'd0, ok);
    expect_eq("set 0 ok", ok, 1);
    expect_eq("slot3", slot(3), 16'd0);
    command(1'b1, 2'd2, ok);
    expect_eq("full log refuses", ok, 0);
    reboot(1'b1, 1'b0);
    expect_eq("last entry 0: no trigger", n_trig, 0);
    expect_eq("last entry 0: image", boot_image, 0);
    // put 2 in the last slot directly in the flash model
    u_flash.mem[(SLOT0 >> 1) + 3] = 16'd2;
    reboot(1'b1, 1'b0);
    expect_eq("full log boot addr", reconfig_addr, 23'h3B0000);
    expect_eq("full log boot trigger", n_trig, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
