// tb_rfu_engine: self-checking test of the upgrade protocol engine.
//
// A back-end model sends packets, a flash model stores them. Checked: BEGIN with a bad
// image number or size is refused; BEGIN erases exactly the sectors the file needs;
// DATA packets land at base + (n-1)*1280 with the right words; a repeated packet is
// acknowledged without a second write; an out-of-order number and a bad checksum are
// refused and write nothing; FIN before all data fails, FIN after all data succeeds;
// the tail of the last packet past the file size is not written; stray words before a
// header are dropped. Latencies are checked against the engine's timing:
// BEGIN ACK 2 + sectors*(erase delay + 2) clocks after the last BEGIN word, DATA ACK
// 2 + 640*(program delay + 3) clocks after the CHECKSUM word.
// Packet formats follow the published protocol; the STATUS codes, the duplicate rule
// and these latencies are this design's and are checked as such.
module tb_rfu_engine;
  import rfu_pkg::*;
  localparam int unsigned DR = 2, DP = 2, DE = 20;

  logic clk = 1'b0, rst_n = 1'b0, sock_open = 1'b0;
  logic rx_valid, rx_ready, tx_valid, tx_last, tx_ready;
  logic [15:0] rx_data, tx_data;
  logic fl_req_valid, fl_req_ready, fl_rsp_valid;
  flash_req_t fl_req;
  flash_rsp_t fl_rsp;
  logic busy, sock_close, done_ok, done_fail;
  logic [15:0] cfg_data;
  int checks = 0, failures = 0;
  int cyc = 0, last_rx_cyc = 0, first_tx_cyc = 0;
  int n_close = 0, n_ok = 0, n_fail = 0;
  bit tx_seen = 1'b0;

  rfu_engine dut (
    .clk, .rst_n, .sock_open,
    .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_last, .tx_ready,
    .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
    .busy, .sock_close, .done_ok, .done_fail
  );
  epcs64_model #(.DELAY_READ(DR), .DELAY_PROG(DP), .DELAY_ERASE(DE)) u_flash (
    .clk, .fl_req_valid, .fl_req, .fl_req_ready, .fl_rsp_valid, .fl_rsp,
    .cfg_addr(23'd0), .cfg_data
  );
  rfu_backend_model u_be (
    .clk, .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_last, .tx_ready
  );

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rx_valid && rx_ready) last_rx_cyc <= cyc;
    if (tx_valid && !tx_seen) begin first_tx_cyc <= cyc; tx_seen <= 1'b1; end
    if (rst_n && sock_close) n_close++;
    if (rst_n && done_ok) n_ok++;
    if (rst_n && done_fail) n_fail++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog state=%0d rxv=%0d rxr=%0d txv=%0d widx=%0d cyc=%0d last_rx=%0d", dut.state, rx_valid, rx_ready, tx_valid, dut.widx, cyc, last_rx_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic ack(string what, logic [15:0] eseq, logic [15:0] est, int exp_lat = -1);
    logic [15:0] s, st; bit ok;
    tx_seen = 1'b0;
    u_be.get_ack(s, st, ok);
    expect_eq({what, " ack framing"}, ok, 1);
    expect_eq({what, " ack seq"}, s, eseq);
    expect_eq({what, " ack status"}, st, est);
    if (exp_lat >= 0) expect_eq({what, " latency"}, first_tx_cyc - last_rx_cyc, exp_lat);
  endtask

  function automatic logic [15:0] fw(int unsigned byte_addr);
    return u_flash.mem[byte_addr >> 1];
  endfunction

  localparam int unsigned SIZE = 3000;      // 1500 words, 3 packets (last one 440 bytes)
  localparam int unsigned B2 = 32'h3B0000;

  initial begin
    int unsigned p0;
    int mism;
    repeat (3) @(posedge clk);
    rst_n = 1'b1; sock_open = 1'b1;
    // garbage, then BEGIN for the factory image and an oversize BEGIN
    u_be.send_raw(16'h1234);
    u_be.send_begin(16'd0, 32'd100);       ack("begin img0", 0, ST_BAD_BEGIN);
    u_be.send_begin(16'd1, 32'h300000);    ack("begin 3MB", 0, ST_BAD_BEGIN);
    u_be.send_begin(16'd7, 32'd100);       ack("begin img7", 0, ST_BAD_BEGIN);
    expect_eq("no erase yet", u_flash.n_erase, 0);
    // dirty image 2's first two sectors
    for (int i = 0; i < 65536; i++) u_flash.mem[(B2 >> 1) + i] = 16'h0000;
    u_be.send_begin(16'd2, SIZE);          ack("begin img2", 0, ST_OK, 2 + 1 * (DE + 2));
    expect_eq("erase count", u_flash.n_erase, 1);
    mism = 0;
    for (int i = 0; i < 32768; i++) if (u_flash.mem[(B2 >> 1) + i] != 16'hFFFF) mism++;
    expect_eq("sector 0 erased", mism, 0);
    expect_eq("sector 1 untouched", fw(B2 + 65536), 16'h0000);
    expect_eq("busy in session", busy, 1);
    // packet 1
    u_be.send_data(2, SIZE, 16'd1, 1'b0);  ack("data 1", 1, ST_OK, 2 + 640 * (DP + 3));
    expect_eq("prog count 1", u_flash.n_prog, 640);
    mism = 0;
    for (int i = 0; i < 640; i++) if (fw(B2 + 2*i) != u_be.image_word(2, i, SIZE/2)) mism++;
    expect_eq("packet 1 content", mism, 0);
    // repeated packet 1: success, no write
    u_be.send_data(2, SIZE, 16'd1, 1'b0);  ack("data 1 again", 1, ST_OK);
    expect_eq("prog count dup", u_flash.n_prog, 640);
    // out of order
    u_be.send_data(2, SIZE, 16'd3, 1'b0);  ack("data 3 early", 3, ST_SEQUENCE);
    // bad checksum
    u_be.rx_gap = 1'b1;
    u_be.send_data(2, SIZE, 16'd2, 1'b1);  ack("data 2 corrupt", 2, ST_CHECKSUM);
    u_be.rx_gap = 1'b0;
    expect_eq("prog count bad", u_flash.n_prog, 640);
    expect_eq("packet 2 not written", fw(B2 + 1280), 16'hFFFF);
    // FIN too early
    u_be.send_fin();                       ack("fin early", 1, ST_MISSING);
    @(posedge clk); @(posedge clk);
    expect_eq("close pulses", n_close, 1);
    expect_eq("fail pulses", n_fail, 1);
    expect_eq("session over", busy, 0);
    u_be.send_data(2, SIZE, 16'd2, 1'b0);  ack("data after fin", 2, ST_SEQUENCE);
    // complete transfer
    u_be.send_begin(16'd2, SIZE);          ack("begin again", 0, ST_OK);
    p0 = u_flash.n_prog;
    u_be.send_data(2, SIZE, 16'd1, 1'b0);  ack("data 1", 1, ST_OK);
    u_be.rx_gap = 1'b1;
    u_be.send_data(2, SIZE, 16'd2, 1'b0);  ack("data 2", 2, ST_OK);
    u_be.rx_gap = 1'b0;
    u_be.send_data(2, SIZE, 16'd3, 1'b0);  ack("data 3", 3, ST_OK, 2 + 220 * (DP + 3));
    expect_eq("prog count full", u_flash.n_prog - p0, 1500);
    mism = 0;
    for (int i = 0; i < 1500; i++) if (fw(B2 + 2*i) != u_be.image_word(2, i, SIZE/2)) mism++;
    expect_eq("image content", mism, 0);
    expect_eq("tail not written", fw(B2 + 3000), 16'hFFFF);
    u_be.send_fin();                       ack("fin", 3, ST_OK);
    @(posedge clk); @(posedge clk);
    expect_eq("ok pulses", n_ok, 1);
    expect_eq("close pulses 2", n_close, 2);
    // socket closed: nothing is taken
    sock_open = 1'b0;
    repeat (5) @(posedge clk);
    expect_eq("not ready when closed", rx_ready, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
