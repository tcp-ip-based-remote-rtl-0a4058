// rfu_backend_model: behavioural model of the back-end upgrade server on one TCP socket.
//
// Not synthesizable: it plays the server side of the upgrade protocol for the
// testbenches. It drives the DAQ's receive word stream (rx_*) and takes ACK words from
// tx_*. Tasks send the BEGIN, DATA and FIN packets, wait for an ACK and return its
// sequence number and status, and `upload` runs a whole transfer the way the server
// does: BEGIN, then DATA packets from sequence number 1, resending a packet whose ACK
// reports a failure, then FIN. The firmware image is generated, not read from a file:
// image_word() gives word i of an image of n words (a start signature 0x5AA5, the
// length in words, pseudo-random body words and an end signature 0xA55A).
// When `rx_gap` is set, the model leaves random idle cycles between words.
// Timing: one word per clock at most, driven on the falling edge; a word is taken on
// the rising edge where rx_ready is high. The packet order and resend-on-failure
// follow the published server; the resend limit of 3 is this model's choice.
module rfu_backend_model
  import rfu_pkg::*;
(
  input  logic        clk,
  output logic        rx_valid,
  output logic [15:0] rx_data,
  input  logic        rx_ready,
  input  logic        tx_valid,
  input  logic [15:0] tx_data,
  input  logic        tx_last,
  output logic        tx_ready
);
  localparam int unsigned PW = 640;

  bit rx_gap = 1'b0;
  int unsigned n_acks = 0, n_resends = 0;

  initial begin
    rx_valid = 1'b0; rx_data = '0; tx_ready = 1'b1;
  end

  function automatic logic [15:0] image_word(input int unsigned img, input int unsigned i,
                                             input int unsigned n);
    logic [31:0] h;
    if (i == 0)          return 16'h5AA5;
    else if (i == 1)     return n[15:0];
    else if (i == 2)     return n[31:16];
    else if (i == n - 1) return 16'hA55A;
    h = (i * 32'd2654435761) ^ (img * 32'd40503) ^ (i >> 7);
    return h[31:16] ^ h[15:0];
  endfunction

  // one word: offered from a falling edge, taken on the rising edge where rx_ready is high
  task automatic put_word(input logic [15:0] w);
    if (rx_gap) repeat ($urandom_range(0, 2)) @(negedge clk);
    @(negedge clk);
    rx_valid = 1'b1;
    rx_data  = w;
    while (!rx_ready) @(negedge clk);
    @(posedge clk);
    #1 rx_valid = 1'b0;
  endtask

  task automatic send_begin(input logic [15:0] img, input logic [31:0] size);
    put_word(BEGIN_HDR); put_word(img); put_word(size[15:0]); put_word(size[31:16]);
    put_word(BEGIN_TRL);
  endtask

  // DATA packet `seq` of image `img` (size in bytes); corrupt != 0 flips a payload bit
  task automatic send_data(input int unsigned img, input int unsigned size,
                           input logic [15:0] seq, input bit corrupt);
    logic [15:0] ck, w;
    int unsigned n, first;
    n = size / 2;
    first = (int'(seq) - 1) * PW;
    ck = DATA_HDR ^ seq ^ 16'h0000;
    put_word(DATA_HDR); put_word(seq); put_word(16'h0000);
    for (int i = 0; i < PW; i++) begin
      w = (first + i < n) ? image_word(img, first + i, n) : 16'h0000;
      ck ^= w;
      if (corrupt && i == 100) w ^= 16'h0400;
      put_word(w);
    end
    put_word(ck);
  endtask

  task automatic send_fin();
    put_word(FIN_W0); put_word(FIN_W1);
  endtask

  task automatic send_raw(input logic [15:0] w);
    put_word(w);
  endtask

  task automatic get_ack(output logic [15:0] seq, output logic [15:0] status, output bit ok);
    logic [15:0] w [4];
    ok = 1'b1;
    for (int i = 0; i < 4; i++) begin
      do @(negedge clk); while (!tx_valid);
      w[i] = tx_data;
      if (tx_last != (i == 3)) ok = 1'b0;
      @(posedge clk);
    end
    if (w[0] != ACK_HDR || w[2] != 16'h0000) ok = 1'b0;
    seq = w[1]; status = w[3];
    n_acks++;
  endtask

  // Whole transfer of packets 1..last_seq (all of them if last_seq == 0); a packet whose
  // ACK is not a success is sent again, up to 3 times. Returns the FIN status.
  task automatic upload(input int unsigned img, input int unsigned size,
                        input int unsigned last_seq, output logic [15:0] fin_status);
    logic [15:0] s, st;
    bit ok;
    int unsigned npk, tries;
    npk = (size + 1279) / 1280;
    if (last_seq != 0 && last_seq < npk) npk = last_seq;
    send_begin(16'(img), size);
    get_ack(s, st, ok);
    if (st != ST_OK) begin fin_status = st; return; end
    for (int unsigned k = 1; k <= npk; k++) begin
      tries = 0;
      do begin
        send_data(img, size, 16'(k), 1'b0);
        get_ack(s, st, ok);
        tries++;
        if (st != ST_OK) n_resends++;
      end while (st != ST_OK && tries < 3);
    end
    send_fin();
    get_ack(s, fin_status, ok);
  endtask
endmodule
