// rfu_engine: RPC-DAQ side of the remote firmware upgrade protocol.
//
// The engine sits on the receive and transmit streams of the one TCP socket kept for
// upgrades. It reads 16-bit words from rx_*, recognises the three packet kinds by
// their first word and answers each one with a four-word ACK packet
// (0xAFAF, SEQ_NUM, RSW = 0, STATUS) on tx_*:
//
//   BEGIN  0xFAFA, IMG_NUM, SIZE_LSW, SIZE_MSW, 0xAFAF
//          Checks the image number (1..3) and size (1 byte .. 2 MB), then erases
//          ceil(size / 64 KiB) sectors from the image's base address. ACK SEQ_NUM = 0.
//   DATA   0xDADA, SEQ_NUM, RSW, 640 payload words (1280 bytes), CHECKSUM
//          The payload goes into a packet buffer while the XOR of every word before
//          CHECKSUM is accumulated. On a match, and if SEQ_NUM is the expected one,
//          packet n is programmed at base + (n-1)*1280, word by word, stopping at the
//          file size. A repeat of the last accepted number (the back end resending
//          after a lost ACK) is acknowledged without writing again.
//   FIN    0xEFEF, 0xFEFE
//          Succeeds if every byte of the file was accepted. After the ACK, sock_close
//          pulses and the session ends.
//
// Words that start no packet are dropped, so the parser finds the next header again.
// Packet layouts, the constants, the 1280-byte payload, sequence numbers from 1, the
// XOR checksum and the erase-then-write order follow the published protocol. The
// status codes, the word framing, checksum coverage, buffering before programming
// and the duplicate rule are this design's choices.
//
// Flash port: a request (fl_req) is offered with fl_req_valid and held until
// fl_req_ready; the engine then waits for the one-cycle fl_rsp_valid before it issues
// the next request. A DATA packet of 640 words takes 644 receive cycles, then per
// word 2 cycles plus the flash's program time, then 4 ACK cycles.
module rfu_engine
  import rfu_pkg::*;
#(
  parameter int unsigned PAYLOAD_BYTES = 1280
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sock_open,
  // receive stream
  input  logic        rx_valid,
  input  logic [15:0] rx_data,
  output logic        rx_ready,
  // ACK stream
  output logic        tx_valid,
  output logic [15:0] tx_data,
  output logic        tx_last,
  input  logic        tx_ready,
  // flash command port
  output logic        fl_req_valid,
  output flash_req_t  fl_req,
  input  logic        fl_req_ready,
  input  logic        fl_rsp_valid,
  input  flash_rsp_t  fl_rsp,
  // status
  output logic        busy,
  output logic        sock_close,
  output logic        done_ok,
  output logic        done_fail
);
  localparam int unsigned PW  = PAYLOAD_BYTES / 2;
  localparam int unsigned PAW = $clog2(PW);

  typedef enum logic [4:0] {
    S_IDLE, S_B_IMG, S_B_LSW, S_B_MSW, S_B_TRL, S_B_CHECK,
    S_ERASE_REQ, S_ERASE_WAIT,
    S_D_SEQ, S_D_RSW, S_D_PAY, S_D_CK, S_D_CHECK,
    S_PROG_RD, S_PROG_REQ, S_PROG_WAIT,
    S_F1, S_ACK
  } state_e;

  state_e       state;
  logic         rx_fire, tx_fire;
  // session
  logic         session;          // a BEGIN has been accepted
  logic [31:0]  file_size;
  logic [22:0]  base;
  logic [15:0]  exp_seq;          // next expected sequence number
  logic [31:0]  accepted_bytes;
  // packet
  logic [15:0]  pkt_seq;
  logic         ck_ok;
  logic [PAW-1:0] widx;
  logic [9:0]   words_to_write;
  logic [6:0]   sec, nsec;
  // ack
  logic [15:0]  ack_seq, ack_status;
  logic [1:0]   ack_idx;
  logic         ack_is_fin;
  // flash map lookup for the BEGIN being parsed
  logic [1:0]   b_img;
  logic [31:0]  b_size;
  logic [22:0]  map_base;
  logic [6:0]   map_nsec;
  logic         map_ok;
  // checksum
  logic         ck_clear, ck_en;
  logic [15:0]  ck_sum;
  // buffer
  logic         buf_we, buf_re;
  logic [PAW-1:0] buf_raddr;
  logic [15:0]  buf_rdata;
  // data packet placement
  logic [31:0]  pkt_off, remaining;

  assign rx_fire = rx_valid && rx_ready;
  assign tx_fire = tx_valid && tx_ready;

  flash_map u_map (
    .img_num(b_img), .file_size(b_size),
    .base_addr(map_base), .region_bytes(), .n_sectors(map_nsec), .size_ok(map_ok)
  );

  xor_checksum #(.W(16)) u_ck (
    .clk, .rst_n, .clear(ck_clear), .en(ck_en), .word(rx_data), .sum(ck_sum)
  );

  packet_buffer #(.DEPTH(PW), .W(16)) u_buf (
    .clk, .we(buf_we), .waddr(widx), .wdata(rx_data),
    .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata)
  );

  always_comb begin
    rx_ready = 1'b0;
    unique case (state)
      S_IDLE:  rx_ready = sock_open;
      S_B_IMG, S_B_LSW, S_B_MSW, S_B_TRL,
      S_D_SEQ, S_D_RSW, S_D_PAY, S_D_CK, S_F1: rx_ready = 1'b1;
      default: rx_ready = 1'b0;
    endcase
    ck_clear = (state == S_IDLE);
    ck_en    = rx_fire && (state inside {S_D_SEQ, S_D_RSW, S_D_PAY});
    buf_we   = rx_fire && (state == S_D_PAY);
    buf_re   = (state == S_PROG_RD);
    buf_raddr = widx;
    pkt_off   = 32'(pkt_seq - 16'd1) * PAYLOAD_BYTES;
    remaining = file_size - pkt_off;
  end

  // ACK words and flash request
  always_comb begin
    tx_valid = (state == S_ACK);
    tx_last  = (ack_idx == 2'd3);
    unique case (ack_idx)
      2'd0: tx_data = ACK_HDR;
      2'd1: tx_data = ack_seq;
      2'd2: tx_data = 16'h0000;
      default: tx_data = ack_status;
    endcase
    fl_req_valid = (state == S_ERASE_REQ) || (state == S_PROG_REQ);
    fl_req.op    = (state == S_ERASE_REQ) ? FL_ERASE : FL_PROGRAM;
    fl_req.addr  = (state == S_ERASE_REQ) ? (base + {sec, 16'h0000})
                                          : (base + pkt_off[22:0] + {12'd0, widx, 1'b0});
    fl_req.wdata = buf_rdata;
    busy = session || (state != S_IDLE);
  end

  task automatic send_ack(input logic [15:0] seq, input logic [15:0] st, input logic fin);
    ack_seq    <= seq;
    ack_status <= st;
    ack_is_fin <= fin;
    ack_idx    <= 2'd0;
    state      <= S_ACK;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      session        <= 1'b0;
      file_size      <= '0;
      base           <= '0;
      exp_seq        <= 16'd1;
      accepted_bytes <= '0;
      pkt_seq        <= '0;
      ck_ok          <= 1'b0;
      widx           <= '0;
      words_to_write <= '0;
      sec            <= '0;
      nsec           <= '0;
      ack_seq        <= '0;
      ack_status     <= '0;
      ack_idx        <= '0;
      ack_is_fin     <= 1'b0;
      b_img          <= '0;
      b_size         <= '0;
      sock_close     <= 1'b0;
      done_ok        <= 1'b0;
      done_fail      <= 1'b0;
    end else begin
      sock_close <= 1'b0;
      done_ok    <= 1'b0;
      done_fail  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (!sock_open) session <= 1'b0;
          if (rx_fire) begin
            unique case (rx_data)
              BEGIN_HDR: state <= S_B_IMG;
              DATA_HDR:  state <= S_D_SEQ;
              FIN_W0:    state <= S_F1;
              default:   state <= S_IDLE;   // not a header: drop it
            endcase
          end
        end
        // ---------------- BEGIN ----------------
        S_B_IMG: if (rx_fire) begin b_img <= rx_data[1:0]; ck_ok <= (rx_data[15:2] == '0); state <= S_B_LSW; end
        S_B_LSW: if (rx_fire) begin b_size[15:0]  <= rx_data; state <= S_B_MSW; end
        S_B_MSW: if (rx_fire) begin b_size[31:16] <= rx_data; state <= S_B_TRL; end
        S_B_TRL: if (rx_fire) begin
          ck_ok <= ck_ok && (rx_data == BEGIN_TRL);
          state <= S_B_CHECK;
        end
        S_B_CHECK: begin
          session <= 1'b0;
          if (ck_ok && map_ok) begin
            file_size <= b_size;
            base      <= map_base;
            nsec      <= map_nsec;
            sec       <= '0;
            state     <= S_ERASE_REQ;
          end else begin
            send_ack(16'd0, ST_BAD_BEGIN, 1'b0);
          end
        end
        S_ERASE_REQ: if (fl_req_ready) state <= S_ERASE_WAIT;
        S_ERASE_WAIT: if (fl_rsp_valid) begin
          if (fl_rsp.error) begin
            send_ack(16'd0, ST_ERASE, 1'b0);
          end else if (sec + 7'd1 == nsec) begin
            session        <= 1'b1;
            exp_seq        <= 16'd1;
            accepted_bytes <= '0;
            send_ack(16'd0, ST_OK, 1'b0);
          end else begin
            sec   <= sec + 7'd1;
            state <= S_ERASE_REQ;
          end
        end
        // ---------------- DATA ----------------
        S_D_SEQ: if (rx_fire) begin pkt_seq <= rx_data; state <= S_D_RSW; end
        S_D_RSW: if (rx_fire) begin widx <= '0; state <= S_D_PAY; end
        S_D_PAY: if (rx_fire) begin
          if (widx == PAW'(PW - 1)) state <= S_D_CK;
          else widx <= widx + 1'b1;
        end
        S_D_CK: if (rx_fire) begin
          ck_ok <= ((ck_sum ^ DATA_HDR) == rx_data);
          state <= S_D_CHECK;
        end
        S_D_CHECK: begin
          widx <= '0;
          if (!ck_ok) begin
            send_ack(pkt_seq, ST_CHECKSUM, 1'b0);
          end else if (!session) begin
            send_ack(pkt_seq, ST_SEQUENCE, 1'b0);
          end else if (pkt_seq == exp_seq && pkt_off < file_size) begin
            words_to_write <= (remaining >= PAYLOAD_BYTES) ? 10'(PW)
                                                           : 10'((remaining + 32'd1) >> 1);
            state <= S_PROG_RD;
          end else if (exp_seq != 16'd1 && pkt_seq == exp_seq - 16'd1) begin
            send_ack(pkt_seq, ST_OK, 1'b0);      // retransmission of an accepted packet
          end else begin
            send_ack(pkt_seq, ST_SEQUENCE, 1'b0);
          end
        end
        S_PROG_RD:  state <= S_PROG_REQ;
        S_PROG_REQ: if (fl_req_ready) state <= S_PROG_WAIT;
        S_PROG_WAIT: if (fl_rsp_valid) begin
          if (fl_rsp.error) begin
            send_ack(pkt_seq, ST_PROGRAM, 1'b0);
          end else if (10'(widx) + 10'd1 == words_to_write) begin
            exp_seq        <= exp_seq + 16'd1;
            accepted_bytes <= accepted_bytes + PAYLOAD_BYTES;
            send_ack(pkt_seq, ST_OK, 1'b0);
          end else begin
            widx  <= widx + 1'b1;
            state <= S_PROG_RD;
          end
        end
        // ---------------- FIN ----------------
        S_F1: if (rx_fire) begin
          if (rx_data == FIN_W1) begin
            if (session && accepted_bytes >= file_size) begin
              done_ok <= 1'b1;
              send_ack(exp_seq - 16'd1, ST_OK, 1'b1);
            end else begin
              done_fail <= 1'b1;
              send_ack(exp_seq - 16'd1, ST_MISSING, 1'b1);
            end
          end else begin
            state <= S_IDLE;
          end
        end
        // ---------------- ACK ----------------
        S_ACK: if (tx_fire) begin
          if (ack_idx == 2'd3) begin
            state <= S_IDLE;
            if (ack_is_fin) begin
              sock_close <= 1'b1;
              session    <= 1'b0;
            end
          end else begin
            ack_idx <= ack_idx + 2'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A flash request must stay unchanged until it is taken.
  a_fl_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    fl_req_valid && !fl_req_ready |=> fl_req_valid && $stable(fl_req));
  // An ACK word must stay unchanged until it is taken.
  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
