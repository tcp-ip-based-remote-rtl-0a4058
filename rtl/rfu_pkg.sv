// rfu_pkg: constants and types shared by the remote firmware upgrade (RFU) logic.
//
// The packet constants are the fixed header/trailer words of the RFU TCP protocol
// (BEGIN 0xFAFA..0xAFAF, DATA 0xDADA, FIN 0xEFEF 0xFEFE, ACK 0xAFAF) and the flash
// addresses are the EPCS64 partition: factory image at 0x000000, application images
// at 0x1A0000, 0x3B0000 and 0x5C0000 (2 MB each, one spare 64 KiB sector between
// regions) and the information sector at 0x7F0000. Those numbers follow the published
// protocol and memory map. The ACK status codes, the 16-bit word framing and the
// flash command port (erase sector / program word / read word with a valid-ready
// request and a one-cycle response) are this design's own choices.
package rfu_pkg;

  // ---------------- protocol words ----------------
  localparam logic [15:0] BEGIN_HDR = 16'hFAFA;
  localparam logic [15:0] BEGIN_TRL = 16'hAFAF;
  localparam logic [15:0] DATA_HDR  = 16'hDADA;
  localparam logic [15:0] FIN_W0    = 16'hEFEF;
  localparam logic [15:0] FIN_W1    = 16'hFEFE;
  localparam logic [15:0] ACK_HDR   = 16'hAFAF;

  localparam int unsigned DATA_PAYLOAD_BYTES = 1280;          // DATA 0 to 1279

  // ACK STATUS word (the protocol only says "success or failure")
  localparam logic [15:0] ST_OK        = 16'h0001;
  localparam logic [15:0] ST_CHECKSUM  = 16'hE001;
  localparam logic [15:0] ST_SEQUENCE  = 16'hE002;
  localparam logic [15:0] ST_BAD_BEGIN = 16'hE003;
  localparam logic [15:0] ST_ERASE     = 16'hE004;
  localparam logic [15:0] ST_PROGRAM   = 16'hE005;
  localparam logic [15:0] ST_MISSING   = 16'hE006;

  // ---------------- EPCS64 memory map ----------------
  localparam int unsigned FLASH_ADDR_W  = 23;          // 8 MB byte address
  localparam int unsigned SECTOR_BYTES  = 65536;
  localparam int unsigned SECTOR_SHIFT  = 16;
  localparam logic [22:0] FACTORY_BASE  = 23'h000000;
  localparam logic [22:0] IMAGE1_BASE   = 23'h1A0000;
  localparam logic [22:0] IMAGE2_BASE   = 23'h3B0000;
  localparam logic [22:0] IMAGE3_BASE   = 23'h5C0000;
  localparam logic [22:0] INFO_BASE     = 23'h7F0000;
  localparam int unsigned FACTORY_BYTES = 32'h190000;  // 1.5 MB + 64 KiB (0x000000-0x18FFFF)
  localparam int unsigned IMAGE_BYTES   = 32'h200000;  // 2 MB
  // image-select log inside the information sector (layout is this design's choice)
  localparam logic [22:0] IMGSEL_BASE   = 23'h7F8000;

  // base address of image n (0 = factory)
  function automatic logic [22:0] image_base(input logic [1:0] n);
    unique case (n)
      2'd0:    return FACTORY_BASE;
      2'd1:    return IMAGE1_BASE;
      2'd2:    return IMAGE2_BASE;
      default: return IMAGE3_BASE;
    endcase
  endfunction

  // ---------------- flash command port ----------------
  typedef enum logic [1:0] {
    FL_READ    = 2'd0,
    FL_PROGRAM = 2'd1,   // program one 16-bit word (can only clear bits)
    FL_ERASE   = 2'd2    // erase the 64 KiB sector holding addr (all bits to 1)
  } flash_op_e;

  typedef struct packed {
    flash_op_e         op;
    logic [22:0]       addr;   // byte address, addr[0] ignored for words
    logic [15:0]       wdata;
  } flash_req_t;

  typedef struct packed {
    logic [15:0] rdata;
    logic        error;
  } flash_rsp_t;

endpackage
