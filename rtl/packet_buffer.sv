// packet_buffer: simple dual-port RAM that holds the payload of one DATA packet.
//
// One write port and one registered read port, both on `clk`. A read returns
// mem[raddr] on `rdata` one clock after `re`; `rdata` keeps its value while `re` is low,
// so a consumer can hold it as long as it likes. DEPTH is one 1280-byte payload in
// 16-bit words. Buffering a whole packet before writing it to flash (so that a packet
// with a bad checksum never reaches flash) is this design's choice; the 1280-byte
// payload size follows the protocol.
module packet_buffer #(
  parameter int unsigned DEPTH = 640,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
