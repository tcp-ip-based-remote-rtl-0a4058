// epcs64_model: behavioural model of the 8 MB configuration flash behind its controller.
//
// Not synthesizable logic: a simulation model of the serial flash plus the flash
// controller, seen at the command port of rfu_pkg (FL_READ / FL_PROGRAM / FL_ERASE,
// request held until fl_req_ready, then one fl_rsp_valid). Storage is 4 Mi 16-bit
// words, erased (0xFFFF) at start. A program only clears bits, as in NOR flash; an
// erase sets the whole 64 KiB sector to 0xFFFF. A request is taken when the model is
// idle; its response comes exactly DELAY_* clocks after the clock that took it.
// A second, combinational read port (cfg_addr / cfg_data) stands for the path the
// FPGA's configuration logic uses to read an image. Counters report the operations.
// The 64 Mbit size and 64 KiB sectors follow the flash named for the board; the
// command port and the delays (in clocks, not the chip's real times) are assumptions.
module epcs64_model
  import rfu_pkg::*;
#(
  parameter int unsigned DELAY_READ  = 2,
  parameter int unsigned DELAY_PROG  = 2,
  parameter int unsigned DELAY_ERASE = 20
) (
  input  logic        clk,
  input  logic        fl_req_valid,
  input  flash_req_t  fl_req,
  output logic        fl_req_ready,
  output logic        fl_rsp_valid,
  output flash_rsp_t  fl_rsp,
  input  logic [22:0] cfg_addr,
  output logic [15:0] cfg_data
);
  localparam int unsigned WORDS = 1 << 22;

  logic [15:0] mem [WORDS];
  logic        busy;
  int unsigned cnt;
  flash_req_t  cur;
  int unsigned n_read, n_prog, n_erase;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = 16'hFFFF;
    busy = 1'b0; fl_rsp_valid = 1'b0; fl_rsp = '0; cnt = 0; cur = '0;
    n_read = 0; n_prog = 0; n_erase = 0;
  end

  assign fl_req_ready = !busy && !fl_rsp_valid;
  assign cfg_data     = mem[cfg_addr[22:1]];

  function automatic int unsigned delay_of(flash_op_e op);
    case (op)
      FL_READ:    return DELAY_READ;
      FL_PROGRAM: return DELAY_PROG;
      default:    return DELAY_ERASE;
    endcase
  endfunction

  always @(posedge clk) begin
    fl_rsp_valid <= 1'b0;
    if (fl_req_valid && fl_req_ready) begin
      busy <= 1'b1;
      cur  <= fl_req;
      cnt  <= delay_of(fl_req.op);
    end else if (busy) begin
      if (cnt <= 1) begin
        busy         <= 1'b0;
        fl_rsp_valid <= 1'b1;
        fl_rsp.error <= 1'b0;
        fl_rsp.rdata <= 16'h0000;
        case (cur.op)
          FL_READ: begin
            fl_rsp.rdata <= mem[cur.addr[22:1]];
            n_read <= n_read + 1;
          end
          FL_PROGRAM: begin
            mem[cur.addr[22:1]] <= mem[cur.addr[22:1]] & cur.wdata;
            n_prog <= n_prog + 1;
          end
          default: begin
            for (int i = 0; i < SECTOR_BYTES / 2; i++)
              mem[{cur.addr[22:16], 15'(i)}] <= 16'hFFFF;
            n_erase <= n_erase + 1;
          end
        endcase
      end else begin
        cnt <= cnt - 1;
      end
    end
  end
endmodule
