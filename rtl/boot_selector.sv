// boot_selector: image selection of the factory boot loader, plus the two image commands.
//
// After reset, if the factory image is running and the reset was not caused by a
// configuration error, the block reads the image number from the information sector
// of the flash. If it is 1, 2 or 3 the base address of that image goes into the
// reconfiguration register (reconfig_addr) and reconfig_trigger pulses for one clock;
// any other value leaves the factory image running. After a configuration error the
// factory image stays up and does not retry, so a broken image cannot cause a boot loop.
//
// cmd_set_image records cmd_img (0..3, 0 = factory) as the new boot image. Flash bits
// can only be cleared without erasing the whole 64 KiB sector, and that sector also
// keeps the network settings, so the number is stored as a log: N_SLOTS words from
// 0x7F8000; set-image programs the first erased (0xFFFF) slot and boot uses the last
// programmed one. A full log makes set-image fail (cmd_ok = 0).
// cmd_reconfig loads the base address of cmd_img and triggers at once, in any mode.
// Each command ends with a one-cycle cmd_done; commands arriving while busy are ignored.
//
// Reading the image number at factory boot, the 1/2/3 decision, setting the register
// and triggering follow the published boot flow and memory map. The slot log, its
// address and the no-retry rule are this design's choices. Flash port as in rfu_pkg:
// request held until ready, then one response; the scan makes one read per slot.
module boot_selector
  import rfu_pkg::*;
#(
  parameter int unsigned N_SLOTS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        factory_mode,
  input  logic        config_error,
  input  logic        cmd_set_image,
  input  logic        cmd_reconfig,
  input  logic [1:0]  cmd_img,
  // flash command port
  output logic        fl_req_valid,
  output flash_req_t  fl_req,
  input  logic        fl_req_ready,
  input  logic        fl_rsp_valid,
  input  flash_rsp_t  fl_rsp,
  // reconfiguration controller
  output logic [22:0] reconfig_addr,
  output logic        reconfig_trigger,
  // status
  output logic        cmd_done,
  output logic        cmd_ok,
  output logic [1:0]  boot_image
);
  localparam int unsigned SW = $clog2(N_SLOTS + 1);

  typedef enum logic [2:0] {
    S_START, S_IDLE, S_RD_REQ, S_RD_WAIT, S_PROG_REQ, S_PROG_WAIT, S_RUN
  } state_e;

  state_e         state;
  logic           for_boot;     // scanning for boot (1) or for set-image (0)
  logic [SW-1:0]  slot;
  logic [15:0]    last_val;
  logic           found;
  logic [1:0]     new_img;

  always_comb begin
    fl_req_valid = (state == S_RD_REQ) || (state == S_PROG_REQ);
    fl_req.op    = (state == S_PROG_REQ) ? FL_PROGRAM : FL_READ;
    fl_req.addr  = IMGSEL_BASE + 23'({slot, 1'b0});
    fl_req.wdata = {14'd0, new_img};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= S_START;
      for_boot         <= 1'b0;
      slot             <= '0;
      last_val         <= 16'hFFFF;
      found            <= 1'b0;
      new_img          <= '0;
      reconfig_addr    <= FACTORY_BASE;
      reconfig_trigger <= 1'b0;
      cmd_done         <= 1'b0;
      cmd_ok           <= 1'b0;
      boot_image       <= '0;
    end else begin
      reconfig_trigger <= 1'b0;
      cmd_done         <= 1'b0;
      unique case (state)
        S_START: begin
          slot  <= '0;
          found <= 1'b0;
          if (factory_mode && !config_error) begin
            for_boot <= 1'b1;
            state    <= S_RD_REQ;
          end else begin
            state <= S_IDLE;
          end
        end
        S_IDLE: begin
          slot  <= '0;
          found <= 1'b0;
          if (cmd_reconfig) begin
            reconfig_addr    <= image_base(cmd_img);
            reconfig_trigger <= 1'b1;
            cmd_done         <= 1'b1;
            cmd_ok           <= 1'b1;
            state            <= S_RUN;
          end else if (cmd_set_image) begin
            new_img  <= cmd_img;
            for_boot <= 1'b0;
            state    <= S_RD_REQ;
          end
        end
        S_RD_REQ: if (fl_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (fl_rsp_valid) begin
          if (fl_rsp.error || fl_rsp.rdata == 16'hFFFF) begin
            // end of the log (or unreadable)
            if (for_boot) begin
              if (found && last_val inside {16'd1, 16'd2, 16'd3}) begin
                boot_image       <= last_val[1:0];
                reconfig_addr    <= image_base(last_val[1:0]);
                reconfig_trigger <= 1'b1;
                state            <= S_RUN;
              end else begin
                boot_image <= 2'd0;
                state      <= S_IDLE;
              end
            end else if (fl_rsp.error) begin
              cmd_done <= 1'b1;
              cmd_ok   <= 1'b0;
              state    <= S_IDLE;
            end else begin
              state <= S_PROG_REQ;     // first free slot found
            end
          end else begin
            found    <= 1'b1;
            last_val <= fl_rsp.rdata;
            if (slot == SW'(N_SLOTS - 1)) begin
              if (for_boot) begin
                // log full: use its last entry
                if (fl_rsp.rdata inside {16'd1, 16'd2, 16'd3}) begin
                  boot_image       <= fl_rsp.rdata[1:0];
                  reconfig_addr    <= image_base(fl_rsp.rdata[1:0]);
                  reconfig_trigger <= 1'b1;
                  state            <= S_RUN;
                end else begin
                  boot_image <= 2'd0;
                  state      <= S_IDLE;
                end
              end else begin
                cmd_done <= 1'b1;
                cmd_ok   <= 1'b0;
                state    <= S_IDLE;
              end
            end else begin
              slot  <= slot + 1'b1;
              state <= S_RD_REQ;
            end
          end
        end
        S_PROG_REQ: if (fl_req_ready) state <= S_PROG_WAIT;
        S_PROG_WAIT: if (fl_rsp_valid) begin
          cmd_done <= 1'b1;
          cmd_ok   <= !fl_rsp.error;
          state    <= S_IDLE;
        end
        // reconfiguration requested: the controller will reload the device
        S_RUN: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fl_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    fl_req_valid && !fl_req_ready |=> fl_req_valid && $stable(fl_req));

endmodule
