// reconfig_ctrl_model: behavioural model of the FPGA's remote-update block.
//
// Not synthesizable: it stands for the vendor reconfiguration controller together
// with the device's configuration logic. At power-up it holds rst_n low for a few
// clocks and reports the factory image. On reconfig_trigger it holds rst_n low, reads
// the image at reconfig_addr through the flash's configuration read port and checks
// it the way the test images are built: start word 0x5AA5, a length of at most 2 MB
// in words 1..2, and end word 0xA55A in the last word. A good image comes up in
// application mode with app_image set from its base address; a bad one (for example a
// half-written image whose end word is still erased) ends in a configuration error and
// the factory image comes back with config_error set. Address 0 reloads the factory
// image. rst_n is released LOAD_CYCLES clocks after the trigger (about 1 ms at 50 MHz
// by default, the load time reported for the real controller). The image format
// check stands in for the device's own configuration CRC and is this model's choice.
module reconfig_ctrl_model
  import rfu_pkg::*;
#(
  parameter int unsigned LOAD_CYCLES = 50_000
) (
  input  logic        clk,
  input  logic        reconfig_trigger,
  input  logic [22:0] reconfig_addr,
  output logic [22:0] cfg_addr,
  input  logic [15:0] cfg_data,
  output logic        rst_n,
  output logic        factory_mode,
  output logic        config_error,
  output logic [1:0]  app_image
);
  int unsigned n_loads = 0, n_errors = 0;

  initial begin
    rst_n = 1'b0; factory_mode = 1'b1; config_error = 1'b0; app_image = 2'd0; cfg_addr = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
  end

  function automatic logic [1:0] image_of(logic [22:0] a);
    case (a)
      IMAGE1_BASE: return 2'd1;
      IMAGE2_BASE: return 2'd2;
      IMAGE3_BASE: return 2'd3;
      default:     return 2'd0;
    endcase
  endfunction

  task automatic rd(input logic [22:0] a, output logic [15:0] d);
    cfg_addr = a;
    @(posedge clk);
    d = cfg_data;
  endtask

  always @(posedge clk) begin
    if (rst_n && reconfig_trigger) begin
      logic [22:0] a;
      logic [15:0] w0, w1, w2, wl;
      logic [31:0] n;
      bit good;
      a = reconfig_addr;
      #1 rst_n = 1'b0;
      n_loads++;
      if (a == FACTORY_BASE) begin
        factory_mode = 1'b1; config_error = 1'b0; app_image = 2'd0;
      end else begin
        rd(a, w0); rd(a + 23'd2, w1); rd(a + 23'd4, w2);
        n = {w2, w1};
        good = (w0 == 16'h5AA5) && (n >= 4) && (n <= IMAGE_BYTES / 2) && (image_of(a) != 2'd0);
        if (good) begin
          rd(a + 23'(2 * (n - 1)), wl);
          good = (wl == 16'hA55A);
        end
        if (good) begin
          factory_mode = 1'b0; config_error = 1'b0; app_image = image_of(a);
        end else begin
          factory_mode = 1'b1; config_error = 1'b1; app_image = 2'd0;
          n_errors++;
        end
      end
      repeat (LOAD_CYCLES) @(posedge clk);
      #1 rst_n = 1'b1;
    end
  end
endmodule
