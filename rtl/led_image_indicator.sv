// led_image_indicator: shows on two LEDs which firmware image is running.
//
// Combinational decode of the running configuration reported by the reconfiguration
// controller: factory -> LED1 low, LED2 low; image 1 -> low, high; image 2 -> high,
// low; image 3 -> high, high. The LED table is the one used to check upgrades on the
// test bench. In the original test each image had its own LED logic; one shared
// decoder driven by the running-image status is this design's choice. An application
// mode with image number 0 (not a valid image) shows the factory pattern.
// Timing: no clock; the LEDs follow the status inputs combinationally.
module led_image_indicator (
  input  logic       factory_mode,
  input  logic [1:0] app_image,
  output logic       led1,
  output logic       led2
);
  always_comb begin
    if (factory_mode) begin
      led1 = 1'b0;
      led2 = 1'b0;
    end else begin
      unique case (app_image)
        2'd1:    begin led1 = 1'b0; led2 = 1'b1; end
        2'd2:    begin led1 = 1'b1; led2 = 1'b0; end
        2'd3:    begin led1 = 1'b1; led2 = 1'b1; end
        default: begin led1 = 1'b0; led2 = 1'b0; end
      endcase
    end
  end
endmodule
