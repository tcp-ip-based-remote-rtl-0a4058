// tb_led_image_indicator: checks the LED pattern of every running image
// (factory 00, image1 01, image2 10, image3 11, given as LED1 LED2), the published
// LED table, plus an invalid image number. Combinational: checks wait 1 ns.
module tb_led_image_indicator;
  logic factory_mode;
  logic [1:0] app_image;
  logic led1, led2;
  int checks = 0, failures = 0;

  led_image_indicator dut (.factory_mode, .app_image, .led1, .led2);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_leds(logic f, logic [1:0] img, logic e1, logic e2);
    factory_mode = f; app_image = img; #1;
    checks++;
    if (led1 !== e1 || led2 !== e2) begin
      failures++;
      $display("FAIL factory=%0d image=%0d: leds %0d%0d expected %0d%0d", f, img, led1, led2, e1, e2);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) expect_leds(1'b1, 2'(i), 1'b0, 1'b0);   // factory
    expect_leds(1'b0, 2'd1, 1'b0, 1'b1);
    expect_leds(1'b0, 2'd2, 1'b1, 1'b0);
    expect_leds(1'b0, 2'd3, 1'b1, 1'b1);
    expect_leds(1'b0, 2'd0, 1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
