// tb_xor_checksum: self-checking test of the running XOR checksum.
// Folds random words (with random gaps), compares the sum with an XOR computed here
// after every clock, and checks that clear restarts the sum and wins over en.
// Timing: the sum is registered; it is compared on the falling edge after the clock
// that takes each word. The XOR checksum follows the protocol; the clear/en
// interface is this design's.
module tb_xor_checksum;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [15:0] word = '0, sum, ref_sum;
  int checks = 0, failures = 0;

  xor_checksum #(.W(16)) dut (.clk, .rst_n, .clear, .en, .word, .sum);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    checks++;
    if (sum !== ref_sum) begin
      failures++;
      $display("FAIL %s: sum=%h expected %h", what, sum, ref_sum);
    end
  endtask

  initial begin
    ref_sum = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); check("after reset");
    for (int pkt = 0; pkt < 20; pkt++) begin
      clear = 1'b1; en = ($urandom_range(0, 1) == 1); word = 16'($urandom);
      @(posedge clk); @(negedge clk);
      clear = 1'b0; ref_sum = '0;
      check("clear");
      for (int i = 0; i < 700; i++) begin
        en = ($urandom_range(0, 3) != 0);
        word = 16'($urandom);
        if (en) ref_sum ^= word;
        @(posedge clk); @(negedge clk);
        check("fold");
      end
    end
    // a known vector: 0xDADA ^ 0x0001 ^ 0x0000 ^ 0x1234 = 0xC8EF
    clear = 1'b1; @(posedge clk); @(negedge clk); clear = 1'b0;
    foreach (vec[i]) begin en = 1'b1; word = vec[i]; @(posedge clk); @(negedge clk); end
    en = 1'b0; ref_sum = 16'hC8EF; check("known vector");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [15:0] vec [4] = '{16'hDADA, 16'h0001, 16'h0000, 16'h1234};
endmodule
