// tb_flash_map: self-checking test of the EPCS64 partition lookup.
// Checks the base address and region size of every image against the memory map,
// the sector count at sector boundaries, and which (image, size) pairs are accepted.
// The expected values are computed here from the published map (64 KiB sectors, 2 MB
// slots); the block is combinational, so each check waits 1 ns after the inputs change.
module tb_flash_map;
  import rfu_pkg::*;
  logic [1:0]  img_num;
  logic [31:0] file_size;
  logic [22:0] base_addr, region_bytes;
  logic [6:0]  n_sectors;
  logic        size_ok;
  int checks = 0, failures = 0;

  flash_map dut (.img_num, .file_size, .base_addr, .region_bytes, .n_sectors, .size_ok);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (img %0d size %0d)", what, got, exp, img_num, file_size);
    end
  endtask

  logic [22:0] bases [4] = '{23'h000000, 23'h1A0000, 23'h3B0000, 23'h5C0000};
  logic [22:0] lasts [4] = '{23'h18FFFF, 23'h39FFFF, 23'h5AFFFF, 23'h7BFFFF};

  initial begin
    for (int i = 0; i < 4; i++) begin
      img_num = 2'(i); file_size = 32'd1000; #1;
      expect_eq("base", base_addr, bases[i]);
      expect_eq("region end", base_addr + region_bytes - 1, lasts[i]);
      expect_eq("size_ok", size_ok, i != 0);
      // one spare 64 KiB sector after each application image (and after the factory)
      if (i > 0) expect_eq("gap", bases[i] - (lasts[i-1] + 1), 65536);
    end
    // the information sector sits above the last gap and the two spare sectors
    expect_eq("info", INFO_BASE, 23'h7BFFFF + 1 + 65536 + 131072);
    img_num = 2'd2;
    file_size = 0;          #1; expect_eq("empty ok", size_ok, 0); expect_eq("empty n", n_sectors, 0);
    file_size = 1;          #1; expect_eq("1 n", n_sectors, 1);  expect_eq("1 ok", size_ok, 1);
    file_size = 65536;      #1; expect_eq("64k n", n_sectors, 1);
    file_size = 65537;      #1; expect_eq("64k+1 n", n_sectors, 2);
    file_size = 1500000;    #1; expect_eq("1.5M n", n_sectors, 23);
    file_size = 32'h200000; #1; expect_eq("2M n", n_sectors, 32); expect_eq("2M ok", size_ok, 1);
    file_size = 32'h200001; #1; expect_eq("2M+1 ok", size_ok, 0);
    file_size = 32'hFFFFFFFF; #1; expect_eq("huge ok", size_ok, 0);
    for (int k = 0; k < 200; k++) begin
      int unsigned s;
      s = $urandom_range(1, 32'h200000);
      img_num = 2'($urandom_range(1, 3)); file_size = s; #1;
      expect_eq("rand n", n_sectors, (s + 65535) / 65536);
      expect_eq("rand ok", size_ok, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
