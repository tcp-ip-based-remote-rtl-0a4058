// flash_map: EPCS64 partition lookup for the firmware images.
//
// Purely combinational. For an image number (0 = factory, 1..3 = application images)
// it gives the byte base address and region size of that image in the 8 MB flash, and
// for a firmware file size the number of 64 KiB sectors that must be erased before the
// file is written. `size_ok` is set only for application images whose file is non-empty
// and no larger than the 2 MB region: the factory image is never rewritten remotely.
// The addresses and sizes follow the published memory map; refusing factory writes is
// this design's choice. Timing: no clock; outputs settle combinationally from the
// inputs, so the engine samples them in the cycle after it registers the BEGIN fields.
module flash_map
  import rfu_pkg::*;
(
  input  logic [1:0]  img_num,
  input  logic [31:0] file_size,
  output logic [22:0] base_addr,
  output logic [22:0] region_bytes,
  output logic [6:0]  n_sectors,
  output logic        size_ok
);
  logic [31:0] sectors_needed;

  always_comb begin
    base_addr    = image_base(img_num);
    region_bytes = (img_num == 2'd0) ? 23'(FACTORY_BYTES) : 23'(IMAGE_BYTES);
    // ceil(file_size / 65536)
    sectors_needed = (file_size >> SECTOR_SHIFT) + 32'(file_size[SECTOR_SHIFT-1:0] != '0);
    size_ok   = (img_num != 2'd0) && (file_size != '0) && (file_size <= IMAGE_BYTES);
    n_sectors = size_ok ? sectors_needed[6:0] : 7'd0;
  end
endmodule
