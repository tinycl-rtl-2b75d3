// tb_tinycl_top_full: end-to-end test of the accelerator at its full size
// (tinycl_top with its default parameters: 1000 sample slots of 32x32x3,
// 32x32x8 feature maps, 8 filters per conv layer, up to 10 classes).
// The training memory is filled with 1003 offered samples through the GDumb
// slot manager; then one training step with 2 classes, one with all 10, and
// an inference pass run, all compared word for word with the reference
// model. Every command's cycle count is checked against the compute count
// (8192 per conv op, 1280 per dense op with 10 classes) plus overhead.
// See tinycl_top_tb_body.svh for the shared checks.
module tb_tinycl_top_full;
  localparam int H = 32, W = 32, NSLOT = 1000, NC_MAX = 10, SWORDS = H * W;
  localparam int PFD = 4096, KD = 10384, GD = 1024;
  localparam int NC2 = 10;
  localparam int DY_SHIFT = 7;
  localparam bit VERBOSE_CYC = 1;
  localparam longint TB_WATCHDOG = 64'd2_000_000_000;

  `include "tinycl_top_tb_body.svh"

  tinycl_top dut (.*);
endmodule
