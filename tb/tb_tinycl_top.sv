// tb_tinycl_top: end-to-end test of the whole accelerator at a reduced size
// (4x8 samples, 6 sample slots, up to 4 classes). See tinycl_top_tb_body.svh
// for what is run and checked.
module tb_tinycl_top;
  localparam int H = 4, W = 8, NSLOT = 6, NC_MAX = 4, SWORDS = H * W;
  localparam int PFD = 128, KD = 512, GD = 64;
  localparam longint TB_WATCHDOG = 64'd50_000_000;
  localparam int NC2 = 3;
  localparam int DY_SHIFT = 2;
  localparam bit VERBOSE_CYC = 0;

  `include "tinycl_top_tb_body.svh"

  tinycl_top #(.NSLOT(NSLOT), .NCLS(NC_MAX), .SAMPLE_WORDS(SWORDS), .PF_DEPTH(PFD),
               .K_DEPTH(KD), .G_DEPTH(GD), .NL_MAX(3), .NMAX_OUT(16)) dut (.*);
endmodule
