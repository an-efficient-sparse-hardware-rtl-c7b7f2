// tb_sdt_accel_full: end-to-end test of the accelerator with every parameter
// at its default (512 SPS channels on a 16x16 map, 3 x 512 channels for
// Qs/Ks/Vs, 64 tokens, 16 linear units). Same sequence and reference model as
// the reduced test (sdt_accel_tb_body.svh).
module tb_sdt_accel_full;
  localparam int N0 = 512, H0 = 16, W0 = 16, D = 512, L1 = 64, NU = 16, IBD = 256;
  localparam int WATCHDOG = 3000000, VTH_ATT = 16;

  `include "sdt_accel_tb_body.svh"

  sdt_accel dut (.*);
endmodule
