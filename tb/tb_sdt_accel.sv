// tb_sdt_accel: end-to-end test of the accelerator at reduced size (8 SPS
// channels on a 6x6 map, 4 channels per Q/K/V group, 16 tokens, 3 linear
// units), through the bus and tile-engine ports only. See
// sdt_accel_tb_body.svh for the sequence and the reference model.
module tb_sdt_accel;
  localparam int N0 = 8, H0 = 6, W0 = 6, D = 4, L1 = 16, NU = 3, IBD = 16;
  localparam int WATCHDOG = 200000, VTH_ATT = 2;

  `include "sdt_accel_tb_body.svh"

  sdt_accel #(.N0(N0), .H0(H0), .W0(W0), .PK(2), .PS(1), .D(D), .L1(L1), .NU(NU), .IBD(IBD)) dut (.*);
endmodule
