// sla: Spike Linear Array, NU spike linear units side by side.
//
// All units see the same encoded spike stream (the token positions of one
// input channel at a time) and each receives its own weight from the row of
// the weight buffer that belongs to that input channel, so one pass over the
// input channels produces NU output channels for every token. Read-out
// returns one token's NU results. clr zeroes all linear buffers; sat_evt
// reports that at least one unit saturated.
//
// Timing is that of the units: a spike is accumulated two cycles after it is
// presented; read-out data follow rd_en by one cycle.
//
// The paper names the array and notes that input channels, being stored in
// separate banks, could also be processed in parallel; this array instead
// parallelises over output channels, which is this design's choice.
module sla
  import sdt_pkg::*;
#(
  parameter int unsigned NU = 16,
  parameter int unsigned L  = 64,
  parameter int unsigned DW = DATA_W,
  parameter int unsigned PW = POS_W,
  localparam int unsigned AW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 in_valid,
  input  logic [PW-1:0]        in_pos,
  input  logic signed [DW-1:0] w [NU],
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data [NU],
  output logic                 sat_evt
);
  logic [NU-1:0] ov, sv;
  for (genvar j = 0; j < NU; j++) begin : g_slu
    slu #(.L(L), .DW(DW), .PW(PW)) u_slu (
      .clk, .rst_n, .clr, .in_valid, .in_pos, .w(w[j]),
      .rd_en, .rd_addr, .out_valid(ov[j]), .out_data(out_data[j]), .sat_evt(sv[j])
    );
  end
  assign out_valid = ov[0];
  assign sat_evt   = |sv;
endmodule
