// buffer_ram: row-organised on-chip buffer, used for the input, output, weight
// and residual buffers.
//
// DEPTH rows of LANES elements of DW bits. Two write ports: an element port
// (one lane of one row, used by the bus) and a row port (a whole row, used by
// the datapath); the row port wins if both hit the same row and lane in one
// cycle. Two read ports: a row port returning all lanes of a row and an
// element port returning one lane, both asynchronous (distributed-memory
// style). Contents are not reset.
//
// The paper names these buffers without describing them; their organisation
// is this design's choice.
module buffer_ram #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned LANES = 16,
  parameter int unsigned DW    = 10,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                clk,
  input  logic                e_we,
  input  logic [AW-1:0]       e_wrow,
  input  logic [LW-1:0]       e_wlane,
  input  logic [DW-1:0]       e_wdata,
  input  logic                r_we,
  input  logic [AW-1:0]       r_wrow,
  input  logic [LANES*DW-1:0] r_wdata,
  input  logic [AW-1:0]       r_rrow,
  output logic [LANES*DW-1:0] r_rdata,
  input  logic [AW-1:0]       e_rrow,
  input  logic [LW-1:0]       e_rlane,
  output logic [DW-1:0]       e_rdata
);
  logic [LANES*DW-1:0] mem [DEPTH];
  logic [LANES*DW-1:0] erow;

  always_ff @(posedge clk) begin
    if (e_we) mem[e_wrow][32'(e_wlane)*DW +: DW] <= e_wdata;
    if (r_we) mem[r_wrow] <= r_wdata;
  end

  assign r_rdata = mem[r_rrow];
  assign erow    = mem[e_rrow];
  assign e_rdata = erow[32'(e_rlane)*DW +: DW];
endmodule
