// maxpool_unit: conventional maxpooling for regular (multi-bit) values, the
// non-spike half of the maxpooling array.
//
// Values of one channel arrive one per cycle as (position, value), position
// row-major over an H x W map. Every pooled output whose K x K window (stride
// S) contains the position compares the value with its current maximum and
// keeps the larger, so each input is compared in all overlapping windows in
// the same cycle. clear sets every output to the most negative value. Unlike
// the spike unit, every position must be presented.
//
// The paper only says that the maxpooling array also contains conventional
// maxpooling modules for regular input; this streaming structure, which
// mirrors the spike unit, is this design's choice.
module maxpool_unit
  import sdt_pkg::*;
#(
  parameter int unsigned H  = 16,
  parameter int unsigned W  = 16,
  parameter int unsigned K  = 2,
  parameter int unsigned S  = 1,
  parameter int unsigned DW = DATA_W,
  parameter int unsigned PW = POS_W,
  localparam int unsigned HO = (H - K) / S + 1,
  localparam int unsigned WO = (W - K) / S + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [PW-1:0]        in_pos,
  input  logic signed [DW-1:0] in_val,
  output logic signed [DW-1:0] vals [HO*WO]
);
  localparam logic signed [DW-1:0] MINV = {1'b1, {(DW-1){1'b0}}};
  int unsigned r, c;
  logic [HO*WO-1:0] hit;

  always_comb begin
    r = 32'(in_pos) / W;
    c = 32'(in_pos) % W;
    for (int i = 0; i < HO; i++)
      for (int j = 0; j < WO; j++)
        hit[i*WO+j] = (r >= i*S) && (r < i*S + K) && (c >= j*S) && (c < j*S + K);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < HO*WO; k++) vals[k] <= MINV;
    end else if (clear) begin
      for (int k = 0; k < HO*WO; k++) vals[k] <= MINV;
    end else if (in_valid) begin
      for (int k = 0; k < HO*WO; k++)
        if (hit[k] && in_val > vals[k]) vals[k] <= in_val;
    end
  end
endmodule
