// smu: Spike Maxpooling Unit.
//
// With binary spikes, a pooled output is 1 exactly when its kernel covers at
// least one spike. The unit therefore takes only the encoded spikes of one
// channel (token positions, row-major over an H x W map) and, for each one,
// sets in a single cycle every pooled output whose K x K window (stride S)
// contains that position. Overlapping windows are served by the same spike,
// e.g. with K = 2, S = 1 a spike at m01 sets both M0 and M1. Positions with no
// spike cost no cycles.
//
// Interface: clear empties the pooled map; each in_valid cycle handles one
// encoded spike; the map is a registered output, updated one cycle after the
// spike. The K = 2, S = 1 default is the worked example of the paper; the
// feature-map size and the all-windows-in-parallel comparison are this
// design's choices. No padding is applied.
module smu
  import sdt_pkg::*;
#(
  parameter int unsigned H  = 16,
  parameter int unsigned W  = 16,
  parameter int unsigned K  = 2,
  parameter int unsigned S  = 1,
  parameter int unsigned PW = POS_W,
  localparam int unsigned HO = (H - K) / S + 1,
  localparam int unsigned WO = (W - K) / S + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [PW-1:0]     in_pos,
  output logic [HO*WO-1:0]  map      // bit i*WO+j = pooled output (i, j)
);
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
    if (!rst_n)        map <= '0;
    else if (clear)    map <= '0;
    else if (in_valid) map <= map | hit;
  end
endmodule
