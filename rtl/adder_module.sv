// adder_module: residual adder of one core.
//
// Adds, lane by lane, a row from the residual buffer to the row on the
// datapath and saturates each sum to DW bits; with en = 0 the datapath row
// passes unchanged (no residual for this layer). Combinational.
//
// The paper places an adder module and a residual buffer in each core for
// the residual connections; lane count, saturation and the enable are this
// design's choices.
module adder_module
  import sdt_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned DW = DATA_W
) (
  input  logic                 en,
  input  logic signed [DW-1:0] a   [N],
  input  logic signed [DW-1:0] res [N],
  output logic signed [DW-1:0] y   [N]
);
  localparam logic signed [DW:0] MAXV = (DW+1)'(2**(DW-1) - 1);
  localparam logic signed [DW:0] MINV = -(DW+1)'(2**(DW-1));
  logic signed [DW:0] s [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      s[i] = (DW+1)'(a[i]) + (en ? (DW+1)'(res[i]) : '0);
      if (s[i] > MAXV)      y[i] = MAXV[DW-1:0];
      else if (s[i] < MINV) y[i] = MINV[DW-1:0];
      else                  y[i] = s[i][DW-1:0];
    end
  end
endmodule
