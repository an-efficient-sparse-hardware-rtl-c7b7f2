// smam_fire: token-wise accumulation and fire determination of the spike
// attention module.
//
// Each cycle with h = 1 (a Hadamard-product hit: Qs and Ks both spike at the
// same token) the accumulator counts one. When `load` is pulsed the count is
// copied into the output register, whose comparison with the threshold gives
// the mask bit: s = (sum >= vth). `clr` restarts the count for the next
// channel.
//
// Adder, accumulation register, controlled output register and comparator are
// those of the accumulate-and-fire figure. The >= comparison follows the
// neuron's step function, which is 1 at zero ("greater than or equal to 0");
// the prose of the attention section says "exceed".
module smam_fire #(
  parameter int unsigned CW = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          h,
  input  logic          load,
  input  logic [CW-1:0] vth,
  output logic [CW-1:0] sum,
  output logic          s
);
  logic [CW-1:0] acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      sum <= '0;
    end else begin
      if (clr)    acc <= '0;
      else if (h) acc <= acc + 1'b1;
      if (load)   sum <= acc;
    end
  end
  assign s = (sum >= vth);
endmodule
