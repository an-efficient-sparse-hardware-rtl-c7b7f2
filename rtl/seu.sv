// seu: Spike Encoding Unit, one leaky integrate-and-fire neuron that emits the
// token position of a spike instead of a binary 1.
//
// Per the LIF equations: Mem[t] = Spa[t] + Temp[t-1]; the neuron fires when
// Mem[t] - Vth >= 0; the temporal value carried to the next timestep is Vreset
// after a spike and gamma*Mem[t] otherwise. When it fires, the current token
// address is presented on pos_out with fire = 1, so that the Encoded Spike
// SRAM stores the position rather than a bit. pos_out is pos_in wired through:
// the encoded spike is the address itself, qualified by fire.
//
// The unit is purely combinational; the temporal value is held by the
// surrounding array's temporal buffer. The decay gamma is realised as an
// arithmetic right shift by `shift` (gamma = 2^-shift), following the ">>"
// block of the encoding unit; the width of the membrane adder (one bit more
// than the data) and saturating the carried value back to DATA_W bits are
// this design's choices.
module seu
  import sdt_pkg::*;
#(
  parameter int unsigned DW = DATA_W,
  parameter int unsigned PW = POS_W
) (
  input  logic signed [DW-1:0] spa,        // spatial input Spa[t]
  input  logic signed [DW-1:0] temp_prev,  // temporal input Temp[t-1]
  input  logic signed [DW-1:0] vth,
  input  logic signed [DW-1:0] vreset,
  input  logic [2:0]           shift,
  input  logic [PW-1:0]        pos_in,     // current token address
  output logic                 fire,
  output logic [PW-1:0]        pos_out,    // Pos[t], meaningful when fire = 1
  output logic signed [DW-1:0] temp_next   // Temp[t]
);
  logic signed [DW:0]   mem;
  logic signed [DW:0]   decayed;
  localparam logic signed [DW:0] MAXV = (DW+1)'(2**(DW-1) - 1);
  localparam logic signed [DW:0] MINV = -(DW+1)'(2**(DW-1));

  always_comb begin
    mem     = (DW+1)'(spa) + (DW+1)'(temp_prev);
    fire    = (mem >= (DW+1)'(vth));
    decayed = mem >>> shift;
    if (fire)                temp_next = vreset;
    else if (decayed > MAXV) temp_next = MAXV[DW-1:0];
    else if (decayed < MINV) temp_next = MINV[DW-1:0];
    else                     temp_next = decayed[DW-1:0];
    pos_out = pos_in;
  end
endmodule
