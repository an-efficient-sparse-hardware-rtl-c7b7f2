// maxpool_array: the maxpooling array of the patch-splitting core.
//
// It holds a spike maxpooling unit (encoded-spike input) and a conventional
// maxpooling unit (regular multi-bit input) and steers one shared input
// stream to one of them by `regular`: 0 selects spike mode, in which only
// in_pos matters and each input is an encoded spike; 1 selects regular mode,
// in which every position of the map arrives with its value. clear empties
// both units. Outputs are the pooled spike map and the pooled values, one
// cycle after the last input.
//
// That the array combines spike and conventional units follows the paper;
// one unit of each kind sharing one input stream is this design's choice.
module maxpool_array
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
  input  logic                 regular,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [PW-1:0]        in_pos,
  input  logic signed [DW-1:0] in_val,
  output logic [HO*WO-1:0]     spike_map,
  output logic signed [DW-1:0] vals [HO*WO]
);
  logic spk_valid, reg_valid;
  assign spk_valid = in_valid && !regular;
  assign reg_valid = in_valid &&  regular;

  smu #(.H(H), .W(W), .K(K), .S(S), .PW(PW)) u_smu (
    .clk, .rst_n, .clear, .in_valid(spk_valid), .in_pos, .map(spike_map)
  );

  maxpool_unit #(.H(H), .W(W), .K(K), .S(S), .DW(DW), .PW(PW)) u_mp (
    .clk, .rst_n, .clear, .in_valid(reg_valid), .in_pos, .in_val, .vals
  );
endmodule
