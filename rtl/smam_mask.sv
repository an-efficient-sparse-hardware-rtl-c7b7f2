// smam_mask: masking stage of the spike attention module.
//
// A multiplexer controlled by the mask bit s chooses between 0 and the Vs
// channel, and a register with enable captures the result. What is masked is
// the channel's content as held in the encoded spike memory, represented by
// its spike count: s = 1 keeps the count (the channel keeps its spikes),
// s = 0 gives 0 (the channel is cleared). The result appears one cycle after
// `en`.
//
// The multiplexer and enabled register follow the masking figure; applying
// them to the bank count is this design's choice.
module smam_mask #(
  parameter int unsigned CW = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          s,
  input  logic [CW-1:0] vs_cnt,
  output logic [CW-1:0] out_cnt
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out_cnt <= '0;
    else if (en) out_cnt <= s ? vs_cnt : '0;
  end
endmodule
