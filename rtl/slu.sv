// slu: Spike Linear Unit, one output channel of a multiplication-free linear
// layer on encoded spikes.
//
// For a spike input X (tokens x input channels) and weights W, output
// Y[p][j] = sum over input channels c of X[p][c] * W[c][j] reduces to adding
// W[c][j] to Y[p][j] for every spike of channel c at token p. The unit keeps
// Y[.][j] for all tokens in its linear buffer. Each encoded spike (in_pos = p)
// arriving with its weight (w = W[c][j], read from the weight buffer by the
// input channel being streamed) reads Y[p]; one cycle later the sum is
// saturated to DW bits and written back at the delayed address.
//
// Pipeline: cycle 0 read linear buffer at in_pos (registered read, address
// and weight delayed by one register); cycle 1 add, saturate, write. A spike
// at the address being written in the same cycle would read a stale value;
// such a read takes the value being written instead (forwarding). Within one
// channel positions are strictly increasing, so this only happens where one
// channel's last spike meets the next channel's first.
//
// clr zeroes the whole linear buffer. Read-out: rd_en/rd_addr, result in
// out_data with out_valid one cycle later (output register with enable).
// sat_evt pulses when a write-back saturated.
//
// Read/add/saturate/write with a delayed write address and an enabled output
// register follow the unit's figure; the forwarding path and the
// one-output-channel-per-unit mapping are this design's choices.
module slu
  import sdt_pkg::*;
#(
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
  input  logic signed [DW-1:0] w,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data,
  output logic                 sat_evt
);
  logic signed [DW-1:0] lbuf [L];
  logic signed [DW-1:0] rdata, wdata, fwd_data;
  logic signed [DW+1:0] sum;
  logic [AW-1:0]        waddr;
  logic signed [DW-1:0] w_d;
  logic                 v_d, fwd;
  localparam logic signed [DW+1:0] MAXV = (DW+2)'(2**(DW-1) - 1);
  localparam logic signed [DW+1:0] MINV = -(DW+2)'(2**(DW-1));

  always_comb begin
    sum     = (DW+2)'(fwd ? fwd_data : rdata) + (DW+2)'(w_d);
    if (sum > MAXV)      wdata = MAXV[DW-1:0];
    else if (sum < MINV) wdata = MINV[DW-1:0];
    else                 wdata = sum[DW-1:0];
    sat_evt = v_d && (sum != (DW+2)'(wdata));
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int i = 0; i < L; i++) lbuf[i] <= '0;
    end else if (v_d) begin
      lbuf[waddr] <= wdata;
    end
    rdata    <= lbuf[AW'(in_pos)];
    waddr    <= AW'(in_pos);
    w_d      <= w;
    fwd      <= v_d && (waddr == AW'(in_pos));
    fwd_data <= wdata;
    if (rd_en) out_data <= lbuf[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_d       <= in_valid && !clr;
      out_valid <= rd_en;
    end
  end
endmodule
