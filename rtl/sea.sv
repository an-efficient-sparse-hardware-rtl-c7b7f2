// sea: Spike Encoding Array, N spike encoding units and the temporal buffer.
//
// Each cycle with in_valid the array takes one token: the spatial inputs of
// all N channels at token address in_pos. Unit c adds its spatial input to the
// temporal value it left for this token in the previous timestep (zero when
// first_ts is set), decides whether to fire, and writes its new temporal value
// back into the temporal buffer row in_pos. One cycle later out_valid rises
// with out_fire[c] set for every channel that fired and out_pos holding the
// token address; the Encoded Spike SRAM appends out_pos to bank c for each
// such channel. Because tokens are fed in increasing order, every bank ends up
// sorted by address.
//
// Following the encoding-array figure, the N units work in parallel and share
// one temporal buffer. Mapping one unit to one channel (so the array walks the
// tokens) and the single-cycle latency are this design's choices. The temporal
// buffer is one row of N values per token, with an asynchronous read.
module sea
  import sdt_pkg::*;
#(
  parameter int unsigned N  = 1536,  // units working in parallel
  parameter int unsigned L  = 64,    // tokens per feature map
  parameter int unsigned DW = DATA_W,
  parameter int unsigned PW = POS_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [PW-1:0]        in_pos,
  input  logic signed [DW-1:0] spa [N],
  input  logic                 first_ts,
  input  logic signed [DW-1:0] vth,
  input  logic signed [DW-1:0] vreset,
  input  logic [2:0]           shift,
  output logic                 out_valid,
  output logic [N-1:0]         out_fire,
  output logic [PW-1:0]        out_pos
);
  localparam int unsigned AW = (L > 1) ? $clog2(L) : 1;

  logic [N*DW-1:0] tbuf [L];   // temporal buffer
  logic [N*DW-1:0] trow_rd, trow_wr;
  logic [N-1:0]    fire;
  logic [AW-1:0]   row;

  assign row     = AW'(in_pos);
  assign trow_rd = first_ts ? '0 : tbuf[row];

  for (genvar c = 0; c < N; c++) begin : g_seu
    logic signed [DW-1:0] tprev, tnext;
    logic [PW-1:0]        pos_c;
    assign tprev = trow_rd[c*DW +: DW];
    seu #(.DW(DW), .PW(PW)) u_seu (
      .spa(spa[c]), .temp_prev(tprev), .vth(vth), .vreset(vreset),
      .shift(shift), .pos_in(in_pos), .fire(fire[c]), .pos_out(pos_c),
      .temp_next(tnext)
    );
    assign trow_wr[c*DW +: DW] = tnext;
  end

  always_ff @(posedge clk) begin
    if (in_valid) tbuf[row] <= trow_wr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_fire  <= '0;
      out_pos   <= '0;
    end else begin
      out_valid <= in_valid;
      out_fire  <= in_valid ? fire : '0;
      out_pos   <= in_pos;
    end
  end
endmodule
