// ess: Encoded Spike SRAM, one bank per channel holding the token positions of
// that channel's spikes, in the order they were written (address order).
//
// Write side: when wr_valid is high every bank c with wr_fire[c] set appends
// wr_pos at its own fill pointer cnt[c] (the spike encoding array produces at
// most one spike per channel per cycle). clear empties all banks. A masking
// write (mask_we) sets the fill count of bank mask_bank to mask_cnt, which is
// how a channel of Vs is cleared (count 0) or kept (count unchanged).
//
// Read side: two ports (A, B) each select a bank and an entry and return the
// stored position and the bank's count, combinationally; a third port C returns
// only the count of a bank. The spike attention module uses A and B for the Qs
// and Ks channels and C for the Vs channel; the linear array and the
// maxpooling array use port A.
//
// Storing positions per channel in address order follows the paper. The
// fill-count organisation, the port count and the asynchronous reads are this
// design's choices; a write beyond DEPTH entries is dropped.
module ess
  import sdt_pkg::*;
#(
  parameter int unsigned NB    = 1536,  // banks = channels
  parameter int unsigned DEPTH = 64,    // entries per bank = tokens
  parameter int unsigned PW    = POS_W,
  localparam int unsigned BW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned EW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           wr_valid,
  input  logic [NB-1:0]  wr_fire,
  input  logic [PW-1:0]  wr_pos,
  input  logic           mask_we,
  input  logic [BW-1:0]  mask_bank,
  input  logic [CW-1:0]  mask_cnt,
  input  logic [BW-1:0]  a_bank,
  input  logic [EW-1:0]  a_addr,
  output logic [PW-1:0]  a_data,
  output logic [CW-1:0]  a_cnt,
  input  logic [BW-1:0]  b_bank,
  input  logic [EW-1:0]  b_addr,
  output logic [PW-1:0]  b_data,
  output logic [CW-1:0]  b_cnt,
  input  logic [BW-1:0]  c_bank,
  output logic [CW-1:0]  c_cnt
);
  logic [CW-1:0] cnt [NB];
  logic [PW-1:0] rd_a [NB];
  logic [PW-1:0] rd_b [NB];

  for (genvar c = 0; c < NB; c++) begin : g_bank
    logic [PW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_valid && wr_fire[c] && cnt[c] < CW'(DEPTH))
        mem[EW'(cnt[c])] <= wr_pos;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                             cnt[c] <= '0;
      else if (clear)                                         cnt[c] <= '0;
      else if (mask_we && mask_bank == BW'(c))                cnt[c] <= mask_cnt;
      else if (wr_valid && wr_fire[c] && cnt[c] < CW'(DEPTH)) cnt[c] <= cnt[c] + 1'b1;
    end
    assign rd_a[c] = mem[a_addr];
    assign rd_b[c] = mem[b_addr];
  end

  assign a_data = rd_a[a_bank];
  assign b_data = rd_b[b_bank];
  assign a_cnt  = cnt[a_bank];
  assign b_cnt  = cnt[b_bank];
  assign c_cnt  = cnt[c_bank];
endmodule
