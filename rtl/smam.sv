// smam: Spike Mask-Add Module, spike-driven self-attention on encoded spikes
// for one channel at a time.
//
// In spike-driven self-attention the product of Q and K becomes the Hadamard
// product of two binary spike matrices, summed over the tokens of a channel;
// a spiking neuron turns the sum into a mask bit S, and S either keeps or
// clears that channel of Vs. Here the Qs and Ks channels are lists of token
// positions in increasing order, so their Hadamard product is the set of
// positions present in both lists. The comparator walks the two lists: equal
// positions give a hit (H = 1) and both lists advance; otherwise the list
// holding the smaller position advances, so the larger one stays in the
// comparator. It stops when either list is exhausted. Only spikes are ever
// read, so a channel costs at most qcnt + kcnt cycles.
//
// Sequence after `start` (one cycle each except the compare loop):
//   CMP  - one comparison per cycle, hits counted by smam_fire
//   LOAD - the count is latched; s = (count >= vth)
//   MASK - smam_mask captures s ? count(Vs) : 0
//   WB   - mask_we pulses with mask_cnt (write-back of the Vs bank count),
//          done pulses, s and sum stay valid until the next start.
// The memories are read combinationally (q_addr -> q_data in the same cycle).
//
// The compare-and-keep-the-larger walk, the token-wise sum, the threshold
// comparison and the 0/Vs multiplexer follow the paper; the state sequence
// and the handshake are this design's choices.
//
// h_pos is q_data wired through: on a hit both lists hold the same address,
// which is the token position of the Hadamard product's 1.
module smam
  import sdt_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned PW    = POS_W,
  localparam int unsigned EW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] vth,
  // Qs / Ks channel in the encoded spike memory
  input  logic [CW-1:0] q_cnt,
  input  logic [CW-1:0] k_cnt,
  output logic [EW-1:0] q_addr,
  output logic [EW-1:0] k_addr,
  input  logic [PW-1:0] q_data,
  input  logic [PW-1:0] k_data,
  // Vs channel
  input  logic [CW-1:0] v_cnt,
  output logic          mask_we,
  output logic [CW-1:0] mask_cnt,
  // status
  output logic          busy,
  output logic          done,
  output logic          s,
  output logic [CW-1:0] sum,
  output logic          h_valid,   // Hadamard hit this cycle
  output logic [PW-1:0] h_pos      // its token position
);
  typedef enum logic [2:0] {S_IDLE, S_CMP, S_LOAD, S_MASK, S_WB} state_e;
  state_e state;
  logic [CW-1:0] iq, ik;
  logic in_cmp, exhausted, eq, q_lt;

  assign in_cmp    = (state == S_CMP);
  assign exhausted = (iq >= q_cnt) || (ik >= k_cnt);
  assign eq        = (q_data == k_data);
  assign q_lt      = (q_data <  k_data);
  assign q_addr    = EW'(iq);
  assign k_addr    = EW'(ik);
  assign h_valid   = in_cmp && !exhausted && eq;
  assign h_pos     = q_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      iq    <= '0;
      ik    <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_CMP;
          iq    <= '0;
          ik    <= '0;
        end
        S_CMP: begin
          if (exhausted) state <= S_LOAD;
          else if (eq) begin
            iq <= iq + 1'b1;
            ik <= ik + 1'b1;
          end else if (q_lt) iq <= iq + 1'b1;
          else               ik <= ik + 1'b1;
        end
        S_LOAD: state <= S_MASK;
        S_MASK: state <= S_WB;
        default: state <= S_IDLE;
      endcase
    end
  end

  smam_fire #(.CW(CW)) u_fire (
    .clk, .rst_n, .clr(state == S_IDLE && start), .h(h_valid),
    .load(state == S_LOAD), .vth, .sum, .s
  );

  smam_mask #(.CW(CW)) u_mask (
    .clk, .rst_n, .en(state == S_MASK), .s, .vs_cnt(v_cnt), .out_cnt(mask_cnt)
  );

  assign mask_we = (state == S_WB);
  assign done    = (state == S_WB);
  assign busy    = (state != S_IDLE);

  // The walk only moves forward: an address never passes its list's count.
  a_ptr_bound: assert property (@(posedge clk) disable iff (!rst_n)
    in_cmp |-> (iq <= q_cnt) && (ik <= k_cnt));
endmodule
