// controller: sequences one operation (one command) over tokens or channels
// and drives the strobes of every datapath block.
//
// A command is started by `start` with the configuration in `cfg`. busy is
// high until `done` pulses; every operation ends with a short drain so that
// the last write of the pipelines has landed when done rises.
//   OP_ENC0 - counts rows arriving from the tile engine (te_spa_valid) as
//             tokens 0..ntok-1 and issues sea0_valid; clears ESS0 at start.
//   OP_POOL - spike mode: for channels 0..nch-1, clear the pooling unit,
//             stream the channel's spikes from ESS0 (idx 0..count-1), then
//             pulse pool_out_valid. Regular mode: clear, accept the tile
//             engine's value stream until te_mp_last, pulse pool_out_valid.
//   OP_ENC1 - reads input-buffer rows 0..ntok-1, one per cycle, into SEA1;
//             clears ESS1 at start.
//   OP_SDSA - for channels 0..nch-1 starts the attention module and waits for
//             its done.
//   OP_LIN  - clears the linear array, then for channels 0..nch-1 streams the
//             Vs channel's spikes (idx 0..count-1) with that channel's weight
//             row.
//   OP_OUT  - reads the linear array for tokens 0..ntok-1; out_we/out_row
//             follow one cycle later for the output buffer.
//
// The paper says only that the controller generates the control signals of
// all modules and data movement; this command set and the state machine are
// this design's choices.
module controller
  import sdt_pkg::*;
#(
  parameter int unsigned EW = 6,   // width of an entry index in an ESS bank
  parameter int unsigned CW = 7    // width of an ESS bank count
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cfg_t          cfg,
  output logic          busy,
  output logic          done,
  // tile engine side
  input  logic          te_spa_valid,
  input  logic          te_mp_valid,
  input  logic          te_mp_last,
  // position counters
  output logic [11:0]   tok,
  output logic [11:0]   ch,
  output logic [EW-1:0] idx,
  input  logic [CW-1:0] cnt,        // count of the ESS bank being streamed
  // SPS core
  output logic          ess0_clear,
  output logic          sea0_valid,
  output logic          mp_clear,
  output logic          mp_valid,
  output logic          pool_out_valid,
  // SDEB core
  output logic          ess1_clear,
  output logic          sea1_valid,
  output logic          smam_start,
  input  logic          smam_done,
  output logic          sla_clr,
  output logic          sla_valid,
  output logic          sla_rd_en,
  output logic          out_we,
  output logic [11:0]   out_row
);
  typedef enum logic [3:0] {
    C_IDLE, C_ENC0, C_PCLR, C_PRUN, C_POUT, C_ENC1,
    C_SSTART, C_SWAIT, C_LCLR, C_LRUN, C_ORUN, C_DRAIN
  } state_e;
  state_e     state;
  logic [1:0] drain;
  logic       last_ch, last_tok, idx_end;

  assign last_ch  = (ch  + 1'b1 >= cfg.nch);
  assign last_tok = (tok + 1'b1 >= cfg.ntok);
  assign idx_end  = (CW'(idx) >= cnt);
  assign busy     = (state != C_IDLE);

  always_comb begin
    ess0_clear     = (state == C_IDLE) && start && cfg.op == OP_ENC0;
    ess1_clear     = (state == C_IDLE) && start && cfg.op == OP_ENC1;
    sea0_valid     = (state == C_ENC0) && te_spa_valid;
    sea1_valid     = (state == C_ENC1);
    mp_clear       = (state == C_PCLR);
    mp_valid       = (state == C_PRUN) && (cfg.pool_regular ? te_mp_valid : !idx_end);
    pool_out_valid = (state == C_POUT);
    smam_start     = (state == C_SSTART);
    sla_clr        = (state == C_LCLR);
    sla_valid      = (state == C_LRUN) && !idx_end;
    sla_rd_en      = (state == C_ORUN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= C_IDLE;
      tok     <= '0;
      ch      <= '0;
      idx     <= '0;
      drain   <= '0;
      done    <= 1'b0;
      out_we  <= 1'b0;
      out_row <= '0;
    end else begin
      done    <= 1'b0;
      out_we  <= (state == C_ORUN);
      out_row <= tok;
      case (state)
        C_IDLE: if (start) begin
          tok <= '0;
          ch  <= '0;
          idx <= '0;
          case (cfg.op)
            OP_ENC0: state <= C_ENC0;
            OP_POOL: state <= C_PCLR;
            OP_ENC1: state <= C_ENC1;
            OP_SDSA: state <= C_SSTART;
            OP_LIN:  state <= C_LCLR;
            OP_OUT:  state <= C_ORUN;
            default: state <= C_DRAIN;
          endcase
        end
        C_ENC0: if (te_spa_valid) begin
          tok <= tok + 1'b1;
          if (last_tok) state <= C_DRAIN;
        end
        C_PCLR: begin
          idx   <= '0;
          state <= C_PRUN;
        end
        C_PRUN: begin
          if (cfg.pool_regular) begin
            if (te_mp_valid && te_mp_last) state <= C_POUT;
          end else if (idx_end) state <= C_POUT;
          else idx <= idx + 1'b1;
        end
        C_POUT: begin
          if (last_ch || cfg.pool_regular) state <= C_DRAIN;
          else begin
            ch    <= ch + 1'b1;
            state <= C_PCLR;
          end
        end
        C_ENC1: begin
          tok <= tok + 1'b1;
          if (last_tok) state <= C_DRAIN;
        end
        C_SSTART: state <= C_SWAIT;
        C_SWAIT: if (smam_done) begin
          if (last_ch) state <= C_DRAIN;
          else begin
            ch    <= ch + 1'b1;
            state <= C_SSTART;
          end
        end
        C_LCLR: state <= C_LRUN;
        C_LRUN: begin
          if (!idx_end) idx <= idx + 1'b1;
          else begin
            idx <= '0;
            if (last_ch) state <= C_DRAIN;
            else ch <= ch + 1'b1;
          end
        end
        C_ORUN: begin
          tok <= tok + 1'b1;
          if (last_tok) state <= C_DRAIN;
        end
        C_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd3) begin
            state <= C_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
