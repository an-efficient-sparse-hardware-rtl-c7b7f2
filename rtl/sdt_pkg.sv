// sdt_pkg: widths, operation codes and the run-time configuration shared by
// the spike-driven transformer accelerator.
//
// DATA_W (10) is the width of weights and activations and POS_W (8) the width
// of an encoded spike (a token position); both follow the quantisation the
// design was evaluated with. Everything else here (the operation codes, the
// configuration fields and the register map used by the bus interface) is
// this implementation's own choice.
package sdt_pkg;

  localparam int unsigned DATA_W = 10;  // weights and activations
  localparam int unsigned POS_W  = 8;   // encoded spike = token position

  // Operations the controller sequences. One command runs one operation
  // over NTOK tokens or NCH channels, for one timestep.
  typedef enum logic [2:0] {
    OP_NONE = 3'd0,
    OP_ENC0 = 3'd1,  // SPS core: tile-engine rows (+ResBuffer0) -> SEA0 -> ESS0
    OP_POOL = 3'd2,  // SPS core: maxpooling array, spike (ESS0) or regular input
    OP_ENC1 = 3'd3,  // SDEB core: input-buffer rows -> SEA1 -> ESS1 (Q|K|V banks)
    OP_SDSA = 3'd4,  // SDEB core: SMAM over every channel, masks V banks
    OP_LIN  = 3'd5,  // SDEB core: SLA over the (masked) V banks
    OP_OUT  = 3'd6   // SDEB core: SLA result (+ResBuffer1) -> Output Buffer
  } op_e;

  typedef struct packed {
    op_e                       op;
    logic                      first_ts;     // timestep 0: temporal input is zero
    logic                      res_en;       // adder module adds the ResBuffer row
    logic                      res_wr;       // adder output is written to the ResBuffer
    logic                      pool_regular; // maxpooling on regular values, not spikes
    logic signed [DATA_W-1:0]  vth;          // SEU firing threshold
    logic signed [DATA_W-1:0]  vreset;       // SEU reset potential
    logic [2:0]                shift;        // SEU decay: gamma = 2^-shift
    logic [POS_W:0]            vth_attn;     // SMAM firing threshold (token count)
    logic [11:0]               ntok;         // tokens per operation
    logic [11:0]               nch;          // channels per operation
  } cfg_t;

  // Bus address map: addr[31:28] region, addr[27:16] row, addr[15:0] lane
  // (or register index in the CSR region).
  typedef enum logic [3:0] {
    RG_CSR  = 4'd0,
    RG_IBUF = 4'd1,
    RG_WBUF = 4'd2,
    RG_RB0  = 4'd3,
    RG_RB1  = 4'd4,
    RG_OBUF = 4'd5
  } region_e;

  // CSR indices
  localparam logic [3:0] CSR_CMD    = 4'd0;  // write starts the command
  localparam logic [3:0] CSR_VTH    = 4'd1;
  localparam logic [3:0] CSR_VRESET = 4'd2;
  localparam logic [3:0] CSR_SHIFT  = 4'd3;
  localparam logic [3:0] CSR_VTHATT = 4'd4;
  localparam logic [3:0] CSR_STATUS = 4'd5;  // {done_sticky, busy}
  localparam logic [3:0] CSR_NTOK   = 4'd6;
  localparam logic [3:0] CSR_NCH    = 4'd7;
  localparam logic [3:0] CSR_NMASK  = 4'd8;  // channels whose mask S was 1

  // CMD word: [2:0] op, [8] first_ts, [9] res_en, [10] res_wr, [11] pool_regular


endpackage
