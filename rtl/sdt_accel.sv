// sdt_accel: sparse accelerator for the spike-driven transformer, top level.
//
// Two cores share a controller, a bus interface and the on-chip buffers.
//  * Patch-splitting (SPS) core: the convolution tile engine sits outside this
//    module (its ports are te_*). Its output rows, one token of N0 channels per
//    cycle, pass the residual adder (ResBuffer0) into spike encoding array 0,
//    whose spikes are stored as token positions in ESS0, one bank per channel.
//    The maxpooling array pools either those encoded spikes (channel by
//    channel) or a regular value stream from the tile engine; results go back
//    on the pool_* ports.
//  * Encoder-block (SDEB) core: rows of 3*D channels from the input buffer are
//    encoded by spike encoding array 1 into ESS1, whose banks hold Qs
//    (0..D-1), Ks (D..2D-1) and Vs (2D..3D-1). The spike mask-add module
//    computes each channel's attention mask and clears masked Vs channels in
//    place; the spike linear array then runs a linear layer over the Vs
//    channels with weights from the weight buffer, and its results, plus the
//    ResBuffer1 residual, are written to the output buffer.
// The host drives everything through the bus (see bus_interface): it fills the
// buffers, writes the configuration, issues one command per operation and
// reads the output buffer.
//
// Defaults: 10-bit data, 8-bit encoded spikes and 1536 neurons encoding in
// parallel (3 x 512 channels for Qs, Ks, Vs) come from the paper; the token
// counts, the SPS core width, the linear array width and the 2x2/stride-1
// pooling window (the paper's example) are this design's choices.
module sdt_accel
  import sdt_pkg::*;
#(
  parameter int unsigned N0  = 512,  // SPS core: channels encoded in parallel
  parameter int unsigned H0  = 16,   // SPS feature map height
  parameter int unsigned W0  = 16,   // SPS feature map width
  parameter int unsigned PK  = 2,    // pooling window
  parameter int unsigned PS  = 1,    // pooling stride
  parameter int unsigned D   = 512,  // SDEB channels per Q/K/V group
  parameter int unsigned L1  = 64,   // SDEB tokens
  parameter int unsigned NU  = 16,   // spike linear units
  parameter int unsigned IBD = 256,  // input buffer rows
  localparam int unsigned N1  = 3 * D,
  localparam int unsigned L0  = H0 * W0,
  localparam int unsigned HO  = (H0 - PK) / PS + 1,
  localparam int unsigned WO  = (W0 - PK) / PS + 1,
  localparam int unsigned DW  = DATA_W,
  localparam int unsigned PW  = POS_W,
  localparam int unsigned IBA = $clog2(IBD)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host bus
  input  logic                 bus_we,
  input  logic                 bus_re,
  input  logic [31:0]          bus_addr,
  input  logic [31:0]          bus_wdata,
  output logic [31:0]          bus_rdata,
  output logic                 bus_rvalid,
  output logic                 busy,
  output logic                 done,
  // tile engine: reads the input buffer, returns convolution rows
  input  logic [IBA-1:0]       te_ib_row,
  output logic [N1*DW-1:0]     te_ib_data,
  input  logic                 te_spa_valid,
  input  logic signed [DW-1:0] te_spa [N0],
  // tile engine: regular maxpooling stream and pooled results
  input  logic                 te_mp_valid,
  input  logic [PW-1:0]        te_mp_pos,
  input  logic signed [DW-1:0] te_mp_val,
  input  logic                 te_mp_last,
  output logic                 pool_out_valid,
  output logic [11:0]          pool_out_ch,
  output logic [HO*WO-1:0]     pool_spike_map,
  output logic signed [DW-1:0] pool_vals [HO*WO]
);
  localparam int unsigned EW0 = $clog2(L0);
  localparam int unsigned CW0 = $clog2(L0 + 1);
  localparam int unsigned BW0 = $clog2(N0);
  localparam int unsigned EW1 = $clog2(L1);
  localparam int unsigned CW1 = $clog2(L1 + 1);
  localparam int unsigned BW1 = $clog2(N1);
  localparam int unsigned A0  = $clog2(L0);
  localparam int unsigned A1  = $clog2(L1);
  localparam int unsigned AWW = $clog2(D);
  localparam int unsigned EWC = (EW0 > EW1) ? EW0 : EW1;
  localparam int unsigned CWC = (CW0 > CW1) ? CW0 : CW1;

  // ---------------- bus interface and controller ----------------
  cfg_t        cfg;
  logic        start;
  logic        ibuf_we, wbuf_we, rb0_we, rb1_we;
  logic [11:0] e_row;
  logic [15:0] e_lane;
  logic [DW-1:0] e_data, obuf_edata;
  logic [15:0] nmask;

  bus_interface u_bus (
    .clk, .rst_n, .bus_we, .bus_re, .bus_addr, .bus_wdata, .bus_rdata, .bus_rvalid,
    .cfg, .start, .busy, .done, .nmask,
    .ibuf_we, .wbuf_we, .rb0_we, .rb1_we, .e_row, .e_lane, .e_data,
    .obuf_rdata(obuf_edata)
  );

  logic [11:0]    tok, ch, out_row;
  logic [EWC-1:0] idx;
  logic [CWC-1:0] cnt;
  logic ess0_clear, sea0_valid, mp_clear, mp_valid;
  logic ess1_clear, sea1_valid, smam_start, smam_done, sla_clr, sla_valid, sla_rd_en, out_we;

  controller #(.EW(EWC), .CW(CWC)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .te_spa_valid, .te_mp_valid, .te_mp_last,
    .tok, .ch, .idx, .cnt,
    .ess0_clear, .sea0_valid, .mp_clear, .mp_valid, .pool_out_valid,
    .ess1_clear, .sea1_valid, .smam_start, .smam_done,
    .sla_clr, .sla_valid, .sla_rd_en, .out_we, .out_row
  );
  assign pool_out_ch = ch;

  // ---------------- SPS core ----------------
  logic [N0*DW-1:0]     rb0_row, spa0_row;
  logic signed [DW-1:0] rb0_v [N0];
  logic signed [DW-1:0] spa0 [N0];
  for (genvar i = 0; i < N0; i++) begin : g_rb0
    assign rb0_v[i] = rb0_row[i*DW +: DW];
    assign spa0_row[i*DW +: DW] = spa0[i];
  end

  buffer_ram #(.DEPTH(L0), .LANES(N0), .DW(DW)) u_resbuf0 (
    .clk, .e_we(rb0_we), .e_wrow(A0'(e_row)), .e_wlane(BW0'(e_lane)), .e_wdata(e_data),
    .r_we(sea0_valid && cfg.res_wr), .r_wrow(A0'(tok)), .r_wdata(spa0_row),
    .r_rrow(A0'(tok)), .r_rdata(rb0_row),
    .e_rrow('0), .e_rlane('0), .e_rdata()
  );

  adder_module #(.N(N0), .DW(DW)) u_add0 (
    .en(cfg.res_en), .a(te_spa), .res(rb0_v), .y(spa0)
  );

  logic          sea0_ovalid;
  logic [N0-1:0] sea0_fire;
  logic [PW-1:0] sea0_pos;
  sea #(.N(N0), .L(L0), .DW(DW), .PW(PW)) u_sea0 (
    .clk, .rst_n, .in_valid(sea0_valid), .in_pos(PW'(tok)), .spa(spa0),
    .first_ts(cfg.first_ts), .vth(cfg.vth), .vreset(cfg.vreset), .shift(cfg.shift),
    .out_valid(sea0_ovalid), .out_fire(sea0_fire), .out_pos(sea0_pos)
  );

  logic [PW-1:0]  ess0_data;
  logic [CW0-1:0] ess0_cnt;
  ess #(.NB(N0), .DEPTH(L0), .PW(PW)) u_ess0 (
    .clk, .rst_n, .clear(ess0_clear),
    .wr_valid(sea0_ovalid), .wr_fire(sea0_fire), .wr_pos(sea0_pos),
    .mask_we(1'b0), .mask_bank('0), .mask_cnt('0),
    .a_bank(BW0'(ch)), .a_addr(EW0'(idx)), .a_data(ess0_data), .a_cnt(ess0_cnt),
    .b_bank('0), .b_addr('0), .b_data(), .b_cnt(),
    .c_bank('0), .c_cnt()
  );

  maxpool_array #(.H(H0), .W(W0), .K(PK), .S(PS), .DW(DW), .PW(PW)) u_pool (
    .clk, .rst_n, .regular(cfg.pool_regular), .clear(mp_clear), .in_valid(mp_valid),
    .in_pos(cfg.pool_regular ? te_mp_pos : ess0_data), .in_val(te_mp_val),
    .spike_map(pool_spike_map), .vals(pool_vals)
  );

  // ---------------- SDEB core ----------------
  logic [N1*DW-1:0]     ib_row;
  logic signed [DW-1:0] spa1 [N1];
  logic                 enc1;
  assign enc1 = busy && cfg.op == OP_ENC1;

  buffer_ram #(.DEPTH(IBD), .LANES(N1), .DW(DW)) u_inbuf (
    .clk, .e_we(ibuf_we), .e_wrow(IBA'(e_row)), .e_wlane(BW1'(e_lane)), .e_wdata(e_data),
    .r_we(1'b0), .r_wrow('0), .r_wdata('0),
    .r_rrow(enc1 ? IBA'(tok) : te_ib_row), .r_rdata(ib_row),
    .e_rrow('0), .e_rlane('0), .e_rdata()
  );
  assign te_ib_data = ib_row;
  for (genvar i = 0; i < N1; i++) begin : g_spa1
    assign spa1[i] = ib_row[i*DW +: DW];
  end

  logic          sea1_ovalid;
  logic [N1-1:0] sea1_fire;
  logic [PW-1:0] sea1_pos;
  sea #(.N(N1), .L(L1), .DW(DW), .PW(PW)) u_sea1 (
    .clk, .rst_n, .in_valid(sea1_valid), .in_pos(PW'(tok)), .spa(spa1),
    .first_ts(cfg.first_ts), .vth(cfg.vth), .vreset(cfg.vreset), .shift(cfg.shift),
    .out_valid(sea1_ovalid), .out_fire(sea1_fire), .out_pos(sea1_pos)
  );

  logic           sdsa;
  logic [EW1-1:0] q_addr, k_addr;
  logic [PW-1:0]  q_data, k_data;
  logic [CW1-1:0] q_cnt, k_cnt, v_cnt, mask_cnt;
  logic           mask_we, smam_s;
  logic [BW1-1:0] v_bank;
  assign sdsa   = busy && cfg.op == OP_SDSA;
  assign v_bank = BW1'(2 * D) + BW1'(ch);

  ess #(.NB(N1), .DEPTH(L1), .PW(PW)) u_ess1 (
    .clk, .rst_n, .clear(ess1_clear),
    .wr_valid(sea1_ovalid), .wr_fire(sea1_fire), .wr_pos(sea1_pos),
    .mask_we, .mask_bank(v_bank), .mask_cnt,
    .a_bank(sdsa ? BW1'(ch) : v_bank), .a_addr(sdsa ? q_addr : EW1'(idx)),
    .a_data(q_data), .a_cnt(q_cnt),
    .b_bank(BW1'(D) + BW1'(ch)), .b_addr(k_addr), .b_data(k_data), .b_cnt(k_cnt),
    .c_bank(v_bank), .c_cnt(v_cnt)
  );

  smam #(.DEPTH(L1), .PW(PW)) u_smam (
    .clk, .rst_n, .start(smam_start), .vth(CW1'(cfg.vth_attn)),
    .q_cnt, .k_cnt, .q_addr, .k_addr, .q_data, .k_data,
    .v_cnt, .mask_we, .mask_cnt,
    .busy(), .done(smam_done), .s(smam_s), .sum(), .h_valid(), .h_pos()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       nmask <= '0;
    else if (start && cfg.op == OP_SDSA && !busy)     nmask <= '0;
    else if (smam_done && smam_s)                     nmask <= nmask + 1'b1;
  end

  assign cnt = sdsa ? '0 : (cfg.op == OP_POOL) ? CWC'(ess0_cnt) : CWC'(q_cnt);

  logic [NU*DW-1:0]     w_row;
  logic signed [DW-1:0] w_v [NU];
  logic signed [DW-1:0] sla_out [NU];
  logic signed [DW-1:0] rb1_v [NU];
  logic signed [DW-1:0] res1 [NU];
  logic [NU*DW-1:0]     rb1_row, res1_row;
  logic                 sla_ovalid, sla_sat;
  for (genvar j = 0; j < NU; j++) begin : g_nu
    assign w_v[j]   = w_row[j*DW +: DW];
    assign rb1_v[j] = rb1_row[j*DW +: DW];
    assign res1_row[j*DW +: DW] = res1[j];
  end

  buffer_ram #(.DEPTH(D), .LANES(NU), .DW(DW)) u_wbuf (
    .clk, .e_we(wbuf_we), .e_wrow(AWW'(e_row)), .e_wlane($clog2(NU)'(e_lane)), .e_wdata(e_data),
    .r_we(1'b0), .r_wrow('0), .r_wdata('0),
    .r_rrow(AWW'(ch)), .r_rdata(w_row),
    .e_rrow('0), .e_rlane('0), .e_rdata()
  );

  sla #(.NU(NU), .L(L1), .DW(DW), .PW(PW)) u_sla (
    .clk, .rst_n, .clr(sla_clr), .in_valid(sla_valid), .in_pos(q_data), .w(w_v),
    .rd_en(sla_rd_en), .rd_addr(A1'(tok)), .out_valid(sla_ovalid), .out_data(sla_out),
    .sat_evt(sla_sat)
  );

  buffer_ram #(.DEPTH(L1), .LANES(NU), .DW(DW)) u_resbuf1 (
    .clk, .e_we(rb1_we), .e_wrow(A1'(e_row)), .e_wlane($clog2(NU)'(e_lane)), .e_wdata(e_data),
    .r_we(out_we && cfg.res_wr), .r_wrow(A1'(out_row)), .r_wdata(res1_row),
    .r_rrow(A1'(out_row)), .r_rdata(rb1_row),
    .e_rrow('0), .e_rlane('0), .e_rdata()
  );

  adder_module #(.N(NU), .DW(DW)) u_add1 (
    .en(cfg.res_en), .a(sla_out), .res(rb1_v), .y(res1)
  );

  buffer_ram #(.DEPTH(L1), .LANES(NU), .DW(DW)) u_outbuf (
    .clk, .e_we(1'b0), .e_wrow('0), .e_wlane('0), .e_wdata('0),
    .r_we(out_we), .r_wrow(A1'(out_row)), .r_wdata(res1_row),
    .r_rrow('0), .r_rdata(),
    .e_rrow(A1'(e_row)), .e_rlane($clog2(NU)'(e_lane)), .e_rdata(obuf_edata)
  );

  // The output row is written exactly when the linear array's read-out
  // arrives.
  a_out_aligned: assert property (@(posedge clk) disable iff (!rst_n) out_we == sla_ovalid);
endmodule
