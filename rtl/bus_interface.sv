// bus_interface: host/external-memory port of the accelerator.
//
// A simple memory-mapped bus (write: bus_we with address and data in the same
// cycle; read: bus_re, data in bus_rdata with bus_rvalid one cycle later).
// addr[31:28] selects a region, addr[27:16] a buffer row and addr[15:0] a
// lane. Writes to the input, weight and residual buffer regions become element
// writes into those buffers; reads of the output buffer region return one
// element. The control/status region holds the run-time configuration
// registers (thresholds, decay, counts); a write to the command register
// latches the operation and its flags and, one cycle later, pulses `start`
// towards the controller. The status register reads {done_sticky, busy}; done_sticky is
// set when the controller finishes and cleared by the next command.
//
// The paper shows only a bus interface between external memory and the
// buffers and controller; this register map and protocol are this design's.
module bus_interface
  import sdt_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 bus_we,
  input  logic                 bus_re,
  input  logic [31:0]          bus_addr,
  input  logic [31:0]          bus_wdata,
  output logic [31:0]          bus_rdata,
  output logic                 bus_rvalid,
  // configuration and command towards the controller
  output cfg_t                 cfg,
  output logic                 start,
  input  logic                 busy,
  input  logic                 done,
  input  logic [15:0]          nmask,
  // element writes into the buffers
  output logic                 ibuf_we,
  output logic                 wbuf_we,
  output logic                 rb0_we,
  output logic                 rb1_we,
  output logic [11:0]          e_row,
  output logic [15:0]          e_lane,
  output logic [DATA_W-1:0]    e_data,
  // element read of the output buffer
  input  logic [DATA_W-1:0]    obuf_rdata
);
  region_e    region;
  logic [3:0] csr;
  logic       done_sticky;

  assign region = region_e'(bus_addr[31:28]);
  assign csr    = bus_addr[3:0];
  assign e_row  = bus_addr[27:16];
  assign e_lane = bus_addr[15:0];
  assign e_data = bus_wdata[DATA_W-1:0];

  assign ibuf_we = bus_we && region == RG_IBUF;
  assign wbuf_we = bus_we && region == RG_WBUF;
  assign rb0_we  = bus_we && region == RG_RB0;
  assign rb1_we  = bus_we && region == RG_RB1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      start       <= 1'b0;
      done_sticky <= 1'b0;
      bus_rvalid  <= 1'b0;
      bus_rdata   <= '0;
    end else begin
      // start follows the command write by one cycle, so that the controller
      // sees the new configuration together with it
      start <= bus_we && region == RG_CSR && csr == CSR_CMD;
      if (bus_we && region == RG_CSR) begin
        case (csr)
          CSR_CMD: begin
            cfg.op           <= op_e'(bus_wdata[2:0]);
            cfg.first_ts     <= bus_wdata[8];
            cfg.res_en       <= bus_wdata[9];
            cfg.res_wr       <= bus_wdata[10];
            cfg.pool_regular <= bus_wdata[11];
          end
          CSR_VTH:    cfg.vth      <= bus_wdata[DATA_W-1:0];
          CSR_VRESET: cfg.vreset   <= bus_wdata[DATA_W-1:0];
          CSR_SHIFT:  cfg.shift    <= bus_wdata[2:0];
          CSR_VTHATT: cfg.vth_attn <= bus_wdata[POS_W:0];
          CSR_NTOK:   cfg.ntok     <= bus_wdata[11:0];
          CSR_NCH:    cfg.nch      <= bus_wdata[11:0];
          default: ;
        endcase
      end
      if (start)     done_sticky <= 1'b0;
      else if (done) done_sticky <= 1'b1;

      bus_rvalid <= bus_re;
      if (bus_re) begin
        if (region == RG_OBUF) bus_rdata <= 32'(signed'(obuf_rdata));
        else if (region == RG_CSR) begin
          case (csr)
            CSR_STATUS: bus_rdata <= {30'd0, done_sticky, busy};
            CSR_NMASK:  bus_rdata <= {16'd0, nmask};
            CSR_NTOK:   bus_rdata <= {20'd0, cfg.ntok};
            CSR_NCH:    bus_rdata <= {20'd0, cfg.nch};
            default:    bus_rdata <= '0;
          endcase
        end else bus_rdata <= '0;
      end
    end
  end

  // A command may only be issued while the controller is idle.
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
