// tb_bus_interface: self-checking test of the bus interface: configuration
// registers, command decoding and start pulse, buffer write decoding, output
// buffer read path and the status register.
module tb_bus_interface;
  import sdt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we, bus_re, bus_rvalid, start, busy, done;
  logic [31:0] bus_addr, bus_wdata, bus_rdata;
  cfg_t cfg;
  logic [15:0] nmask;
  logic ibuf_we, wbuf_we, rb0_we, rb1_we;
  logic [11:0] e_row;
  logic [15:0] e_lane;
  logic [DATA_W-1:0] e_data, obuf_rdata;
  int checks = 0, failures = 0, nstart = 0;

  bus_interface dut (.*);
  always @(posedge clk) if (start) nstart++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d; #1;
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); bus_we = 0; bus_re = 1; bus_addr = a;
    @(negedge clk); bus_re = 0; d = bus_rdata;
    chk(bus_rvalid, "rvalid");
  endtask

  initial begin
    logic [31:0] d;
    bus_we = 0; bus_re = 0; bus_addr = 0; bus_wdata = 0; busy = 0; done = 0; nmask = 16'd7;
    obuf_rdata = DATA_W'(-3);
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr({RG_CSR, 28'd1}, 32'd40);
    wr({RG_CSR, 28'd2}, 32'h3FE);
    wr({RG_CSR, 28'd3}, 32'd1);
    wr({RG_CSR, 28'd4}, 32'd5);
    wr({RG_CSR, 28'd6}, 32'd64);
    wr({RG_CSR, 28'd7}, 32'd512);
    wr({RG_IBUF, 12'd9, 16'd1000}, 32'd123);
    chk(ibuf_we && !wbuf_we && e_row == 9 && e_lane == 1000 && e_data == 123, "ibuf decode");
    wr({RG_WBUF, 12'd3, 16'd2}, 32'd5);
    chk(wbuf_we && !ibuf_we && e_row == 3, "wbuf decode");
    wr({RG_RB0, 12'd1, 16'd1}, 32'd5);
    chk(rb0_we && !rb1_we, "rb0 decode");
    wr({RG_RB1, 12'd1, 16'd1}, 32'd5);
    chk(rb1_we && !rb0_we, "rb1 decode");
    chk(!start, "no start on buffer write");
    wr({RG_CSR, 28'd0}, 32'h0000_0304);   // SDSA, first_ts, res_en
    chk(!start, "start not before the command is latched");
    @(negedge clk); bus_we = 0; #1;
    chk(start, "start pulse");
    chk(cfg.op == OP_SDSA && cfg.first_ts && cfg.res_en && !cfg.res_wr && !cfg.pool_regular, "cmd fields");
    chk(cfg.vth == 40 && cfg.vreset == -2 && cfg.shift == 1 && cfg.vth_attn == 5, "cfg regs");
    chk(cfg.ntok == 64 && cfg.nch == 512, "counts");
    @(negedge clk);
    chk(nstart == 1 && !start, "one start");
    busy = 1;
    rd({RG_CSR, 28'd5}, d);
    chk(d == 32'd1, "status busy");
    @(negedge clk); busy = 0; done = 1;
    @(negedge clk); done = 0;
    rd({RG_CSR, 28'd5}, d);
    chk(d == 32'd2, "status done");
    rd({RG_CSR, 28'd8}, d);
    chk(d == 32'd7, "nmask");
    rd({RG_OBUF, 12'd2, 16'd3}, d);
    chk(d == 32'hFFFF_FFFD, "obuf read sign-extended");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
