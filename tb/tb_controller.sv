// tb_controller: self-checking test of the controller's sequencing: for each
// operation the number of strobes it issues, the counters it presents and the
// time from start to done are checked against the command.
module tb_controller;
  import sdt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, te_spa_valid, te_mp_valid, te_mp_last;
  cfg_t cfg;
  logic [11:0] tok, ch, out_row;
  logic [5:0] idx;
  logic [6:0] cnt;
  logic ess0_clear, sea0_valid, mp_clear, mp_valid, pool_out_valid;
  logic ess1_clear, sea1_valid, smam_start, smam_done, sla_clr, sla_valid, sla_rd_en, out_we;
  int checks = 0, failures = 0;
  int n_sea0, n_sea1, n_mp, n_pout, n_smam, n_sla, n_rd, n_out, n_clr0, n_clr1, cyc;

  controller #(.EW(6), .CW(7)) dut (.*);

  // bank counts seen by the controller: channel c holds c+1 spikes
  assign cnt = 7'(ch + 1);

  // attention module model: done three cycles after start
  logic [2:0] sd;
  always_ff @(posedge clk) sd <= {sd[1:0], smam_start};
  assign smam_done = sd[2];

  always @(posedge clk) if (rst_n) begin
    n_sea0 += sea0_valid; n_sea1 += sea1_valid; n_mp += mp_valid; n_pout += pool_out_valid;
    n_smam += smam_start; n_sla += sla_valid; n_rd += sla_rd_en; n_out += out_we;
    n_clr0 += ess0_clear; n_clr1 += ess1_clear; cyc++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(op_e op, bit regular);
    {n_sea0, n_sea1, n_mp, n_pout, n_smam, n_sla, n_rd, n_out, n_clr0, n_clr1, cyc} = '0;
    @(negedge clk); cfg.op = op; cfg.pool_regular = regular; start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 2000) @(negedge clk);
    chk(!busy || done, "finished");
  endtask

  initial begin
    cfg = '0; start = 0; te_spa_valid = 0; te_mp_valid = 0; te_mp_last = 0; sd = 0;
    cfg.ntok = 12'd10; cfg.nch = 12'd4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ENC0 with a tile engine delivering every other cycle
    fork
      run(OP_ENC0, 0);
      while (!done) begin @(negedge clk); te_spa_valid = ~te_spa_valid; end
    join
    te_spa_valid = 0;
    chk(n_sea0 == 10 && n_clr0 == 1, $sformatf("ENC0 strobes %0d", n_sea0));
    chk(cyc >= 20, "ENC0 follows the tile engine rate");
    run(OP_ENC1, 0);
    chk(n_sea1 == 10 && n_clr1 == 1, "ENC1 strobes");
    chk(cyc <= 10 + 6, $sformatf("ENC1 one token per cycle (%0d)", cyc));
    run(OP_POOL, 0);
    chk(n_mp == 1 + 2 + 3 + 4 && n_pout == 4, $sformatf("POOL spike %0d %0d", n_mp, n_pout));
    fork
      run(OP_POOL, 1);
      begin
        repeat (3) @(negedge clk);
        te_mp_valid = 1; repeat (5) @(negedge clk);
        te_mp_last = 1; @(negedge clk);
        te_mp_valid = 0; te_mp_last = 0;
      end
    join
    chk(n_mp == 6 && n_pout == 1, $sformatf("POOL regular %0d %0d", n_mp, n_pout));
    run(OP_SDSA, 0);
    chk(n_smam == 4, "SDSA starts");
    run(OP_LIN, 0);
    chk(n_sla == 1 + 2 + 3 + 4, $sformatf("LIN strobes %0d", n_sla));
    run(OP_OUT, 0);
    chk(n_rd == 10 && n_out == 10, "OUT strobes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
