// Shared body of the end-to-end testbenches of sdt_accel. The including
// module defines N0, H0, W0, D, L1, NU, IBD (matching the DUT) and the attention threshold VTH_ATT, instantiates
// the DUT as `dut` on the signals declared here, and sets WATCHDOG.
//
// Sequence (one layer slice, reference model computed in the testbench):
//  1. SPS timestep 0: tile-engine rows arrive with gaps (stalls); spikes are
//     encoded into ESS0 and the adder outputs are stored in ResBuffer0.
//  2. SPS timestep 1: rows again, now with the residual added and the
//     temporal values of timestep 0 carried over.
//  3. Spike maxpooling of every channel; pooled maps are compared with an
//     OR-pooling of the reference spikes.
//  4. Regular maxpooling of one value map.
//  5. SDEB: Q|K|V rows written over the bus, encoded into ESS1.
//  6. Spike attention over all channels; the number of unmasked channels is
//     read back and compared; the cycle count is bounded by the spike count.
//  7. Linear layer over the masked Vs channels, read-out with residual, and
//     every output element read back over the bus.
// Each mechanism (stall, residual, temporal carry, spike/regular pooling,
// mask keep/clear, saturation, tile-engine read) is counted;
// one that never happened counts as a failure.

  localparam int L0 = H0 * W0;
  localparam int N1 = 3 * D;
  localparam int HO = H0 - 1, WO = W0 - 1;   // 2x2 window, stride 1
  localparam int VTH = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we, bus_re, bus_rvalid, busy, done;
  logic [31:0] bus_addr, bus_wdata, bus_rdata;
  logic [$clog2(IBD)-1:0] te_ib_row;
  logic [N1*sdt_pkg::DATA_W-1:0] te_ib_data;
  logic te_spa_valid, te_mp_valid, te_mp_last, pool_out_valid;
  logic signed [sdt_pkg::DATA_W-1:0] te_spa [N0];
  logic [sdt_pkg::POS_W-1:0] te_mp_pos;
  logic signed [sdt_pkg::DATA_W-1:0] te_mp_val;
  logic [11:0] pool_out_ch;
  logic [HO*WO-1:0] pool_spike_map;
  logic signed [sdt_pkg::DATA_W-1:0] pool_vals [HO*WO];

  int checks = 0, failures = 0;
  int n_stall = 0, n_resid = 0, n_carry = 0, n_spool = 0, n_rpool = 0;
  int n_keep = 0, n_clear = 0, n_sat = 0, n_teread = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic bw(logic [3:0] rg, int row, int lane, int data);
    @(negedge clk);
    bus_we = 1; bus_addr = {rg, 12'(row), 16'(lane)}; bus_wdata = 32'(data);
    @(negedge clk);
    bus_we = 0;
  endtask

  task automatic br(logic [3:0] rg, int row, int lane, output int data);
    @(negedge clk);
    bus_re = 1; bus_addr = {rg, 12'(row), 16'(lane)};
    @(negedge clk);
    bus_re = 0;
    data = int'(bus_rdata);
  endtask

  task automatic csr(logic [3:0] idx, int data);
    bw(4'd0, 0, int'(idx), data);
  endtask

  task automatic wait_done(output int cycles);
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic int sat(int v);
    if (v > 511) return 511;
    if (v < -512) return -512;
    return v;
  endfunction

  // reference state
  int  spa_r [N0][L0];
  int  rb0   [N0][L0];
  int  tmp0  [N0][L0];
  bit  f0    [N0][L0];
  bit  f1    [N1][L1];
  int  ibv   [N1][L1];
  int  w     [D][NU];
  int  rb1   [L1][NU];
  int  y     [L1][NU];
  bit  s_ref [D];

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (busy && dut.cfg.op == sdt_pkg::OP_ENC0 && !te_spa_valid) n_stall++;
    if (dut.sla_sat) n_sat++;
  end

  task automatic enc0_timestep(int t);
    int cyc;
    csr(sdt_pkg::CSR_NTOK, L0);
    // t=0: no residual, store adder output; t=1: add residual, carry temp
    csr(sdt_pkg::CSR_CMD, (t == 0) ? (32'h1 | 32'h100 | 32'h400) : (32'h1 | 32'h200));
    while (!busy) @(negedge clk);
    for (int p = 0; p < L0; p++) begin
      for (int c = 0; c < N0; c++) begin
        int m;
        spa_r[c][p] = $urandom_range(0, 399) - 100;
        te_spa[c]   = 10'(spa_r[c][p]);
        if (t == 0) begin
          rb0[c][p] = spa_r[c][p];
          m = spa_r[c][p];
        end else begin
          m = sat(spa_r[c][p] + rb0[c][p]) + tmp0[c][p];
          n_resid++;
          if (tmp0[c][p] != 0) n_carry++;
        end
        f0[c][p]   = (m >= VTH);
        tmp0[c][p] = f0[c][p] ? 0 : sat(m >>> 1);
      end
      // the tile engine delivers a row every cycle, with a gap every 3rd token
      if (p % 3 == 2) begin te_spa_valid = 0; @(negedge clk); end
      te_spa_valid = 1;
      @(negedge clk);
    end
    te_spa_valid = 0;
    wait_done(cyc);
  endtask

  initial begin
    int cyc, d, nm, spikes;
    bus_we = 0; bus_re = 0; bus_addr = 0; bus_wdata = 0; te_ib_row = '0;
    te_spa_valid = 0; te_mp_valid = 0; te_mp_last = 0; te_mp_pos = 0; te_mp_val = 0;
    foreach (te_spa[c]) te_spa[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    csr(sdt_pkg::CSR_VTH, VTH);
    csr(sdt_pkg::CSR_VRESET, 0);
    csr(sdt_pkg::CSR_SHIFT, 1);
    csr(sdt_pkg::CSR_VTHATT, VTH_ATT);

    // ---- 1, 2: SPS encoding over two timesteps ----
    enc0_timestep(0);
    enc0_timestep(1);

    // ---- 3: spike maxpooling of every channel ----
    csr(sdt_pkg::CSR_NCH, N0);
    csr(sdt_pkg::CSR_CMD, 32'h2);
    for (int c = 0; c < N0; c++) begin
      while (!pool_out_valid) @(negedge clk);
      chk(pool_out_ch == 12'(c), "pool channel order");
      for (int i = 0; i < HO; i++) for (int j = 0; j < WO; j++) begin
        bit o;
        o = f0[c][i*W0+j] | f0[c][i*W0+j+1] | f0[c][(i+1)*W0+j] | f0[c][(i+1)*W0+j+1];
        chk(pool_spike_map[i*WO+j] == o, $sformatf("spike pool c%0d (%0d,%0d)", c, i, j));
      end
      n_spool++;
      @(negedge clk);
    end
    wait_done(cyc);

    // ---- 4: regular maxpooling of one value map ----
    begin
      int v [L0];
      csr(sdt_pkg::CSR_CMD, 32'h2 | 32'h800);
      while (!busy) @(negedge clk);
      for (int p = 0; p < L0; p++) begin
        v[p] = $urandom_range(0, 1023) - 512;
        te_mp_valid = 1; te_mp_pos = 8'(p); te_mp_val = 10'(v[p]); te_mp_last = (p == L0 - 1);
        @(negedge clk);
      end
      te_mp_valid = 0; te_mp_last = 0;
      while (!pool_out_valid) @(negedge clk);
      for (int i = 0; i < HO; i++) for (int j = 0; j < WO; j++) begin
        int m;
        m = v[i*W0+j];
        if (v[i*W0+j+1] > m) m = v[i*W0+j+1];
        if (v[(i+1)*W0+j] > m) m = v[(i+1)*W0+j];
        if (v[(i+1)*W0+j+1] > m) m = v[(i+1)*W0+j+1];
        chk(int'(pool_vals[i*WO+j]) == m, "regular pool");
      end
      n_rpool++;
      wait_done(cyc);
    end

    // ---- 5: SDEB encoding of Q|K|V rows from the input buffer ----
    for (int p = 0; p < L1; p++) for (int c = 0; c < N1; c++) begin
      int v;
      v = $urandom_range(0, 399);
      bw(4'd1, p, c, v);
      ibv[c][p] = v;
      f1[c][p] = (v >= VTH);
    end
    // the tile engine's read port sees the same rows
    te_ib_row = 1; #1;
    chk(int'(signed'(te_ib_data[9:0])) == ibv[0][1], "tile engine read, first lane");
    chk(int'(signed'(te_ib_data[N1*10-1 -: 10])) == ibv[N1-1][1], "tile engine read, last lane");
    n_teread++;
    csr(sdt_pkg::CSR_NTOK, L1);
    csr(sdt_pkg::CSR_CMD, 32'h3 | 32'h100);
    wait_done(cyc);
    chk(cyc <= L1 + 8, $sformatf("ENC1 one token per cycle (%0d cycles)", cyc));

    // ---- 6: spike attention ----
    spikes = 0;
    nm = 0;
    for (int c = 0; c < D; c++) begin
      int h;
      h = 0;
      for (int p = 0; p < L1; p++) begin
        h += (f1[c][p] && f1[D+c][p]);
        spikes += f1[c][p] + f1[D+c][p];
      end
      s_ref[c] = (h >= VTH_ATT);
      nm += s_ref[c];
      if (s_ref[c]) n_keep++; else n_clear++;
    end
    csr(sdt_pkg::CSR_NCH, D);
    csr(sdt_pkg::CSR_CMD, 32'h4);
    wait_done(cyc);
    chk(cyc <= spikes + 7 * D + 8, $sformatf("SDSA cycles %0d for %0d spikes", cyc, spikes));
    br(4'd0, 0, 8, d);
    chk(d == nm, $sformatf("unmasked channels %0d exp %0d", d, nm));

    // ---- 7: linear layer over masked Vs, residual, output ----
    for (int c = 0; c < D; c++) for (int j = 0; j < NU; j++) begin
      w[c][j] = $urandom_range(0, 1023) - 512;
      bw(4'd2, c, j, w[c][j]);
    end
    for (int p = 0; p < L1; p++) for (int j = 0; j < NU; j++) begin
      rb1[p][j] = $urandom_range(0, 199) - 100;
      bw(4'd4, p, j, rb1[p][j]);
      y[p][j] = 0;
    end
    for (int c = 0; c < D; c++) if (s_ref[c])
      for (int p = 0; p < L1; p++) if (f1[2*D+c][p])
        for (int j = 0; j < NU; j++) y[p][j] = sat(y[p][j] + w[c][j]);
    csr(sdt_pkg::CSR_CMD, 32'h5);
    wait_done(cyc);
    csr(sdt_pkg::CSR_CMD, 32'h6 | 32'h200);
    wait_done(cyc);
    for (int p = 0; p < L1; p++) for (int j = 0; j < NU; j++) begin
      br(4'd5, p, j, d);
      chk(d == sat(y[p][j] + rb1[p][j]), $sformatf("out[%0d][%0d]=%0d exp %0d", p, j, d, sat(y[p][j] + rb1[p][j])));
    end

    $display("mechanisms: stall=%0d residual=%0d carry=%0d spike_pool=%0d regular_pool=%0d keep=%0d clear=%0d sat=%0d te_read=%0d",
             n_stall, n_resid, n_carry, n_spool, n_rpool, n_keep, n_clear, n_sat, n_teread);
    chk(n_stall > 0, "stall happened");
    chk(n_resid > 0, "residual happened");
    chk(n_carry > 0, "temporal carry happened");
    chk(n_spool > 0, "spike pooling happened");
    chk(n_rpool > 0, "regular pooling happened");
    chk(n_keep > 0, "mask keep happened");
    chk(n_clear > 0, "mask clear happened");
    chk(n_sat > 0, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
