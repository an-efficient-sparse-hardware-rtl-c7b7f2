// tb_smam: self-checking test of the spike mask-add module. A small model of
// the encoded spike memory holds sorted Qs, Ks lists and a Vs count. The
// worked example (Qs = {2,8,9}, Ks = {0,2,7,8}: hits at 2 and 8, mask 1, Vs
// kept) is run first, then random channels. Hadamard hits, sum, mask bit, the
// written-back Vs count and the cycle count (at most |Qs| + |Ks| compares plus
// four cycles) are checked.
module tb_smam;
  import sdt_pkg::*;
  localparam int DEPTH = 16, EW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, mask_we, busy, done, s, h_valid;
  logic [CW-1:0] vth, q_cnt, k_cnt, v_cnt, mask_cnt, sum;
  logic [EW-1:0] q_addr, k_addr;
  logic [POS_W-1:0] q_data, k_data, h_pos;
  int checks = 0, failures = 0;
  int qs [$], ks [$];
  logic [POS_W-1:0] qmem [DEPTH], kmem [DEPTH];

  smam #(.DEPTH(DEPTH)) dut (.*);
  assign q_data = qmem[q_addr];
  assign k_data = kmem[k_addr];

  function automatic void make_list(ref int l [$], input int n);
    l = {};
    for (int p = 0; p < 32 && l.size() < n; p++) if ($urandom_range(0, 1)) l.push_back(p);
  endfunction

  task automatic run(int th, int vc);
    int hits [$], got [$];
    int cycles = 0, limit;
    foreach (qmem[i]) qmem[i] = 0;
    foreach (kmem[i]) kmem[i] = 0;
    foreach (qs[i]) qmem[i] = POS_W'(qs[i]);
    foreach (ks[i]) kmem[i] = POS_W'(ks[i]);
    foreach (qs[i]) foreach (ks[j]) if (qs[i] == ks[j]) hits.push_back(qs[i]);
    q_cnt = CW'(qs.size()); k_cnt = CW'(ks.size()); v_cnt = CW'(vc); vth = CW'(th);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      if (h_valid) got.push_back(int'(h_pos));
      cycles++;
      @(negedge clk);
      if (cycles > 200) break;
    end
    limit = qs.size() + ks.size() + 4;
    checks += 5;
    if (got != hits) begin failures++; $display("FAIL hits %p exp %p", got, hits); end
    if (int'(sum) != hits.size()) begin failures++; $display("FAIL sum %0d exp %0d", sum, hits.size()); end
    if (s != (hits.size() >= th)) begin failures++; $display("FAIL s"); end
    if (!mask_we || int'(mask_cnt) != ((hits.size() >= th) ? vc : 0)) begin failures++; $display("FAIL mask"); end
    if (cycles > limit) begin failures++; $display("FAIL cycles %0d > %0d", cycles, limit); end
  endtask

  initial begin
    start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    qs = '{2, 8, 9}; ks = '{0, 2, 7, 8};
    run(2, 3);
    checks++;
    if (!s) failures++;
    qs = '{1, 4, 7, 9}; ks = '{0, 3, 5};
    run(1, 4);
    checks++;
    if (s || mask_cnt != 0) failures++;
    repeat (100) begin
      make_list(qs, $urandom_range(0, DEPTH));
      make_list(ks, $urandom_range(0, DEPTH));
      run($urandom_range(0, 6), $urandom_range(0, DEPTH));
    end
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
