// tb_sla: self-checking test of the spike linear array on the worked example
// of a 3-channel 2x2 spike input: X0 spikes at tokens {0,1,3}, X1 at {1,2},
// X2 at {1,3}. With weights W (3x3), Y[p][j] is the sum of W[c][j] over the
// channels c that spike at token p, e.g. Y[0][0] = w00, Y[1][1] = w01+w11+w21,
// Y[3][2] = w02+w22. Then random inputs with 4 output channels.
module tb_sla;
  import sdt_pkg::*;
  localparam int NU = 3, L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, in_valid, rd_en, out_valid, sat_evt;
  logic [POS_W-1:0] in_pos;
  logic signed [DATA_W-1:0] w [NU];
  logic signed [DATA_W-1:0] out_data [NU];
  logic [1:0] rd_addr;
  int checks = 0, failures = 0;
  int wm [3][NU];
  int xs [3][$];
  int y [L][NU];

  sla #(.NU(NU), .L(L)) dut (.*);

  task automatic run();
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    foreach (y[p, j]) y[p][j] = 0;
    for (int c = 0; c < 3; c++) begin
      foreach (w[j]) w[j] = DATA_W'(wm[c][j]);
      foreach (xs[c][i]) begin
        in_valid = 1; in_pos = POS_W'(xs[c][i]);
        for (int j = 0; j < NU; j++) y[xs[c][i]][j] += wm[c][j];
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (2) @(negedge clk);
    for (int p = 0; p < L; p++) begin
      rd_en = 1; rd_addr = 2'(p);
      @(negedge clk);
      rd_en = 0;
      for (int j = 0; j < NU; j++) begin
        checks++;
        if (!out_valid || int'(out_data[j]) != y[p][j]) begin
          failures++; $display("FAIL y[%0d][%0d]=%0d exp %0d", p, j, out_data[j], y[p][j]);
        end
      end
    end
  endtask

  initial begin
    clr = 0; in_valid = 0; rd_en = 0; in_pos = 0; rd_addr = 0;
    foreach (w[j]) w[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (wm[c, j]) wm[c][j] = 10 * c + j + 1;   // w_cj
    xs[0] = '{0, 1, 3}; xs[1] = '{1, 2}; xs[2] = '{1, 3};
    run();
    checks += 3;
    if (y[0][0] != wm[0][0]) failures++;
    if (y[1][1] != wm[0][1] + wm[1][1] + wm[2][1]) failures++;
    if (y[3][2] != wm[0][2] + wm[2][2]) failures++;
    repeat (20) begin
      foreach (wm[c, j]) wm[c][j] = $urandom_range(0, 200) - 100;
      for (int c = 0; c < 3; c++) begin
        xs[c] = {};
        for (int p = 0; p < L; p++) if ($urandom_range(0, 1)) xs[c].push_back(p);
      end
      run();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
