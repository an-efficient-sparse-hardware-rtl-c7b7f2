// tb_sea: self-checking test of the spike encoding array over four timesteps.
// A reference LIF model keeps each neuron's temporal value per token; the
// array's fire vector, token address and one-cycle latency are compared.
module tb_sea;
  import sdt_pkg::*;
  localparam int N = 8, L = 6, T = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, first_ts, out_valid;
  logic [POS_W-1:0] in_pos, out_pos;
  logic signed [DATA_W-1:0] spa [N];
  logic signed [DATA_W-1:0] vth, vreset;
  logic [2:0] shift;
  logic [N-1:0] out_fire;
  int checks = 0, failures = 0, nfire = 0;
  int tref [N][L];

  sea #(.N(N), .L(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    in_valid = 0; first_ts = 1; in_pos = 0; vth = 40; vreset = 0; shift = 1;
    foreach (spa[i]) spa[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) begin
      for (int p = 0; p < L; p++) begin
        logic [N-1:0] exp_f;
        @(negedge clk);
        in_valid = 1; in_pos = POS_W'(p); first_ts = (t == 0);
        for (int c = 0; c < N; c++) begin
          int m, tp;
          spa[c] = DATA_W'($urandom_range(0, 35));
          tp = (t == 0) ? 0 : tref[c][p];
          m  = int'(spa[c]) + tp;
          exp_f[c] = (m >= int'(vth));
          tref[c][p] = exp_f[c] ? 0 : (m >>> 1);
        end
        @(posedge clk); #1;
        checks++;
        if (!out_valid || out_fire !== exp_f || out_pos != POS_W'(p)) begin
          failures++;
          $display("FAIL t=%0d p=%0d fire=%b exp=%b", t, p, out_fire, exp_f);
        end
        nfire += $countones(exp_f);
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    checks++;
    if (nfire == 0) failures++;   // the test must exercise firing
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
