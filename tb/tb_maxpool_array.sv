// tb_maxpool_array: self-checking test of the maxpooling array in both modes.
// Spike mode pools encoded spikes; regular mode pools a full map of signed
// values with a 2x2, stride-1 window. Each mode must leave the other unit
// untouched.
module tb_maxpool_array;
  import sdt_pkg::*;
  localparam int H = 5, W = 4, HO = H - 1, WO = W - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic regular, clear, in_valid;
  logic [POS_W-1:0] in_pos;
  logic signed [DATA_W-1:0] in_val;
  logic [HO*WO-1:0] spike_map;
  logic signed [DATA_W-1:0] vals [HO*WO];
  int checks = 0, failures = 0;

  maxpool_array #(.H(H), .W(W), .K(2), .S(1)) dut (.*);

  initial begin
    int v [H][W];
    bit s [H][W];
    regular = 0; clear = 0; in_valid = 0; in_pos = 0; in_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (10) begin
      foreach (v[r, c]) begin v[r][c] = $urandom_range(0, 1000) - 500; s[r][c] = ($urandom_range(0, 9) < 3); end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      // regular mode: every position, with its value
      regular = 1;
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
        in_valid = 1; in_pos = POS_W'(r * W + c); in_val = DATA_W'(v[r][c]);
        @(negedge clk);
      end
      in_valid = 0;
      checks++;
      if (spike_map != '0) begin failures++; $display("FAIL spike unit touched in regular mode"); end
      // spike mode: only spike positions
      regular = 0;
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) if (s[r][c]) begin
        in_valid = 1; in_pos = POS_W'(r * W + c); in_val = DATA_W'(511);
        @(negedge clk);
      end
      in_valid = 0;
      for (int i = 0; i < HO; i++) for (int j = 0; j < WO; j++) begin
        automatic int m = -512;
        automatic bit o = 0;
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
          if (v[i+a][j+b] > m) m = v[i+a][j+b];
          o |= s[i+a][j+b];
        end
        checks += 2;
        if (int'(vals[i*WO+j]) != m) begin failures++; $display("FAIL max (%0d,%0d) %0d/%0d", i, j, vals[i*WO+j], m); end
        if (spike_map[i*WO+j] != o) begin failures++; $display("FAIL spike (%0d,%0d)", i, j); end
      end
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
