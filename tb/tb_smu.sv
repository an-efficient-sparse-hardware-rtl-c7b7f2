// tb_smu: self-checking test of the spike maxpooling unit. The worked example
// (2x2 window, stride 1: a spike at m01 sets M0 and M1) is checked first, then
// random sparse maps for 2x2/1 and 3x3/2 windows are pooled and compared with
// a dense OR-pooling reference. The unit must take one cycle per spike.
module tb_smu;
  import sdt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int H = 6, W = 5;
  localparam int HOA = H - 1, WOA = W - 1;             // K=2, S=1
  localparam int HOB = (H - 3) / 2 + 1, WOB = (W - 3) / 2 + 1;  // K=3, S=2
  logic clear, in_valid;
  logic [POS_W-1:0] in_pos;
  logic [HOA*WOA-1:0] map_a;
  logic [HOB*WOB-1:0] map_b;

  smu #(.H(H), .W(W), .K(2), .S(1)) dut_a (.clk, .rst_n, .clear, .in_valid, .in_pos, .map(map_a));
  smu #(.H(H), .W(W), .K(3), .S(2)) dut_b (.clk, .rst_n, .clear, .in_valid, .in_pos, .map(map_b));

  function automatic bit pooled(bit img [H][W], int i, int j, int k, int s);
    bit r = 0;
    for (int a = 0; a < k; a++) for (int b = 0; b < k; b++) r |= img[i*s+a][j*s+b];
    return r;
  endfunction

  task automatic run(bit img [H][W]);
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) if (img[r][c]) begin
      in_valid = 1; in_pos = POS_W'(r * W + c);
      @(negedge clk);
    end
    in_valid = 0;
    for (int i = 0; i < HOA; i++) for (int j = 0; j < WOA; j++) begin
      checks++;
      if (map_a[i*WOA+j] != pooled(img, i, j, 2, 1)) begin
        failures++; $display("FAIL 2x2 (%0d,%0d)", i, j);
      end
    end
    for (int i = 0; i < HOB; i++) for (int j = 0; j < WOB; j++) begin
      checks++;
      if (map_b[i*WOB+j] != pooled(img, i, j, 3, 2)) begin
        failures++; $display("FAIL 3x3 (%0d,%0d)", i, j);
      end
    end
  endtask

  initial begin
    bit img [H][W];
    clear = 0; in_valid = 0; in_pos = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // worked example: single spike at m01 -> M0 and M1 both 1, M2 0
    foreach (img[r, c]) img[r][c] = 0;
    img[0][1] = 1;
    run(img);
    checks++;
    if (!(map_a[0] && map_a[1] && !map_a[2])) begin failures++; $display("FAIL m01 example"); end
    repeat (30) begin
      foreach (img[r, c]) img[r][c] = ($urandom_range(0, 99) < 20);
      run(img);
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
