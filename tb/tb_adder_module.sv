// tb_adder_module: self-checking test of the residual adder: random lanes with
// and without the residual, including saturation at both ends.
module tb_adder_module;
  import sdt_pkg::*;
  localparam int N = 8;
  logic en;
  logic signed [DATA_W-1:0] a [N], res [N], y [N];
  int checks = 0, failures = 0, nsat = 0;

  adder_module #(.N(N)) dut (.*);

  initial begin
    repeat (500) begin
      en = 1'($urandom);
      foreach (a[i]) begin a[i] = DATA_W'($urandom); res[i] = DATA_W'($urandom); end
      #1;
      foreach (y[i]) begin
        automatic int e = int'(a[i]) + (en ? int'(res[i]) : 0);
        if (e > 511) begin e = 511; nsat++; end
        if (e < -512) begin e = -512; nsat++; end
        checks++;
        if (int'(y[i]) != e) begin failures++; $display("FAIL lane %0d %0d exp %0d", i, y[i], e); end
      end
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
