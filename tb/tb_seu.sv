// tb_seu: self-checking test of the spike encoding unit against the LIF
// equations, with random inputs and hand-picked threshold edge cases.
module tb_seu;
  import sdt_pkg::*;
  logic signed [DATA_W-1:0] spa, temp_prev, vth, vreset, temp_next;
  logic [2:0]               shift;
  logic [POS_W-1:0]         pos_in, pos_out;
  logic                     fire;
  int checks = 0, failures = 0;

  seu dut (.*);

  task automatic check_one();
    int m, exp_t;
    bit exp_f;
    #1;
    m     = int'(spa) + int'(temp_prev);
    exp_f = (m - int'(vth)) >= 0;
    if (exp_f) exp_t = int'(vreset);
    else begin
      exp_t = m >>> shift;
      if (exp_t > 511) exp_t = 511;
      if (exp_t < -512) exp_t = -512;
    end
    checks++;
    if (fire !== exp_f || int'(temp_next) != exp_t || (exp_f && pos_out != pos_in)) begin
      failures++;
      $display("FAIL spa=%0d tp=%0d vth=%0d sh=%0d: fire=%0d/%0d temp=%0d/%0d",
               spa, temp_prev, vth, shift, fire, exp_f, temp_next, exp_t);
    end
  endtask

  initial begin
    // threshold edge: Mem == Vth fires, Mem == Vth-1 does not
    vreset = 0; shift = 1; pos_in = 8'd17;
    spa = 10; temp_prev = 5; vth = 15; check_one();
    if (!fire) failures++;
    checks++;
    spa = 10; temp_prev = 4; vth = 15; check_one();
    if (fire || temp_next != 7) failures++;
    checks++;
    repeat (2000) begin
      spa       = DATA_W'($urandom);
      temp_prev = DATA_W'($urandom);
      vth       = DATA_W'($urandom_range(0, 300));
      vreset    = DATA_W'($urandom_range(0, 20));
      shift     = 3'($urandom);
      pos_in    = POS_W'($urandom);
      check_one();
    end
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
