// tb_ess: self-checking test of the encoded spike memory: random spike
// patterns are appended token by token, then every bank is read back through
// ports A and B and checked for content, order and count; a masking write and
// a clear are checked as well.
module tb_ess;
  import sdt_pkg::*;
  localparam int NB = 6, DEPTH = 10;
  localparam int BW = $clog2(NB), EW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);
  logic clk = 0, rst_n = 0;
  logic clear, wr_valid, mask_we;
  logic [NB-1:0] wr_fire;
  logic [POS_W-1:0] wr_pos, a_data, b_data;
  logic [BW-1:0] mask_bank, a_bank, b_bank, c_bank;
  logic [CW-1:0] mask_cnt, a_cnt, b_cnt, c_cnt;
  logic [EW-1:0] a_addr, b_addr;
  int checks = 0, failures = 0;
  int ref_q [NB][$];

  ess #(.NB(NB), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    clear = 0; wr_valid = 0; mask_we = 0; wr_fire = 0; wr_pos = 0;
    mask_bank = 0; mask_cnt = 0; a_bank = 0; b_bank = 0; c_bank = 0; a_addr = 0; b_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < DEPTH; p++) begin
      @(negedge clk);
      wr_valid = 1; wr_pos = POS_W'(p * 3); wr_fire = NB'($urandom);
      for (int c = 0; c < NB; c++) if (wr_fire[c]) ref_q[c].push_back(p * 3);
    end
    @(negedge clk); wr_valid = 0;
    for (int c = 0; c < NB; c++) begin
      a_bank = BW'(c); b_bank = BW'(c); c_bank = BW'(c);
      #1;
      chk(a_cnt == CW'(ref_q[c].size()) && b_cnt == a_cnt && c_cnt == a_cnt, "count");
      for (int i = 0; i < ref_q[c].size(); i++) begin
        a_addr = EW'(i); b_addr = EW'(ref_q[c].size() - 1 - i);
        #1;
        chk(a_data == POS_W'(ref_q[c][i]), $sformatf("A bank %0d entry %0d", c, i));
        chk(b_data == POS_W'(ref_q[c][ref_q[c].size() - 1 - i]), "B port");
      end
    end
    // masking: bank 2 cleared, bank 3 rewritten with its own count
    @(negedge clk); mask_we = 1; mask_bank = 2; mask_cnt = 0;
    @(negedge clk); mask_bank = 3; mask_cnt = CW'(ref_q[3].size());
    @(negedge clk); mask_we = 0; c_bank = 2; #1;
    chk(c_cnt == 0, "masked bank cleared");
    c_bank = 3; #1;
    chk(c_cnt == CW'(ref_q[3].size()), "kept bank");
    // clear
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int c = 0; c < NB; c++) begin c_bank = BW'(c); #1; chk(c_cnt == 0, "clear"); end
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
