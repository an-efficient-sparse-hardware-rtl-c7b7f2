// tb_slu: self-checking test of the spike linear unit. Random sorted spike
// lists of several input channels are streamed back to back (so one channel's
// last spike can meet the next channel's first at the same token, exercising
// the forwarding path) with large weights that also drive saturation. A
// reference applies the same saturating additions in stream order. Read-out
// latency (one cycle) is checked.
module tb_slu;
  import sdt_pkg::*;
  localparam int L = 8, AW = 3, CIN = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, in_valid, rd_en, out_valid, sat_evt;
  logic [POS_W-1:0] in_pos;
  logic signed [DATA_W-1:0] w, out_data;
  logic [AW-1:0] rd_addr;
  int checks = 0, failures = 0, nfwd = 0, nsat = 0;
  int yref [L];

  slu #(.L(L)) dut (.*);

  always @(posedge clk) if (sat_evt) nsat++;

  initial begin
    clr = 0; in_valid = 0; rd_en = 0; in_pos = 0; w = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (6) begin
      automatic int last = -1;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      foreach (yref[i]) yref[i] = 0;
      for (int c = 0; c < CIN; c++) begin
        automatic int wc = $urandom_range(0, 1023) - 512;
        // odd channels start at the previous channel's last token
        automatic int p0 = (c % 2 == 1 && last >= 0) ? last : 0;
        for (int p = p0; p < L; p++) if ((p == p0 && c % 2 == 1) || $urandom_range(0, 1)) begin
          if (p == last) nfwd++;
          last = p;
          in_valid = 1; in_pos = POS_W'(p); w = DATA_W'(wc);
          yref[p] += wc;
          if (yref[p] > 511) yref[p] = 511;
          if (yref[p] < -512) yref[p] = -512;
          @(negedge clk);
        end
      end
      in_valid = 0;
      repeat (2) @(negedge clk);
      for (int p = 0; p < L; p++) begin
        rd_en = 1; rd_addr = AW'(p);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!out_valid || int'(out_data) != yref[p]) begin
          failures++; $display("FAIL y[%0d]=%0d exp %0d", p, out_data, yref[p]);
        end
      end
    end
    checks += 2;
    if (nfwd == 0) begin failures++; $display("FAIL no back-to-back same token"); end
    if (nsat == 0) begin failures++; $display("FAIL no saturation"); end
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
