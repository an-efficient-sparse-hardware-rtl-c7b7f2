// tb_buffer_ram: self-checking test of the row buffer: element writes, row
// writes, and both read ports against a reference array.
module tb_buffer_ram;
  localparam int DEPTH = 8, LANES = 5, DW = 10, AW = 3, LW = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic e_we, r_we;
  logic [AW-1:0] e_wrow, r_wrow, r_rrow, e_rrow;
  logic [LW-1:0] e_wlane, e_rlane;
  logic [DW-1:0] e_wdata, e_rdata;
  logic [LANES*DW-1:0] r_wdata, r_rdata;
  int checks = 0, failures = 0;
  logic [DW-1:0] ref_m [DEPTH][LANES];

  buffer_ram #(.DEPTH(DEPTH), .LANES(LANES), .DW(DW)) dut (.*);

  initial begin
    e_we = 0; r_we = 0; e_wrow = 0; r_wrow = 0; r_rrow = 0; e_rrow = 0;
    e_wlane = 0; e_rlane = 0; e_wdata = 0; r_wdata = 0;
    // fill by rows
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      r_we = 1; r_wrow = AW'(r);
      for (int l = 0; l < LANES; l++) begin
        ref_m[r][l] = DW'($urandom);
        r_wdata[l*DW +: DW] = ref_m[r][l];
      end
    end
    @(negedge clk); r_we = 0;
    // overwrite random elements
    repeat (30) begin
      automatic int r = $urandom_range(0, DEPTH - 1), l = $urandom_range(0, LANES - 1);
      e_we = 1; e_wrow = AW'(r); e_wlane = LW'(l); e_wdata = DW'($urandom);
      ref_m[r][l] = e_wdata;
      @(negedge clk);
    end
    e_we = 0;
    for (int r = 0; r < DEPTH; r++) begin
      r_rrow = AW'(r); e_rrow = AW'(r);
      for (int l = 0; l < LANES; l++) begin
        e_rlane = LW'(l);
        #1;
        checks += 2;
        if (r_rdata[l*DW +: DW] != ref_m[r][l]) begin failures++; $display("FAIL row read %0d %0d", r, l); end
        if (e_rdata != ref_m[r][l]) begin failures++; $display("FAIL elem read %0d %0d", r, l); end
      end
    end
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
