// tb_psum_lut: fills both banks of a reduced PSum LUT (C=16, T_N=64, beats
// of 32 entries) with random data, then reads random (bank, row) pairs and
// compares the full row with the model; also checks that writing one bank
// leaves the other untouched.
`timescale 1ns/1ps
module tb_psum_lut;
  localparam int C = 16, T_N = 64, LUT_W = 8, LOAD_W = 32;
  localparam int IDX_W = $clog2(C), COL_W = $clog2(T_N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [IDX_W-1:0] wr_row = '0, rd_idx = '0;
  logic [COL_W-1:0] wr_col = '0;
  logic [LOAD_W*LUT_W-1:0] wr_data = '0;
  logic [T_N*LUT_W-1:0] rd_row;
  psum_lut #(.C(C), .T_N(T_N), .LUT_W(LUT_W), .LOAD_W(LOAD_W)) dut (.clk, .wr_en, .wr_bank, .wr_row, .wr_col, .wr_data, .rd_bank, .rd_idx, .rd_row);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [LUT_W-1:0] model [2][C][T_N];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic write_bank(input int b);
    for (int r = 0; r < C; r++) for (int col = 0; col < T_N; col += LOAD_W) begin
      @(negedge clk);
      wr_en = 1; wr_bank = b[0]; wr_row = IDX_W'(r); wr_col = COL_W'(col);
      for (int e = 0; e < LOAD_W; e++) begin
        wr_data[e*LUT_W +: LUT_W] = LUT_W'($urandom);
        model[b][r][col+e] = wr_data[e*LUT_W +: LUT_W];
      end
    end
    @(negedge clk); wr_en = 0;
  endtask
  task automatic check_reads(input int n);
    for (int t = 0; t < n; t++) begin
      rd_bank = $urandom_range(0, 1); rd_idx = IDX_W'($urandom);
      #1;
      for (int e = 0; e < T_N; e++)
        check(rd_row[e*LUT_W +: LUT_W] == model[rd_bank][rd_idx][e], $sformatf("bank %0d row %0d col %0d", rd_bank, rd_idx, e));
    end
  endtask
  initial begin : main
    write_bank(0); write_bank(1);
    check_reads(40);
    write_bank(0);
    check_reads(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
