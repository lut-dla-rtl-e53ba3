// tb_scratchpad: random accumulate operations (first-subspace writes and
// ordinary accumulations of signed INT8 rows) on a reduced scratchpad, then
// every row is read back and compared with an integer model.
`timescale 1ns/1ps
module tb_scratchpad;
  localparam int M_MAX = 16, T_N = 16, LUT_W = 8, PSUM_W = 32, AW = $clog2(M_MAX);
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_en = 0, acc_first = 0;
  logic [AW-1:0] acc_row = '0, rd_row = '0;
  logic [T_N*LUT_W-1:0] acc_data = '0;
  logic [T_N*PSUM_W-1:0] rd_data;
  scratchpad #(.M_MAX(M_MAX), .T_N(T_N), .LUT_W(LUT_W), .PSUM_W(PSUM_W)) dut (.clk, .acc_en, .acc_first, .acc_row, .acc_data, .rd_row, .rd_data);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int model [M_MAX][T_N];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin : main
    for (int r = 0; r < M_MAX; r++) begin
      @(negedge clk); acc_en = 1; acc_first = 1; acc_row = AW'(r);
      for (int i = 0; i < T_N; i++) begin acc_data[i*LUT_W +: LUT_W] = LUT_W'($urandom); model[r][i] = int'($signed(acc_data[i*LUT_W +: LUT_W])); end
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      acc_en = ($urandom_range(0, 4) != 0); acc_first = ($urandom_range(0, 9) == 0); acc_row = AW'($urandom);
      for (int i = 0; i < T_N; i++) acc_data[i*LUT_W +: LUT_W] = LUT_W'($urandom);
      if (acc_en) for (int i = 0; i < T_N; i++)
        model[acc_row][i] = (acc_first ? 0 : model[acc_row][i]) + int'($signed(acc_data[i*LUT_W +: LUT_W]));
    end
    @(negedge clk); acc_en = 0;
    for (int r = 0; r < M_MAX; r++) begin
      rd_row = AW'(r); #1;
      for (int i = 0; i < T_N; i++) check($signed(rd_data[i*PSUM_W +: PSUM_W]) == model[r][i], $sformatf("row %0d col %0d", r, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
