// tb_indices_buffer: random writes and registered reads against an array
// model, including reads of the address written in the same cycle, which must
// return the new value.
`timescale 1ns/1ps
module tb_indices_buffer;
  localparam int M_MAX = 64, IDX_W = 5, AW = $clog2(M_MAX);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [IDX_W-1:0] wr_idx = '0, rd_idx;
  indices_buffer #(.M_MAX(M_MAX), .IDX_W(IDX_W)) dut (.clk, .wr_en, .wr_addr, .wr_idx, .rd_en, .rd_addr, .rd_idx);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [IDX_W-1:0] model [M_MAX];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin : main
    logic [IDX_W-1:0] exp_v;
    for (int a = 0; a < M_MAX; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(a); wr_idx = IDX_W'($urandom); model[a] = wr_idx;
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_addr = AW'($urandom); wr_idx = IDX_W'($urandom);
      rd_en = 1; rd_addr = (t % 3 == 0) ? wr_addr : AW'($urandom);
      exp_v = (wr_en && wr_addr == rd_addr) ? wr_idx : model[rd_addr];
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_idx;
      #1;
      check(rd_idx == exp_v, $sformatf("t=%0d read %0d exp %0d", t, rd_idx, exp_v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
