// tb_prefetcher: streams three LUT slices (C=16, T_N=64, 32 entries per beat)
// while the consumer releases banks with random delays. Checks the write
// address sequence (row, column, bank), that a bank is marked full exactly
// after its last beat, that lut_ready drops while the next bank is still full
// (back-pressure) and that a released bank is refilled.
`timescale 1ns/1ps
module tb_prefetcher;
  localparam int C = 16, T_N = 64, LUT_W = 8, LOAD_W = 32;
  localparam int IDX_W = $clog2(C), COL_W = $clog2(T_N), BEATS = C * T_N / LOAD_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, lut_valid = 0, lut_ready, wr_en, wr_bank, release_bank = 0, rel_bank = 0;
  logic [LOAD_W*LUT_W-1:0] lut_data = '0, wr_data;
  logic [IDX_W-1:0] wr_row;
  logic [COL_W-1:0] wr_col;
  logic [1:0] bank_full;
  prefetcher #(.C(C), .T_N(T_N), .LUT_W(LUT_W), .LOAD_W(LOAD_W)) dut (.clk, .rst_n, .clear, .lut_valid, .lut_ready, .lut_data,
    .wr_en, .wr_bank, .wr_row, .wr_col, .wr_data, .bank_full, .release_bank, .rel_bank);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int backpressure = 0;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin : main
    int beat, slice;
    repeat (2) @(posedge clk);
    rst_n = 1;
    beat = 0; slice = 0;
    while (slice < 3) begin
      @(negedge clk);
      lut_valid = ($urandom_range(0, 3) != 0);
      lut_data = {8{$urandom}};
      // consumer: slice 0 is released after slice 1 has been stalled a while
      release_bank = 0;
      if (slice == 2 && bank_full == 2'b11 && backpressure > 5) begin release_bank = 1; rel_bank = 0; end
      #1;
      if (bank_full == 2'b11) begin
        check(!lut_ready, "ready low while both banks full");
        backpressure++;
      end
      if (lut_valid && lut_ready) begin
        check(wr_en, "write on accepted beat");
        check(int'(wr_row) == beat / (T_N / LOAD_W), $sformatf("row beat %0d", beat));
        check(int'(wr_col) == (beat % (T_N / LOAD_W)) * LOAD_W, "col");
        check(int'(wr_bank) == slice % 2, "bank");
        check(wr_data == lut_data, "data");
      end else check(!wr_en, "no write without handshake");
      @(posedge clk);
      if (lut_valid && lut_ready) begin
        beat++;
        if (beat == BEATS) begin
          beat = 0;
          #1 check(bank_full[slice % 2], "bank full after last beat");
          slice++;
        end
      end
    end
    check(backpressure > 0, "back-pressure occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
