// tb_async_fifo: writer and reader on unrelated clocks (7 ns and 11 ns,
// then swapped speeds by gating activity). Every written word must come out
// once, in order; nothing may be written while full; the FIFO must fill up
// (full seen) and drain (empty seen).
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int WIDTH = 8, DEPTH = 8;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #3.5 wclk = ~wclk;
  always #5.5 rclk = ~rclk;
  logic wr_en = 0, full, rd_en = 0, empty;
  logic [WIDTH-1:0] wdata = '0, rdata;
  async_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.wclk, .wrst_n, .wr_en, .wdata, .full, .rclk, .rrst_n, .rd_en, .rdata, .empty);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [WIDTH-1:0] q [$];
  int nw = 0, nr = 0, saw_full = 0;
  int phase = 0;
  localparam int N = 1500;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // writer
  initial begin
    repeat (3) @(posedge wclk);
    wrst_n = 1; rrst_n = 1;
    while (nw < N) begin
      @(negedge wclk);
      wr_en = ($urandom_range(0, 99) < (phase == 0 ? 90 : 25));
      wdata = WIDTH'(nw);
      @(posedge wclk);
      if (full) saw_full++;
      if (wr_en && !full) begin q.push_back(wdata); nw++; end
    end
    @(negedge wclk); wr_en = 0;
  end
  // reader
  initial begin : rd
    repeat (4) @(posedge rclk);
    while (nr < N) begin
      @(negedge rclk);
      rd_en = ($urandom_range(0, 99) < (phase == 0 ? 30 : 95));
      @(posedge rclk);
      if (rd_en && !empty) begin
        check(q.size() > 0 && rdata == q[0], $sformatf("data %0d", rdata));
        if (q.size() > 0) void'(q.pop_front());
        nr++;
      end
      if (nr == N/2) phase = 1;
    end
    @(negedge rclk); rd_en = 0;
    repeat (5) @(posedge rclk);
    check(empty, "empty at end");
    check(saw_full > 0, "full seen");
    check(nr == N, "all words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
