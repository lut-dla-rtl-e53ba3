// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// data, the count output, and that ready/valid reflect full and empty.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int WIDTH = 24, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [WIDTH-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH):0] count;
  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [WIDTH-1:0] q [$];
  int fulls = 0;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin : main
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < ((t / 250) % 2 ? 30 : 70));
      in_data = WIDTH'($urandom);
      out_ready = ($urandom_range(0, 99) < 50);
      #1;
      check(int'(count) == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (out_valid) check(out_data == q[0], "head data");
      if (!in_ready) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(fulls > 0, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
