// tb_index_dispatch: four model FIFOs are filled the way the CCM fills them
// (row m of a subspace into FIFO m mod 4, 10 rows per subspace, so the last
// block is partial). The dispatcher must deliver the indices in row order,
// pop only the FIFO it reads and only when the consumer is ready, and restart
// at FIFO 0 for each subspace.
`timescale 1ns/1ps
module tb_index_dispatch;
  localparam int N_CCU = 4, IDX_W = 4, ROW_W = 10, ROWS = 10, NSUB = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [ROW_W-1:0] cfg_rows = ROW_W'(ROWS);
  logic fifo_empty [N_CCU];
  logic [IDX_W-1:0] fifo_data [N_CCU];
  logic fifo_rd [N_CCU];
  logic idx_valid, idx_ready = 0;
  logic [IDX_W-1:0] idx_data;
  index_dispatch #(.N_CCU(N_CCU), .IDX_W(IDX_W), .ROW_W(ROW_W)) dut (.clk, .rst_n, .start, .cfg_rows,
    .fifo_empty, .fifo_data, .fifo_rd, .idx_valid, .idx_data, .idx_ready);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int fq [N_CCU][$];
  int order [$];
  logic [N_CCU-1:0] gate;   // lets a FIFO look empty for a while

  task automatic drive_fifos();
    for (int u = 0; u < N_CCU; u++) begin
      fifo_empty[u] = (fq[u].size() == 0) || !gate[u];
      fifo_data[u]  = (fq[u].size() == 0) ? '0 : IDX_W'(fq[u][0]);
    end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin : main
    int got;
    gate = '1;
    drive_fifos();
    for (int k = 0; k < NSUB; k++) for (int m = 0; m < ROWS; m++) begin
      int v;
      v = $urandom_range(0, 15);
      fq[m % N_CCU].push_back(v); order.push_back(v);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    got = 0;
    while (got < NSUB * ROWS) begin
      @(negedge clk);
      idx_ready = ($urandom_range(0, 3) != 0);
      gate = N_CCU'($urandom_range(0, 15)) | 4'b1000;
      if ($urandom_range(0, 1)) gate = '1;
      drive_fifos();
      #1;
      for (int u = 0; u < N_CCU; u++)
        check(fifo_rd[u] == (idx_valid && idx_ready && (u == (got % ROWS) % N_CCU)), $sformatf("rd lane %0d row %0d", u, got));
      if (idx_valid) check(int'(idx_data) == order[0], $sformatf("data row %0d", got));
      @(posedge clk);
      if (idx_valid && idx_ready) begin
        void'(order.pop_front());
        for (int u = 0; u < N_CCU; u++) if (fifo_rd[u]) void'(fq[u].pop_front());
        got++;
      end
    end
    check(order.size() == 0, "all delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
