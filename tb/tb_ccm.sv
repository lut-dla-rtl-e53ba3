// tb_ccm: drives the centroid computation module as the top level does.
// Random codebooks (C=16, V=3) are written for NC=3 subspaces, then input
// beats of 4 rows are streamed in loop order (group, subspace, row block) for
// 10 rows (so the last beat of each subspace is partial) and 2 groups. The
// indices leaving each CCU port are compared with a reference nearest-centroid
// search (strict less-than, lowest index wins ties).
// Run 1: no back-pressure; the CCM must accept one beat per cycle
//        (busy for exactly the number of beats).
// Run 2: random FIFO-full back-pressure and gaps in the input stream; no
//        index may be lost or duplicated and stall_cycles must count every
//        cycle with a full FIFO while work is pending.
`timescale 1ns/1ps
module tb_ccm;
  import lutdla_pkg::*;
  localparam int V = 3, DATA_W = 16, C = 16, NC_MAX = 8, M_MAX = 16, N_CCU = 4;
  localparam int TAG_W = $clog2(NC_MAX), IDX_W = $clog2(C), ROW_W = $clog2(M_MAX + 1);
  localparam int ROWS = 10, NC = 3, GROUPS = 2;
  localparam int BLOCKS = (ROWS + N_CCU - 1) / N_CCU;
  localparam int BEATS = GROUPS * NC * BLOCKS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy;
  logic [ROW_W-1:0] cfg_rows = ROW_W'(ROWS);
  logic [TAG_W:0] cfg_nc = (TAG_W+1)'(NC);
  logic [15:0] cfg_groups = 16'(GROUPS);
  logic cb_wr_en = 0;
  logic [TAG_W-1:0] cb_wr_k = '0;
  logic [IDX_W-1:0] cb_wr_c = '0;
  logic [V*DATA_W-1:0] cb_wr_vec = '0;
  logic in_valid = 0, in_ready;
  logic [V*DATA_W-1:0] in_vec [N_CCU];
  logic idx_push [N_CCU];
  logic [IDX_W-1:0] idx_data [N_CCU];
  logic idx_full [N_CCU];
  logic [31:0] stall_cycles;

  ccm #(.V(V), .DATA_W(DATA_W), .C(C), .NC_MAX(NC_MAX), .M_MAX(M_MAX), .N_CCU(N_CCU), .METRIC(METRIC_L1)) dut (
    .clk, .rst_n, .start, .cfg_rows, .cfg_nc, .cfg_groups, .busy,
    .cb_wr_en, .cb_wr_k, .cb_wr_c, .cb_wr_vec, .in_valid, .in_ready, .in_vec,
    .idx_push, .idx_data, .idx_full, .stall_cycles);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [V*DATA_W-1:0] cb [NC][C];
  logic [V*DATA_W-1:0] a [ROWS][NC];
  int exp_q [N_CCU][$];
  bit pressure = 0, gaps = 0;
  int busy_cycles = 0, full_cycles = 0, pushes = 0;

  function automatic int nearest(input logic [V*DATA_W-1:0] x, input int k);
    logic [dist_width(V, DATA_W)-1:0] best, d;
    int bi;
    best = '1; bi = 0;
    for (int c = 0; c < C; c++) begin
      d = vec_dist(METRIC_L1, x, cb[k][c]);
      if (d < best) begin best = d; bi = c; end
    end
    return bi;
  endfunction

  function automatic logic [V*DATA_W-1:0] rand_vec();
    logic [V*DATA_W-1:0] r;
    for (int i = 0; i < V; i++) r[i*DATA_W +: DATA_W] = DATA_W'($urandom_range(0, 600) - 300);
    return r;
  endfunction

  // FIFO-full model and index collector
  always @(negedge clk) begin
    for (int u = 0; u < N_CCU; u++) idx_full[u] <= pressure ? ($urandom_range(0, 2) == 0) : 1'b0;
  end
  always @(posedge clk) if (rst_n) begin
    logic anyf;
    anyf = 0;
    for (int u = 0; u < N_CCU; u++) anyf |= idx_full[u];
    if (busy) busy_cycles++;
    begin
      logic pend;
      pend = busy;
      for (int u = 0; u < N_CCU; u++) pend |= dut.ccu_valid[u];
      if (pend && anyf) full_cycles++;
    end
    for (int u = 0; u < N_CCU; u++) if (idx_push[u]) begin
      pushes++;
      check(!idx_full[u], "push into full FIFO");
      if (exp_q[u].size() == 0) check(0, $sformatf("unexpected index on lane %0d", u));
      else begin
        int e;
        e = exp_q[u].pop_front();
        check(int'(idx_data[u]) == e, $sformatf("lane %0d idx %0d exp %0d", u, idx_data[u], e));
      end
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input bit with_pressure);
    int st0, sent;
    pressure = with_pressure; gaps = with_pressure;
    for (int m = 0; m < ROWS; m++) for (int k = 0; k < NC; k++) a[m][k] = rand_vec();
    for (int k = 0; k < NC; k++) for (int c = 0; c < C; c++) begin
      @(negedge clk); cb_wr_en = 1; cb_wr_k = TAG_W'(k); cb_wr_c = IDX_W'(c);
      cb_wr_vec = (c < 4) ? cb[k][c ^ 1] : rand_vec();   // a few duplicates: ties
      cb[k][c] = cb_wr_vec;
    end
    for (int g = 0; g < GROUPS; g++) for (int k = 0; k < NC; k++) for (int m = 0; m < ROWS; m++)
      exp_q[m % N_CCU].push_back(nearest(a[m][k], k));
    @(negedge clk); cb_wr_en = 0;
    st0 = stall_cycles; busy_cycles = 0; full_cycles = 0;
    start = 1; @(negedge clk); start = 0;
    sent = 0;
    while (sent < BEATS) begin
      int blk, k, m0;
      blk = sent % BLOCKS; k = (sent / BLOCKS) % NC; m0 = blk * N_CCU;
      in_valid = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
      for (int u = 0; u < N_CCU; u++) in_vec[u] = (m0 + u < ROWS) ? a[m0 + u][k] : rand_vec();
      @(posedge clk);
      if (in_valid && in_ready) sent++;
      @(negedge clk);
    end
    in_valid = 0;
    while (busy) @(negedge clk);
    // the first beat enters the input buffer one cycle after start
    if (!with_pressure) check(busy_cycles == BEATS + 1, $sformatf("one beat per cycle: busy %0d cycles for %0d beats", busy_cycles, BEATS));
    for (int t = 0; t < 2000; t++) begin
      int left;
      left = 0;
      for (int u = 0; u < N_CCU; u++) left += exp_q[u].size();
      if (left == 0) break;
      @(negedge clk);
    end
    for (int u = 0; u < N_CCU; u++) check(exp_q[u].size() == 0, $sformatf("lane %0d missing %0d indices", u, exp_q[u].size()));
    check(int'(stall_cycles) - st0 == full_cycles, $sformatf("stall counter %0d vs %0d", int'(stall_cycles) - st0, full_cycles));
    if (with_pressure) check(full_cycles > 0, "back-pressure stall happened");
  endtask

  initial begin : main
    for (int u = 0; u < N_CCU; u++) begin idx_full[u] = 0; in_vec[u] = '0; end
    for (int k = 0; k < NC; k++) for (int c = 0; c < C; c++) cb[k][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0);
    run(1);
    check(pushes == 2 * GROUPS * NC * ROWS, $sformatf("index count %0d", pushes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
