// tb_lut_dla_full: one complete operation of the accelerator core with every
// parameter at its default (V=3, C=16, T_N=768, M_MAX=512, two IMMs, four
// CCUs): 512 rows, two subspaces, one group of two output tiles, similarity
// side on a 7 ns clock and lookup side on a 10 ns clock.
//
// The testbench plays the memory system around the core. It writes random
// codebooks, streams the input rows (beats of N_CCU rows of one subspace, in
// group / subspace / row order), streams to each IMM its PSum LUT slices in
// use order and collects the result rows of every IMM. The expected rows are
// computed independently: nearest centroid of every sub-vector by exhaustive
// search (strict less-than), then for every output column
//   sat16((sum_k LUT[tile][k][idx[m][k]][col] * scale) >>> shift), ReLU.
// Mechanisms counted, each required at least once: CCM stall on a full
// clock-crossing FIFO, IMM waiting for a PSum LUT, LUT prefetch overlapping
// lookups (ping-pong), output back-pressure, drain, more than one group (where
// the run has several), a partial last beat, and the CCM reaching one beat per
// cycle while nothing stalls it.
`timescale 1ns/1ps
module tb_lut_dla_full;
  import lutdla_pkg::*;
  localparam int V = D_V, C = D_C, T_N = D_T_N, M_MAX = D_M_MAX, N_IMM = D_N_IMM, N_CCU = D_N_CCU;
  localparam int NC_MAX = D_NC_MAX, DATA_W = D_DATA_W, LUT_W = D_LUT_W, OUT_W = D_OUT_W, LOAD_W = D_LOAD_W;
  localparam int ROWS = D_M_MAX, NC = 2, GROUPS = 1;
  localparam int IDX_W = $clog2(C), ROW_W = $clog2(M_MAX + 1), TAG_W = $clog2(NC_MAX);
  localparam int BPR = T_N / LOAD_W;
  localparam int BLOCKS = (ROWS + N_CCU - 1) / N_CCU;
  localparam int BEATS = GROUPS * NC * BLOCKS;
  localparam int TILES = GROUPS * N_IMM;

  logic clk_ccm = 0, clk_imm = 0, rst_ccm_n = 0, rst_imm_n = 0;
  always #3.5 clk_ccm = ~clk_ccm;
  always #5   clk_imm = ~clk_imm;

  logic ccm_start = 0, ccm_busy, in_valid = 0, in_ready;
  logic cb_wr_en = 0;
  logic [TAG_W-1:0] cb_wr_k = '0;
  logic [IDX_W-1:0] cb_wr_c = '0;
  logic [V*DATA_W-1:0] cb_wr_vec = '0;
  logic [V*DATA_W-1:0] in_vec [N_CCU];
  logic [31:0] ccm_stall_cycles;
  logic imm_start = 0, imm_busy, imm_done;
  logic signed [15:0] scale = 16'sd37;
  logic [5:0] shift = 6'd3;
  logic lut_valid [N_IMM], lut_ready [N_IMM];
  logic [LOAD_W*LUT_W-1:0] lut_data [N_IMM];
  logic out_valid [N_IMM], out_ready [N_IMM];
  logic [T_N*OUT_W-1:0] out_row [N_IMM];
  logic [31:0] lut_wait_cycles [N_IMM], drain_cycles [N_IMM];

  lut_dla_top dut (
    .clk_ccm, .rst_ccm_n, .ccm_start,
    .ccm_cfg_rows(ROW_W'(ROWS)), .ccm_cfg_nc((TAG_W+1)'(NC)), .ccm_cfg_groups(16'(GROUPS)),
    .ccm_busy, .cb_wr_en, .cb_wr_k, .cb_wr_c, .cb_wr_vec, .in_valid, .in_ready, .in_vec, .ccm_stall_cycles,
    .clk_imm, .rst_imm_n, .imm_start,
    .imm_cfg_rows(ROW_W'(ROWS)), .imm_cfg_nc((TAG_W+1)'(NC)), .imm_cfg_groups(16'(GROUPS)),
    .imm_cfg_scale(scale), .imm_cfg_shift(shift), .imm_cfg_act(ACT_RELU),
    .imm_busy, .imm_done, .lut_valid, .lut_ready, .lut_data, .out_valid, .out_ready, .out_row,
    .lut_wait_cycles, .drain_cycles);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [V*DATA_W-1:0] cb [NC][C];
  logic [V*DATA_W-1:0] a [ROWS][NC];
  logic [LUT_W-1:0] lut [TILES][NC][C][T_N];
  int idx [ROWS][NC];
  int n_overlap = 0, n_bp = 0, n_rows = 0, n_partial = 0, ccm_full_rate = 0;

  function automatic logic [V*DATA_W-1:0] rand_vec();
    logic [V*DATA_W-1:0] r;
    for (int i = 0; i < V; i++) r[i*DATA_W +: DATA_W] = DATA_W'($urandom_range(0, 2000) - 1000);
    return r;
  endfunction

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

  function automatic logic [OUT_W-1:0] ref_out(input int tile, input int m, input int col);
    longint s;
    s = 0;
    for (int k = 0; k < NC; k++) s += longint'($signed(lut[tile][k][idx[m][k]][col]));
    s = (s * longint'(scale)) >>> shift;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (s < 0) s = 0;
    return OUT_W'(s);
  endfunction

  initial begin
    #(5000000); failures++;
    $display("watchdog: rows received %0d", n_rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- event counters (IMM domain) ----
  int run_len = 0;
  always @(posedge clk_imm) if (rst_imm_n) begin
    for (int i = 0; i < N_IMM; i++) begin
      if (lut_valid[i] && lut_ready[i] && dut.d_valid && dut.d_ready) n_overlap++;
      if (out_valid[i] && !out_ready[i]) n_bp++;
    end
  end
  // ---- CCM throughput: beats accepted by the CCUs in consecutive cycles ----
  int ccm_run = 0;
  always @(posedge clk_ccm) if (rst_ccm_n) begin
    if (dut.u_ccm.take) begin
      ccm_run++;
      if (ccm_run >= 4) ccm_full_rate++;
      if (32'(dut.u_ccm.row_q) + N_CCU > ROWS) n_partial++;
    end else ccm_run = 0;
  end

  // ---- CCM side: codebooks and input beats ----
  task automatic ccm_side();
    for (int k = 0; k < NC; k++) for (int c = 0; c < C; c++) begin
      @(negedge clk_ccm); cb_wr_en = 1; cb_wr_k = TAG_W'(k); cb_wr_c = IDX_W'(c); cb_wr_vec = cb[k][c];
    end
    @(negedge clk_ccm); cb_wr_en = 0;
    ccm_start = 1; @(negedge clk_ccm); ccm_start = 0;
    for (int b = 0; b < BEATS; b++) begin
      int blk, k, m0;
      blk = b % BLOCKS; k = (b / BLOCKS) % NC; m0 = blk * N_CCU;
      for (int u = 0; u < N_CCU; u++) in_vec[u] = (m0 + u < ROWS) ? a[m0 + u][k] : rand_vec();
      in_valid = (b < BEATS / 4) ? 1'b1 : ($urandom_range(0, 5) != 0);
      forever begin
        @(posedge clk_ccm);
        if (in_valid && in_ready) break;
        @(negedge clk_ccm);
        in_valid = ($urandom_range(0, 5) != 0);
      end
      @(negedge clk_ccm);
    end
    in_valid = 0;
  endtask

  // ---- IMM side: one LUT stream and one result collector per IMM ----
  task automatic lut_side(input int i);
    for (int g = 0; g < GROUPS; g++) for (int k = 0; k < NC; k++) for (int r = 0; r < C; r++)
      for (int b = 0; b < BPR; b++) begin
        for (int e = 0; e < LOAD_W; e++) lut_data[i][e*LUT_W +: LUT_W] = lut[g*N_IMM + i][k][r][b*LOAD_W + e];
        lut_valid[i] = ($urandom_range(0, 7) != 0);
        forever begin
          @(posedge clk_imm);
          if (lut_valid[i] && lut_ready[i]) break;
          @(negedge clk_imm);
          lut_valid[i] = ($urandom_range(0, 7) != 0);
        end
        @(negedge clk_imm);
      end
    lut_valid[i] = 0;
  endtask

  task automatic out_side(input int i);
    for (int g = 0; g < GROUPS; g++) for (int m = 0; m < ROWS; m++) begin
      forever begin
        @(negedge clk_imm);
        out_ready[i] = ($urandom_range(0, 3) != 0);
        @(posedge clk_imm);
        if (out_valid[i] && out_ready[i]) break;
      end
      n_rows++;
      for (int col = 0; col < T_N; col++) begin
        logic [OUT_W-1:0] e;
        e = ref_out(g * N_IMM + i, m, col);
        check(out_row[i][col*OUT_W +: OUT_W] == e,
              $sformatf("imm %0d group %0d row %0d col %0d: got %0d exp %0d", i, g, m, col,
                        $signed(out_row[i][col*OUT_W +: OUT_W]), $signed(e)));
      end
    end
    @(negedge clk_imm); out_ready[i] = 1;
  endtask

  initial begin : main
    for (int u = 0; u < N_CCU; u++) in_vec[u] = '0;
    for (int i = 0; i < N_IMM; i++) begin lut_valid[i] = 0; lut_data[i] = '0; out_ready[i] = 1; end
    for (int k = 0; k < NC; k++) for (int c = 0; c < C; c++) cb[k][c] = rand_vec();
    for (int m = 0; m < ROWS; m++) for (int k = 0; k < NC; k++) begin
      a[m][k] = rand_vec();
      idx[m][k] = nearest(a[m][k], k);
    end
    for (int t = 0; t < TILES; t++) for (int k = 0; k < NC; k++) for (int c = 0; c < C; c++)
      for (int col = 0; col < T_N; col++) lut[t][k][c][col] = LUT_W'($urandom);
    repeat (3) @(posedge clk_imm);
    rst_ccm_n = 1; rst_imm_n = 1;
    @(negedge clk_imm); imm_start = 1; @(negedge clk_imm); imm_start = 0;
    fork
      ccm_side();
      begin
        fork
          lut_side(0);
          out_side(0);
          lut_side(1);
          out_side(1);
        join
      end
    join
    while (imm_busy || ccm_busy) @(negedge clk_imm);
    repeat (4) @(negedge clk_imm);
    check(n_rows == TILES * ROWS, $sformatf("result rows %0d", n_rows));
    $display("ccm stalls %0d, lut waits %0d/%0d, prefetch overlap %0d, drain %0d, back-pressure %0d, partial beats %0d, full-rate beats %0d",
             ccm_stall_cycles, lut_wait_cycles[0], lut_wait_cycles[N_IMM-1], n_overlap, drain_cycles[0], n_bp, n_partial, ccm_full_rate);
    check(ccm_stall_cycles > 0, "CCM stalled on a full clock-crossing FIFO");
    for (int i = 0; i < N_IMM; i++) begin
      check(lut_wait_cycles[i] > 0, "IMM waited for a PSum LUT");
      check(drain_cycles[i] >= 32'(GROUPS * ROWS), "every group drained");
    end
    check(n_overlap > 0, "LUT prefetch overlapped lookups");
    check(n_bp > 0, "output back-pressure");
    check(ccm_full_rate > 0, "CCM took one beat per cycle");
    if (ROWS % N_CCU != 0) check(n_partial == GROUPS * NC, "partial last beat of every subspace");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
