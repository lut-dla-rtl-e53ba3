// tb_imm: one in-memory matching module at reduced size (C=16, T_N=64,
// M_MAX=16, 32 LUT entries per beat). Three independent processes play the
// index dispatcher, the LUT stream and the result consumer. Every result row
// is compared with a reference: for each output column,
//   sat16((sum_k LUT[g][k][idx[m][k]][col] * scale) >>> shift), ReLU optional.
// Run 1 (10 rows, 3 subspaces, 2 groups, no gaps): the rows of a subspace
//   must be looked up one per cycle once its table is present, and a drain
//   must take rows+1 cycles.
// Run 2 (16 rows, 4 subspaces, 2 groups): random gaps on both input streams
//   and random output back-pressure.
// Counted and required: cycles waiting for a table, table loads overlapping
// lookups (ping-pong), output back-pressure, drains, more than one group.
`timescale 1ns/1ps
module tb_imm;
  import lutdla_pkg::*;
  localparam int C = 16, T_N = 64, M_MAX = 16, NC_MAX = 8, LUT_W = 8, PSUM_W = 32, OUT_W = 16, LOAD_W = 32;
  localparam int IDX_W = $clog2(C), ROW_W = $clog2(M_MAX + 1), TAG_W = $clog2(NC_MAX);
  localparam int BPR = T_N / LOAD_W;
  localparam int MAXG = 2, MAXK = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [ROW_W-1:0] cfg_rows;
  logic [TAG_W:0] cfg_nc;
  logic [15:0] cfg_groups;
  logic signed [15:0] cfg_scale;
  logic [5:0] cfg_shift;
  act_e cfg_act;
  logic idx_valid = 0, idx_ready;
  logic [IDX_W-1:0] idx_data = '0;
  logic lut_valid = 0, lut_ready;
  logic [LOAD_W*LUT_W-1:0] lut_data = '0;
  logic out_valid, out_ready = 1;
  logic [T_N*OUT_W-1:0] out_row;
  logic [31:0] lut_wait_cycles, drain_cycles;

  imm #(.C(C), .T_N(T_N), .M_MAX(M_MAX), .NC_MAX(NC_MAX), .LUT_W(LUT_W), .PSUM_W(PSUM_W), .OUT_W(OUT_W), .LOAD_W(LOAD_W)) dut (
    .clk, .rst_n, .start, .cfg_rows, .cfg_nc, .cfg_groups, .cfg_scale, .cfg_shift, .cfg_act, .busy, .done,
    .idx_valid, .idx_ready, .idx_data, .lut_valid, .lut_ready, .lut_data,
    .out_valid, .out_ready, .out_row, .lut_wait_cycles, .drain_cycles);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [LUT_W-1:0] lut [MAXG][MAXK][C][T_N];
  int idx [M_MAX][MAXK];
  int rows, nc, groups;
  bit gaps;
  int n_overlap = 0, n_bp = 0, n_out = 0, n_done = 0;

  function automatic logic [OUT_W-1:0] ref_out(input int g, input int m, input int col);
    longint s;
    s = 0;
    for (int k = 0; k < nc; k++) s += longint'($signed(lut[g][k][idx[m][k]][col]));
    s = (s * longint'(cfg_scale)) >>> cfg_shift;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (cfg_act == ACT_RELU && s < 0) s = 0;
    return OUT_W'(s);
  endfunction

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // statistics
  always @(posedge clk) if (rst_n) begin
    if (lut_valid && lut_ready && idx_valid && idx_ready) n_overlap++;
    if (out_valid && !out_ready) n_bp++;
    if (done) n_done++;
  end

  task automatic index_stream(input bit run1);
    int last_cyc, cyc;
    cyc = 0;
    for (int g = 0; g < groups; g++) for (int k = 0; k < nc; k++) for (int m = 0; m < rows; m++) begin
      idx_data = IDX_W'(idx[m][k]);
      idx_valid = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
      forever begin
        @(posedge clk); cyc++;
        if (idx_valid && idx_ready) break;
        @(negedge clk);
        if (gaps) idx_valid = ($urandom_range(0, 2) != 0);
        else idx_valid = 1'b1;
      end
      if (run1 && m > 0) check(cyc == last_cyc + 1, $sformatf("g%0d k%0d row %0d not looked up in the next cycle", g, k, m));
      last_cyc = cyc;
      @(negedge clk);
    end
    idx_valid = 0;
  endtask

  task automatic lut_stream();
    for (int g = 0; g < groups; g++) for (int k = 0; k < nc; k++) for (int r = 0; r < C; r++)
      for (int b = 0; b < BPR; b++) begin
        for (int e = 0; e < LOAD_W; e++) lut_data[e*LUT_W +: LUT_W] = lut[g][k][r][b*LOAD_W + e];
        lut_valid = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
        forever begin
          @(posedge clk);
          if (lut_valid && lut_ready) break;
          @(negedge clk);
          lut_valid = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
        end
        @(negedge clk);
      end
    lut_valid = 0;
  endtask

  task automatic out_collect();
    for (int g = 0; g < groups; g++) for (int m = 0; m < rows; m++) begin
      forever begin
        @(negedge clk);
        out_ready = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
        @(posedge clk);
        if (out_valid && out_ready) break;
      end
      n_out++;
      for (int col = 0; col < T_N; col++)
        check(out_row[col*OUT_W +: OUT_W] == ref_out(g, m, col),
              $sformatf("g%0d row %0d col %0d got %0d exp %0d", g, m, col, $signed(out_row[col*OUT_W +: OUT_W]), $signed(ref_out(g, m, col))));
    end
    @(negedge clk); out_ready = 1;
  endtask

  task automatic run(input int r, input int n, input int gr, input bit with_gaps, input act_e act);
    int dc0, lw0, done0;
    rows = r; nc = n; groups = gr; gaps = with_gaps;
    for (int g = 0; g < groups; g++) for (int k = 0; k < nc; k++) for (int c = 0; c < C; c++)
      for (int col = 0; col < T_N; col++) lut[g][k][c][col] = LUT_W'($urandom);
    for (int m = 0; m < rows; m++) for (int k = 0; k < nc; k++) idx[m][k] = $urandom_range(0, C - 1);
    cfg_rows = ROW_W'(rows); cfg_nc = (TAG_W+1)'(nc); cfg_groups = 16'(groups);
    cfg_scale = 16'($urandom_range(1, 300)); cfg_shift = 6'($urandom_range(0, 4)); cfg_act = act;
    dc0 = drain_cycles; lw0 = lut_wait_cycles; done0 = n_done;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      index_stream(!with_gaps);
      lut_stream();
      out_collect();
    join
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    check(n_done - done0 == 1, "one done pulse per operation");
    check(int'(lut_wait_cycles) - lw0 > 0, "waited for a table");
    if (!with_gaps) check(int'(drain_cycles) - dc0 == groups * (rows + 1), $sformatf("drain cycles %0d", int'(drain_cycles) - dc0));
  endtask

  initial begin : main
    cfg_rows = '0; cfg_nc = '0; cfg_groups = '0; cfg_scale = '0; cfg_shift = '0; cfg_act = ACT_NONE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(10, 3, 2, 0, ACT_NONE);
    run(16, 4, 2, 1, ACT_RELU);
    check(n_out == 10 * 2 + 16 * 2, "row count");
    check(n_overlap > 0, "table prefetch overlapped lookups");
    check(n_bp > 0, "output back-pressure happened");
    $display("overlap=%0d backpressure=%0d lut_wait=%0d drain=%0d", n_overlap, n_bp, lut_wait_cycles, drain_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
