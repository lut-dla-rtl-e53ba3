// tb_ccu: streams random vectors with random subspace tags through one CCU
// (L1 metric, C=16, V=3) and checks that each index leaving the pipeline is
// the nearest centroid (lowest index on ties) of the matching vector's own
// codebook, in order, that the first index appears exactly C cycles after
// its vector entered, and that random stalls (en=0) lose nothing.
`timescale 1ns/1ps
module tb_ccu;
  import lutdla_pkg::*;
  localparam int V = D_V, DATA_W = D_DATA_W, C = D_C, NC_MAX = 8;
  localparam int TAG_W = $clog2(NC_MAX), IDX_W = $clog2(C);

  logic clk = 0, rst_n = 0, en = 1;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [V*DATA_W-1:0] in_vec = '0;
  logic [TAG_W-1:0] in_tag = '0;
  logic [TAG_W-1:0] rd_tag [C];
  logic [V*DATA_W-1:0] rd_cent [C];
  logic out_valid;
  logic [IDX_W-1:0] out_idx;
  logic [TAG_W-1:0] out_tag;
  logic [V*DATA_W-1:0] cb [NC_MAX][C];

  always_comb for (int j = 0; j < C; j++) rd_cent[j] = cb[rd_tag[j]][j];

  ccu #(.NC_MAX(NC_MAX), .METRIC(METRIC_L1)) dut (.clk, .rst_n, .en, .in_valid, .in_vec, .in_tag,
    .rd_tag, .rd_cent, .out_valid, .out_idx, .out_tag);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int ref_idx(input logic [V*DATA_W-1:0] v, input int k);
    longint best, d, x;
    int bi;
    best = -1; bi = 0;
    for (int j = 0; j < C; j++) begin
      d = 0;
      for (int i = 0; i < V; i++) begin
        x = longint'($signed(v[i*DATA_W +: DATA_W])) - longint'($signed(cb[k][j][i*DATA_W +: DATA_W]));
        d += (x < 0) ? -x : x;
      end
      if (best < 0 || d < best) begin best = d; bi = j; end
    end
    return bi;
  endfunction

  int exp_q [$];
  int tag_q [$];
  longint in_cycle [$];
  longint cyc = 0;
  int got = 0;
  always @(posedge clk) cyc++;

  // sampled at the edge that hands the index downstream (pre-update values)
  always @(posedge clk) if (rst_n && out_valid && en) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      int e, tg;
      e = exp_q.pop_front(); tg = tag_q.pop_front();
      check(int'(out_idx) == e, $sformatf("idx %0d exp %0d", out_idx, e));
      check(int'(out_tag) == tg, "tag");
      if (got == 0) check(cyc - in_cycle[0] == C, $sformatf("latency %0d", cyc - in_cycle[0]));
      got++;
    end
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin : main
    for (int k = 0; k < NC_MAX; k++) for (int j = 0; j < C; j++)
      for (int i = 0; i < V; i++) cb[k][j][i*DATA_W +: DATA_W] = DATA_W'($urandom_range(0, 200) - 100);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      en = (t < 100) || ($urandom_range(0, 4) != 0);
      in_valid = ($urandom_range(0, 5) != 0);
      for (int i = 0; i < V; i++) in_vec[i*DATA_W +: DATA_W] = DATA_W'($urandom_range(0, 200) - 100);
      if (t % 11 == 0) in_vec = cb[1][7];
      in_tag = TAG_W'($urandom_range(0, NC_MAX - 1));
      if (t % 11 == 0) in_tag = 1;
      if (in_valid && en) begin
        exp_q.push_back(ref_idx(in_vec, int'(in_tag)));
        tag_q.push_back(int'(in_tag));
        in_cycle.push_back(cyc + 1);
      end
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (C + 5) @(posedge clk);
    #1;
    check(exp_q.size() == 0, "all vectors produced an index");
    check(got > 300, "enough outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
