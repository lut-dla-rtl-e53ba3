// tb_dpe: checks one distance PE for each of the three metrics.
// Random vectors, centroids and incoming minima are applied; one cycle later
// the registered minimum and index must equal a reference computed with the
// package distance function and a strict "less than" update. The vector, tag
// and valid must pass through unchanged, and en=0 must hold the outputs.
`timescale 1ns/1ps
module tb_dpe;
  import lutdla_pkg::*;
  localparam int V = D_V, DATA_W = D_DATA_W, C = D_C, TAG_W = 10;
  localparam int DIST_W = 2 * DATA_W + 2 + $clog2(V);
  localparam int IDX_W = $clog2(C);

  logic clk = 0, rst_n = 0, en = 1;
  always #5 clk = ~clk;

  logic in_valid;
  logic [V*DATA_W-1:0] in_vec, cent;
  logic [TAG_W-1:0] in_tag;
  logic [DIST_W-1:0] in_min;
  logic [IDX_W-1:0] in_idx;
  logic o_valid [3];
  logic [V*DATA_W-1:0] o_vec [3];
  logic [TAG_W-1:0] o_tag [3];
  logic [DIST_W-1:0] o_min [3];
  logic [IDX_W-1:0] o_idx [3];

  dpe #(.IDX(5), .TAG_W(TAG_W), .METRIC(METRIC_L2)) u_l2 (.clk, .rst_n, .en, .in_valid, .in_vec, .in_tag, .in_min, .in_idx,
    .centroid(cent), .out_valid(o_valid[0]), .out_vec(o_vec[0]), .out_tag(o_tag[0]), .out_min(o_min[0]), .out_idx(o_idx[0]));
  dpe #(.IDX(5), .TAG_W(TAG_W), .METRIC(METRIC_L1)) u_l1 (.clk, .rst_n, .en, .in_valid, .in_vec, .in_tag, .in_min, .in_idx,
    .centroid(cent), .out_valid(o_valid[1]), .out_vec(o_vec[1]), .out_tag(o_tag[1]), .out_min(o_min[1]), .out_idx(o_idx[1]));
  dpe #(.IDX(5), .TAG_W(TAG_W), .METRIC(METRIC_CHEBYSHEV)) u_ch (.clk, .rst_n, .en, .in_valid, .in_vec, .in_tag, .in_min, .in_idx,
    .centroid(cent), .out_valid(o_valid[2]), .out_vec(o_vec[2]), .out_tag(o_tag[2]), .out_min(o_min[2]), .out_idx(o_idx[2]));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // independent reference of one element's absolute difference
  function automatic longint absdiff(input logic [DATA_W-1:0] a, input logic [DATA_W-1:0] b);
    longint x;
    x = longint'($signed(a)) - longint'($signed(b));
    return x < 0 ? -x : x;
  endfunction
  function automatic longint ref_dist(input int metric, input logic [V*DATA_W-1:0] a, input logic [V*DATA_W-1:0] b);
    longint acc, t;
    acc = 0;
    for (int i = 0; i < V; i++) begin
      t = absdiff(a[i*DATA_W +: DATA_W], b[i*DATA_W +: DATA_W]);
      if (metric == 0) acc += t * t;
      else if (metric == 1) acc += t;
      else if (t > acc) acc = t;
    end
    return acc;
  endfunction

  function automatic logic [V*DATA_W-1:0] rnd_vec(input int range);
    logic [V*DATA_W-1:0] v;
    for (int i = 0; i < V; i++) v[i*DATA_W +: DATA_W] = DATA_W'($urandom_range(0, 2*range) - range);
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    in_valid = 0; in_vec = '0; cent = '0; in_tag = '0; in_min = '0; in_idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint d [3];
      int range;
      range = (t < 200) ? 40 : 32767;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_vec = rnd_vec(range);
      cent = (t % 7 == 0) ? in_vec : rnd_vec(range);
      in_tag = TAG_W'($urandom);
      in_idx = IDX_W'($urandom_range(0, 4));
      // incoming minimum near the expected distances so both outcomes occur
      d[0] = ref_dist(0, in_vec, cent);
      in_min = (t % 3 == 0) ? '1 : DIST_W'(ref_dist(1, in_vec, cent) + $urandom_range(0, 20) - 10);
      if (t % 5 == 0) in_min = DIST_W'(ref_dist(1, in_vec, cent));   // tie on L1
      for (int mtr = 0; mtr < 3; mtr++) d[mtr] = ref_dist(mtr, in_vec, cent);
      @(posedge clk); #1;
      for (int mtr = 0; mtr < 3; mtr++) begin
        longint exp_min;
        int exp_idx;
        exp_min = (d[mtr] < longint'(in_min)) ? d[mtr] : longint'(in_min);
        exp_idx = (d[mtr] < longint'(in_min)) ? 5 : int'(in_idx);
        check(longint'(o_min[mtr]) == exp_min, $sformatf("t=%0d metric %0d min %0d exp %0d", t, mtr, o_min[mtr], exp_min));
        check(int'(o_idx[mtr]) == exp_idx, $sformatf("t=%0d metric %0d idx %0d exp %0d", t, mtr, o_idx[mtr], exp_idx));
        check(o_vec[mtr] == in_vec && o_tag[mtr] == in_tag && o_valid[mtr] == in_valid, "pass-through");
      end
      // package reference agrees with this testbench's reference
      check(longint'(vec_dist(METRIC_L1, in_vec, cent)) == d[1], "pkg L1");
    end
    // stall: en=0 must hold the registers
    @(negedge clk);
    en = 0; in_vec = ~in_vec; in_min = '0;
    @(posedge clk); #1;
    check(o_vec[0] != in_vec, "stall holds vector");
    en = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
