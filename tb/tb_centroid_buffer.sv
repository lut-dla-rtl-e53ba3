// tb_centroid_buffer: writes random centroids to every (subspace, centroid)
// slot of a reduced buffer, then checks that every read port returns
// centroid j of the subspace it asks for, for random addresses.
`timescale 1ns/1ps
module tb_centroid_buffer;
  import lutdla_pkg::*;
  localparam int V = D_V, DATA_W = D_DATA_W, C = D_C, NC_MAX = 16, N_RD = 2;
  localparam int TAG_W = $clog2(NC_MAX), IDX_W = $clog2(C);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [TAG_W-1:0] wr_k = '0;
  logic [IDX_W-1:0] wr_c = '0;
  logic [V*DATA_W-1:0] wr_vec = '0;
  logic [TAG_W-1:0] rd_tag [N_RD][C];
  logic [V*DATA_W-1:0] rd_cent [N_RD][C];
  logic [V*DATA_W-1:0] model [NC_MAX][C];

  centroid_buffer #(.NC_MAX(NC_MAX), .N_RD(N_RD)) dut (.clk, .wr_en, .wr_k, .wr_c, .wr_vec, .rd_tag, .rd_cent);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin : main
    for (int u = 0; u < N_RD; u++) for (int j = 0; j < C; j++) rd_tag[u][j] = '0;
    for (int k = 0; k < NC_MAX; k++) for (int j = 0; j < C; j++) begin
      @(negedge clk);
      wr_en = 1; wr_k = TAG_W'(k); wr_c = IDX_W'(j);
      wr_vec = {$urandom, $urandom};
      model[k][j] = wr_vec;
    end
    @(negedge clk); wr_en = 0;
    // overwrite a few entries
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      wr_en = 1; wr_k = TAG_W'($urandom_range(0, NC_MAX-1)); wr_c = IDX_W'($urandom_range(0, C-1));
      wr_vec = {$urandom, $urandom}; model[wr_k][wr_c] = wr_vec;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 50; t++) begin
      for (int u = 0; u < N_RD; u++) for (int j = 0; j < C; j++) rd_tag[u][j] = TAG_W'($urandom_range(0, NC_MAX-1));
      #1;
      for (int u = 0; u < N_RD; u++) for (int j = 0; j < C; j++)
        check(rd_cent[u][j] == model[rd_tag[u][j]][j], $sformatf("port %0d/%0d", u, j));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
