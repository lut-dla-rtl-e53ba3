// centroid_buffer: codebook memory of the CCM.
//
// Holds, for each of up to NC_MAX subspaces, the C centroids of V elements
// that a CCU compares input vectors with. It is written one centroid per cycle
// (subspace wr_k, centroid number wr_c) and read by every stage of N_RD CCU
// pipelines at once: read port [u][j] returns centroid j of subspace
// rd_tag[u][j], which is what stage j of CCU u needs for the vector it holds.
// The reads are combinational, so a dPE sees its centroid in the same cycle as
// the vector. Codebooks are loaded before the layer and stay put while it runs
// (they are reused for every row and every output tile).
//
// Sizes: NC_MAX (subspaces) is this design's choice; C and V are the model's.
module centroid_buffer
  import lutdla_pkg::*;
#(
  parameter int V      = lutdla_pkg::D_V,
  parameter int DATA_W = lutdla_pkg::D_DATA_W,
  parameter int C      = lutdla_pkg::D_C,
  parameter int NC_MAX = lutdla_pkg::D_NC_MAX,
  parameter int N_RD   = 2,
  localparam int TAG_W = $clog2(NC_MAX),
  localparam int IDX_W = $clog2(C)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [TAG_W-1:0]    wr_k,
  input  logic [IDX_W-1:0]    wr_c,
  input  logic [V*DATA_W-1:0] wr_vec,
  input  logic [TAG_W-1:0]    rd_tag  [N_RD][C],
  output logic [V*DATA_W-1:0] rd_cent [N_RD][C]
);

  logic [V*DATA_W-1:0] mem [NC_MAX][C];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_k][wr_c] <= wr_vec;
  end

  always_comb begin
    for (int u = 0; u < N_RD; u++)
      for (int j = 0; j < C; j++)
        rd_cent[u][j] = mem[rd_tag[u][j]][j];
  end

endmodule
