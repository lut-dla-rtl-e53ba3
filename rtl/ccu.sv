// ccu: centroid computation unit, a pipeline of C distance PEs.
//
// A vector entering the CCU visits dPE 0, 1, ... C-1 in consecutive cycles;
// dPE j compares it with centroid j of the vector's own codebook and keeps the
// running minimum. After C cycles the index of the nearest centroid leaves the
// last stage. One new vector can enter every cycle, so the CCU delivers one
// index per cycle once the pipe is full.
//
// The subspace number of each vector (in_tag) travels along with it; every
// stage uses it to select its centroid from the codebook array, so vectors
// of two different subspaces may share the pipeline (this tag scheme is this
// design's own choice). The codebook input is the full content of a centroid
// buffer, [subspace][centroid] -> V elements.
//
// Interface: in_valid/in_vec/in_tag enter when en=1; out_valid/out_idx/out_tag
// are the last stage's registers. en=0 freezes every stage (stall).
// Timing: latency C cycles, throughput one vector per cycle.
module ccu
  import lutdla_pkg::*;
#(
  parameter int      V       = lutdla_pkg::D_V,
  parameter int      DATA_W  = lutdla_pkg::D_DATA_W,
  parameter int      C       = lutdla_pkg::D_C,
  parameter int      NC_MAX  = lutdla_pkg::D_NC_MAX,
  parameter metric_e METRIC  = METRIC_L1,
  localparam int     TAG_W   = $clog2(NC_MAX),
  localparam int     IDX_W   = $clog2(C),
  localparam int     DIST_W  = 2 * DATA_W + 2 + $clog2(V)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic [V*DATA_W-1:0] in_vec,
  input  logic [TAG_W-1:0]    in_tag,
  // codebook read: stage j asks for subspace rd_tag[j] and gets centroid j
  output logic [TAG_W-1:0]    rd_tag  [C],
  input  logic [V*DATA_W-1:0] rd_cent [C],
  output logic                out_valid,
  output logic [IDX_W-1:0]    out_idx,
  output logic [TAG_W-1:0]    out_tag
);

  logic                valid_s [C+1];
  logic [V*DATA_W-1:0] vec_s   [C+1];
  logic [TAG_W-1:0]    tag_s   [C+1];
  logic [DIST_W-1:0]   min_s   [C+1];
  logic [IDX_W-1:0]    idx_s   [C+1];

  assign valid_s[0] = in_valid;
  assign vec_s[0]   = in_vec;
  assign tag_s[0]   = in_tag;
  assign min_s[0]   = '1;       // "infinitely far" before the first centroid
  assign idx_s[0]   = '0;

  for (genvar j = 0; j < C; j++) begin : g_pe
    assign rd_tag[j] = tag_s[j];
    dpe #(.V(V), .DATA_W(DATA_W), .C(C), .TAG_W(TAG_W), .IDX(j), .METRIC(METRIC)) u_dpe (
      .clk, .rst_n, .en,
      .in_valid (valid_s[j]), .in_vec (vec_s[j]), .in_tag (tag_s[j]),
      .in_min   (min_s[j]),   .in_idx (idx_s[j]), .centroid (rd_cent[j]),
      .out_valid(valid_s[j+1]), .out_vec(vec_s[j+1]), .out_tag(tag_s[j+1]),
      .out_min  (min_s[j+1]), .out_idx(idx_s[j+1])
    );
  end

  assign out_valid = valid_s[C];
  assign out_idx   = idx_s[C];
  assign out_tag   = tag_s[C];

endmodule
