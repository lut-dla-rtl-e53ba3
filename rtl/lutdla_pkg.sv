// lutdla_pkg: constants, types and the distance function shared by the
// LUT-DLA datapath.
//
// LUT-DLA replaces a matrix product A(MxK) * B(KxN) by vector quantisation:
// every length-V sub-vector of a row of A is replaced by the index of its
// nearest centroid (one of C per subspace), and the product of each centroid
// with the matching slice of B is precomputed into a lookup table (the PSum
// LUT). The accelerator therefore only searches nearest centroids (CCM side)
// and looks up and accumulates table rows (IMM side).
//
// Default sizes follow the largest evaluated configuration ("Design 3"):
// V=3, C=16 centroids, an N tile of T_N=768 columns and M_MAX=512 rows per
// IMM, two IMMs, INT8 table entries. The element format of inputs and
// centroids is 16-bit signed fixed point here (the published design uses a
// 16-bit floating-point format); the accumulator width, the number of CCUs and
// the bus widths are this implementation's own choices.
package lutdla_pkg;

  // ---- sizes (defaults of the whole design) ----
  parameter int D_V       = 3;     // sub-vector length
  parameter int D_C       = 16;    // centroids per codebook
  parameter int D_T_N     = 768;   // output columns handled by one IMM
  parameter int D_M_MAX   = 512;   // rows per tile (scratchpad / indices depth)
  parameter int D_N_IMM   = 2;     // IMMs sharing one index stream
  parameter int D_N_CCU   = 4;     // CCUs in the CCM
  parameter int D_NC_MAX  = 1024;  // subspaces the centroid buffer can hold
  parameter int D_DATA_W  = 16;    // input / centroid element width
  parameter int D_LUT_W   = 8;     // PSum LUT entry width (INT8)
  parameter int D_PSUM_W  = 32;    // scratchpad accumulator width
  parameter int D_OUT_W   = 16;    // width after dequantisation
  parameter int D_LOAD_W  = 32;    // LUT entries per prefetch beat
  parameter int D_FIFO_DEPTH = 16; // async FIFO depth (per CCU)

  // ---- similarity metric of the distance PEs ----
  typedef enum logic [1:0] {
    METRIC_L2        = 2'd0,  // sum of squared differences
    METRIC_L1        = 2'd1,  // sum of absolute differences
    METRIC_CHEBYSHEV = 2'd2   // largest absolute difference
  } metric_e;

  // ---- activation applied on the way out of the scratchpad ----
  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1
  } act_e;

  // Width that holds any distance of V elements of w bits.
  function automatic int dist_width(input int v, input int w);
    return 2 * w + 2 + $clog2(v);
  endfunction

  // Distance between two vectors packed as v elements of DATA_W bits
  // (element 0 in the low bits). Used by the dPE and by reference models.
  function automatic logic [dist_width(D_V, D_DATA_W)-1:0] vec_dist(
      input metric_e metric,
      input logic [D_V*D_DATA_W-1:0] a,
      input logic [D_V*D_DATA_W-1:0] b);
    logic [dist_width(D_V, D_DATA_W)-1:0] acc;
    logic signed [D_DATA_W:0] d;
    logic [D_DATA_W:0] ad;
    logic [2*D_DATA_W+1:0] sq;
    acc = '0;
    for (int i = 0; i < D_V; i++) begin
      d  = $signed({a[i*D_DATA_W+D_DATA_W-1], a[i*D_DATA_W +: D_DATA_W]}) -
           $signed({b[i*D_DATA_W+D_DATA_W-1], b[i*D_DATA_W +: D_DATA_W]});
      ad = d[D_DATA_W] ? (D_DATA_W+1)'(-d) : (D_DATA_W+1)'(d);
      sq = {{(D_DATA_W+1){1'b0}}, ad} * {{(D_DATA_W+1){1'b0}}, ad};
      unique case (metric)
        METRIC_L2:  acc = acc + dist_width(D_V, D_DATA_W)'(sq);
        METRIC_L1:  acc = acc + dist_width(D_V, D_DATA_W)'(ad);
        default:    if (dist_width(D_V, D_DATA_W)'(ad) > acc) acc = dist_width(D_V, D_DATA_W)'(ad);
      endcase
    end
    return acc;
  endfunction

endpackage
