// dpe: distance processing element, one stage of a CCU pipeline.
//
// Each dPE owns one centroid (position IDX in the codebook). In the cycle a
// vector arrives it computes the distance between the vector and its centroid,
// compares it with the running minimum handed over by the upstream dPE and
// registers the (possibly updated) minimum distance and index together with the
// vector itself for the next dPE. A chain of C dPEs therefore finds the
// nearest centroid of one vector per cycle with a latency of C cycles.
//
// The distance unit is chosen at build time by METRIC:
//   L2        sum of (v_i - c_i)^2
//   L1        sum of |v_i - c_i|
//   Chebyshev max |v_i - c_i|
// The update uses a strict "less than", so on a tie the earlier (lower)
// centroid index is kept. Elements are signed two's complement integers of
// DATA_W bits (the published design computes distances in a 16-bit float
// format, where |x| is taken by clearing the sign bit).
//
// The published figure of the dPE places its registers on the incoming minimum
// and after the distance unit, ahead of the comparator; here the single
// register follows the comparator, which keeps one cycle per stage and lets
// the registered minimum feed the next stage's comparator directly.
//
// Interface: in_* from the upstream stage, out_* registered to the downstream
// stage, centroid is this stage's codebook entry (chosen by the caller from
// the tag travelling with the vector). en=0 freezes the stage (stall).
// Timing: one register stage, all outputs valid one cycle after the inputs.
module dpe
  import lutdla_pkg::*;
#(
  parameter int      V       = lutdla_pkg::D_V,
  parameter int      DATA_W  = lutdla_pkg::D_DATA_W,
  parameter int      C       = lutdla_pkg::D_C,
  parameter int      TAG_W   = 10,
  parameter int      IDX     = 0,
  parameter metric_e METRIC  = METRIC_L1,
  localparam int     DIST_W  = 2 * DATA_W + 2 + $clog2(V),
  localparam int     IDX_W   = $clog2(C)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  in_valid,
  input  logic [V*DATA_W-1:0]   in_vec,
  input  logic [TAG_W-1:0]      in_tag,
  input  logic [DIST_W-1:0]     in_min,
  input  logic [IDX_W-1:0]      in_idx,
  input  logic [V*DATA_W-1:0]   centroid,
  output logic                  out_valid,
  output logic [V*DATA_W-1:0]   out_vec,
  output logic [TAG_W-1:0]      out_tag,
  output logic [DIST_W-1:0]     out_min,
  output logic [IDX_W-1:0]      out_idx
);

  logic [DIST_W-1:0] dist_v;

  // distance compute
  always_comb begin
    logic signed [DATA_W:0] d;
    logic [DATA_W:0]        ad;
    logic [2*DATA_W+1:0]    sq;
    dist_v = '0;
    for (int i = 0; i < V; i++) begin
      d  = $signed({in_vec[i*DATA_W+DATA_W-1], in_vec[i*DATA_W +: DATA_W]}) -
           $signed({centroid[i*DATA_W+DATA_W-1], centroid[i*DATA_W +: DATA_W]});
      ad = d[DATA_W] ? (DATA_W+1)'(-d) : (DATA_W+1)'(d);
      sq = {{(DATA_W+1){1'b0}}, ad} * {{(DATA_W+1){1'b0}}, ad};
      if (METRIC == METRIC_L2)
        dist_v = dist_v + DIST_W'(sq);
      else if (METRIC == METRIC_L1)
        dist_v = dist_v + DIST_W'(ad);
      else if (DIST_W'(ad) > dist_v)
        dist_v = DIST_W'(ad);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
      out_tag   <= '0;
      out_min   <= '0;
      out_idx   <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      out_vec   <= in_vec;
      out_tag   <= in_tag;
      if (dist_v < in_min) begin
        out_min <= dist_v;
        out_idx <= IDX_W'(IDX);
      end else begin
        out_min <= in_min;
        out_idx <= in_idx;
      end
    end
  end

endmodule
