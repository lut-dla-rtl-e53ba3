// lut_dla_top: LUT-DLA accelerator core, one CCM feeding N_IMM IMMs.
//
// The core computes C(M x N) = A(M x K) * B(K x N) approximately: each
// length-V sub-vector of A is replaced by its nearest centroid (CCM), and the
// centroid-times-weight products, precomputed into PSum LUTs, are looked up and
// summed (IMMs). The two halves run in separate clock domains, clk_ccm and
// clk_imm, joined by N_CCU asynchronous FIFOs (one per CCU). On the IMM side
// the index dispatcher restores row order and broadcasts every index to all
// IMMs; IMM i holds output tile i of the current group, so one similarity
// search serves N_IMM tiles.
//
// One operation (LUT-stationary order):
//   for g in 0..cfg_groups-1           (N_IMM output tiles per group)
//     for k in 0..cfg_nc-1             (subspaces of K)
//       IMM i uses PSum LUT[k][tile g*N_IMM+i], prefetched while k-1 ran
//       for m in 0..cfg_rows-1         (rows of the tile)
//         idx = nearest centroid of A[m][k];  PSum_i[m] += LUT_i[idx]
//     every IMM drains cfg_rows result rows through Dequant&Actv
// The input rows are sent once per group (in beats of N_CCU rows of one
// subspace); the PSum LUT slices are sent per IMM in use order.
//
// Ports: CCM-domain configuration, codebook write and input stream; IMM-domain
// configuration, one LUT stream and one result stream per IMM. The global
// buffer, on-chip interconnect and external memory of the full chip are not
// part of this core: their traffic is what these streams carry. Both start
// inputs must be pulsed for an operation, each in its own clock domain, with
// the same cfg_rows/cfg_nc/cfg_groups.
module lut_dla_top
  import lutdla_pkg::*;
#(
  parameter int      V          = lutdla_pkg::D_V,
  parameter int      C          = lutdla_pkg::D_C,
  parameter int      T_N        = lutdla_pkg::D_T_N,
  parameter int      M_MAX      = lutdla_pkg::D_M_MAX,
  parameter int      N_IMM      = lutdla_pkg::D_N_IMM,
  parameter int      N_CCU      = lutdla_pkg::D_N_CCU,
  parameter int      NC_MAX     = lutdla_pkg::D_NC_MAX,
  parameter int      DATA_W     = lutdla_pkg::D_DATA_W,
  parameter int      LUT_W      = lutdla_pkg::D_LUT_W,
  parameter int      PSUM_W     = lutdla_pkg::D_PSUM_W,
  parameter int      OUT_W      = lutdla_pkg::D_OUT_W,
  parameter int      LOAD_W     = lutdla_pkg::D_LOAD_W,
  parameter int      FIFO_DEPTH = lutdla_pkg::D_FIFO_DEPTH,
  parameter metric_e METRIC     = METRIC_L1,
  localparam int     IDX_W      = $clog2(C),
  localparam int     ROW_W      = $clog2(M_MAX + 1),
  localparam int     TAG_W      = $clog2(NC_MAX)
) (
  // ---------------- CCM clock domain ----------------
  input  logic                    clk_ccm,
  input  logic                    rst_ccm_n,
  input  logic                    ccm_start,
  input  logic [ROW_W-1:0]        ccm_cfg_rows,
  input  logic [TAG_W:0]          ccm_cfg_nc,
  input  logic [15:0]             ccm_cfg_groups,
  output logic                    ccm_busy,
  input  logic                    cb_wr_en,
  input  logic [TAG_W-1:0]        cb_wr_k,
  input  logic [IDX_W-1:0]        cb_wr_c,
  input  logic [V*DATA_W-1:0]     cb_wr_vec,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [V*DATA_W-1:0]     in_vec [N_CCU],
  output logic [31:0]             ccm_stall_cycles,
  // ---------------- IMM clock domain ----------------
  input  logic                    clk_imm,
  input  logic                    rst_imm_n,
  input  logic                    imm_start,
  input  logic [ROW_W-1:0]        imm_cfg_rows,
  input  logic [TAG_W:0]          imm_cfg_nc,
  input  logic [15:0]             imm_cfg_groups,
  input  logic signed [15:0]      imm_cfg_scale,
  input  logic [5:0]              imm_cfg_shift,
  input  act_e                    imm_cfg_act,
  output logic                    imm_busy,
  output logic                    imm_done,
  input  logic                    lut_valid [N_IMM],
  output logic                    lut_ready [N_IMM],
  input  logic [LOAD_W*LUT_W-1:0] lut_data  [N_IMM],
  output logic                    out_valid [N_IMM],
  input  logic                    out_ready [N_IMM],
  output logic [T_N*OUT_W-1:0]    out_row   [N_IMM],
  output logic [31:0]             lut_wait_cycles [N_IMM],
  output logic [31:0]             drain_cycles    [N_IMM]
);

  // ---------------- CCM ----------------
  logic             idx_push [N_CCU];
  logic [IDX_W-1:0] idx_wdata [N_CCU];
  logic             idx_full [N_CCU];

  ccm #(.V(V), .DATA_W(DATA_W), .C(C), .NC_MAX(NC_MAX), .M_MAX(M_MAX),
        .N_CCU(N_CCU), .METRIC(METRIC)) u_ccm (
    .clk(clk_ccm), .rst_n(rst_ccm_n),
    .start(ccm_start), .cfg_rows(ccm_cfg_rows), .cfg_nc(ccm_cfg_nc), .cfg_groups(ccm_cfg_groups),
    .busy(ccm_busy),
    .cb_wr_en, .cb_wr_k, .cb_wr_c, .cb_wr_vec,
    .in_valid, .in_ready, .in_vec,
    .idx_push, .idx_data(idx_wdata), .idx_full,
    .stall_cycles(ccm_stall_cycles)
  );

  // ---------------- clock-domain crossing ----------------
  logic             f_empty [N_CCU];
  logic [IDX_W-1:0] f_rdata [N_CCU];
  logic             f_rd    [N_CCU];

  for (genvar u = 0; u < N_CCU; u++) begin : g_fifo
    async_fifo #(.WIDTH(IDX_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wclk(clk_ccm), .wrst_n(rst_ccm_n), .wr_en(idx_push[u]), .wdata(idx_wdata[u]), .full(idx_full[u]),
      .rclk(clk_imm), .rrst_n(rst_imm_n), .rd_en(f_rd[u]), .rdata(f_rdata[u]), .empty(f_empty[u])
    );
  end

  // ---------------- index dispatch ----------------
  logic             d_valid, d_ready;
  logic [IDX_W-1:0] d_idx;
  logic             imm_ready [N_IMM];
  logic             imm_busy_v [N_IMM];
  logic             imm_done_v [N_IMM];

  index_dispatch #(.N_CCU(N_CCU), .IDX_W(IDX_W), .ROW_W(ROW_W)) u_dispatch (
    .clk(clk_imm), .rst_n(rst_imm_n), .start(imm_start), .cfg_rows(imm_cfg_rows),
    .fifo_empty(f_empty), .fifo_data(f_rdata), .fifo_rd(f_rd),
    .idx_valid(d_valid), .idx_data(d_idx), .idx_ready(d_ready)
  );

  always_comb begin
    d_ready  = 1'b1;
    imm_busy = 1'b0;
    for (int i = 0; i < N_IMM; i++) begin
      d_ready  &= imm_ready[i];
      imm_busy |= imm_busy_v[i];
    end
  end
  assign imm_done = imm_done_v[0];

  // ---------------- IMMs ----------------
  for (genvar i = 0; i < N_IMM; i++) begin : g_imm
    imm #(.C(C), .T_N(T_N), .M_MAX(M_MAX), .NC_MAX(NC_MAX), .LUT_W(LUT_W),
          .PSUM_W(PSUM_W), .OUT_W(OUT_W), .LOAD_W(LOAD_W)) u_imm (
      .clk(clk_imm), .rst_n(rst_imm_n),
      .start(imm_start), .cfg_rows(imm_cfg_rows), .cfg_nc(imm_cfg_nc), .cfg_groups(imm_cfg_groups),
      .cfg_scale(imm_cfg_scale), .cfg_shift(imm_cfg_shift), .cfg_act(imm_cfg_act),
      .busy(imm_busy_v[i]), .done(imm_done_v[i]),
      .idx_valid(d_valid && d_ready), .idx_ready(imm_ready[i]), .idx_data(d_idx),
      .lut_valid(lut_valid[i]), .lut_ready(lut_ready[i]), .lut_data(lut_data[i]),
      .out_valid(out_valid[i]), .out_ready(out_ready[i]), .out_row(out_row[i]),
      .lut_wait_cycles(lut_wait_cycles[i]), .drain_cycles(drain_cycles[i])
    );
  end

endmodule
