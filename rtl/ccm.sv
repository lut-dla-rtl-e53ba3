// ccm: centroid computation module (similarity side of LUT-DLA).
//
// The CCM turns input sub-vectors into centroid indices. It holds
//   - the input buffer, a FIFO of input beats; a beat carries N_CCU
//     sub-vectors, rows m..m+N_CCU-1 of one subspace k;
//   - N_CB centroid buffers, each shared by N_CCU/N_CB CCUs and written
//     together, so all copies hold the same codebooks;
//   - N_CCU CCUs; row m of a subspace is handled by CCU (m mod N_CCU);
//   - the CCM controller, which counts beats in loop order
//     (output-tile group g, subspace k, row block) and tags every beat with k.
// Each CCU's index leaves through its own port towards an asynchronous FIFO
// (idx_push[u], idx_data[u]). When any of those FIFOs is full the whole CCM
// stalls (all pipelines freeze), so no index is ever dropped.
//
// The loop order follows the LUT-stationary dataflow: for each group of
// output tiles (one tile per IMM) all subspaces are processed, and within a
// subspace all M rows. Indices are recomputed for every group, so the input
// rows are sent once per group. The two-copy centroid buffer, the round-robin
// row assignment and the beat format are this design's choices.
//
// Interface: start (one cycle) latches cfg_rows (rows per tile, 1..M_MAX),
// cfg_nc (subspaces, 1..NC_MAX) and cfg_groups; busy stays high until every
// beat of the operation has entered the CCUs. Codebooks are written through
// cb_* before start. stall_cycles counts the cycles in which the CCM is frozen by a
// full FIFO while it still has beats to take or an index to hand over.
// Timing: one beat per cycle when not stalled; index latency C cycles.
// The input buffer's fill level and the subspace tag leaving each CCU are not
// needed here (the tag only travels along the pipeline to select codebooks),
// so those two outputs are left open.
module ccm
  import lutdla_pkg::*;
#(
  parameter int      V        = lutdla_pkg::D_V,
  parameter int      DATA_W   = lutdla_pkg::D_DATA_W,
  parameter int      C        = lutdla_pkg::D_C,
  parameter int      NC_MAX   = lutdla_pkg::D_NC_MAX,
  parameter int      M_MAX    = lutdla_pkg::D_M_MAX,
  parameter int      N_CCU    = lutdla_pkg::D_N_CCU,
  parameter int      N_CB     = 2,
  parameter int      IB_DEPTH = 16,
  parameter metric_e METRIC   = METRIC_L1,
  localparam int     TAG_W    = $clog2(NC_MAX),
  localparam int     IDX_W    = $clog2(C),
  localparam int     ROW_W    = $clog2(M_MAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                start,
  input  logic [ROW_W-1:0]    cfg_rows,
  input  logic [TAG_W:0]      cfg_nc,
  input  logic [15:0]         cfg_groups,
  output logic                busy,
  // codebook load
  input  logic                cb_wr_en,
  input  logic [TAG_W-1:0]    cb_wr_k,
  input  logic [IDX_W-1:0]    cb_wr_c,
  input  logic [V*DATA_W-1:0] cb_wr_vec,
  // input vectors
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [V*DATA_W-1:0] in_vec [N_CCU],
  // indices towards the asynchronous FIFOs
  output logic                idx_push [N_CCU],
  output logic [IDX_W-1:0]    idx_data [N_CCU],
  input  logic                idx_full [N_CCU],
  output logic [31:0]         stall_cycles
);

  localparam int PER_CB = N_CCU / N_CB;
  localparam int BEAT_W = N_CCU * V * DATA_W;

  // ---------------- input buffer ----------------
  logic              ib_valid, ib_ready;
  logic [BEAT_W-1:0] ib_in, ib_out;

  always_comb begin
    for (int u = 0; u < N_CCU; u++) ib_in[u*V*DATA_W +: V*DATA_W] = in_vec[u];
  end

  sync_fifo #(.WIDTH(BEAT_W), .DEPTH(IB_DEPTH)) u_input_buffer (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(ib_in),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_out), .count()
  );

  // ---------------- controller ----------------
  logic              en;
  logic [ROW_W-1:0]  rows_q, row_q;      // row_q: first row of the next beat
  logic [TAG_W:0]    nc_q;
  logic [TAG_W-1:0]  k_q;
  logic [15:0]       groups_q, g_q;
  logic              any_full, any_out;
  logic              take;
  logic              ccu_valid [N_CCU];

  always_comb begin
    any_full = 1'b0;
    any_out  = 1'b0;
    for (int u = 0; u < N_CCU; u++) begin
      any_full |= idx_full[u];
      any_out  |= ccu_valid[u];
    end
  end
  assign en       = !any_full;
  assign take     = busy && en && ib_valid;
  assign ib_ready = busy && en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; rows_q <= '0; nc_q <= '0; groups_q <= '0;
      row_q <= '0; k_q <= '0; g_q <= '0; stall_cycles <= '0;
    end else begin
      if (start && !busy) begin
        busy     <= (cfg_rows != '0) && (cfg_nc != '0) && (cfg_groups != '0);
        rows_q   <= cfg_rows;
        nc_q     <= cfg_nc;
        groups_q <= cfg_groups;
        row_q    <= '0; k_q <= '0; g_q <= '0;
      end else if (take) begin
        if (32'(row_q) + N_CCU >= 32'(rows_q)) begin
          row_q <= '0;
          if (32'(k_q) + 1 >= 32'(nc_q)) begin
            k_q <= '0;
            if (g_q + 16'd1 >= groups_q) begin
              g_q  <= '0;
              busy <= 1'b0;
            end else begin
              g_q <= g_q + 16'd1;
            end
          end else begin
            k_q <= k_q + 1'b1;
          end
        end else begin
          row_q <= row_q + ROW_W'(N_CCU);
        end
      end
      if ((busy || any_out) && any_full) stall_cycles <= stall_cycles + 1;
    end
  end

  // ---------------- centroid buffers and CCUs ----------------
  logic [TAG_W-1:0]    rd_tag  [N_CCU][C];
  logic [V*DATA_W-1:0] rd_cent [N_CCU][C];

  for (genvar b = 0; b < N_CB; b++) begin : g_cb
    logic [TAG_W-1:0]    t [PER_CB][C];
    logic [V*DATA_W-1:0] q [PER_CB][C];
    for (genvar p = 0; p < PER_CB; p++) begin : g_p
      assign t[p] = rd_tag[b*PER_CB + p];
      assign rd_cent[b*PER_CB + p] = q[p];
    end
    centroid_buffer #(.V(V), .DATA_W(DATA_W), .C(C), .NC_MAX(NC_MAX), .N_RD(PER_CB)) u_cb (
      .clk, .wr_en(cb_wr_en), .wr_k(cb_wr_k), .wr_c(cb_wr_c), .wr_vec(cb_wr_vec),
      .rd_tag(t), .rd_cent(q)
    );
  end

  for (genvar u = 0; u < N_CCU; u++) begin : g_ccu
    logic lane_valid;
    assign lane_valid = take && (32'(row_q) + u < 32'(rows_q));
    ccu #(.V(V), .DATA_W(DATA_W), .C(C), .NC_MAX(NC_MAX), .METRIC(METRIC)) u_ccu (
      .clk, .rst_n, .en,
      .in_valid (lane_valid),
      .in_vec   (ib_out[u*V*DATA_W +: V*DATA_W]),
      .in_tag   (k_q),
      .rd_tag   (rd_tag[u]),
      .rd_cent  (rd_cent[u]),
      .out_valid(ccu_valid[u]),
      .out_idx  (idx_data[u]),
      .out_tag  ()
    );
    assign idx_push[u] = ccu_valid[u] && en;
  end

endmodule
