// imm: in-memory matching module (lookup side of LUT-DLA).
//
// One IMM owns one output tile of T_N columns. For every centroid index it
// receives (row m of subspace k) it reads row idx of the PSum LUT of subspace
// k and adds it to the partial sums of row m in the scratchpad. The loop order
// is LUT-stationary: the table of one subspace stays in place while all rows
// pass, then the next subspace's table, which the prefetcher has meanwhile
// loaded into the other bank, takes over. After the last subspace the rows are
// drained through Dequant&Actv and the IMM starts over on its next output tile
// (one "group" of the operation).
//
// Pipeline of the lookup path:
//   stage 0  index accepted, written to the indices buffer at row m
//   stage 1  indices buffer read -> PSum LUT row read -> scratchpad
//            read-modify-write of row m (row replaced when k == 0)
// Flow control: idx_ready is high only while running and while the PSum LUT
// bank for the current subspace is full; when the last row of a subspace has
// passed stage 1 that bank is released to the prefetcher. During the drain no
// index is taken. The drain emits one row per cycle with valid/ready.
//
// Interface: start latches cfg_rows/cfg_nc/cfg_groups and the dequantisation
// settings; done pulses after the last row of the last group has been
// accepted at the output. lut_* is the table stream, out_* the result rows.
// Counters: lut_wait_cycles (an index waited for a table), drain_cycles.
// The stalls, the drain that pauses lookups and the counters are this
// design's choices. The one assertion (a lookup only reads a bank holding a
// complete table) is disabled during reset, so lint reports rst_n as used both
// asynchronously and synchronously; the assertion is simulation-only.
module imm
  import lutdla_pkg::*;
#(
  parameter int C      = lutdla_pkg::D_C,
  parameter int T_N    = lutdla_pkg::D_T_N,
  parameter int M_MAX  = lutdla_pkg::D_M_MAX,
  parameter int NC_MAX = lutdla_pkg::D_NC_MAX,
  parameter int LUT_W  = lutdla_pkg::D_LUT_W,
  parameter int PSUM_W = lutdla_pkg::D_PSUM_W,
  parameter int OUT_W  = lutdla_pkg::D_OUT_W,
  parameter int LOAD_W = lutdla_pkg::D_LOAD_W,
  localparam int IDX_W = $clog2(C),
  localparam int ROW_W = $clog2(M_MAX + 1),
  localparam int AW    = $clog2(M_MAX),
  localparam int TAG_W = $clog2(NC_MAX)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic                    start,
  input  logic [ROW_W-1:0]        cfg_rows,
  input  logic [TAG_W:0]          cfg_nc,
  input  logic [15:0]             cfg_groups,
  input  logic signed [15:0]      cfg_scale,
  input  logic [5:0]              cfg_shift,
  input  act_e                    cfg_act,
  output logic                    busy,
  output logic                    done,
  // index stream
  input  logic                    idx_valid,
  output logic                    idx_ready,
  input  logic [IDX_W-1:0]        idx_data,
  // PSum LUT stream
  input  logic                    lut_valid,
  output logic                    lut_ready,
  input  logic [LOAD_W*LUT_W-1:0] lut_data,
  // result rows
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [T_N*OUT_W-1:0]    out_row,
  // statistics
  output logic [31:0]             lut_wait_cycles,
  output logic [31:0]             drain_cycles
);

  typedef enum logic [2:0] { S_IDLE, S_RUN, S_WAIT, S_DRAIN, S_FLUSH } state_e;
  state_e state;

  logic [ROW_W-1:0] rows_q;
  logic [TAG_W:0]   nc_q;
  logic [15:0]      groups_q, g_q;
  logic signed [15:0] scale_q;
  logic [5:0]       shift_q;
  act_e             act_q;

  logic [AW-1:0]    m_q;
  logic [TAG_W-1:0] k_q;
  logic             cur_bank;
  logic [1:0]       bank_full;
  logic             accept;
  logic             last_row, last_k;

  // stage 1 registers
  logic             s1_valid, s1_first, s1_last, s1_bank;
  logic [AW-1:0]    s1_row;
  logic [IDX_W-1:0] s1_idx;

  // drain
  logic [AW-1:0]    dr_row;
  logic             dq_en, dq_in_valid;

  assign last_row  = (32'(m_q) + 1 >= 32'(rows_q));
  assign last_k    = (32'(k_q) + 1 >= 32'(nc_q));
  assign idx_ready = (state == S_RUN) && bank_full[cur_bank];
  assign accept    = idx_valid && idx_ready;
  assign busy      = (state != S_IDLE);

  // ---------------- indices buffer ----------------
  indices_buffer #(.M_MAX(M_MAX), .IDX_W(IDX_W)) u_indices (
    .clk,
    .wr_en(accept), .wr_addr(m_q), .wr_idx(idx_data),
    .rd_en(accept), .rd_addr(m_q), .rd_idx(s1_idx)
  );

  // ---------------- PSum LUT and prefetcher ----------------
  logic                    pf_wr_en, pf_wr_bank;
  logic [IDX_W-1:0]        pf_wr_row;
  logic [$clog2(T_N)-1:0]  pf_wr_col;
  logic [LOAD_W*LUT_W-1:0] pf_wr_data;
  logic [T_N*LUT_W-1:0]    lut_row;

  prefetcher #(.C(C), .T_N(T_N), .LUT_W(LUT_W), .LOAD_W(LOAD_W)) u_prefetcher (
    .clk, .rst_n, .clear(1'b0),
    .lut_valid, .lut_ready, .lut_data,
    .wr_en(pf_wr_en), .wr_bank(pf_wr_bank), .wr_row(pf_wr_row), .wr_col(pf_wr_col),
    .wr_data(pf_wr_data), .bank_full,
    .release_bank(s1_valid && s1_last), .rel_bank(s1_bank)
  );

  psum_lut #(.C(C), .T_N(T_N), .LUT_W(LUT_W), .LOAD_W(LOAD_W)) u_psum_lut (
    .clk,
    .wr_en(pf_wr_en), .wr_bank(pf_wr_bank), .wr_row(pf_wr_row), .wr_col(pf_wr_col), .wr_data(pf_wr_data),
    .rd_bank(s1_bank), .rd_idx(s1_idx), .rd_row(lut_row)
  );

  // ---------------- scratchpad ----------------
  logic [T_N*PSUM_W-1:0] sp_rd;

  scratchpad #(.M_MAX(M_MAX), .T_N(T_N), .LUT_W(LUT_W), .PSUM_W(PSUM_W)) u_scratchpad (
    .clk,
    .acc_en(s1_valid), .acc_first(s1_first), .acc_row(s1_row), .acc_data(lut_row),
    .rd_row(dr_row), .rd_data(sp_rd)
  );

  // ---------------- Dequant & activation ----------------
  assign dq_en       = out_ready || !out_valid;
  assign dq_in_valid = (state == S_DRAIN);

  dequant_act #(.T_N(T_N), .PSUM_W(PSUM_W), .OUT_W(OUT_W)) u_dequant_act (
    .clk, .rst_n, .en(dq_en),
    .in_valid(dq_in_valid), .in_row(sp_rd),
    .scale(scale_q), .shift(shift_q), .act(act_q),
    .out_valid, .out_row
  );

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      rows_q <= '0; nc_q <= '0; groups_q <= '0; g_q <= '0;
      scale_q <= '0; shift_q <= '0; act_q <= ACT_NONE;
      m_q <= '0; k_q <= '0; cur_bank <= 1'b0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_bank <= 1'b0; s1_row <= '0;
      dr_row <= '0;
      lut_wait_cycles <= '0; drain_cycles <= '0;
    end else begin
      done     <= 1'b0;
      s1_valid <= accept;
      if (accept) begin
        s1_row   <= m_q;
        s1_first <= (k_q == '0);
        s1_last  <= last_row;
        s1_bank  <= cur_bank;
      end
      if (state == S_RUN && !bank_full[cur_bank])
        lut_wait_cycles <= lut_wait_cycles + 1;
      if (state == S_DRAIN || state == S_FLUSH)
        drain_cycles <= drain_cycles + 1;

      unique case (state)
        S_IDLE: if (start) begin
          rows_q <= cfg_rows; nc_q <= cfg_nc; groups_q <= cfg_groups;
          scale_q <= cfg_scale; shift_q <= cfg_shift; act_q <= cfg_act;
          m_q <= '0; k_q <= '0; g_q <= '0;
          if (cfg_rows != '0 && cfg_nc != '0 && cfg_groups != '0) state <= S_RUN;
        end
        S_RUN: if (accept) begin
          if (last_row) begin
            m_q      <= '0;
            cur_bank <= ~cur_bank;
            if (last_k) begin
              k_q   <= '0;
              state <= S_WAIT;
            end else begin
              k_q <= k_q + 1'b1;
            end
          end else begin
            m_q <= m_q + 1'b1;
          end
        end
        S_WAIT: begin            // let the last accumulate land
          dr_row <= '0;
          state  <= S_DRAIN;
        end
        S_DRAIN: if (dq_en) begin
          if (32'(dr_row) + 1 >= 32'(rows_q)) state <= S_FLUSH;
          else dr_row <= dr_row + 1'b1;
        end
        S_FLUSH: if (!out_valid || out_ready) begin
          if (g_q + 16'd1 >= groups_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            g_q   <= g_q + 16'd1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a table row is only read from a bank that holds a complete table
  property p_bank_full_on_lookup;
    @(posedge clk) disable iff (!rst_n) s1_valid |-> bank_full[s1_bank];
  endproperty
  a_bank_full_on_lookup: assert property (p_bank_full_on_lookup);

endmodule
