// index_dispatch: merges the per-CCU index FIFOs back into row order and
// broadcasts each index to every IMM.
//
// The CCM sends row m of a subspace through CCU (m mod N_CCU), so the IMM side
// must read the FIFOs round-robin: lane 0, 1, ..., N_CCU-1, 0, ... and restart
// at lane 0 when a subspace's rows are done (cfg_rows rows). All IMMs hold
// different output tiles of the same rows, so they consume the same index
// stream in lockstep: an index is popped only when every IMM is ready, which
// is how one similarity result serves several lookup units.
//
// Interface (IMM clock): start restarts the row counter and latches cfg_rows;
// fifo_* connect to the read sides of the N_CCU async FIFOs; idx_valid/idx_data
// go to all IMMs, idx_ready is the AND of their ready signals.
// Timing: combinational from FIFO head to idx_valid, one index per cycle.
module index_dispatch #(
  parameter int N_CCU = 4,
  parameter int IDX_W = 4,
  parameter int ROW_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ROW_W-1:0] cfg_rows,
  input  logic             fifo_empty [N_CCU],
  input  logic [IDX_W-1:0] fifo_data  [N_CCU],
  output logic             fifo_rd    [N_CCU],
  output logic             idx_valid,
  output logic [IDX_W-1:0] idx_data,
  input  logic             idx_ready
);

  localparam int LW = (N_CCU > 1) ? $clog2(N_CCU) : 1;

  logic [LW-1:0]    lane;
  logic [ROW_W-1:0] row, rows_q;
  logic             fire;

  assign idx_valid = !fifo_empty[lane];
  assign idx_data  = fifo_data[lane];
  assign fire      = idx_valid && idx_ready;

  always_comb begin
    for (int u = 0; u < N_CCU; u++) fifo_rd[u] = fire && (32'(lane) == u);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane <= '0; row <= '0; rows_q <= '0;
    end else if (start) begin
      lane <= '0; row <= '0; rows_q <= cfg_rows;
    end else if (fire) begin
      if (row + 1'b1 >= rows_q) begin
        row  <= '0;
        lane <= '0;
      end else begin
        row  <= row + 1'b1;
        lane <= (32'(lane) == N_CCU - 1) ? '0 : lane + 1'b1;
      end
    end
  end

endmodule
