// scratchpad: partial-sum accumulator memory of one IMM.
//
// Holds one row of T_N partial sums for each of M_MAX input rows. For every
// looked-up table row the IMM performs PSum[m] += LUT[idx]; for the first
// subspace of a tile the old content is ignored (PSum[m] = LUT[idx]), so no
// separate clearing pass is needed. LUT entries are signed LUT_W-bit values,
// sign-extended to PSUM_W bits; the sums wrap at PSUM_W bits.
//
// Interface: accumulate port (acc_en, acc_first, acc_row, acc_data = T_N
// LUT entries), read port (rd_row -> rd_data, combinational) for draining.
// Timing: the read-modify-write completes in the cycle acc_en is high.
module scratchpad #(
  parameter int M_MAX  = 512,
  parameter int T_N    = 768,
  parameter int LUT_W  = 8,
  parameter int PSUM_W = 32,
  localparam int AW    = $clog2(M_MAX)
) (
  input  logic                  clk,
  input  logic                  acc_en,
  input  logic                  acc_first,
  input  logic [AW-1:0]         acc_row,
  input  logic [T_N*LUT_W-1:0]  acc_data,
  input  logic [AW-1:0]         rd_row,
  output logic [T_N*PSUM_W-1:0] rd_data
);

  logic [T_N*PSUM_W-1:0] mem [M_MAX];
  logic [T_N*PSUM_W-1:0] old_row, new_row;

  assign old_row = mem[acc_row];

  for (genvar i = 0; i < T_N; i++) begin : g_lane
    assign new_row[i*PSUM_W +: PSUM_W] =
      (acc_first ? PSUM_W'(0) : old_row[i*PSUM_W +: PSUM_W]) +
      PSUM_W'($signed(acc_data[i*LUT_W +: LUT_W]));
  end

  always_ff @(posedge clk) begin
    if (acc_en) mem[acc_row] <= new_row;
  end

  assign rd_data = mem[rd_row];

endmodule
