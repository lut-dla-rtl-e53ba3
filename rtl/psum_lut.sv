// psum_lut: ping-pong PSum LUT of one IMM.
//
// A PSum LUT holds, for one subspace k and one output tile, the precomputed
// products of each of the C centroids with the matching V x T_N slice of the
// weight matrix: C rows of T_N signed LUT_W-bit entries. Two banks are kept:
// the lookup stage reads a whole row of the active bank every cycle while the
// prefetcher writes the next subspace's table into the other bank, so table
// loading is hidden behind lookups.
//
// Interface: write port (wr_en, wr_bank, wr_row, wr_col = first entry of a
// beat of LOAD_W entries, wr_data); read port (rd_bank, rd_idx) returns the
// full row rd_row combinationally. Bank selection and fullness bookkeeping
// live in the prefetcher and the IMM controller.
module psum_lut #(
  parameter int C      = 16,
  parameter int T_N    = 768,
  parameter int LUT_W  = 8,
  parameter int LOAD_W = 32,
  localparam int IDX_W = $clog2(C),
  localparam int COL_W = $clog2(T_N)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_bank,
  input  logic [IDX_W-1:0]        wr_row,
  input  logic [COL_W-1:0]        wr_col,
  input  logic [LOAD_W*LUT_W-1:0] wr_data,
  input  logic                    rd_bank,
  input  logic [IDX_W-1:0]        rd_idx,
  output logic [T_N*LUT_W-1:0]    rd_row
);

  localparam int BEATS = T_N / LOAD_W;

  // one memory per beat position, addressed by {bank, row}
  for (genvar b = 0; b < BEATS; b++) begin : g_beat
    logic [LOAD_W*LUT_W-1:0] mem [2*C];
    always_ff @(posedge clk) begin
      if (wr_en && 32'(wr_col) / LOAD_W == b) mem[{wr_bank, wr_row}] <= wr_data;
    end
    assign rd_row[b*LOAD_W*LUT_W +: LOAD_W*LUT_W] = mem[{rd_bank, rd_idx}];
  end

endmodule
