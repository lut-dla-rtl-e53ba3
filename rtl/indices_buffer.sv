// indices_buffer: the M-entry index memory at the front of an IMM.
//
// Every cycle the IMM takes one centroid index from the CCM side and stores
// it at the row it belongs to; the lookup stage reads it back to address the
// PSum LUT. It holds the indices of one subspace (M_MAX entries of log2(C)
// bits, matching the small index buffer of the LUT-stationary dataflow).
//
// Interface: one write port (wr_en, wr_addr, wr_idx) and one read port with a
// registered output (rd_en, rd_addr -> rd_idx one cycle later). A read of the
// address being written in the same cycle returns the new value (write-first
// forwarding), so an index can be written and used back to back.
module indices_buffer #(
  parameter int M_MAX = 512,
  parameter int IDX_W = 4,
  localparam int AW   = $clog2(M_MAX)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [IDX_W-1:0] wr_idx,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [IDX_W-1:0] rd_idx
);

  logic [IDX_W-1:0] mem [M_MAX];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_idx;
    if (rd_en) rd_idx <= (wr_en && wr_addr == rd_addr) ? wr_idx : mem[rd_addr];
  end

endmodule
