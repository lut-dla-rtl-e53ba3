// prefetcher: fills the free bank of the ping-pong PSum LUT from the LUT
// stream.
//
// PSum LUT slices arrive from memory in the order the IMM will use them
// (subspace after subspace of the current output tile), each slice as
// C * T_N / LOAD_W beats: centroid row 0 first, within a row the columns in
// ascending order. The prefetcher writes beats into bank fill_bank; after the
// last beat of a slice it marks that bank full and moves to the other bank.
// While the other bank is still full (still being looked up) it holds
// lut_ready low. The IMM controller pulses release when it has finished with
// its active bank, which frees it for the next slice.
//
// Interface: lut_valid/lut_ready/lut_data (LOAD_W entries of LUT_W bits),
// wr_* to the PSum LUT write port, bank_full[1:0], release/rel_bank from the
// IMM controller, clear (synchronous) empties both banks. One beat per cycle.
module prefetcher #(
  parameter int C      = 16,
  parameter int T_N    = 768,
  parameter int LUT_W  = 8,
  parameter int LOAD_W = 32,
  localparam int IDX_W = $clog2(C),
  localparam int COL_W = $clog2(T_N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    lut_valid,
  output logic                    lut_ready,
  input  logic [LOAD_W*LUT_W-1:0] lut_data,
  output logic                    wr_en,
  output logic                    wr_bank,
  output logic [IDX_W-1:0]        wr_row,
  output logic [COL_W-1:0]        wr_col,
  output logic [LOAD_W*LUT_W-1:0] wr_data,
  output logic [1:0]              bank_full,
  input  logic                    release_bank,
  input  logic                    rel_bank
);

  logic fill_bank;
  logic last_beat;

  assign lut_ready = !bank_full[fill_bank];
  assign wr_en     = lut_valid && lut_ready;
  assign wr_bank   = fill_bank;
  assign wr_data   = lut_data;
  assign last_beat = (32'(wr_row) == C - 1) && (32'(wr_col) + LOAD_W >= T_N);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_bank <= 1'b0; bank_full <= '0; wr_row <= '0; wr_col <= '0;
    end else if (clear) begin
      fill_bank <= 1'b0; bank_full <= '0; wr_row <= '0; wr_col <= '0;
    end else begin
      if (release_bank) bank_full[rel_bank] <= 1'b0;
      if (wr_en) begin
        if (32'(wr_col) + LOAD_W >= T_N) begin
          wr_col <= '0;
          wr_row <= (32'(wr_row) == C - 1) ? '0 : wr_row + 1'b1;
        end else begin
          wr_col <= wr_col + COL_W'(LOAD_W);
        end
        if (last_beat) begin
          bank_full[fill_bank] <= 1'b1;
          fill_bank <= ~fill_bank;
        end
      end
    end
  end

endmodule
