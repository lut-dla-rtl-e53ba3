// sync_fifo: single-clock FIFO used as the CCM input buffer.
//
// Input vectors arrive from the memory side in beats (N_CCU vectors of one
// subspace plus a count of valid rows) and wait here until the CCUs can take
// them. Standard valid/ready on both sides: a beat is written when
// in_valid && in_ready and leaves when out_valid && out_ready. DEPTH must be a
// power of two. out_data is the head entry (combinational read), so a beat can
// be written and read in the same cycle. The depth is this design's choice.
module sync_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;

  assign count     = wptr - rptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

endmodule
