// dequant_act: element-wise dequantisation and activation of a result row.
//
// Rows leave the scratchpad through this unit. Each of the T_N accumulated
// sums x is rescaled as y = (x * scale) >>> shift (scale a signed 16-bit
// factor, arithmetic shift), saturated to OUT_W signed bits, and then passed
// through the activation: identity or ReLU (negative values become 0).
// The published design approximates other activations such as GELU with
// polynomials; those are not part of this unit.
//
// Interface: in_valid/in_row in, out_valid/out_row one cycle later (one
// register stage); scale, shift and act are static during an operation.
module dequant_act
  import lutdla_pkg::*;
#(
  parameter int T_N    = lutdla_pkg::D_T_N,
  parameter int PSUM_W = 32,
  parameter int OUT_W  = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  in_valid,
  input  logic [T_N*PSUM_W-1:0] in_row,
  input  logic signed [15:0]    scale,
  input  logic [5:0]            shift,
  input  act_e                  act,
  output logic                  out_valid,
  output logic [T_N*OUT_W-1:0]  out_row
);

  localparam int PW = PSUM_W + 16;
  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (OUT_W - 1));

  logic [T_N*OUT_W-1:0] y;

  for (genvar i = 0; i < T_N; i++) begin : g_lane
    logic signed [PW-1:0] p, q;
    assign p = (PW'($signed(in_row[i*PSUM_W +: PSUM_W])) * PW'(scale)) >>> shift;
    always_comb begin
      if (p > MAXV)      q = MAXV;
      else if (p < MINV) q = MINV;
      else               q = p;
      if (act == ACT_RELU && q < 0) q = '0;
    end
    assign y[i*OUT_W +: OUT_W] = q[OUT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out_valid <= 1'b0;
    else if (en) out_valid <= in_valid;
  end

  // data register without reset: only read when out_valid is high
  always_ff @(posedge clk) begin
    if (en) out_row <= y;
  end

endmodule
