// tb_dequant_act: random partial sums, scales and shifts; each output element
// must equal sat16((x * scale) >> shift), followed by ReLU when selected,
// one cycle after the input, and en=0 must hold the output register.
`timescale 1ns/1ps
module tb_dequant_act;
  import lutdla_pkg::*;
  localparam int T_N = 8, PSUM_W = 32, OUT_W = 16;
  logic clk = 0, rst_n = 0, en = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [T_N*PSUM_W-1:0] in_row = '0;
  logic signed [15:0] scale = 0;
  logic [5:0] shift = 0;
  act_e act = ACT_NONE;
  logic [T_N*OUT_W-1:0] out_row;
  dequant_act #(.T_N(T_N), .PSUM_W(PSUM_W), .OUT_W(OUT_W)) dut (.clk, .rst_n, .en, .in_valid, .in_row, .scale, .shift, .act, .out_valid, .out_row);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int sat_hi = 0, sat_lo = 0, relu0 = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin : main
    longint e;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 1);
      for (int i = 0; i < T_N; i++) in_row[i*PSUM_W +: PSUM_W] = (t % 2) ? PSUM_W'($urandom) : PSUM_W'($urandom_range(0, 4000) - 2000);
      scale = 16'($urandom); shift = 6'($urandom_range(0, 24));
      act = ($urandom_range(0, 1)) ? ACT_RELU : ACT_NONE;
      @(posedge clk); #1;
      check(out_valid == in_valid, "valid");
      for (int i = 0; i < T_N; i++) begin
        e = (longint'($signed(in_row[i*PSUM_W +: PSUM_W])) * longint'(scale)) >>> shift;
        if (e > 32767) begin e = 32767; sat_hi++; end
        if (e < -32768) begin e = -32768; sat_lo++; end
        if (act == ACT_RELU && e < 0) begin e = 0; relu0++; end
        check(longint'($signed(out_row[i*OUT_W +: OUT_W])) == e, $sformatf("t=%0d lane %0d got %0d exp %0d", t, i, $signed(out_row[i*OUT_W +: OUT_W]), e));
      end
    end
    check(sat_hi > 0 && sat_lo > 0 && relu0 > 0, "saturation and ReLU exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
