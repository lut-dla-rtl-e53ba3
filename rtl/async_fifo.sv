// async_fifo: dual-clock FIFO that carries centroid indices from the CCM
// clock domain to the IMM clock domain.
//
// The CCM and the IMMs run on independent clocks (the CCM pipeline can be
// clocked faster, the table-lookup side slower to save power); one such FIFO
// per CCU decouples them. This is the textbook construction: binary pointers
// with one extra wrap bit, converted to Gray code, each passed through a
// two-flop synchroniser into the other domain. full is computed in the write
// domain, empty in the read domain, both conservative.
//
// Interface: write side (wclk) wr_en/wdata/full, read side (rclk)
// rd_en/rdata/empty; rdata shows the head entry while empty=0 and rd_en pops
// it. DEPTH must be a power of two. Latency: a written entry becomes visible
// to the reader 2-3 rclk cycles later.
module async_fifo #(
  parameter int WIDTH = 4,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer synchronised into wclk
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer synchronised into rclk
  logic [AW:0] wbin_nx, rbin_nx, wgray_nx, rgray_nx;

  // ---- write domain ----
  assign wbin_nx  = wbin + (AW+1)'(wr_en && !full);
  assign wgray_nx = (wbin_nx >> 1) ^ wbin_nx;

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; full <= 1'b0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= wgray_nx;
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      full     <= (wgray_nx == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
    end
  end

  // ---- read domain ----
  assign rbin_nx  = rbin + (AW+1)'(rd_en && !empty);
  assign rgray_nx = (rbin_nx >> 1) ^ rbin_nx;
  assign rdata    = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0; empty <= 1'b1;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= rgray_nx;
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      empty    <= (rgray_nx == wgray_r2);
    end
  end

endmodule
