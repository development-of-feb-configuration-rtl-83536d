// Dual-clock first-word-fall-through FIFO for the byte streams between the
// 125 MHz network clock and the 40 MHz system clock. Classic design: binary
// pointers in each domain, Gray-coded copies crossed through two flops, full
// and empty computed from the crossed pointers (so both are pessimistic by
// the crossing delay, never wrong). The array is written in the write domain
// and read asynchronously at the read pointer.
module async_fifo #(
  parameter int unsigned WIDTH = 9,
  parameter int unsigned AW    = 4     // depth = 2**AW
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);

  logic [WIDTH-1:0] mem [2**AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  wire [AW:0] wbin_n = wbin + (AW+1)'(wr_en && !full);
  wire [AW:0] rbin_n = rbin + (AW+1)'(rd_en && !empty);

  always_ff @(posedge wclk) if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_n; wgray <= b2g(wbin_n);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_n; rgray <= b2g(rbin_n);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end

  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];

endmodule
