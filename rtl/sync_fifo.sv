// Single-clock first-word-fall-through FIFO: rd_data shows the oldest entry
// whenever empty is 0; rd_en pops it. A write to a full FIFO and a read from
// an empty one are ignored. Storage is a plain array (distributed or block
// RAM on the FPGA). count gives the number of entries held.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned AW    = 8     // depth = 2**AW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [2**AW];
  logic [AW:0]      wp, rp;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign count   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (count == (AW+1)'(2**AW));
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (do_wr) mem[wp[AW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

endmodule
