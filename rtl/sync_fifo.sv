// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
// The head entry is visible on rd_data while rd_valid is high; rd_en pops it.
// wr_en while full is ignored and flagged on overflow (one-cycle pulse).
// count gives the fill level. Storage is a plain array so that synthesis can
// map it to block RAM. Depth must be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 18,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         rd_valid,
  output logic [AW:0]  count,
  output logic         overflow
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count    = wp - rp;
  assign full     = count == (AW+1)'(DEPTH);
  assign rd_valid = wp != rp;
  assign rd_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_en && full;
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && rd_valid) rp <= rp + 1'b1;
    end
  end
endmodule
