// sequencer: produces the SwitcherB control signals for rolling-shutter
// operation of the beam-test module. The sequence sits in a dual-port
// memory: the slow control writes it through port A (wr_en/wr_addr/wr_data,
// last_addr marks its end), port B is read continuously, one entry per
// clock while run is high. The read pointer returns to 0 after last_addr or
// when a frame synchronisation pulse arrives, and the frame cycle repeats.
// The output is registered (one clock behind the read pointer). Depth and
// width (SwitcherB signal count) are not given and are this design's own.
module sequencer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] last_addr,
  input  logic          run,
  input  logic          frame_sync,
  output logic [W-1:0]  sw_out,
  output logic [AW-1:0] rd_ptr,
  output logic          frame_start
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      sw_out <= '0;
      frame_start <= 1'b0;
    end else if (run) begin
      sw_out <= mem[rd_ptr];
      frame_start <= rd_ptr == '0;
      rd_ptr <= (frame_sync || rd_ptr == last_addr) ? '0 : rd_ptr + 1'b1;
    end else begin
      frame_start <= 1'b0;
    end
  end
endmodule
