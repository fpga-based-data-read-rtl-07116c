// trigger_cdc: carries trigger pulses and trigger numbers from the B2TT clock
// (127.21 MHz) into the front-end clock (76.33 MHz). The two clocks are
// rationally related (76.33 / 127.21 = 3 / 5), so their phase relation
// repeats every SRC_PERIOD source cycles = DST_PERIOD destination cycles.
// As described for the read-out system, a trigger seen in the source domain
// is written into a transfer register at the beginning of such a period and
// read by the destination domain at the end of the period, when the register
// is certain to be stable. This costs up to two periods of latency (about
// 79 ns) and one period of time resolution, well below the 190 ns minimum
// trigger spacing; at most one trigger per period is carried.
// Own choices: both period counters start from one reset that is released
// at a common edge of the two clocks; a trigger arriving while one is
// already pending in the same period is dropped and counted in lost.
module trigger_cdc #(
  parameter int unsigned SRC_PERIOD = 5,
  parameter int unsigned DST_PERIOD = 3,
  parameter int unsigned TRIG_W     = 16
) (
  input  logic              src_clk,
  input  logic              src_rst,
  input  logic              src_trig,
  input  logic [TRIG_W-1:0] src_trig_num,
  input  logic              dst_clk,
  input  logic              dst_rst,
  output logic              dst_trig,
  output logic [TRIG_W-1:0] dst_trig_num,
  output logic [7:0]        lost
);
  logic [$clog2(SRC_PERIOD)-1:0] scnt;
  logic [$clog2(DST_PERIOD)-1:0] dcnt;
  logic              pend, pend_q;
  // pending trigger that is still pending after this cycle's transfer
  assign pend_q = pend && (scnt != '0);
  logic [TRIG_W-1:0] pend_num;
  // transfer register, written in the source domain, read in the destination
  logic              xfer_vld;
  logic [TRIG_W-1:0] xfer_num;

  always_ff @(posedge src_clk) begin
    if (src_rst) begin
      scnt <= '0;
      pend <= 1'b0;
      pend_num <= '0;
      xfer_vld <= 1'b0;
      xfer_num <= '0;
      lost <= '0;
    end else begin
      scnt <= (scnt == $bits(scnt)'(SRC_PERIOD-1)) ? '0 : scnt + 1'b1;
      if (scnt == '0) begin
        // beginning of the period: move the pending trigger to the register
        xfer_vld <= pend;
        xfer_num <= pend_num;
      end
      if (src_trig && pend_q && lost != 8'hff) lost <= lost + 1'b1;
      if (src_trig && !pend_q) pend_num <= src_trig_num;
      pend <= pend_q || src_trig;
    end
  end

  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      dcnt <= '0;
      dst_trig <= 1'b0;
      dst_trig_num <= '0;
    end else begin
      dcnt <= (dcnt == $bits(dcnt)'(DST_PERIOD-1)) ? '0 : dcnt + 1'b1;
      dst_trig <= 1'b0;
      if (dcnt == $bits(dcnt)'(DST_PERIOD-1)) begin
        // end of the period: the register was written a full period ago
        dst_trig <= xfer_vld;
        if (xfer_vld) dst_trig_num <= xfer_num;
      end
    end
  end
endmodule
