// sub_event_builder: online sub-event building of the DHH controller.
// NIN incoming DHH links each feed a seb_input (buffer FIFO with flow
// control, round-robin distribution of events over the outgoing links);
// NIN x NOUT intermediate FIFOs hold the frames; NOUT event framers each
// collect one event from all active incoming links and enclose it in a
// header and a trailer frame. The outputs go to the large external FIFO.
// in_mask / out_mask switch incoming and outgoing channels off; the
// round-robin and the read order then skip them.
module sub_event_builder
  import dhh_pkg::*;
#(
  parameter int unsigned NIN       = 5,
  parameter int unsigned NOUT      = 4,
  parameter int unsigned IN_DEPTH  = 1024,
  parameter int unsigned INT_DEPTH = 512
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [NIN-1:0]  in_mask,
  input  logic [NOUT-1:0] out_mask,
  input  logic [NIN-1:0]  in_valid,
  input  word_t           in_data [NIN],
  output logic [NIN-1:0]  xoff,
  output logic [NOUT-1:0] out_valid,
  input  logic [NOUT-1:0] out_ready,
  output word_t           out_data [NOUT],
  output logic [15:0]     mismatches [NOUT],
  output logic [15:0]     events [NOUT],
  output logic [15:0]     in_ovf [NIN]
);
  localparam int unsigned IAW = $clog2(INT_DEPTH);
  logic [NOUT-1:0] d_valid [NIN];
  logic [NOUT-1:0] d_ready [NIN];
  word_t           d_data  [NIN];
  logic [NIN-1:0]  q_valid [NOUT];
  logic [NIN-1:0]  q_ready [NOUT];
  word_t           q_data  [NOUT][NIN];

  for (genvar i = 0; i < NIN; i++) begin : g_in
    seb_input #(.NOUT(NOUT), .DEPTH(IN_DEPTH), .XOFF_LEVEL(IN_DEPTH * 3 / 4),
                .XON_LEVEL(IN_DEPTH / 4)) u_in (
      .clk, .rst, .out_mask, .in_valid(in_valid[i] && in_mask[i]), .in_data(in_data[i]),
      .xoff(xoff[i]), .out_valid(d_valid[i]), .out_ready(d_ready[i]), .out_data(d_data[i]),
      .ovf(in_ovf[i]));
    for (genvar k = 0; k < NOUT; k++) begin : g_q
      logic full, ovf_unused;
      logic [IAW:0] cnt_unused;
      assign d_ready[i][k] = !full;
      sync_fifo #(.W($bits(word_t)), .DEPTH(INT_DEPTH)) u_q (
        .clk, .rst, .wr_en(d_valid[i][k]), .wr_data(d_data[i]), .full,
        .rd_en(q_ready[k][i]), .rd_data(q_data[k][i]), .rd_valid(q_valid[k][i]),
        .count(cnt_unused), .overflow(ovf_unused));
    end
  end

  for (genvar k = 0; k < NOUT; k++) begin : g_out
    event_framer #(.NIN(NIN)) u_fr (
      .clk, .rst, .in_mask, .in_valid(q_valid[k]), .in_ready(q_ready[k]), .in_data(q_data[k]),
      .out_valid(out_valid[k]), .out_ready(out_ready[k]), .out_data(out_data[k]),
      .mismatches(mismatches[k]), .events(events[k]));
  end
endmodule
