// dhh_framer: builds the DHH frames sent to the controller. For every
// event it takes one frame from each of the NLINK DHP streams in link order
// and prepends a frame type word (dhh_pkg::dhh_frame_word: data type, last
// frame of the event flag, DHH index, link); the following word is the
// event's trigger number, which the streams already carry as their first
// word. cluster_mode (sampled at the start of each event) selects the
// clustered streams (type FT_CLUSTER) or the bypass streams straight from
// the memory FIFO (FT_RAW) - the multiplexer in front of the framing.
// The frame layout is this design's own; the paper says only that DHH
// frames carry the data type and the event number. One word per clock.
module dhh_framer
  import dhh_pkg::*;
#(
  parameter int unsigned NLINK = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             cluster_mode,
  input  logic [5:0]       dhh_id,
  input  logic [NLINK-1:0] raw_valid,
  output logic [NLINK-1:0] raw_ready,
  input  word_t            raw_data [NLINK],
  input  logic [NLINK-1:0] clu_valid,
  output logic [NLINK-1:0] clu_ready,
  input  word_t            clu_data [NLINK],
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            out_data
);
  localparam int unsigned LW = (NLINK > 1) ? $clog2(NLINK) : 1;
  logic [LW-1:0] l;
  logic          mode, in_body;

  wire   cur_mode = (l == 0 && !in_body) ? cluster_mode : mode;
  wire   src_v = cur_mode ? clu_valid[l] : raw_valid[l];
  word_t src;
  assign src = cur_mode ? clu_data[l] : raw_data[l];
  wire   last_link = int'(l) == NLINK - 1;

  always_comb begin
    raw_ready = '0;
    clu_ready = '0;
    out_valid = src_v;
    if (!in_body) begin
      out_data = '{sof: 1'b1, eof: 1'b0,
                   data: dhh_frame_word(cur_mode ? FT_CLUSTER : FT_RAW, last_link, dhh_id, 2'(l))};
    end else begin
      out_data = '{sof: 1'b0, eof: src.eof, data: src.data};
      if (cur_mode) clu_ready[l] = out_ready;
      else          raw_ready[l] = out_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      l <= '0;
      mode <= 1'b0;
      in_body <= 1'b0;
    end else if (out_valid && out_ready) begin
      if (!in_body) begin
        in_body <= 1'b1;
        mode <= cur_mode;
      end else if (src.eof) begin
        in_body <= 1'b0;
        l <= last_link ? '0 : l + 1'b1;
      end
    end
  end
endmodule
