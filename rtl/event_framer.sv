// event_framer: framing state machine of one outgoing link of the sub-event
// builder. It reads its intermediate FIFO of every active incoming link in
// a fixed order, starting with the active link of smallest index, and takes
// from each the frames of one event up to the frame flagged as that DHH's
// last of the event. The event number (second word of each frame) of the
// first frame becomes the event number of the sub-event; every other frame
// is checked against it and a mismatch is counted. The frames are enclosed
// by a header frame (FT_SEB_HDR, event number) and a trailer frame
// (FT_SEB_TRL with mismatch flag and frame count, event number).
// Own choices: header/trailer layout; a masked incoming link is skipped.
module event_framer
  import dhh_pkg::*;
#(
  parameter int unsigned NIN = 5
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [NIN-1:0] in_mask,
  input  logic [NIN-1:0] in_valid,
  output logic [NIN-1:0] in_ready,
  input  word_t          in_data [NIN],
  output logic           out_valid,
  input  logic           out_ready,
  output word_t          out_data,
  output logic [15:0]    mismatches,
  output logic [15:0]    events
);
  localparam int unsigned JW = $clog2(NIN + 1);
  typedef enum logic [3:0] {E_IDLE, E_G0, E_G1, E_HDR0, E_HDR1, E_P0, E_P1, E_BODY,
                            E_NEXT, E_TRL0, E_TRL1} estate_e;
  estate_e     st;
  logic [JW-1:0] j;
  word_t       w0, w1;
  logic [15:0] evt;
  logic        first, bad;
  logic [7:0]  nfr;

  // first active link with index >= from; NIN if none
  function automatic logic [JW-1:0] next_in(input int from, input logic [NIN-1:0] mask);
    logic [JW-1:0] r = JW'(NIN);
    for (int i = NIN - 1; i >= 0; i--)
      if (i >= from && mask[i]) r = JW'(i);
    return r;
  endfunction

  wire [JW-1:0] jj = (int'(j) < NIN) ? j : '0;
  wire          src_v = in_valid[jj];
  word_t        src;
  assign src = in_data[jj];

  always_comb begin
    in_ready = '0;
    out_valid = 1'b0;
    out_data = '0;
    unique case (st)
      E_G0, E_G1: in_ready[jj] = 1'b1;
      E_HDR0: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b1, eof: 1'b0, data: {FT_SEB_HDR, 12'd0}};
      end
      E_HDR1: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b0, eof: 1'b1, data: evt};
      end
      E_P0: begin
        out_valid = 1'b1;
        out_data = w0;
      end
      E_P1: begin
        out_valid = 1'b1;
        out_data = w1;
      end
      E_BODY: begin
        out_valid = src_v;
        out_data = src;
        in_ready[jj] = out_ready;
      end
      E_TRL0: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b1, eof: 1'b0, data: {FT_SEB_TRL, bad, 3'd0, nfr}};
      end
      E_TRL1: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b0, eof: 1'b1, data: evt};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= E_IDLE;
      j <= '0;
      w0 <= '0;
      w1 <= '0;
      evt <= '0;
      first <= 1'b0;
      bad <= 1'b0;
      nfr <= '0;
      mismatches <= '0;
      events <= '0;
    end else begin
      unique case (st)
        E_IDLE: if (next_in(0, in_mask) != JW'(NIN)) begin
          j <= next_in(0, in_mask);
          first <= 1'b1;
          bad <= 1'b0;
          nfr <= '0;
          st <= E_G0;
        end
        E_G0: if (src_v && src.sof) begin
          w0 <= src;
          st <= E_G1;
        end
        E_G1: if (src_v) begin
          w1 <= src;
          nfr <= nfr + 1'b1;
          if (first) begin
            evt <= src.data;
            st <= E_HDR0;
          end else begin
            if (src.data != evt) begin
              bad <= 1'b1;
              mismatches <= mismatches + 1'b1;
            end
            st <= E_P0;
          end
          first <= 1'b0;
        end
        E_HDR0: if (out_ready) st <= E_HDR1;
        E_HDR1: if (out_ready) st <= E_P0;
        E_P0: if (out_ready) st <= E_P1;
        E_P1: if (out_ready) st <= w1.eof ? E_NEXT : E_BODY;
        E_BODY: if (src_v && out_ready && src.eof) st <= E_NEXT;
        E_NEXT: begin
          if (!w0.data[11]) begin
            st <= E_G0;
          end else if (next_in(int'(j) + 1, in_mask) == JW'(NIN)) begin
            st <= E_TRL0;
          end else begin
            j <= next_in(int'(j) + 1, in_mask);
            st <= E_G0;
          end
        end
        E_TRL0: if (out_ready) st <= E_TRL1;
        E_TRL1: if (out_ready) begin
          events <= events + 1'b1;
          st <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
