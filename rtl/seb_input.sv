// seb_input: input stage of the sub-event builder for one incoming DHH link.
// Frames are first buffered in an input FIFO. Native flow control of the
// link: xoff rises when the fill level reaches XOFF_LEVEL and stays until it
// falls under XON_LEVEL, during which the DHH holds its data (in its
// external memory). A distributor then moves whole frames into one of
// NOUT intermediate FIFOs, one per outgoing link. All frames of one event
// go to the same FIFO; at each new event number (second word of a DHH frame)
// the next active outgoing link is chosen in round-robin order, skipping
// links masked off in out_mask. Since every DHH sends every event in the
// same order, all inputs send a given event to the same outgoing link.
// Own choices: FIFO depth and thresholds; the link has no ready and words
// that arrive while the FIFO is full are lost and counted in ovf.
module seb_input
  import dhh_pkg::*;
#(
  parameter int unsigned NOUT       = 4,
  parameter int unsigned DEPTH      = 1024,
  parameter int unsigned XOFF_LEVEL = 768,
  parameter int unsigned XON_LEVEL  = 256
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [NOUT-1:0] out_mask,
  input  logic            in_valid,
  input  word_t           in_data,
  output logic            xoff,
  output logic [NOUT-1:0] out_valid,
  input  logic [NOUT-1:0] out_ready,
  output word_t           out_data,
  output logic [15:0]     ovf
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned KW = (NOUT > 1) ? $clog2(NOUT) : 1;
  logic        f_rd, f_vld, f_full, f_ovf;
  word_t       f_q;
  logic [AW:0] f_cnt;

  sync_fifo #(.W($bits(word_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst, .wr_en(in_valid), .wr_data(in_data), .full(f_full),
    .rd_en(f_rd), .rd_data(f_q), .rd_valid(f_vld), .count(f_cnt), .overflow(f_ovf));

  typedef enum logic [2:0] {D_W0, D_W1, D_O0, D_O1, D_BODY} dstate_e;
  dstate_e     st;
  word_t       w0, w1;
  logic [KW-1:0] k;
  logic        have_evt;
  logic [15:0] last_evt;

  // next active outgoing link after 'from' (or from 0 when first)
  function automatic logic [KW-1:0] next_out(input logic [KW-1:0] from, input logic first,
                                             input logic [NOUT-1:0] mask);
    logic [KW-1:0] r = from;
    logic hit = 1'b0;
    for (int i = 0; i < NOUT; i++) begin
      automatic int cand = first ? i : (int'(from) + 1 + i) % NOUT;
      if (!hit && mask[cand]) begin
        hit = 1'b1;
        r = KW'(cand);
      end
    end
    return r;
  endfunction

  always_comb begin
    f_rd = 1'b0;
    out_valid = '0;
    out_data = '0;
    unique case (st)
      D_W0, D_W1: f_rd = f_vld;
      D_O0: begin
        out_valid[k] = 1'b1;
        out_data = w0;
      end
      D_O1: begin
        out_valid[k] = 1'b1;
        out_data = w1;
      end
      D_BODY: begin
        out_valid[k] = f_vld;
        out_data = f_q;
        f_rd = out_ready[k];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= D_W0;
      w0 <= '0;
      w1 <= '0;
      k <= '0;
      have_evt <= 1'b0;
      last_evt <= '0;
      xoff <= 1'b0;
      ovf <= '0;
    end else begin
      if (f_ovf && ovf != 16'hffff) ovf <= ovf + 1'b1;
      if (f_cnt >= (AW+1)'(XOFF_LEVEL)) xoff <= 1'b1;
      else if (f_cnt < (AW+1)'(XON_LEVEL)) xoff <= 1'b0;
      unique case (st)
        D_W0: if (f_vld && f_q.sof) begin
          w0 <= f_q;
          st <= f_q.eof ? D_O0 : D_W1;
        end
        D_W1: if (f_vld) begin
          w1 <= f_q;
          if (!have_evt || f_q.data != last_evt) begin
            k <= next_out(k, !have_evt, out_mask);
            have_evt <= 1'b1;
            last_evt <= f_q.data;
          end
          st <= D_O0;
        end
        D_O0: if (out_ready[k]) st <= w0.eof ? D_W0 : D_O1;
        D_O1: if (out_ready[k]) st <= w1.eof ? D_W0 : D_BODY;
        D_BODY: if (f_vld && out_ready[k] && f_q.eof) st <= D_W0;
        default: st <= D_W0;
      endcase
    end
  end
endmodule
