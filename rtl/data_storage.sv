// data_storage: extracts the data of one trigger from the DHP stream.
// The DHP sends its memory as frames that always run from row 0 to the last
// row, so the data of a trigger that arrived while the read pointer was at
// row R lies in rows R..last of DHP frame F and rows 0..R-1 of frame F+1.
// Once started by the job allocator the module waits for frame F, keeps the
// row headers and hits of rows >= R in FIFO A, then (if R > 0) waits for
// frame F+1 and keeps rows < R in FIFO B. It then reports done and, when
// read, emits one event: a header word with the trigger number, FIFO B,
// then FIFO A - the two parts in reverse order of arrival, so that the rows
// of the merged frame ascend from 0. Several modules listen to the same
// DHP stream, which has no back-pressure; a full FIFO drops words and sets
// ovf. Interface: din_valid/din from the link; dout_valid/dout_ready/dout
// towards the data reader. Timing: one input word per clock; output one
// word per clock after done.
module data_storage
  import dhh_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  input  job_t  job_in,
  output logic  busy,
  output logic  done,
  input  logic  din_valid,
  input  word_t din,
  output logic  dout_valid,
  input  logic  dout_ready,
  output word_t dout,
  output logic  ovf
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT_F, S_FIRST, S_WAIT_F1, S_SECOND,
                            S_HDR, S_READ_B, S_READ_A} state_e;
  state_e state;
  job_t   job;
  logic   row_sel;          // current row of the incoming frame is selected

  localparam int unsigned AW = $clog2(FIFO_DEPTH);
  logic       a_wr, b_wr, a_rd, b_rd, a_full, b_full, a_vld, b_vld, a_ovf, b_ovf;
  logic [15:0] a_q, b_q;
  logic [AW:0] a_cnt, b_cnt;

  wire is_row = din.data[15:14] == W_ROW;
  wire is_hit = din.data[15:14] == W_HIT;
  wire [9:0] din_row = din.data[9:0];
  // keep a word of the first frame if its row is >= first_row, of the second if < first_row
  wire sel_first  = din_row >= job.first_row;
  wire sel_second = din_row <  job.first_row;

  always_comb begin
    a_wr = 1'b0;
    b_wr = 1'b0;
    if (din_valid && !din.sof) begin
      if (state == S_FIRST)
        a_wr = is_row ? sel_first  : (is_hit && row_sel);
      if (state == S_SECOND)
        b_wr = is_row ? sel_second : (is_hit && row_sel);
    end
  end

  sync_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_a (
    .clk, .rst, .wr_en(a_wr), .wr_data(din.data), .full(a_full),
    .rd_en(a_rd), .rd_data(a_q), .rd_valid(a_vld), .count(a_cnt), .overflow(a_ovf));
  sync_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_b (
    .clk, .rst, .wr_en(b_wr), .wr_data(din.data), .full(b_full),
    .rd_en(b_rd), .rd_data(b_q), .rd_valid(b_vld), .count(b_cnt), .overflow(b_ovf));

  assign busy = state != S_IDLE;
  assign done = state inside {S_HDR, S_READ_B, S_READ_A};

  always_comb begin
    dout_valid = 1'b0;
    dout = '0;
    a_rd = 1'b0;
    b_rd = 1'b0;
    unique case (state)
      S_HDR: begin
        dout_valid = 1'b1;
        dout = '{sof: 1'b1, eof: (a_cnt == 0 && b_cnt == 0), data: job.trig_num};
      end
      S_READ_B: begin
        dout_valid = b_vld;
        dout = '{sof: 1'b0, eof: (b_cnt == 1 && a_cnt == 0), data: b_q};
        b_rd = dout_ready;
      end
      S_READ_A: begin
        dout_valid = a_vld;
        dout = '{sof: 1'b0, eof: (a_cnt == 1), data: a_q};
        a_rd = dout_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      job <= '0;
      row_sel <= 1'b0;
      ovf <= 1'b0;
    end else begin
      if (a_ovf || b_ovf) ovf <= 1'b1;
      if (din_valid && is_row && !din.sof)
        row_sel <= (state == S_FIRST) ? sel_first : sel_second;
      unique case (state)
        S_IDLE: if (start) begin
          job <= job_in;
          state <= S_WAIT_F;
        end
        S_WAIT_F: if (din_valid && din.sof && din.data == job.frame_id) begin
          row_sel <= 1'b0;
          state <= din.eof ? ((job.first_row == 0) ? S_HDR : S_WAIT_F1) : S_FIRST;
        end
        S_FIRST: if (din_valid && din.eof)
          state <= (job.first_row == 0) ? S_HDR : S_WAIT_F1;
        S_WAIT_F1: if (din_valid && din.sof && din.data == job.frame_id + 16'd1) begin
          row_sel <= 1'b0;
          state <= din.eof ? S_HDR : S_SECOND;
        end
        S_SECOND: if (din_valid && din.eof) state <= S_HDR;
        S_HDR: if (dout_ready)
          state <= (a_cnt == 0 && b_cnt == 0) ? S_IDLE : (b_cnt != 0 ? S_READ_B : S_READ_A);
        S_READ_B: if (dout_ready && b_vld && b_cnt == 1) state <= (a_cnt == 0) ? S_IDLE : S_READ_A;
        S_READ_A: if (dout_ready && a_vld && a_cnt == 1) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
