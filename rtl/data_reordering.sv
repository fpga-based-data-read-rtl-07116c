// data_reordering: the per-DHP-link event extraction of the DHH. A job
// allocator, NDSM data-storage modules and a data reader: triggers are
// handed to the storage modules in round-robin order, each module pulls the
// data of its trigger out of the shared DHP stream (up to two DHP frames),
// and the reader takes the finished events out in the same order. NDSM is
// the number of triggers whose data can overlap in the DHP stream. The
// output is one event per trigger: trigger-number header, then row headers
// and hits with ascending rows, eof on the last word. free is high while
// at least one storage module is idle, i.e. a trigger would be accepted; a
// DHH with several links uses it to accept or drop a trigger on all links
// together.
module data_reordering
  import dhh_pkg::*;
#(
  parameter int unsigned NDSM       = 4,
  parameter int unsigned FIFO_DEPTH = 4096,
  parameter int unsigned ROWS       = 768,
  parameter int unsigned FOLD       = 4,
  parameter int unsigned CLK_PER_RO = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        trig,
  input  logic [15:0] trig_num,
  input  logic        din_valid,
  input  word_t       din,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  output logic [15:0] dropped,
  output logic        free,
  output logic        ovf
);
  logic [NDSM-1:0] start, busy, done, s_valid, s_ready, s_ovf;
  word_t           s_data [NDSM];
  job_t            job;
  logic [9:0]      row_ptr;
  logic [15:0]     frame_ptr;

  job_allocator #(.NDSM(NDSM), .ROWS(ROWS), .FOLD(FOLD), .CLK_PER_RO(CLK_PER_RO)) u_alloc (
    .clk, .rst, .trig, .trig_num, .busy, .start, .job, .row_ptr, .frame_ptr, .dropped);

  for (genvar i = 0; i < NDSM; i++) begin : g_dsm
    data_storage #(.FIFO_DEPTH(FIFO_DEPTH)) u_dsm (
      .clk, .rst, .start(start[i]), .job_in(job), .busy(busy[i]), .done(done[i]),
      .din_valid, .din, .dout_valid(s_valid[i]), .dout_ready(s_ready[i]),
      .dout(s_data[i]), .ovf(s_ovf[i]));
  end

  data_reader #(.NDSM(NDSM)) u_reader (
    .clk, .rst, .done, .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid, .out_ready, .out_data);

  assign ovf = |s_ovf;
  assign free = !(&busy);
endmodule
