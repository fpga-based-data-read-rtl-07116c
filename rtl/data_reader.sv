// data_reader: collects finished events from the data-storage modules in
// round-robin order. It waits for the module whose turn it is to report
// done, forwards that module's event word by word up to its eof, and then
// moves to the next module. Taking the modules strictly in turn keeps the
// events in trigger order, because the job allocator also assigns them in
// turn. Interface: NDSM input streams with valid/ready, one output stream.
module data_reader
  import dhh_pkg::*;
#(
  parameter int unsigned NDSM = 4
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [NDSM-1:0] done,
  input  logic [NDSM-1:0] in_valid,
  output logic [NDSM-1:0] in_ready,
  input  word_t           in_data [NDSM],
  output logic            out_valid,
  input  logic            out_ready,
  output word_t           out_data
);
  localparam int unsigned IW = (NDSM > 1) ? $clog2(NDSM) : 1;
  logic [IW-1:0] cur;

  always_comb begin
    in_ready = '0;
    out_valid = done[cur] && in_valid[cur];
    out_data = in_data[cur];
    in_ready[cur] = done[cur] && out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) cur <= '0;
    else if (out_valid && out_ready && out_data.eof)
      cur <= IW'((int'(cur) + 1) % NDSM);
  end
endmodule
