// dhh: firmware of one Data Handling Hybrid, the first read-out layer of a
// pixel-detector half ladder. Data path (one lane per DHP chip, NLINK = 4):
//   DHP link -> data_reordering (pull the data of each trigger out of the
//   DHP frames, rows in ascending order) -> ddr3_fifo (one ring buffer per
//   lane in the external DDR3) -> either cluster_recovery per lane or
//   bypass -> dhh_framer (DHH frames with type and trigger number) ->
//   eth_data_mux (slow-control replies at low priority) -> link to the DHHC.
// Control: the front-end JTAG master, a second JTAG master used as the
// switcher JTAG player and the switcher sequencer, all driven by
// slow-control registers that are ports here (the IPBus client is not part
// of this design). tx_ready low stands for the controller's flow-control
// request and holds the stream.
// cluster_mode is a run setting: it steers the bypass/cluster demultiplexer
// behind the memory FIFO directly, so it may only be changed while the DHH
// holds no event; a change with events in flight would split a frame
// between the two paths.
// The external memory is the behavioural ddr3_mem_model. The trigger
// arrives already in this clock domain, as the DHH and DHHC share a clock.
module dhh
  import dhh_pkg::*;
#(
  parameter int unsigned NLINK      = 4,
  parameter int unsigned NDSM       = 4,
  parameter int unsigned FIFO_DEPTH = 4096,
  parameter int unsigned ROWS       = 768,
  parameter int unsigned FOLD       = 4,
  parameter int unsigned CLK_PER_RO = 8,
  parameter int unsigned HIT_DEPTH  = 4096,
  parameter int unsigned ADDR_W     = 27,
  parameter int unsigned MEM_DEPTH  = 262144,
  parameter int unsigned SEQ_DEPTH  = 1024,
  parameter int unsigned SEQ_W      = 8
) (
  input  logic              clk,
  input  logic              rst,
  // configuration (slow-control registers)
  input  logic [5:0]        dhh_id,
  input  logic              cluster_mode,
  input  logic              cfg_load,
  input  logic [ADDR_W-1:0] region_base [NLINK],
  input  logic [ADDR_W-1:0] region_size [NLINK],
  // trigger from the controller
  input  logic              trig,
  input  logic [15:0]       trig_num,
  // DHP links (user side of the receivers)
  input  logic [NLINK-1:0]  dhp_valid,
  input  word_t             dhp_data [NLINK],
  // Ethernet replies of the IPBus client
  input  logic              eth_valid,
  output logic              eth_ready,
  input  word_t             eth_data,
  // link to the controller
  output logic              tx_valid,
  input  logic              tx_ready,
  output word_t             tx_data,
  // JTAG masters: 0 front-end ASICs, 1 switcher player
  input  logic [1:0]        jcmd_valid,
  output logic [1:0]        jcmd_ready,
  input  logic [5:0]        jcmd_len [2],
  input  logic [31:0]       jcmd_tms [2],
  input  logic [31:0]       jcmd_tdi [2],
  output logic [1:0]        jrsp_valid,
  output logic [31:0]       jrsp_tdo [2],
  output logic [1:0]        tck,
  output logic [1:0]        tms,
  output logic [1:0]        tdi,
  input  logic [1:0]        tdo,
  // switcher sequencer
  input  logic                         seq_wr_en,
  input  logic [$clog2(SEQ_DEPTH)-1:0] seq_wr_addr,
  input  logic [SEQ_W-1:0]             seq_wr_data,
  input  logic [$clog2(SEQ_DEPTH)-1:0] seq_last,
  input  logic                         seq_run,
  input  logic                         frame_sync,
  output logic [SEQ_W-1:0]             sw_out,
  // status
  output logic [15:0]       dropped,
  output logic [NLINK-1:0]  ovf,
  output logic [NLINK-1:0]  clu_ovf
);
  // ---- data re-ordering, one per DHP link ----
  logic [NLINK-1:0] ro_valid, ro_ready;
  word_t            ro_data [NLINK];
  // A trigger is taken only if every link has a free storage module, so
  // that all links hold the same events; otherwise it is dropped on all.
  logic [NLINK-1:0] ro_free;
  wire              trig_acc = trig && (&ro_free);
  always_ff @(posedge clk) begin
    if (rst) dropped <= '0;
    else if (trig && !(&ro_free)) dropped <= dropped + 1'b1;
  end

  for (genvar i = 0; i < NLINK; i++) begin : g_ro
    data_reordering #(.NDSM(NDSM), .FIFO_DEPTH(FIFO_DEPTH), .ROWS(ROWS), .FOLD(FOLD),
                      .CLK_PER_RO(CLK_PER_RO)) u_ro (
      .clk, .rst, .trig(trig_acc), .trig_num, .din_valid(dhp_valid[i]), .din(dhp_data[i]),
      .out_valid(ro_valid[i]), .out_ready(ro_ready[i]), .out_data(ro_data[i]),
      .dropped(), .free(ro_free[i]), .ovf(ovf[i]));
  end

  // ---- external memory FIFO ----
  logic [NLINK-1:0] mf_valid, mf_ready;
  word_t            mf_data [NLINK];
  logic              mem_req, mem_we, mem_ready, mem_rvalid;
  logic [ADDR_W-1:0] mem_addr;
  logic [255:0]      mem_wdata, mem_rdata;
  logic [ADDR_W:0]   level_unused [NLINK];
  logic [31:0]       vecs_unused;

  ddr3_fifo #(.NCH(NLINK), .ADDR_W(ADDR_W)) u_mfifo (
    .clk, .rst, .cfg_load, .region_base, .region_size,
    .in_valid(ro_valid), .in_ready(ro_ready), .in_data(ro_data),
    .out_valid(mf_valid), .out_ready(mf_ready), .out_data(mf_data),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata,
    .level(level_unused), .vec_written(vecs_unused));

  ddr3_mem_model #(.ADDR_W(ADDR_W), .DEPTH(MEM_DEPTH)) u_mem (
    .clk, .rst, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata);

  // ---- clustering or bypass ----
  logic [NLINK-1:0] cl_in_valid, cl_in_ready, cl_valid, cl_ready, raw_ready;
  word_t            cl_data [NLINK];
  logic [3:0]       look_unused [NLINK];
  for (genvar i = 0; i < NLINK; i++) begin : g_cl
    assign cl_in_valid[i] = mf_valid[i] && cluster_mode;
    assign mf_ready[i] = cluster_mode ? cl_in_ready[i] : raw_ready[i];
    cluster_recovery #(.HIT_DEPTH(HIT_DEPTH)) u_cl (
      .clk, .rst, .in_valid(cl_in_valid[i]), .in_ready(cl_in_ready[i]), .in_data(mf_data[i]),
      .out_valid(cl_valid[i]), .out_ready(cl_ready[i]), .out_data(cl_data[i]),
      .ovf(clu_ovf[i]), .max_lookups(look_unused[i]));
  end

  // ---- framing and Ethernet multiplexer ----
  logic  fr_valid, fr_ready;
  word_t fr_data;
  dhh_framer #(.NLINK(NLINK)) u_framer (
    .clk, .rst, .cluster_mode, .dhh_id,
    .raw_valid(mf_valid & {NLINK{!cluster_mode}}), .raw_ready, .raw_data(mf_data),
    .clu_valid(cl_valid), .clu_ready(cl_ready), .clu_data(cl_data),
    .out_valid(fr_valid), .out_ready(fr_ready), .out_data(fr_data));

  eth_data_mux u_mux (
    .clk, .rst, .dhh_id, .data_valid(fr_valid), .data_ready(fr_ready), .data_in(fr_data),
    .eth_valid, .eth_ready, .eth_in(eth_data),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_data(tx_data));

  // ---- slow control of the front end ----
  for (genvar j = 0; j < 2; j++) begin : g_jtag
    jtag_master u_jtag (
      .clk, .rst, .cmd_valid(jcmd_valid[j]), .cmd_ready(jcmd_ready[j]), .cmd_len(jcmd_len[j]),
      .cmd_tms(jcmd_tms[j]), .cmd_tdi(jcmd_tdi[j]), .rsp_valid(jrsp_valid[j]),
      .rsp_tdo(jrsp_tdo[j]), .tck(tck[j]), .tms(tms[j]), .tdi(tdi[j]), .tdo(tdo[j]));
  end

  logic [$clog2(SEQ_DEPTH)-1:0] seq_ptr_unused;
  logic                         seq_fs_unused;
  sequencer #(.DEPTH(SEQ_DEPTH), .W(SEQ_W)) u_seq (
    .clk, .rst, .wr_en(seq_wr_en), .wr_addr(seq_wr_addr), .wr_data(seq_wr_data),
    .last_addr(seq_last), .run(seq_run), .frame_sync, .sw_out, .rd_ptr(seq_ptr_unused),
    .frame_start(seq_fs_unused));
endmodule
