// readout_unit: one read-out unit of the pixel detector, as placed on one
// carrier board: NDHH DHHs (one per half ladder, each with NLINK DHP links)
// and one DHH controller. The DHHs send their frames to the controller,
// which builds sub-events and sends them out on NOUT links; the controller
// sends triggers (moved into the shared front-end clock) to the DHHs and
// holds a DHH's stream while its input FIFO is above the flow-control
// threshold. The serial links themselves (Aurora cores and transceivers)
// are not part of this design: their user-side streams are wired directly,
// and DHHs and controller run on one clock, which stands for the
// fixed-phase recovered clock of the real links. The IPBus clients of the
// DHHs and of the controller are outside the design; their Ethernet streams
// are ports. The switcher sequencer programming port is shared by all DHHs.
module readout_unit
  import dhh_pkg::*;
#(
  parameter int unsigned NDHH       = 5,
  parameter int unsigned NLINK      = 4,
  parameter int unsigned NOUT       = 4,
  parameter int unsigned NDSM       = 4,
  parameter int unsigned FIFO_DEPTH = 4096,
  parameter int unsigned ROWS       = 768,
  parameter int unsigned CLK_PER_RO = 8,
  parameter int unsigned HIT_DEPTH  = 4096,
  parameter int unsigned ADDR_W     = 27,
  parameter int unsigned MEM_DEPTH  = 262144,
  parameter int unsigned IN_DEPTH   = 1024,
  parameter int unsigned INT_DEPTH  = 512
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              b2tt_clk,
  input  logic              b2tt_rst,
  input  logic              b2tt_trig,
  input  logic [15:0]       b2tt_trig_num,
  // configuration
  input  logic              cluster_mode,
  input  logic [NDHH-1:0]   in_mask,
  input  logic [NOUT-1:0]   out_mask,
  input  logic              cfg_load,
  input  logic [ADDR_W-1:0] dhh_region_base [NLINK],
  input  logic [ADDR_W-1:0] dhh_region_size [NLINK],
  input  logic [ADDR_W-1:0] dhhc_region_base [NOUT],
  input  logic [ADDR_W-1:0] dhhc_region_size [NOUT],
  // DHP links of all half ladders
  input  logic [NLINK-1:0]  dhp_valid [NDHH],
  input  word_t             dhp_data  [NDHH][NLINK],
  // outgoing links of the controller
  output logic [NOUT-1:0]   out_valid,
  input  logic [NOUT-1:0]   out_ready,
  output word_t             out_data [NOUT],
  // trigger as distributed to the DHHs (front-end trigger)
  output logic              fe_trig,
  output logic [15:0]       fe_trig_num,
  // Ethernet
  input  logic              net_rx_valid,
  output logic              net_rx_ready,
  input  word_t             net_rx_data,
  output logic              net_tx_valid,
  input  logic              net_tx_ready,
  output word_t             net_tx_data,
  output logic [NDHH-1:0]   eth_dn_valid,
  input  logic [NDHH-1:0]   eth_dn_ready,
  output word_t             eth_dn_data,
  input  logic [NDHH-1:0]   eth_up_valid,
  output logic [NDHH-1:0]   eth_up_ready,
  input  word_t             eth_up_data [NDHH],
  output logic              ipb_rx_valid,
  input  logic              ipb_rx_ready,
  input  logic              ipb_tx_valid,
  output logic              ipb_tx_ready,
  input  word_t             ipb_tx_data,
  // front-end slow control, per DHH: JTAG masters 0 (ASICs) and 1 (switchers)
  input  logic [1:0]        jcmd_valid [NDHH],
  output logic [1:0]        jcmd_ready [NDHH],
  input  logic [5:0]        jcmd_len   [NDHH][2],
  input  logic [31:0]       jcmd_tms   [NDHH][2],
  input  logic [31:0]       jcmd_tdi   [NDHH][2],
  output logic [1:0]        jrsp_valid [NDHH],
  output logic [31:0]       jrsp_tdo   [NDHH][2],
  output logic [1:0]        tck [NDHH],
  output logic [1:0]        tms [NDHH],
  output logic [1:0]        tdi [NDHH],
  input  logic [1:0]        tdo [NDHH],
  input  logic              seq_wr_en,
  input  logic [9:0]        seq_wr_addr,
  input  logic [7:0]        seq_wr_data,
  input  logic [9:0]        seq_last,
  input  logic              seq_run,
  input  logic              frame_sync,
  output logic [7:0]        sw_out [NDHH],
  // status
  output logic [15:0]       dropped [NDHH],
  output logic [NLINK-1:0]  dhh_ovf [NDHH],
  output logic [NLINK-1:0]  clu_ovf [NDHH],
  output logic [NDHH-1:0]   xoff,
  output logic [15:0]       mismatches [NOUT],
  output logic [15:0]       events [NOUT],
  output logic [15:0]       in_ovf [NDHH],
  output logic [7:0]        trig_lost
);
  logic [NDHH-1:0] tx_valid;
  word_t           tx_data [NDHH];

  for (genvar d = 0; d < NDHH; d++) begin : g_dhh
    logic tx_v;
    dhh #(.NLINK(NLINK), .NDSM(NDSM), .FIFO_DEPTH(FIFO_DEPTH), .ROWS(ROWS),
          .CLK_PER_RO(CLK_PER_RO), .HIT_DEPTH(HIT_DEPTH), .ADDR_W(ADDR_W),
          .MEM_DEPTH(MEM_DEPTH)) u_dhh (
      .clk, .rst, .dhh_id(6'(d)), .cluster_mode, .cfg_load,
      .region_base(dhh_region_base), .region_size(dhh_region_size),
      .trig(fe_trig), .trig_num(fe_trig_num),
      .dhp_valid(dhp_valid[d]), .dhp_data(dhp_data[d]),
      .eth_valid(eth_up_valid[d]), .eth_ready(eth_up_ready[d]), .eth_data(eth_up_data[d]),
      .tx_valid(tx_v), .tx_ready(!xoff[d]), .tx_data(tx_data[d]),
      .jcmd_valid(jcmd_valid[d]), .jcmd_ready(jcmd_ready[d]), .jcmd_len(jcmd_len[d]),
      .jcmd_tms(jcmd_tms[d]), .jcmd_tdi(jcmd_tdi[d]), .jrsp_valid(jrsp_valid[d]),
      .jrsp_tdo(jrsp_tdo[d]), .tck(tck[d]), .tms(tms[d]), .tdi(tdi[d]), .tdo(tdo[d]),
      .seq_wr_en, .seq_wr_addr, .seq_wr_data, .seq_last, .seq_run, .frame_sync,
      .sw_out(sw_out[d]), .dropped(dropped[d]), .ovf(dhh_ovf[d]), .clu_ovf(clu_ovf[d]));
    // a word is on the link when the DHH offers it and flow control allows it
    assign tx_valid[d] = tx_v && !xoff[d];
  end

  dhhc #(.NDHH(NDHH), .NOUT(NOUT), .IN_DEPTH(IN_DEPTH), .INT_DEPTH(INT_DEPTH),
         .ADDR_W(ADDR_W), .MEM_DEPTH(MEM_DEPTH)) u_dhhc (
    .clk, .rst, .b2tt_clk, .b2tt_rst, .b2tt_trig, .b2tt_trig_num,
    .in_mask, .out_mask, .cfg_load, .region_base(dhhc_region_base),
    .region_size(dhhc_region_size), .trig(fe_trig), .trig_num(fe_trig_num),
    .rx_valid(tx_valid), .rx_data(tx_data), .xoff,
    .out_valid, .out_ready, .out_data,
    .net_rx_valid, .net_rx_ready, .net_rx_data, .net_tx_valid, .net_tx_ready, .net_tx_data,
    .eth_dn_valid, .eth_dn_ready, .eth_dn_data,
    .ipb_rx_valid, .ipb_rx_ready, .ipb_tx_valid, .ipb_tx_ready, .ipb_tx_data,
    .mismatches, .events, .in_ovf, .trig_lost);
endmodule
