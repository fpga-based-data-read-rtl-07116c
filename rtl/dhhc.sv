// dhhc: firmware of the DHH controller, the second read-out layer. It
//  - takes triggers from the trigger and timing system in the 127.21 MHz
//    B2TT clock and moves them into the 76.33 MHz clock it shares with its
//    DHHs (trigger_cdc), then distributes them to the DHHs;
//  - separates each incoming DHH link into data frames and Ethernet reply
//    frames (by the frame type word);
//  - builds sub-events from the data frames of up to NDHH DHHs on NOUT
//    outgoing links (sub_event_builder), buffers them in a large FIFO in its
//    external memory (ddr3_fifo with the behavioural ddr3_mem_model) and
//    sends them out;
//  - shares the board's Ethernet connection between its own IPBus client and
//    the DHHs (eth_hub).
// The IPBus client itself is outside this design: its receive and reply
// streams are ports (ipb_rx_*, ipb_tx_*), as are the Ethernet streams that
// travel to and from the DHHs over the links (eth_dn_*, eth_up_*).
module dhhc
  import dhh_pkg::*;
#(
  parameter int unsigned NDHH      = 5,
  parameter int unsigned NOUT      = 4,
  parameter int unsigned IN_DEPTH  = 1024,
  parameter int unsigned INT_DEPTH = 512,
  parameter int unsigned ADDR_W    = 27,
  parameter int unsigned MEM_DEPTH = 262144
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              b2tt_clk,
  input  logic              b2tt_rst,
  input  logic              b2tt_trig,
  input  logic [15:0]       b2tt_trig_num,
  // configuration
  input  logic [NDHH-1:0]   in_mask,
  input  logic [NOUT-1:0]   out_mask,
  input  logic              cfg_load,
  input  logic [ADDR_W-1:0] region_base [NOUT],
  input  logic [ADDR_W-1:0] region_size [NOUT],
  // trigger to the DHHs
  output logic              trig,
  output logic [15:0]       trig_num,
  // links from the DHHs
  input  logic [NDHH-1:0]   rx_valid,
  input  word_t             rx_data [NDHH],
  output logic [NDHH-1:0]   xoff,
  // outgoing links
  output logic [NOUT-1:0]   out_valid,
  input  logic [NOUT-1:0]   out_ready,
  output word_t             out_data [NOUT],
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
  output logic              ipb_rx_valid,
  input  logic              ipb_rx_ready,
  input  logic              ipb_tx_valid,
  output logic              ipb_tx_ready,
  input  word_t             ipb_tx_data,
  // status
  output logic [15:0]       mismatches [NOUT],
  output logic [15:0]       events [NOUT],
  output logic [15:0]       in_ovf [NDHH],
  output logic [7:0]        trig_lost
);
  trigger_cdc u_cdc (
    .src_clk(b2tt_clk), .src_rst(b2tt_rst), .src_trig(b2tt_trig), .src_trig_num(b2tt_trig_num),
    .dst_clk(clk), .dst_rst(rst), .dst_trig(trig), .dst_trig_num(trig_num), .lost(trig_lost));

  // ---- split each link into data and Ethernet replies ----
  logic [NDHH-1:0] d_valid, e_wr, e_full, e_vld, e_rd;
  logic [NDHH-1:0] is_eth, first_eth;
  word_t           e_q [NDHH];
  word_t           e_w [NDHH];
  for (genvar i = 0; i < NDHH; i++) begin : g_split
    logic [6:0] cnt_unused;
    logic       ovf_unused;
    wire hdr_eth = rx_data[i].data[15:12] == FT_ETH;
    // Ethernet type word is dropped; the next word starts the reply frame
    assign d_valid[i] = rx_valid[i] && !(rx_data[i].sof ? hdr_eth : is_eth[i]);
    assign e_wr[i] = rx_valid[i] && !rx_data[i].sof && is_eth[i];
    assign e_w[i] = '{sof: first_eth[i], eof: rx_data[i].eof, data: rx_data[i].data};
    always_ff @(posedge clk) begin
      if (rst) begin
        is_eth[i] <= 1'b0;
        first_eth[i] <= 1'b0;
      end else if (rx_valid[i]) begin
        if (rx_data[i].sof) begin
          is_eth[i] <= hdr_eth && !rx_data[i].eof;
          first_eth[i] <= 1'b1;
        end else begin
          first_eth[i] <= 1'b0;
          if (rx_data[i].eof) is_eth[i] <= 1'b0;
        end
      end
    end
    sync_fifo #(.W($bits(word_t)), .DEPTH(64)) u_eq (
      .clk, .rst, .wr_en(e_wr[i]), .wr_data(e_w[i]), .full(e_full[i]), .rd_en(e_rd[i]),
      .rd_data(e_q[i]), .rd_valid(e_vld[i]), .count(cnt_unused), .overflow(ovf_unused));
  end

  // ---- sub-event building and the external FIFO ----
  logic [NOUT-1:0] sb_valid, sb_ready;
  word_t           sb_data [NOUT];
  sub_event_builder #(.NIN(NDHH), .NOUT(NOUT), .IN_DEPTH(IN_DEPTH), .INT_DEPTH(INT_DEPTH)) u_seb (
    .clk, .rst, .in_mask, .out_mask, .in_valid(d_valid), .in_data(rx_data), .xoff,
    .out_valid(sb_valid), .out_ready(sb_ready), .out_data(sb_data),
    .mismatches, .events, .in_ovf);

  logic              mem_req, mem_we, mem_ready, mem_rvalid;
  logic [ADDR_W-1:0] mem_addr;
  logic [255:0]      mem_wdata, mem_rdata;
  logic [ADDR_W:0]   level_unused [NOUT];
  logic [31:0]       vecs_unused;
  ddr3_fifo #(.NCH(NOUT), .ADDR_W(ADDR_W)) u_mfifo (
    .clk, .rst, .cfg_load, .region_base, .region_size,
    .in_valid(sb_valid), .in_ready(sb_ready), .in_data(sb_data),
    .out_valid, .out_ready, .out_data,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata,
    .level(level_unused), .vec_written(vecs_unused));
  ddr3_mem_model #(.ADDR_W(ADDR_W), .DEPTH(MEM_DEPTH)) u_mem (
    .clk, .rst, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata);

  // ---- Ethernet hub: ports 0..NDHH-1 are the DHHs, port NDHH the IPBus client ----
  logic [NDHH:0] h_dn_valid, h_dn_ready, h_up_valid, h_up_ready;
  word_t         h_up_data [NDHH+1];
  word_t         h_dn_data;
  assign eth_dn_valid = h_dn_valid[NDHH-1:0];
  assign ipb_rx_valid = h_dn_valid[NDHH];
  assign h_dn_ready = {ipb_rx_ready, eth_dn_ready};
  assign eth_dn_data = h_dn_data;
  for (genvar i = 0; i < NDHH; i++) begin : g_up
    assign h_up_valid[i] = e_vld[i];
    assign h_up_data[i] = e_q[i];
    assign e_rd[i] = h_up_ready[i];
  end
  assign h_up_valid[NDHH] = ipb_tx_valid;
  assign h_up_data[NDHH] = ipb_tx_data;
  assign ipb_tx_ready = h_up_ready[NDHH];

  eth_hub #(.NPORT(NDHH + 1)) u_hub (
    .clk, .rst, .net_rx_valid, .net_rx_ready, .net_rx_data,
    .down_valid(h_dn_valid), .down_ready(h_dn_ready), .down_data(h_dn_data),
    .up_valid(h_up_valid), .up_ready(h_up_ready), .up_data(h_up_data),
    .net_tx_valid, .net_tx_ready, .net_tx_data);
endmodule
