// eth_hub: the simple Ethernet hub of the DHH controller, sharing the single
// Ethernet connection of the carrier board. Every frame from the network is
// broadcast to all NPORT ports (the DHHs and the controller's own IPBus
// client); a frame word leaves only when every port has taken it. Replies
// from the ports are merged towards the network frame by frame in
// round-robin order. Frames are 16-bit word streams with sof/eof.
module eth_hub
  import dhh_pkg::*;
#(
  parameter int unsigned NPORT = 6
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             net_rx_valid,
  output logic             net_rx_ready,
  input  word_t            net_rx_data,
  output logic [NPORT-1:0] down_valid,
  input  logic [NPORT-1:0] down_ready,
  output word_t            down_data,
  input  logic [NPORT-1:0] up_valid,
  output logic [NPORT-1:0] up_ready,
  input  word_t            up_data [NPORT],
  output logic             net_tx_valid,
  input  logic             net_tx_ready,
  output word_t            net_tx_data
);
  localparam int unsigned PW = $clog2(NPORT);
  // ---- broadcast ----
  logic [NPORT-1:0] sent;
  assign down_data = net_rx_data;
  assign down_valid = {NPORT{net_rx_valid}} & ~sent;
  assign net_rx_ready = &(sent | down_ready);
  always_ff @(posedge clk) begin
    if (rst) sent <= '0;
    else if (net_rx_valid) sent <= net_rx_ready ? '0 : (sent | (down_valid & down_ready));
  end

  // ---- merge ----
  logic [PW-1:0] cur;
  logic          busy;
  logic [PW-1:0] pick;
  logic          any;
  always_comb begin
    any = 1'b0;
    pick = cur;
    for (int i = 1; i <= NPORT; i++) begin
      automatic int p = (int'(cur) + i) % NPORT;
      if (!any && up_valid[p]) begin
        any = 1'b1;
        pick = PW'(p);
      end
    end
  end
  wire [PW-1:0] sel = busy ? cur : pick;
  always_comb begin
    up_ready = '0;
    net_tx_valid = (busy || any) && up_valid[sel];
    net_tx_data = up_data[sel];
    up_ready[sel] = (busy || any) && net_tx_ready;
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      cur <= PW'(NPORT - 1);
      busy <= 1'b0;
    end else if (net_tx_valid && net_tx_ready) begin
      cur <= sel;
      busy <= !net_tx_data.eof;
    end
  end
endmodule
