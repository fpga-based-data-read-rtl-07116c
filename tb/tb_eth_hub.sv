// tb_eth_hub: random Ethernet frames from the network must reach each of
// the six ports complete and in order, whatever each port's ready pattern;
// random reply frames from all ports must reach the network whole (never
// interleaved), each port's replies in order, and every port must be
// served.
module tb_eth_hub;
  import dhh_pkg::*;
  localparam int NP = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic net_rx_valid, net_rx_ready, net_tx_valid, net_tx_ready;
  word_t net_rx_data, net_tx_data, down_data;
  logic [NP-1:0] down_valid, down_ready, up_valid, up_ready;
  word_t up_data [NP];
  eth_hub #(.NPORT(NP)) dut (.*);

  int checks = 0, failures = 0;
  word_t rxq [$], dexp [NP][$], upq [NP][$], uexp [NP][$], cur [$];
  int served [NP];


  // what is transferred at the next rising edge, sampled after the falling
  // edge when every input is stable
  logic s_rx, s_tx;
  logic [NP-1:0] s_dn, s_up;
  word_t s_dd, s_txd;
  always @(negedge clk) begin
    #4;
    s_rx = !rst && net_rx_valid && net_rx_ready;
    s_dn = down_valid & down_ready;
    s_dd = down_data;
    s_up = up_valid & up_ready;
    s_tx = net_tx_valid && net_tx_ready;
    s_txd = net_tx_data;
  end

  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) down_ready[p] <= ($urandom % 3) != 0;
    net_tx_ready <= ($urandom % 3) != 0;
    if (!rst) begin
      if (s_rx) void'(rxq.pop_front());
      for (int p = 0; p < NP; p++) begin
        if (s_dn[p]) begin
          checks++;
          if (dexp[p].size() == 0 || s_dd != dexp[p][0]) begin failures++; if (failures < 4) $display("t=%0t p%0d got %h exp %h sent=%b", $time, p, s_dd, dexp[p][0], dut.sent); end
          if (dexp[p].size()) void'(dexp[p].pop_front());
        end
        if (s_up[p]) void'(upq[p].pop_front());
      end
      if (s_tx) begin
        cur.push_back(s_txd);
        if (s_txd.eof) begin
          automatic int p = cur[0].data[15:12];
          checks++;
          if (p >= NP) failures++;
          else begin
            served[p]++;
            foreach (cur[i]) if (uexp[p].size() == 0 || cur[i] != uexp[p].pop_front()) failures++;
          end
          cur.delete();
        end
      end
    end
    // drive the queue heads with non-blocking updates (no race with the hub)
    net_rx_valid <= rxq.size() > 0;
    net_rx_data <= rxq.size() > 0 ? rxq[0] : '0;
    for (int p = 0; p < NP; p++) begin
      up_valid[p] <= upq[p].size() > 0;
      up_data[p] <= upq[p].size() > 0 ? upq[p][0] : '0;
    end
  end

  initial begin
    down_ready = '0;
    net_rx_valid = 0;
    up_valid = '0;
    net_tx_ready = 0;
    for (int p = 0; p < NP; p++) served[p] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 60; k++) begin
      automatic int n = 1 + $urandom % 8;
      for (int i = 0; i < n; i++) begin
        automatic word_t w = '{sof: i == 0, eof: i == n - 1, data: 16'($urandom)};
        rxq.push_back(w);
        for (int p = 0; p < NP; p++) dexp[p].push_back(w);
      end
      for (int p = 0; p < NP; p++)
        if ($urandom % 2) begin
          automatic int m = 2 + $urandom % 6;
          for (int i = 0; i < m; i++) begin
            automatic word_t w = '{sof: i == 0, eof: i == m - 1,
                                   data: i == 0 ? {4'(p), 12'(k)} : 16'($urandom)};
            upq[p].push_back(w);
            uexp[p].push_back(w);
          end
        end
      repeat ($urandom % 20) @(posedge clk);
      @(negedge clk);
    end
    repeat (3000) @(posedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (dexp[p].size() != 0 || uexp[p].size() != 0 || served[p] == 0) begin
        failures++;
        $display("port %0d: %0d down / %0d up words left, %0d served", p, dexp[p].size(),
                 uexp[p].size(), served[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
