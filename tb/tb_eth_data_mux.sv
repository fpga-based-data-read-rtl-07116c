// tb_eth_data_mux: data frames and Ethernet frames are offered at random
// times. Checks: every data frame and every Ethernet frame (behind an FT_ETH
// type word) comes out whole and unmixed, each stream in its own order;
// whenever both wait at a frame boundary the data frame goes first, and
// that case must occur.
module tb_eth_data_mux;
  import dhh_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [5:0] dhh_id = 6'd3;
  logic data_valid, data_ready, eth_valid, eth_ready, out_valid, out_ready;
  word_t data_in, eth_in, out_data;
  eth_data_mux dut (.*);

  int checks = 0, failures = 0, both_waiting = 0;
  word_t dq [$], eq [$], dexp [$], eexp [$], cur [$];

  assign data_valid = dq.size() > 0;
  assign data_in = dq.size() > 0 ? dq[0] : '0;
  assign eth_valid = eq.size() > 0;
  assign eth_in = eq.size() > 0 ? eq[0] : '0;

  bit in_frame = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    if (!rst) begin
      if (out_valid && out_ready && !in_frame && data_valid && eth_valid) begin
        both_waiting++;
        checks++;
        if (out_data != data_in) failures++;
      end
      if (data_valid && data_ready) void'(dq.pop_front());
      if (eth_valid && eth_ready) void'(eq.pop_front());
      if (out_valid && out_ready) begin
        cur.push_back(out_data);
        in_frame = !out_data.eof;
        if (out_data.eof) begin
          checks++;
          if (cur[0].data[15:12] == FT_ETH) begin
            cur[0] = '{sof: 1, eof: 0, data: dhh_frame_word(FT_ETH, 0, dhh_id, 0)};
            if (cur.size() < 2) failures++;
            else begin
              void'(cur.pop_front());
              cur[0].sof = 1;
              foreach (cur[i]) if (eexp.size() == 0 || cur[i] != eexp.pop_front()) failures++;
            end
          end else begin
            foreach (cur[i]) if (dexp.size() == 0 || cur[i] != dexp.pop_front()) failures++;
          end
          cur.delete();
        end
      end
    end
  end

  task automatic frame(ref word_t q[$], ref word_t e[$], input logic [3:0] ty);
    int n = 2 + $urandom % 8;
    for (int i = 0; i < n; i++) begin
      word_t w = '{sof: i == 0, eof: i == n - 1, data: i == 0 ? {ty, 12'h0} : 16'($urandom)};
      q.push_back(w);
      e.push_back(w);
    end
  endtask

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      if ($urandom % 3 == 0) frame(dq, dexp, FT_RAW);
      if ($urandom % 3 == 0) frame(eq, eexp, 4'h5);
      repeat ($urandom % 12) @(posedge clk);
    end
    wait (dq.size() == 0 && eq.size() == 0);
    repeat (20) @(posedge clk);
    checks++;
    if (dexp.size() != 0 || eexp.size() != 0 || both_waiting == 0) begin
      failures++;
      $display("left: data %0d eth %0d, both waiting %0d", dexp.size(), eexp.size(), both_waiting);
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
