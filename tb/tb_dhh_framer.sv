// tb_dhh_framer: four bypass and four clustered sources each hold one frame
// per event (trigger number, then body words). The cluster mode changes
// between events. Expected output per event: for links 0..3 a type word
// (FT_RAW or FT_CLUSTER, last flag on link 3, DHH index, link) followed by
// that link's frame from the source the mode selects. Random back-pressure.
module tb_dhh_framer;
  import dhh_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cluster_mode = 0;
  logic [5:0] dhh_id = 6'd9;
  logic [3:0] raw_valid, raw_ready, clu_valid, clu_ready;
  word_t raw_data [4], clu_data [4];
  logic out_valid, out_ready;
  word_t out_data;
  dhh_framer dut (.*);

  int checks = 0, failures = 0;
  word_t rq [4][$], cq [4][$], exp [$];
  int modes_seen [2] = '{0, 0};

  always_comb
    for (int l = 0; l < 4; l++) begin
      raw_valid[l] = rq[l].size() > 0;
      raw_data[l] = rq[l].size() > 0 ? rq[l][0] : '0;
      clu_valid[l] = cq[l].size() > 0;
      clu_data[l] = cq[l].size() > 0 ? cq[l][0] : '0;
    end

  always @(posedge clk) begin
    out_ready <= ($urandom % 3) != 0;
    if (!rst) begin
      for (int l = 0; l < 4; l++) begin
        if (raw_valid[l] && raw_ready[l]) void'(rq[l].pop_front());
        if (clu_valid[l] && clu_ready[l]) void'(cq[l].pop_front());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (exp.size() == 0 || out_data != exp[0]) begin
          failures++;
          if (failures < 5) $display("got %h exp %h", out_data, exp.size() ? exp[0] : 18'h0);
        end
        if (exp.size()) void'(exp.pop_front());
      end
    end
  end

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk);
    for (int e = 0; e < 20; e++) begin
      automatic bit m = (e % 3) == 1;
      wait (exp.size() == 0);
      @(negedge clk);
      rst = 0;
      cluster_mode = m;
      modes_seen[m]++;
      for (int l = 0; l < 4; l++) begin
        automatic int n = 1 + $urandom % 6;
        exp.push_back('{sof: 1, eof: 0,
                        data: dhh_frame_word(m ? FT_CLUSTER : FT_RAW, l == 3, dhh_id, 2'(l))});
        for (int i = 0; i < n; i++) begin
          automatic word_t w = '{sof: i == 0, eof: i == n - 1, data: i == 0 ? 16'(e) : 16'($urandom)};
          automatic word_t o = '{sof: 1'b0, eof: w.eof, data: w.data};
          automatic word_t junk = '{sof: i == 0, eof: i == n - 1, data: 16'hdead};
          exp.push_back(o);
          if (m) begin cq[l].push_back(w); rq[l].push_back(junk); end
          else   begin rq[l].push_back(w); cq[l].push_back(junk); end
        end
      end
      // the unselected source is consumed by nobody: drop it before the next event
      wait (exp.size() == 0);
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin rq[l].delete(); cq[l].delete(); end
    end
    checks++;
    if (modes_seen[0] == 0 || modes_seen[1] == 0) failures++;
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
