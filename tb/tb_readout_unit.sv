// tb_readout_unit: end-to-end test of one read-out unit (five DHHs and the
// controller) at reduced size: 64-row DHP frames, small buffers and a small
// external memory. Five DHP models feed the DHHs; triggers enter in the
// 127 MHz trigger clock (period 6 against 10 for the read-out clock, the
// 5:3 ratio of the real system). DHH 3 and outgoing link 1 are masked off.
// Every sub-event that leaves the unit is taken apart and compared with the
// pixel data worked out from the DHP model's content function: header and
// trailer frames, one frame per active DHH and DHP link in order, type word
// fields, trigger number, and the body (bypass: row headers and hits exactly;
// cluster mode: the same after removing the cluster tags, with a tag in
// front of every hit). Ethernet frames from the network must reach every
// DHH and the controller's client; replies from all six must come out.
// Mechanisms counted, each must occur: trigger crossing into the read-out
// clock, a trigger lost in the crossing, overlapping triggers, triggers
// dropped with all storage modules busy (the same on every DHH), switches
// between bypass and cluster mode (made while no event is in flight), flow control (xoff) from the controller,
// a full ring buffer in the controller's memory, Ethernet broadcast and
// reply merging, and masking. Sub-events must go round-robin to the active
// outgoing links.
module tb_readout_unit;
  import dhh_pkg::*;
  localparam int NDHH = 5, NLINK = 4, NOUT = 4, ROWS = 64, FOLD = 4, CPR = 8, OCC = 15;
  localparam int FRAME_CYC = CPR * ROWS / FOLD;
  localparam int ADDR_W = 16;
  localparam logic [NDHH-1:0] IN_MASK = 5'b10111;
  localparam logic [NOUT-1:0] OUT_MASK = 4'b1101;

  logic clk = 0, rst = 1, b2tt_clk = 0, b2tt_rst = 1;
  always #5 clk = ~clk;
  always #3 b2tt_clk = ~b2tt_clk;

  logic b2tt_trig = 0;
  logic [15:0] b2tt_trig_num = 0;
  logic cluster_mode = 0, cfg_load = 0;
  logic [ADDR_W-1:0] dhh_region_base [NLINK], dhh_region_size [NLINK];
  logic [ADDR_W-1:0] dhhc_region_base [NOUT], dhhc_region_size [NOUT];
  logic [NLINK-1:0] dhp_valid [NDHH];
  word_t dhp_data [NDHH][NLINK];
  logic [NOUT-1:0] out_valid, out_ready;
  word_t out_data [NOUT];
  logic fe_trig;
  logic [15:0] fe_trig_num;
  logic net_rx_valid, net_rx_ready, net_tx_valid, net_tx_ready;
  word_t net_rx_data, net_tx_data, eth_dn_data, ipb_tx_data;
  logic [NDHH-1:0] eth_dn_valid, eth_dn_ready, eth_up_valid, eth_up_ready;
  word_t eth_up_data [NDHH];
  logic ipb_rx_valid, ipb_rx_ready, ipb_tx_valid, ipb_tx_ready;
  logic [1:0] jcmd_valid [NDHH], jcmd_ready [NDHH], jrsp_valid [NDHH];
  logic [5:0] jcmd_len [NDHH][2];
  logic [31:0] jcmd_tms [NDHH][2], jcmd_tdi [NDHH][2], jrsp_tdo [NDHH][2];
  logic [1:0] tck [NDHH], tms [NDHH], tdi [NDHH], tdo [NDHH];
  logic seq_wr_en = 0, seq_run = 0, frame_sync = 0;
  logic [9:0] seq_wr_addr = 0, seq_last = 10'd15;
  logic [7:0] seq_wr_data = 0, sw_out [NDHH];
  logic [15:0] dropped [NDHH];
  logic [NLINK-1:0] dhh_ovf [NDHH], clu_ovf [NDHH];
  logic [NDHH-1:0] xoff;
  logic [15:0] mismatches [NOUT], events [NOUT], in_ovf [NDHH];
  logic [7:0] trig_lost;

  readout_unit #(.FIFO_DEPTH(512), .ROWS(ROWS), .CLK_PER_RO(CPR), .HIT_DEPTH(512),
                 .ADDR_W(ADDR_W), .MEM_DEPTH(4096), .IN_DEPTH(128), .INT_DEPTH(256)) dut (
    .in_mask(IN_MASK), .out_mask(OUT_MASK), .*);

  int frames_sent [NDHH];
  for (genvar d = 0; d < NDHH; d++) begin : g_dhp
    dhp_model #(.NLINK(NLINK), .ROWS(ROWS), .FOLD(FOLD), .CLK_PER_RO(CPR), .OCC(OCC),
                .LINK0(NLINK * d)) u_dhp (
      .clk, .rst, .trig(fe_trig), .valid(dhp_valid[d]), .data(dhp_data[d]),
      .frames_sent(frames_sent[d]));
    // JTAG and sequencer are tested on their own; here they stay idle
    assign jcmd_valid[d] = '0;
    assign tdo[d] = '0;
    for (genvar m = 0; m < 2; m++) begin : g_j
      assign jcmd_len[d][m] = 6'd1;
      assign jcmd_tms[d][m] = '0;
      assign jcmd_tdi[d][m] = '0;
    end
  end

  int checks = 0, failures = 0;
  function automatic void fail(input string msg);
    failures++;
    if (failures < 12) $display("FAIL %s", msg);
  endfunction

  // ---- trigger bookkeeping in the read-out clock ----
  int cyc = 0;
  always_ff @(posedge clk) if (rst) cyc <= 0; else cyc <= cyc + 1;
  int t_row [int], t_frame [int];
  int n_fe = 0, n_overlap = 0, last_fe = -100000, n_b2tt = 0;
  always @(posedge clk) begin
    if (!rst && fe_trig) begin
      t_row[fe_trig_num] = ((cyc / CPR) % (ROWS / FOLD)) * FOLD;
      t_frame[fe_trig_num] = cyc / FRAME_CYC;
      if (cyc - last_fe < 2 * FRAME_CYC) n_overlap++;
      last_fe = cyc;
      n_fe++;
    end
  end

  // ---- flow control, ring-full and mode observation ----
  bit slow = 0;
  int xoff_cyc = 0, ring_full_cyc = 0, n_raw_frames = 0, n_clu_frames = 0;
  always @(posedge clk) begin
    for (int k = 0; k < NOUT; k++)
      out_ready[k] <= slow ? ($urandom % 16 == 0) : ($urandom % 8 != 0);
    if (!rst && (xoff & IN_MASK) != 0) xoff_cyc++;
    for (int k = 0; k < NOUT; k++)
      if (!rst && dut.u_dhhc.u_mfifo.level[k] == {1'b0, dhhc_region_size[k]}) ring_full_cyc++;
  end

  // ---- sub-event checker ----
  word_t cur [NOUT][$];
  word_t frames [NOUT][$][$];
  int ev_out [int];
  int n_events = 0;
  int last_ev [NOUT] = '{-1, -1, -1, -1};

  function automatic void check_subevent(input int k);
    int e, nfr, fi;
    int act [$];
    for (int d = 0; d < NDHH; d++) if (IN_MASK[d]) act.push_back(d);
    checks++;
    if (frames[k].size() != 2 + act.size() * NLINK) begin
      fail($sformatf("out%0d: %0d frames in sub-event", k, frames[k].size()));
      foreach (frames[k][i]) $display("  frame %0d: %h %h size %0d", i, frames[k][i][0].data,
                                      frames[k][i][1].data, frames[k][i].size());
      return;
    end
    if (frames[k][0].size() != 2 || frames[k][0][0].data != {FT_SEB_HDR, 12'd0}) begin
      fail($sformatf("out%0d: bad header frame", k));
      return;
    end
    e = int'(frames[k][0][1].data);
    if (!t_row.exists(e) || ev_out.exists(e) || e <= last_ev[k]) begin
      fail($sformatf("out%0d: unexpected event %0d", k, e));
      return;
    end
    ev_out[e] = k;
    last_ev[k] = e;
    n_events++;
    fi = 1;
    foreach (act[a]) begin
      int m;
      m = -1;
      for (int l = 0; l < NLINK; l++) begin
        logic [15:0] exp [$];
        word_t f [$];
        logic [15:0] body [$];
        bit tags_ok, clu;
        f = frames[k][fi];
        fi++;
        checks++;
        if (f.size() < 2) begin
          fail("short frame");
          continue;
        end
        if (f[0].data[7:2] != 6'(act[a]) || f[0].data[1:0] != 2'(l) ||
            f[0].data[11] != (l == NLINK - 1) || f[0].data[15:12] > 4'h1) begin
          fail($sformatf("event %0d dhh %0d link %0d: type word %h", e, act[a], l, f[0].data));
          continue;
        end
        clu = f[0].data[12];
        if (m == -1) m = int'(clu);
        else if (m != int'(clu)) fail($sformatf("event %0d: mixed modes in one DHH", e));
        if (clu) n_clu_frames++;
        else n_raw_frames++;
        tb_pkg::event_words(exp, e, t_row[e], t_frame[e], NLINK * act[a] + l, ROWS, 64, OCC);
        body.push_back(f[1].data);
        tags_ok = 1;
        for (int i = 2; i < f.size(); i++) begin
          if (clu && f[i].data[15:14] == W_CLU) begin
            if (i + 1 >= f.size() || f[i + 1].data[15:14] != W_HIT) tags_ok = 0;
          end else begin
            if (clu && f[i].data[15:14] == W_HIT && f[i - 1].data[15:14] != W_CLU)
              tags_ok = 0;
            body.push_back(f[i].data);
          end
        end
        if (body != exp || !tags_ok)
          fail($sformatf("event %0d dhh %0d link %0d: body differs (%0d words, expected %0d, tags %0d)",
                         e, act[a], l, body.size(), exp.size(), tags_ok));
      end
    end
    checks++;
    nfr = act.size() * NLINK;
    if (frames[k][fi].size() != 2 || frames[k][fi][0].data != {FT_SEB_TRL, 4'd0, 8'(nfr)} ||
        frames[k][fi][1].data != 16'(e))
      fail($sformatf("event %0d: bad trailer %h", e, frames[k][fi][0].data));
  endfunction

  always @(posedge clk) begin
    if (!rst)
      for (int k = 0; k < NOUT; k++)
        if (out_valid[k] && out_ready[k]) begin
          if (!OUT_MASK[k]) fail($sformatf("data on masked output %0d", k));
          if (out_data[k].sof != (cur[k].size() == 0)) fail("sof flag misplaced");
          cur[k].push_back(out_data[k]);
          if (out_data[k].eof) begin
            frames[k].push_back(cur[k]);
            if (cur[k][0].data[15:12] == FT_SEB_TRL) begin
              check_subevent(k);
              frames[k].delete();
            end
            cur[k].delete();
          end
        end
  end

  // ---- Ethernet: network side, DHH clients and the controller's client ----
  word_t net_q [$], up_q [NDHH][$], ipb_q [$];
  word_t dn_got [NDHH][$], ipb_got [$], tx_got [$];
  always @(posedge clk) begin
    eth_dn_ready <= '1;
    ipb_rx_ready <= 1'b1;
    net_tx_ready <= ($urandom % 4 != 0);
    if (rst) begin
      net_rx_valid <= 1'b0;
      eth_up_valid <= '0;
      ipb_tx_valid <= 1'b0;
      net_rx_data <= '0;
      ipb_tx_data <= '0;
      for (int d = 0; d < NDHH; d++) eth_up_data[d] <= '0;
    end else begin
      if (!net_rx_valid || net_rx_ready) begin
        net_rx_valid <= net_q.size() > 0;
        if (net_q.size() > 0) net_rx_data <= net_q.pop_front();
      end
      for (int d = 0; d < NDHH; d++)
        if (!eth_up_valid[d] || eth_up_ready[d]) begin
          eth_up_valid[d] <= up_q[d].size() > 0;
          if (up_q[d].size() > 0) eth_up_data[d] <= up_q[d].pop_front();
        end
      if (!ipb_tx_valid || ipb_tx_ready) begin
        ipb_tx_valid <= ipb_q.size() > 0;
        if (ipb_q.size() > 0) ipb_tx_data <= ipb_q.pop_front();
      end
      for (int d = 0; d < NDHH; d++)
        if (eth_dn_valid[d] && eth_dn_ready[d]) dn_got[d].push_back(eth_dn_data);
      if (ipb_rx_valid && ipb_rx_ready) ipb_got.push_back(eth_dn_data);
      if (net_tx_valid && net_tx_ready) tx_got.push_back(net_tx_data);
    end
  end

  function automatic void eth_frame(ref word_t q [$], input logic [15:0] tag, input int n);
    for (int i = 0; i < n; i++)
      q.push_back('{sof: i == 0, eof: i == n - 1, data: tag + 16'(i)});
  endfunction

  task automatic b2tt_fire(input int gap);
    @(negedge b2tt_clk);
    b2tt_trig = 1;
    b2tt_trig_num = b2tt_trig_num + 1'b1;
    n_b2tt++;
    @(negedge b2tt_clk);
    b2tt_trig = 0;
    repeat (gap) @(posedge b2tt_clk);
  endtask

  // wait until every trigger so far has given its sub-event (or was dropped)
  task automatic drain();
    for (int w = 0; w < 200000; w++) begin
      @(posedge clk);
      if (n_events + int'(dropped[0]) == n_fe && w > 3000) break;
    end
    repeat (200) @(posedge clk);
  endtask

  initial begin
    word_t net_ref [$];
    for (int i = 0; i < NLINK; i++) begin
      dhh_region_base[i] = ADDR_W'(i * 1024);
      dhh_region_size[i] = ADDR_W'(1024);
    end
    for (int k = 0; k < NOUT; k++) begin
      dhhc_region_base[k] = ADDR_W'(k * 1024);
      dhhc_region_size[k] = ADDR_W'(24);
    end
    repeat (5) @(posedge clk);
    rst = 0;
    b2tt_rst = 0;
    repeat (100) @(posedge clk);
    // bypass mode, spaced and overlapping triggers
    for (int i = 0; i < 8; i++) b2tt_fire(250 + $urandom % 900);
    // an Ethernet frame from the network and replies from every client
    eth_frame(net_q, 16'h5000, 6);
    for (int d = 0; d < NDHH; d++) eth_frame(up_q[d], 16'(16'h6000 + d * 16'h100), 3 + d);
    eth_frame(ipb_q, 16'h7000, 4);
    // a burst: more triggers than storage modules
    for (int i = 0; i < 7; i++) b2tt_fire(20);
    // three triggers in successive trigger-clock cycles: at least two fall
    // into one transfer period and one is lost
    b2tt_fire(0);
    b2tt_fire(0);
    b2tt_fire(0);
    // the mode is a run setting: switch it only with no event in flight
    drain();
    cluster_mode = 1;
    for (int i = 0; i < 8; i++) b2tt_fire(250 + $urandom % 900);
    // slow outgoing links: rings fill, flow control acts
    slow = 1;
    for (int i = 0; i < 8; i++) b2tt_fire(400 + $urandom % 400);
    repeat (6000) @(posedge clk);
    slow = 0;
    drain();
    cluster_mode = 0;
    for (int i = 0; i < 6; i++) b2tt_fire(250 + $urandom % 900);
    drain();

    // ---- end-of-run checks ----
    checks++;
    if (n_events + int'(dropped[0]) != n_fe)
      fail($sformatf("%0d sub-events + %0d dropped != %0d triggers", n_events, dropped[0], n_fe));
    checks++;
    if (n_fe + int'(trig_lost) != n_b2tt)
      fail($sformatf("%0d triggers crossed + %0d lost != %0d sent", n_fe, trig_lost, n_b2tt));
    for (int d = 0; d < NDHH; d++)
      if (IN_MASK[d]) begin
        checks++;
        if (dropped[d] != dropped[0]) fail("DHHs dropped different triggers");
      end
    for (int k = 0; k < NOUT; k++) begin
      checks++;
      if (mismatches[k] != 0 || in_ovf[0] != 0) fail("event number mismatch or input overflow");
    end
    // round-robin over the active outputs, in trigger order
    begin
      int order [$], outs [$], idx;
      foreach (ev_out[e]) order.push_back(e);
      order.sort();
      for (int k = 0; k < NOUT; k++) if (OUT_MASK[k]) outs.push_back(k);
      idx = -1;
      foreach (order[i]) begin
        checks++;
        if (idx == -1) foreach (outs[j]) if (outs[j] == ev_out[order[i]]) idx = j;
        if (ev_out[order[i]] != outs[idx])
          fail($sformatf("event %0d on output %0d", order[i], ev_out[order[i]]));
        idx = (idx + 1) % outs.size();
      end
    end
    // Ethernet: broadcast reaches all, replies all come out, frame by frame
    eth_frame(net_ref, 16'h5000, 6);
    for (int d = 0; d < NDHH; d++) begin
      checks++;
      if (dn_got[d] != net_ref) fail($sformatf("DHH %0d did not get the broadcast", d));
    end
    checks++;
    if (ipb_got != net_ref) fail("controller client did not get the broadcast");
    begin
      int seen [int];
      int i;
      i = 0;
      while (i < tx_got.size()) begin
        logic [15:0] tag;
        int n;
        tag = tx_got[i].data;
        n = (tag[15:12] == 4'h7) ? 4 : 3 + int'(tag[11:8]);
        checks++;
        for (int j = 0; j < n; j++)
          if (i + j >= tx_got.size() || tx_got[i + j].data != tag + 16'(j) ||
              tx_got[i + j].sof != (j == 0) || tx_got[i + j].eof != (j == n - 1))
            fail($sformatf("reply frame %h damaged", tag));
        seen[int'(tag)] = 1;
        i += n;
      end
      checks++;
      if (seen.num() != NDHH + 1) fail($sformatf("%0d reply frames, expected %0d", seen.num(), NDHH + 1));
    end
    // every mechanism must have happened
    begin
      int mech [string];
      mech["trigger crossing"] = n_fe;
      mech["trigger lost"] = int'(trig_lost);
      mech["overlapping triggers"] = n_overlap;
      mech["dropped triggers"] = int'(dropped[0]);
      mech["bypass frames"] = n_raw_frames;
      mech["cluster frames"] = n_clu_frames;
      mech["flow control"] = xoff_cyc;
      mech["ring full"] = ring_full_cyc;
      mech["broadcast"] = dn_got[0].size();
      mech["reply merge"] = tx_got.size();
      mech["masked DHH"] = int'(IN_MASK[3] == 0 && frames_sent[3] > 0);
      foreach (mech[s]) begin
        checks++;
        $display("mechanism %-22s %0d", s, mech[s]);
        if (mech[s] == 0) fail($sformatf("mechanism never happened: %s", s));
      end
    end
    foreach (dhh_ovf[d]) $display("dhh %0d ovf %b clu_ovf %b in_ovf %0d", d, dhh_ovf[d], clu_ovf[d], in_ovf[d]);
    $display("sub-events=%0d triggers=%0d dropped=%0d", n_events, n_fe, dropped[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #6000000;
    failures++;
    $display("watchdog: %0d sub-events of %0d triggers", n_events, n_fe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
