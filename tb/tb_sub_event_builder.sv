// tb_sub_event_builder: five DHH links send two frames per event each
// (type word with the last-frame flag on the second, event number, random
// body). Incoming link 1 and outgoing link 2 are masked off. Checks: event
// e appears, and only there, on the e-th active outgoing link in
// round-robin order (0, 1, 3, 0, ...), as header frame, the frames of
// links 0, 2, 3, 4 in that order, and trailer frame with frame count; one
// event where link 4 carries a wrong event number must be flagged in the
// trailer and counted as two mismatches; slow outgoing links must make the
// input FIFOs raise flow control (xoff), and the senders obey it.
module tb_sub_event_builder;
  import dhh_pkg::*;
  localparam int NIN = 5, NOUT = 4, NEV = 24, BAD_EV = 9;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [NIN-1:0] in_mask = 5'b11101, in_valid, xoff;
  logic [NOUT-1:0] out_mask = 4'b1011, out_valid, out_ready;
  word_t in_data [NIN], out_data [NOUT];
  logic [15:0] mismatches [NOUT], events [NOUT], in_ovf [NIN];

  sub_event_builder #(.NIN(NIN), .NOUT(NOUT), .IN_DEPTH(64), .INT_DEPTH(64)) dut (.*);

  int checks = 0, failures = 0, xoff_cycles = 0;
  word_t inq [NIN][$], expq [NOUT][$];
  bit slow = 1;

  always @(posedge clk) begin
    for (int k = 0; k < NOUT; k++) out_ready[k] <= slow ? ($urandom % 6 == 0) : ($urandom % 4 != 0);
    if (|xoff) xoff_cycles++;
    if (!rst)
      for (int k = 0; k < NOUT; k++)
        if (out_valid[k] && out_ready[k]) begin
          checks++;
          if (expq[k].size() == 0 || out_data[k] != expq[k][0]) begin
            failures++;
            if (failures < 6) $display("out%0d got %h exp %h", k, out_data[k],
                                       expq[k].size() ? expq[k][0] : 18'h0);
          end
          if (expq[k].size()) void'(expq[k].pop_front());
        end
  end

  // senders obey flow control: one word per clock while xoff is low
  for (genvar j = 0; j < NIN; j++) begin : g_send
    always @(posedge clk) begin
      if (!rst && !xoff[j] && inq[j].size() > 0) begin
        in_valid[j] <= 1'b1;
        in_data[j] <= inq[j].pop_front();
      end else begin
        in_valid[j] <= 1'b0;
      end
    end
  end

  initial begin
    automatic int outs [3] = '{0, 1, 3};
    in_valid = '0;
    out_ready = '0;
    for (int e = 0; e < NEV; e++) begin
      automatic int k = outs[e % 3];
      automatic word_t hdr [$];
      expq[k].push_back('{sof: 1, eof: 0, data: {FT_SEB_HDR, 12'd0}});
      expq[k].push_back('{sof: 0, eof: 1, data: 16'(e)});
      for (int j = 0; j < NIN; j++)
        for (int f = 0; f < 2; f++) begin
          automatic int n = 2 + $urandom % 10;
          for (int i = 0; i < n; i++) begin
            automatic word_t w;
            w.sof = i == 0;
            w.eof = i == n - 1;
            w.data = (i == 0) ? dhh_frame_word(FT_RAW, f == 1, 6'(j), 2'(f)) :
                     (i == 1) ? 16'((e == BAD_EV && j == 4) ? e + 100 : e) : 16'($urandom);
            inq[j].push_back(w);
            if (in_mask[j]) expq[k].push_back(w);
          end
        end
      expq[k].push_back('{sof: 1, eof: 0, data: {FT_SEB_TRL, e == BAD_EV, 3'd0, 8'd8}});
      expq[k].push_back('{sof: 0, eof: 1, data: 16'(e)});
    end
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3000) @(posedge clk);
    slow = 0;
    for (int w = 0; w < 50000; w++) begin
      @(posedge clk);
      if (expq[0].size() == 0 && expq[1].size() == 0 && expq[3].size() == 0) break;
    end
    repeat (50) @(posedge clk);
    for (int k = 0; k < NOUT; k++) begin
      checks++;
      if (expq[k].size() != 0) begin
        failures++;
        $display("out%0d: %0d words missing", k, expq[k].size());
      end
    end
    checks++;
    if (mismatches[0] + mismatches[1] + mismatches[2] + mismatches[3] != 16'd2) begin
      failures++;
      $display("mismatches %0d %0d %0d %0d", mismatches[0], mismatches[1], mismatches[2], mismatches[3]);
    end
    checks++;
    if (xoff_cycles == 0 || in_ovf[0] != 0 || in_ovf[4] != 0) begin
      failures++;
      $display("xoff cycles %0d, overflow %0d", xoff_cycles, in_ovf[0]);
    end
    checks++;
    if (events[0] + events[1] + events[3] != 16'(NEV) || events[2] != 0) failures++;
    $display("xoff_cycles=%0d events=%0d/%0d/%0d/%0d", xoff_cycles, events[0], events[1],
             events[2], events[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
