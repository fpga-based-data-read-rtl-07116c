// tb_cluster_recovery: feeds events of hits into the cluster finder and
// checks (1) the hits come out unchanged and in order, with row headers,
// (2) two hits carry the same cluster number exactly when they are joined
// by a chain of touching pixels (8-neighbourhood), worked out here by a
// flood fill, and (3) pass 1 takes one word per clock. The events are a
// V shape and a U shape that force cluster merges, then random events at
// 3 % and 15 % occupancy; output back-pressure is random.
module tb_cluster_recovery;
  import dhh_pkg::*;
  localparam int COLS = 64, NR = 40;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready, ovf;
  word_t in_data, out_data;
  logic [3:0] max_lookups;

  cluster_recovery #(.COLS(COLS), .ID_W(10), .HIT_DEPTH(2048)) dut (.*);

  int checks = 0, failures = 0;
  int ev_r [$], ev_c [$];
  bit pix [NR][COLS];

  task automatic build_random(input int occ);
    ev_r.delete(); ev_c.delete();
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < COLS; c++) begin
        pix[r][c] = ($urandom % 1000) < occ;
        if (r % 9 == 5) pix[r][c] = 0;   // gaps between rows
        if (pix[r][c]) begin ev_r.push_back(r); ev_c.push_back(c); end
      end
  endtask

  task automatic build_list(input int rr[$], input int cc[$]);
    for (int r = 0; r < NR; r++) for (int c = 0; c < COLS; c++) pix[r][c] = 0;
    ev_r = rr; ev_c = cc;
    foreach (rr[i]) pix[rr[i]][cc[i]] = 1;
  endtask

  // reference labels by flood fill
  int lab [NR][COLS];
  task automatic ref_label();
    int n = 0;
    int qr [$], qc [$];
    for (int r = 0; r < NR; r++) for (int c = 0; c < COLS; c++) lab[r][c] = -1;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < COLS; c++)
        if (pix[r][c] && lab[r][c] < 0) begin
          lab[r][c] = n;
          qr.push_back(r); qc.push_back(c);
          while (qr.size() > 0) begin
            int pr = qr.pop_front(), pc = qc.pop_front();
            for (int dr = -1; dr <= 1; dr++)
              for (int dc = -1; dc <= 1; dc++) begin
                int nr2 = pr + dr, nc2 = pc + dc;
                if (nr2 >= 0 && nr2 < NR && nc2 >= 0 && nc2 < COLS && pix[nr2][nc2] &&
                    lab[nr2][nc2] < 0) begin
                  lab[nr2][nc2] = n;
                  qr.push_back(nr2); qc.push_back(nc2);
                end
              end
          end
          n++;
        end
  endtask

  // collected output
  logic [15:0] outw [$];
  always @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    if (!rst && out_valid && out_ready) outw.push_back(out_data.data);
  end

  task automatic run_event(input int id);
    logic [15:0] words [$];
    int exp_n, t0, got_r [$], got_c [$], got_id [$], row, k, cl;
    words.push_back(16'(id));
    row = -1;
    foreach (ev_r[i]) begin
      if (ev_r[i] != row) begin
        words.push_back(row_word(10'(ev_r[i])));
        row = ev_r[i];
      end
      words.push_back(hit_word(6'(ev_c[i]), 8'(ev_c[i] + ev_r[i])));
    end
    ref_label();
    outw.delete();
    // pass 1: one word per clock
    @(negedge clk);
    t0 = $time;
    foreach (words[i]) begin
      in_valid = 1;
      in_data = '{sof: i == 0, eof: i == words.size() - 1, data: words[i]};
      @(posedge clk);
      if (!in_ready) begin
        failures++;
        $display("input stalled at word %0d", i);
      end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (($time - t0) / 10 != words.size()) begin
      failures++;
      $display("pass 1 took %0d cycles for %0d words", ($time - t0) / 10, words.size());
    end
    // wait for the output
    exp_n = 1 + 2 * ev_r.size() + (words.size() - 1 - ev_r.size());
    for (int w = 0; w < 20000 && outw.size() < exp_n; w++) @(posedge clk);
    repeat (3) @(posedge clk);
    // decode output
    checks++;
    if (outw.size() == 0 || outw[0] != 16'(id)) begin
      failures++;
      $display("event %0d: bad header", id);
    end
    k = 1; row = -1; cl = -1;
    while (k < outw.size()) begin
      case (outw[k][15:14])
        W_ROW: row = outw[k][9:0];
        W_CLU: cl = outw[k][11:0];
        W_HIT: begin
          got_r.push_back(row); got_c.push_back(outw[k][13:8]); got_id.push_back(cl);
        end
        default: ;
      endcase
      k++;
    end
    checks++;
    if (got_r.size() != ev_r.size()) begin
      failures++;
      $display("event %0d: %0d hits out, %0d in", id, got_r.size(), ev_r.size());
    end else begin
      int bad = 0;
      foreach (ev_r[i]) begin
        if (got_r[i] != ev_r[i] || got_c[i] != ev_c[i]) bad++;
        for (int j = 0; j < i; j++)
          if ((got_id[i] == got_id[j]) != (lab[ev_r[i]][ev_c[i]] == lab[ev_r[j]][ev_c[j]])) bad++;
      end
      if (bad != 0) begin
        failures++;
        $display("event %0d: %0d wrong hit/cluster relations", id, bad);
      end
    end
  endtask

  initial begin
    in_data = '0;
    repeat (4) @(posedge clk);
    rst = 0;
    // V: two separate starts joined by a later hit -> merge
    build_list('{0, 0, 1}, '{3, 5, 4});
    run_event(1);
    // U with a long left arm, joined at the bottom
    build_list('{0, 0, 1, 1, 2, 2, 3, 3, 3, 3}, '{10, 14, 10, 14, 10, 14, 10, 11, 12, 13});
    run_event(2);
    // empty event
    build_list('{}, '{});
    run_event(3);
    for (int e = 0; e < 6; e++) begin
      build_random(e < 3 ? 30 : 150);
      run_event(10 + e);
    end
    checks++;
    if (ovf) begin failures++; $display("overflow"); end
    $display("max_lookups=%0d", max_lookups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
