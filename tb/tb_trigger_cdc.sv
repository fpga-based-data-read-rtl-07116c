// tb_trigger_cdc: source clock period 6, destination period 10 time units
// (the 5:3 ratio of 127.21 and 76.33 MHz), rising together every 30 units.
// Triggers with random spacing of at least one transfer period must each
// come out exactly once, in order, with their trigger number, within two
// periods plus one cycle of each clock (76 units). Two triggers inside one period must count one lost.
module tb_trigger_cdc;
  logic sclk = 1, dclk = 1, srst = 1, drst = 1;
  always #3 sclk = ~sclk;
  always #5 dclk = ~dclk;
  logic src_trig = 0, dst_trig;
  logic [15:0] src_trig_num = 0, dst_trig_num;
  logic [7:0] lost;

  trigger_cdc dut (.src_clk(sclk), .src_rst(srst), .src_trig, .src_trig_num,
                   .dst_clk(dclk), .dst_rst(drst), .dst_trig, .dst_trig_num, .lost);

  int checks = 0, failures = 0;
  int sent_num [$];
  realtime sent_t [$];
  always @(posedge dclk) if (dst_trig) begin
    checks++;
    if (sent_num.size() == 0) begin
      failures++;
      $display("spurious trigger %0d", dst_trig_num);
    end else begin
      int n;
      realtime t;
      n = sent_num.pop_front();
      t = sent_t.pop_front();
      if (n != int'(dst_trig_num) || $realtime - t > 76) begin
        failures++;
        $display("trigger %0d got %0d after %0t", n, dst_trig_num, $realtime - t);
      end
    end
  end

  task automatic send(input int n);
    @(negedge sclk);
    src_trig = 1;
    src_trig_num = 16'(n);
    sent_num.push_back(n);
    sent_t.push_back($realtime);
    @(negedge sclk);
    src_trig = 0;
  endtask

  initial begin
    #32;
    srst = 0;
    drst = 0;
    repeat (10) @(posedge sclk);
    for (int i = 0; i < 200; i++) begin
      send(1000 + i);
      repeat (4 + $urandom % 30) @(posedge sclk);
    end
    // two triggers inside one period: the second is lost
    @(negedge sclk);
    src_trig = 1;
    src_trig_num = 16'd7;
    sent_num.push_back(7);
    sent_t.push_back($realtime);
    @(negedge sclk);
    src_trig_num = 16'd8;
    @(negedge sclk);
    src_trig = 0;
    repeat (40) @(posedge sclk);
    checks++;
    if (sent_num.size() != 0 || lost != 8'd1) begin
      failures++;
      $display("%0d triggers not delivered, lost=%0d", sent_num.size(), lost);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
