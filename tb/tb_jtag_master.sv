// tb_jtag_master: a device model made of a 40-bit shift register (TDO is its
// lowest bit, TDI shifts in on rising TCK) records the TMS and TDI bits it
// sees. For random commands the testbench checks the recorded bits against
// the command, the returned TDO bits against the register contents the
// model had, and the TCK period (2 * TCK_DIV clocks).
module tb_jtag_master;
  localparam int DIV = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, rsp_valid, tck, tms, tdi, tdo;
  logic [5:0] cmd_len = 0;
  logic [31:0] cmd_tms = 0, cmd_tdi = 0, rsp_tdo;
  jtag_master #(.TCK_DIV(DIV)) dut (.*);

  logic [39:0] dev;
  bit seen_tms [$], seen_tdi [$];
  int last_rise = -1, periods_bad = 0, ncyc = 0;
  assign tdo = dev[0];
  always @(posedge clk) ncyc++;
  always @(posedge tck) begin
    seen_tms.push_back(tms);
    seen_tdi.push_back(tdi);
    dev <= {tdi, dev[39:1]};
    if (last_rise >= 0 && ncyc - last_rise != 2 * DIV && seen_tms.size() > 1) periods_bad++;
    last_rise = ncyc;
  end

  int checks = 0, failures = 0;
  initial begin
    dev = 40'h12_3456_789A;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 30; k++) begin
      automatic int n = 1 + $urandom % 32;
      automatic logic [31:0] ms = $urandom, di = $urandom;
      automatic logic [39:0] prior = dev;
      seen_tms.delete();
      seen_tdi.delete();
      @(negedge clk);
      cmd_valid = 1;
      cmd_len = 6'(n);
      cmd_tms = ms;
      cmd_tdi = di;
      @(negedge clk);
      cmd_valid = 0;
      wait (rsp_valid);
      @(negedge clk);
      checks++;
      if (seen_tms.size() != n) begin
        failures++;
        $display("cmd %0d: %0d TCK pulses for %0d bits", k, seen_tms.size(), n);
      end else begin
        for (int i = 0; i < n; i++)
          if (seen_tms[i] != ms[i] || seen_tdi[i] != di[i] || rsp_tdo[i] != prior[i]) begin
            failures++;
            $display("cmd %0d bit %0d wrong", k, i);
            break;
          end
      end
      last_rise = -1;
    end
    checks++;
    if (periods_bad != 0) begin
      failures++;
      $display("%0d TCK periods wrong", periods_bad);
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
