// tb_ddr3_fifo: four channels of random frames (1..70 words) go through the
// external-memory FIFO, with the behavioural memory behind it. Checks: each
// channel returns exactly its frames, word by word with sof/eof; the number
// of 256-bit vectors written equals sum(ceil(words/15)), i.e. one 16-bit
// service field per vector and a partly filled last vector per frame; the
// small ring buffers (16 vectors) run full at least once while the output
// side is slow; the overhead of a long frame approaches 6.25 %.
module tb_ddr3_fifo;
  import dhh_pkg::*;
  localparam int NCH = 4, AW = 27, RING = 16, NFR = 40;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cfg_load = 0;
  logic [AW-1:0] region_base [NCH], region_size [NCH];
  logic [NCH-1:0] in_valid, in_ready, out_valid, out_ready;
  word_t in_data [NCH], out_data [NCH];
  logic mem_req, mem_we, mem_ready, mem_rvalid;
  logic [AW-1:0] mem_addr;
  logic [255:0] mem_wdata, mem_rdata;
  logic [AW:0] level [NCH];
  logic [31:0] vec_written;

  ddr3_fifo #(.NCH(NCH), .ADDR_W(AW)) dut (.*);
  ddr3_mem_model #(.ADDR_W(AW), .DEPTH(256), .LATENCY(12), .STALL_EVERY(7)) u_mem (
    .clk, .rst, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata);

  int checks = 0, failures = 0;
  logic [17:0] sent [NCH][$];
  int exp_vecs = 0, ring_full = 0, frames_done [NCH];
  bit slow = 0;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    // sender
    initial begin
      in_valid[c] = 0;
      in_data[c] = '0;
      wait (!rst);
      repeat (20) @(posedge clk);
      for (int f = 0; f < NFR; f++) begin
        automatic int n = (f == NFR - 1 && c == 0) ? 300 : 1 + $urandom % 70;
        exp_vecs += (n + 14) / 15;
        for (int i = 0; i < n; i++) begin
          @(negedge clk);
          in_valid[c] = 1;
          in_data[c] = '{sof: i == 0, eof: i == n - 1, data: 16'($urandom)};
          sent[c].push_back(in_data[c]);
          @(posedge clk);
          while (!in_ready[c]) @(posedge clk);
        end
        @(negedge clk);
        in_valid[c] = 0;
        repeat ($urandom % 5) @(posedge clk);
      end
    end
    // receiver
    always @(posedge clk) begin
      out_ready[c] <= slow ? (($urandom % 8) == 0) : (($urandom % 4) != 0);
      if (!rst && out_valid[c] && out_ready[c]) begin
        checks++;
        if (sent[c].size() == 0 || out_data[c] != sent[c][0]) begin
          failures++;
          if (failures < 10) $display("ch%0d: got %h expected %h", c, out_data[c],
                                      sent[c].size() ? sent[c][0] : 18'h0);
        end
        if (sent[c].size()) void'(sent[c].pop_front());
        if (out_data[c].eof) frames_done[c]++;
      end
      if (level[c] == (AW+1)'(RING)) ring_full++;
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin
      region_base[c] = AW'(c * 64);
      region_size[c] = AW'(RING);
      frames_done[c] = 0;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk) cfg_load = 1;
    @(negedge clk) cfg_load = 0;
    slow = 1;
    repeat (3000) @(posedge clk);
    slow = 0;
    for (int w = 0; w < 100000; w++) begin
      @(posedge clk);
      if (frames_done[0] == NFR && frames_done[1] == NFR && frames_done[2] == NFR &&
          frames_done[3] == NFR) break;
    end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (frames_done[c] != NFR || sent[c].size() != 0) begin
        failures++;
        $display("ch%0d: %0d frames, %0d words left", c, frames_done[c], sent[c].size());
      end
    end
    checks++;
    if (vec_written != 32'(exp_vecs)) begin
      failures++;
      $display("vectors written %0d, expected %0d", vec_written, exp_vecs);
    end
    checks++;
    if (ring_full == 0) begin
      failures++;
      $display("ring buffers never ran full");
    end
    $display("vectors=%0d ring_full_cycles=%0d", vec_written, ring_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
