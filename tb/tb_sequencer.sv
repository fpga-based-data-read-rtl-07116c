// tb_sequencer: writes a sequence into the memory, runs it and checks that
// the output repeats entries 0..last_addr in order (one clock behind the
// pointer), that the pointer restarts after last_addr, that a frame
// synchronisation pulse restarts it early.
module tb_sequencer;
  localparam int DEPTH = 64, W = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_en = 0, run = 0, frame_sync = 0, frame_start;
  logic [5:0] wr_addr = 0, last_addr = 0, rd_ptr;
  logic [W-1:0] wr_data = 0, sw_out;
  sequencer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  int checks = 0, failures = 0, restarts = 0, syncs = 0;
  logic [W-1:0] ref_mem [DEPTH];
  int ref_ptr = 0;
  bit running = 0;

  // reference pointer: output after an edge is the entry the pointer held
  // before it; the pointer then restarts on frame_sync or after last_addr
  always @(posedge clk) begin
    if (running) begin
      automatic logic [W-1:0] e = ref_mem[ref_ptr];
      automatic bit fs = frame_sync;
      if (fs) syncs++;
      if (!fs && ref_ptr == int'(last_addr)) restarts++;
      ref_ptr = (fs || ref_ptr == int'(last_addr)) ? 0 : ref_ptr + 1;
      #1;
      checks++;
      if (sw_out != e) begin
        failures++;
        if (failures < 5) $display("got %h exp %h", sw_out, e);
      end
    end
  end

  task automatic write_seq(input int n, input int salt);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1;
      wr_addr = 6'(i);
      wr_data = W'(i * 7 + salt);
      ref_mem[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    write_seq(20, 1);
    last_addr = 6'd19;
    @(negedge clk);
    run = 1;
    running = 1;
    repeat (150) @(posedge clk);
    @(negedge clk) frame_sync = 1;
    @(negedge clk) frame_sync = 0;
    repeat (111) @(posedge clk);
    @(negedge clk) frame_sync = 1;
    @(negedge clk) frame_sync = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (restarts < 5 || syncs != 2) failures++;
    $display("restarts=%0d syncs=%0d", restarts, syncs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
