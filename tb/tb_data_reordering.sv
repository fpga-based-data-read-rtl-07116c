// tb_data_reordering: drives one DHP link model and triggers into the
// per-link event extraction (job allocator, data-storage modules, data
// reader) and checks every event word against the event worked out from
// the pixel content function: header with the trigger number, rows
// 0..R-1 of DHP frame F+1, then rows R..end of frame F, where R and F are
// derived from the trigger time by the testbench's own pointer count.
// Phase 1 spaces triggers so that their data overlap in the DHP stream;
// phase 2 sends a burst that must exhaust the data-storage modules, so
// that triggers are dropped. Output back-pressure is random.
module tb_data_reordering;
  import dhh_pkg::*;
  localparam int ROWS = 64, FOLD = 4, CPR = 8, OCC = 15, NDSM = 4;
  localparam int FRAME_CYC = CPR * ROWS / FOLD;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic trig = 0;
  logic [15:0] trig_num = 0;
  logic [0:0] dv;
  word_t dd [1];
  int frames_sent;
  logic out_valid, out_ready;
  word_t out_data;
  logic [15:0] dropped;
  logic ovf;

  dhp_model #(.NLINK(1), .ROWS(ROWS), .FOLD(FOLD), .CLK_PER_RO(CPR), .OCC(OCC)) u_dhp (
    .clk, .rst, .trig, .valid(dv), .data(dd), .frames_sent);

  data_reordering #(.NDSM(NDSM), .FIFO_DEPTH(512), .ROWS(ROWS), .FOLD(FOLD), .CLK_PER_RO(CPR)) dut (
    .clk, .rst, .trig, .trig_num, .din_valid(dv[0]), .din(dd[0]),
    .out_valid, .out_ready, .out_data, .dropped, .free(), .ovf);

  int checks = 0, failures = 0;
  int cyc = 0;
  always_ff @(posedge clk) if (rst) cyc <= 0; else cyc <= cyc + 1;

  int t_row [int];
  int t_frame [int];
  int n_trig = 0, n_events = 0, n_overlap = 0, last_trig_cyc = -100000;

  task automatic fire();
    @(negedge clk);
    trig = 1;
    trig_num = 16'(n_trig + 100);
    t_row[n_trig + 100] = ((cyc / CPR) % (ROWS / FOLD)) * FOLD;
    t_frame[n_trig + 100] = cyc / FRAME_CYC;
    if (cyc - last_trig_cyc < 2 * FRAME_CYC) n_overlap++;
    last_trig_cyc = cyc;
    n_trig++;
    @(negedge clk);
    trig = 0;
  endtask

  // output checker
  logic [15:0] got [$];
  int last_evt = -1;
  always @(posedge clk) begin
    out_ready <= ($urandom % 10) < 8;
    if (!rst && out_valid && out_ready) begin
      if (out_data.sof != (got.size() == 0)) begin
        failures++;
        $display("sof flag wrong at word %0d", got.size());
      end
      got.push_back(out_data.data);
      if (out_data.eof) begin
        logic [15:0] exp [$];
        int t;
        t = int'(got[0]);
        checks++;
        if (!t_row.exists(t) || t <= last_evt) begin
          failures++;
          $display("unexpected event %0d", t);
        end else begin
          tb_pkg::event_words(exp, t, t_row[t], t_frame[t], 0, ROWS, 64, OCC);
          if (exp != got) begin
            failures++;
            $display("event %0d: %0d words, expected %0d (R=%0d F=%0d)", t, got.size(),
                     exp.size(), t_row[t], t_frame[t]);
          end
        end
        last_evt = t;
        n_events++;
        got.delete();
      end
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (50) @(posedge clk);
    for (int i = 0; i < 16; i++) begin
      fire();
      repeat (80 + $urandom % 220) @(posedge clk);
    end
    repeat (3000) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      fire();
      repeat (20) @(posedge clk);
    end
    repeat (6000) @(posedge clk);
    checks++;
    if (n_events + int'(dropped) != n_trig) begin
      failures++;
      $display("events %0d + dropped %0d != triggers %0d", n_events, dropped, n_trig);
    end
    checks++;
    if (dropped == 0) begin
      failures++;
      $display("burst did not exhaust the data-storage modules");
    end
    checks++;
    if (n_overlap == 0) begin
      failures++;
      $display("no overlapping triggers");
    end
    checks++;
    if (ovf) begin
      failures++;
      $display("storage FIFO overflow");
    end
    $display("events=%0d dropped=%0d overlapping=%0d frames=%0d", n_events, dropped, n_overlap,
             frames_sent);
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
