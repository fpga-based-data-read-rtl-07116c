// dhp_model: behavioural model of the DHP chips of one half ladder as seen
// through their links. Each DHP keeps a rolling read pointer (FOLD rows
// every CLK_PER_RO clocks, ROWS rows per frame). A trigger marks the frame
// being read and the next one as requested; each requested frame is sent
// once, after it has been completely read: header word with the frame ID,
// then row headers and hits of the rows that have hits, one word per clock.
// Pixel content comes from tb_pkg::hit_at, for link index LINK0 + l, so
// that several half ladders can carry different data.
module dhp_model
  import dhh_pkg::*;
#(
  parameter int NLINK = 4,
  parameter int ROWS = 768,
  parameter int FOLD = 4,
  parameter int CLK_PER_RO = 8,
  parameter int COLS = 64,
  parameter int OCC = 10,
  parameter int LINK0 = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             trig,
  output logic [NLINK-1:0] valid,
  output word_t            data [NLINK],
  output int               frames_sent
);
  localparam int FRAME_CYC = CLK_PER_RO * ROWS / FOLD;
  int cyc;
  bit need [int];
  int next_send;

  always_ff @(posedge clk) begin
    if (rst) cyc <= 0;
    else begin
      cyc <= cyc + 1;
      if (trig) begin
        need[cyc / FRAME_CYC] = 1;
        if ((cyc / CLK_PER_RO) % (ROWS / FOLD) != 0) need[cyc / FRAME_CYC + 1] = 1;
      end
    end
  end

  initial begin
    valid = '0;
    for (int l = 0; l < NLINK; l++) data[l] = '0;
    next_send = 0;
    frames_sent = 0;
    forever begin
      @(posedge clk);
      if (!rst && next_send < cyc / FRAME_CYC) begin
        if (need.exists(next_send)) begin
          logic [15:0] q [NLINK][$];
          int n;
          n = 0;
          for (int l = 0; l < NLINK; l++) begin
            q[l].delete();
            q[l].push_back(16'(next_send));
            tb_pkg::rows_words(q[l], next_send, LINK0 + l, 0, ROWS, COLS, OCC);
            if (q[l].size() > n) n = q[l].size();
          end
          for (int i = 0; i < n; i++) begin
            for (int l = 0; l < NLINK; l++) begin
              valid[l] <= i < q[l].size();
              if (i < q[l].size())
                data[l] <= '{sof: i == 0, eof: i == q[l].size() - 1, data: q[l][i]};
            end
            @(posedge clk);
          end
          valid <= '0;
          frames_sent++;
        end
        next_send++;
      end
    end
  end
endmodule
