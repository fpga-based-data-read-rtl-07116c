// ddr3_fifo: NCH first-in first-out channels kept in one external memory.
// Each channel accepts frames of 16-bit words on a LocalLink-like stream
// (valid/ready, sof/eof). A packer puts up to 15 words of one frame into a
// 256-bit memory vector whose lowest 16 bits are service information
//   [3:0] number of words (1..15), [4] first word is sof, [5] last word is eof
// so that the storage overhead tends to 16/256 = 6.25 % for long frames and
// is larger for short ones, where the last vector of a frame is not full.
// Packed vectors wait in an intermediate FIFO per channel. A memory arbiter
// visits the channels in turn; the address space is divided into one ring
// buffer per channel (base and size from slow-control registers, in
// vectors; cfg_load re-reads them and empties all rings). On its visit the
// arbiter writes up to BURST waiting vectors into the ring, then reads up to
// BURST stored vectors back into the channel's output FIFO, waits for the
// read data, and moves on. An unpacker turns output vectors back into words.
// Memory side: simplified MIG-style user interface (one command per cycle
// when mem_ready, read data returned in order on mem_rvalid).
// The vector layout, the burst length and the visiting order are this
// design's choice; the paper gives the ring-buffer scheme and the 16-bit
// service field in a 256-bit vector.
module ddr3_fifo
  import dhh_pkg::*;
#(
  parameter int unsigned NCH      = 4,
  parameter int unsigned ADDR_W   = 27,
  parameter int unsigned VEC_W    = 256,
  parameter int unsigned SVC_W    = 16,
  parameter int unsigned BURST    = 8,
  parameter int unsigned IN_VECS  = 16,
  parameter int unsigned OUT_VECS = 16
) (
  input  logic               clk,
  input  logic               rst,
  // slow-control registers
  input  logic               cfg_load,
  input  logic [ADDR_W-1:0]  region_base [NCH],
  input  logic [ADDR_W-1:0]  region_size [NCH],
  // write side
  input  logic [NCH-1:0]     in_valid,
  output logic [NCH-1:0]     in_ready,
  input  word_t              in_data [NCH],
  // read side
  output logic [NCH-1:0]     out_valid,
  input  logic [NCH-1:0]     out_ready,
  output word_t              out_data [NCH],
  // memory controller user interface
  output logic               mem_req,
  output logic               mem_we,
  output logic [ADDR_W-1:0]  mem_addr,
  output logic [VEC_W-1:0]   mem_wdata,
  input  logic               mem_ready,
  input  logic               mem_rvalid,
  input  logic [VEC_W-1:0]   mem_rdata,
  // status
  output logic [ADDR_W:0]    level [NCH],
  output logic [31:0]        vec_written
);
  localparam int unsigned WPV = (VEC_W - SVC_W) / 16;   // words per vector: 15
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned OAW = $clog2(OUT_VECS);

  // ---------------- packers and intermediate input FIFOs ----------------
  logic [VEC_W-1:0] pk_buf  [NCH];
  logic [3:0]       pk_n    [NCH];
  logic             pk_sof  [NCH];
  logic [NCH-1:0]   if_wr, if_full, if_rd, if_vld;
  logic [VEC_W-1:0] if_wdata [NCH];
  logic [VEC_W-1:0] if_q     [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_in
    logic [$clog2(IN_VECS):0] cnt_unused;
    logic ovf_unused;
    assign in_ready[c] = !if_full[c];
    wire take = in_valid[c] && in_ready[c];
    wire flush = take && (in_data[c].eof || pk_n[c] == 4'(WPV-1));
    always_comb begin
      if_wdata[c] = pk_buf[c];
      if_wdata[c][SVC_W + 16*pk_n[c] +: 16] = in_data[c].data;
      if_wdata[c][3:0] = pk_n[c] + 4'd1;
      if_wdata[c][4]   = (pk_n[c] == 0) ? in_data[c].sof : pk_sof[c];
      if_wdata[c][5]   = in_data[c].eof;
      if_wdata[c][SVC_W-1:6] = '0;
    end
    assign if_wr[c] = flush;
    always_ff @(posedge clk) begin
      if (rst) begin
        pk_n[c] <= '0;
        pk_sof[c] <= 1'b0;
        pk_buf[c] <= '0;
      end else if (take) begin
        if (flush) begin
          pk_n[c] <= '0;
          pk_buf[c] <= '0;
        end else begin
          pk_buf[c][SVC_W + 16*pk_n[c] +: 16] <= in_data[c].data;
          if (pk_n[c] == 0) pk_sof[c] <= in_data[c].sof;
          pk_n[c] <= pk_n[c] + 4'd1;
        end
      end
    end
    sync_fifo #(.W(VEC_W), .DEPTH(IN_VECS)) u_if (
      .clk, .rst, .wr_en(if_wr[c]), .wr_data(if_wdata[c]), .full(if_full[c]),
      .rd_en(if_rd[c]), .rd_data(if_q[c]), .rd_valid(if_vld[c]), .count(cnt_unused),
      .overflow(ovf_unused));
  end

  // ---------------- ring buffers and arbiter ----------------
  typedef enum logic [1:0] {A_WR, A_RD, A_WAIT} arb_e;
  arb_e              ast;
  logic [CW-1:0]     cur;
  logic [$clog2(BURST):0] bcnt;
  logic [ADDR_W-1:0] base [NCH];
  logic [ADDR_W-1:0] size [NCH];
  logic [ADDR_W-1:0] wp   [NCH];
  logic [ADDR_W-1:0] rp   [NCH];
  logic [OAW:0]      pending;
  logic [NCH-1:0]    of_wr, of_rd, of_vld, of_full;
  logic [OAW:0]      of_cnt [NCH];
  logic [VEC_W-1:0]  of_q   [NCH];

  wire can_wr = if_vld[cur] && (level[cur] < {1'b0, size[cur]}) && bcnt < BURST;
  wire can_rd = (level[cur] != 0) && bcnt < BURST &&
                ({1'b0, of_cnt[cur]} + {1'b0, pending}) < (OAW+2)'(OUT_VECS);

  always_comb begin
    mem_req = 1'b0;
    mem_we = 1'b0;
    mem_addr = '0;
    mem_wdata = if_q[cur];
    if_rd = '0;
    if (ast == A_WR && can_wr) begin
      mem_req = 1'b1;
      mem_we = 1'b1;
      mem_addr = base[cur] + wp[cur];
      if_rd[cur] = mem_ready;
    end else if (ast == A_RD && can_rd) begin
      mem_req = 1'b1;
      mem_addr = base[cur] + rp[cur];
    end
  end

  always_ff @(posedge clk) begin
    if (rst || cfg_load) begin
      ast <= A_WR;
      cur <= '0;
      bcnt <= '0;
      pending <= '0;
      for (int c = 0; c < NCH; c++) begin
        base[c] <= region_base[c];
        size[c] <= region_size[c];
        wp[c] <= '0;
        rp[c] <= '0;
        level[c] <= '0;
      end
      if (rst) vec_written <= '0;
    end else begin
      if (mem_rvalid) pending <= pending - 1'b1 + ((mem_req && !mem_we && mem_ready) ? 1'b1 : 1'b0);
      else if (mem_req && !mem_we && mem_ready) pending <= pending + 1'b1;
      unique case (ast)
        A_WR: if (can_wr) begin
          if (mem_ready) begin
            wp[cur] <= (wp[cur] == size[cur] - 1'b1) ? '0 : wp[cur] + 1'b1;
            level[cur] <= level[cur] + 1'b1;
            bcnt <= bcnt + 1'b1;
            vec_written <= vec_written + 1'b1;
          end
        end else begin
          ast <= A_RD;
          bcnt <= '0;
        end
        A_RD: if (can_rd) begin
          if (mem_ready) begin
            rp[cur] <= (rp[cur] == size[cur] - 1'b1) ? '0 : rp[cur] + 1'b1;
            level[cur] <= level[cur] - 1'b1;
            bcnt <= bcnt + 1'b1;
          end
        end else begin
          ast <= A_WAIT;
        end
        A_WAIT: if (pending == 0 || (pending == 1 && mem_rvalid)) begin
          ast <= A_WR;
          bcnt <= '0;
          cur <= CW'((int'(cur) + 1) % NCH);
        end
        default: ast <= A_WR;
      endcase
    end
  end

  // read data always belongs to the channel being visited: the arbiter
  // waits for all of it before it moves on
  always_comb begin
    of_wr = '0;
    of_wr[cur] = mem_rvalid;
  end

  // ---------------- output FIFOs and unpackers ----------------
  for (genvar c = 0; c < NCH; c++) begin : g_out
    logic [3:0] k;
    logic ovf_unused, full_unused;
    sync_fifo #(.W(VEC_W), .DEPTH(OUT_VECS)) u_of (
      .clk, .rst(rst || cfg_load), .wr_en(of_wr[c]), .wr_data(mem_rdata), .full(full_unused),
      .rd_en(of_rd[c]), .rd_data(of_q[c]), .rd_valid(of_vld[c]), .count(of_cnt[c]),
      .overflow(ovf_unused));
    assign of_full[c] = full_unused;
    wire [3:0] n = of_q[c][3:0];
    assign out_valid[c] = of_vld[c];
    assign out_data[c] = '{sof: of_q[c][4] && k == 0,
                           eof: of_q[c][5] && k == n - 4'd1,
                           data: of_q[c][SVC_W + 16*k +: 16]};
    assign of_rd[c] = of_vld[c] && out_ready[c] && (k == n - 4'd1);
    always_ff @(posedge clk) begin
      if (rst || cfg_load) k <= '0;
      else if (of_vld[c] && out_ready[c]) k <= (k == n - 4'd1) ? '0 : k + 4'd1;
    end
  end
endmodule
