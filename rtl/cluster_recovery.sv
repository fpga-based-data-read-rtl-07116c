// cluster_recovery: groups the hits of one DHP (64 columns) into clusters of
// touching pixels (8-neighbourhood) and tags every hit with its cluster
// number. It relies on the hits arriving in ascending row order (guaranteed
// by the data re-ordering) and, within a row, ascending column order.
//
// Pass 1, one hit per clock. A row of COLS/2 two-column cells holds, for
// each column, the cluster number of the hit in the current row and in the
// row above (if any). A new hit at column c looks at its neighbours left
// (same row, c-1) and above (c-1, c, c+1). Without an active neighbour it
// takes the next free cluster number; otherwise it takes the neighbour's
// number. When two different numbers meet, the clusters are merged: the hit
// takes the smaller number, the remap table records "larger -> smaller", and
// every cell holding the larger number takes the smaller one, so the cells
// only ever hold numbers that are their own table entry. Hits with their
// preliminary numbers are kept in a hit buffer.
// Pass 2, after the event's last word: the hits are read back in order and
// each preliminary number is looked up in the table until a number maps to
// itself (the final number); that result is written back into the table so
// that later hits of the same cluster find it in one look-up.
// Output: the header word, then per hit a row header when the row changes,
// a cluster tag word and the hit word; eof on the last. max_lookups reports
// the longest look-up chain seen (the read-out paper states two suffice).
// Own choices: passes 1 and 2 of one event do not overlap with the next
// event; the look-up loop is not bounded to two steps; the cluster number
// width ID_W and the hit buffer depth are not given by the paper.
module cluster_recovery
  import dhh_pkg::*;
#(
  parameter int unsigned COLS      = 64,
  parameter int unsigned ID_W      = 12,
  parameter int unsigned HIT_DEPTH = 4096
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  output logic       in_ready,
  input  word_t      in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output word_t      out_data,
  output logic       ovf,
  output logic [3:0] max_lookups
);
  localparam int unsigned HAW = $clog2(HIT_DEPTH);
  localparam int unsigned NID = 2 ** ID_W;

  typedef struct packed {
    logic [9:0]      row;
    logic [5:0]      col;
    logic [7:0]      adc;
    logic [ID_W-1:0] pid;
  } hit_t;

  typedef enum logic [2:0] {S_IN, S_HDR, S_FIND, S_ROW, S_CLU, S_HIT} state_e;
  state_e state;

  // cell states: valid flag and cluster number per column, this row and above
  logic            cur_v [COLS];
  logic [ID_W-1:0] cur_id [COLS];
  logic            prv_v [COLS];
  logic [ID_W-1:0] prv_id [COLS];
  logic [9:0]      cur_row;
  logic            have_row;
  logic [ID_W-1:0] next_id;
  logic [ID_W-1:0] tbl [NID];
  hit_t            hbuf [HIT_DEPTH];
  logic [HAW:0]    hcnt, idx;
  logic [15:0]     hdr;
  logic [ID_W-1:0] x, root;
  logic [9:0]      orow;
  logic            orow_v;
  logic [3:0]      nlook;

  wire is_hit = in_data.data[15:14] == W_HIT;
  wire is_row = in_data.data[15:14] == W_ROW;
  wire [5:0] c = in_data.data[13:8];
  wire take = in_valid && in_ready;

  // neighbour look-up of pass 1
  logic            any, merge;
  logic [ID_W-1:0] lo, hi;
  always_comb begin
    logic            nv [4];
    logic [ID_W-1:0] ni [4];
    nv[0] = (c != 0) && cur_v[c-1];
    ni[0] = (c != 0) ? cur_id[c-1] : '0;
    nv[1] = (c != 0) && prv_v[c-1];
    ni[1] = (c != 0) ? prv_id[c-1] : '0;
    nv[2] = prv_v[c];
    ni[2] = prv_id[c];
    nv[3] = (int'(c) != COLS-1) && prv_v[(int'(c) == COLS-1) ? c : c+1];
    ni[3] = prv_id[(int'(c) == COLS-1) ? c : c+1];
    any = 1'b0;
    lo = '1;
    hi = '0;
    for (int k = 0; k < 4; k++) begin
      if (nv[k]) begin
        any = 1'b1;
        if (ni[k] < lo) lo = ni[k];
        if (ni[k] > hi) hi = ni[k];
      end
    end
    merge = any && (hi != lo);
  end
  wire [ID_W-1:0] hit_id = any ? lo : next_id;

  assign in_ready = state == S_IN;
  hit_t h;
  assign h = hbuf[idx[HAW-1:0]];
  wire last_hit = (idx + 1'b1) == hcnt;

  always_comb begin
    out_valid = 1'b0;
    out_data = '0;
    unique case (state)
      S_HDR: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b1, eof: hcnt == 0, data: hdr};
      end
      S_ROW: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b0, eof: 1'b0, data: row_word(h.row)};
      end
      S_CLU: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b0, eof: 1'b0, data: clu_word(12'(root))};
      end
      S_HIT: begin
        out_valid = 1'b1;
        out_data = '{sof: 1'b0, eof: last_hit, data: hit_word(h.col, h.adc)};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (take && is_hit && !in_data.sof) begin
      if (hcnt < (HAW+1)'(HIT_DEPTH))
        hbuf[hcnt[HAW-1:0]] <= '{row: cur_row, col: c, adc: in_data.data[7:0], pid: hit_id};
      if (!any) tbl[next_id] <= next_id;
      if (merge) tbl[hi] <= lo;
    end
    if (state == S_FIND && tbl[x] == x) tbl[h.pid] <= x;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IN;
      for (int j = 0; j < COLS; j++) begin
        cur_v[j] <= 1'b0;
        prv_v[j] <= 1'b0;
        cur_id[j] <= '0;
        prv_id[j] <= '0;
      end
      cur_row <= '0;
      have_row <= 1'b0;
      next_id <= '0;
      hcnt <= '0;
      idx <= '0;
      hdr <= '0;
      x <= '0;
      root <= '0;
      orow <= '0;
      orow_v <= 1'b0;
      nlook <= '0;
      ovf <= 1'b0;
      max_lookups <= '0;
    end else begin
      unique case (state)
        S_IN: if (take) begin
          if (in_data.sof) begin
            hdr <= in_data.data;
          end else if (is_row) begin
            for (int j = 0; j < COLS; j++) begin
              prv_v[j]  <= have_row && (in_data.data[9:0] == cur_row + 10'd1) && cur_v[j];
              prv_id[j] <= cur_id[j];
              cur_v[j]  <= 1'b0;
            end
            cur_row <= in_data.data[9:0];
            have_row <= 1'b1;
          end else if (is_hit) begin
            if (merge) begin
              for (int j = 0; j < COLS; j++) begin
                if (cur_id[j] == hi) cur_id[j] <= lo;
                if (prv_id[j] == hi) prv_id[j] <= lo;
              end
            end
            cur_v[c] <= 1'b1;
            cur_id[c] <= hit_id;
            if (!any) begin
              if (next_id == ID_W'(NID - 1)) ovf <= 1'b1;
              else next_id <= next_id + 1'b1;
            end
            if (hcnt < (HAW+1)'(HIT_DEPTH)) hcnt <= hcnt + 1'b1;
            else ovf <= 1'b1;
          end
          if (in_data.eof) state <= S_HDR;
        end
        S_HDR: if (out_ready) begin
          idx <= '0;
          orow_v <= 1'b0;
          nlook <= 4'd1;
          x <= hbuf[0].pid;
          state <= (hcnt == 0) ? S_IN : S_FIND;
          if (hcnt == 0) begin
            have_row <= 1'b0;
            next_id <= '0;
            for (int j = 0; j < COLS; j++) begin
              cur_v[j] <= 1'b0;
              prv_v[j] <= 1'b0;
            end
          end
        end
        S_FIND: begin
          if (tbl[x] == x) begin
            root <= x;
            if (nlook > max_lookups) max_lookups <= nlook;
            state <= (orow_v && orow == h.row) ? S_CLU : S_ROW;
          end else begin
            x <= tbl[x];
            if (nlook != 4'hf) nlook <= nlook + 1'b1;
          end
        end
        S_ROW: if (out_ready) begin
          orow <= h.row;
          orow_v <= 1'b1;
          state <= S_CLU;
        end
        S_CLU: if (out_ready) state <= S_HIT;
        S_HIT: if (out_ready) begin
          idx <= idx + 1'b1;
          nlook <= 4'd1;
          x <= hbuf[HAW'(idx + 1'b1)].pid;
          if (last_hit) begin
            state <= S_IN;
            hcnt <= '0;
            have_row <= 1'b0;
            next_id <= '0;
            for (int j = 0; j < COLS; j++) begin
              cur_v[j] <= 1'b0;
              prv_v[j] <= 1'b0;
            end
          end else begin
            state <= S_FIND;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end
endmodule
