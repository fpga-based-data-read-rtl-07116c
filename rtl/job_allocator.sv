// job_allocator: hands each trigger to one data-storage module.
// DHH and DHP run from the same clock, so the DHH keeps its own copy of the
// DHP read pointer: every CLK_PER_RO cycles one read-out cycle (FOLD rows,
// 4-fold read-out) completes; after ROWS rows the pointer wraps to row 0 and
// the DHP frame ID increments. On a trigger the allocator activates the next
// data-storage module in round-robin order (one-cycle start pulse) and gives
// it the trigger number, the first row the DHP processes for this trigger
// (the current pointer) and the expected DHP frame ID.
// Own choices: pointer starts at row 0 / frame 0 after reset; CLK_PER_RO=8
// (104.8 ns at 76.33 MHz against the nominal 100 ns); a busy target is
// skipped in round-robin order, and a trigger finding all modules busy is
// dropped and counted in dropped.
module job_allocator
  import dhh_pkg::*;
#(
  parameter int unsigned NDSM       = 4,
  parameter int unsigned ROWS       = 768,
  parameter int unsigned FOLD       = 4,
  parameter int unsigned CLK_PER_RO = 8
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            trig,
  input  logic [15:0]     trig_num,
  input  logic [NDSM-1:0] busy,
  output logic [NDSM-1:0] start,
  output job_t            job,
  output logic [9:0]      row_ptr,
  output logic [15:0]     frame_ptr,
  output logic [15:0]     dropped
);
  localparam int unsigned IW = (NDSM > 1) ? $clog2(NDSM) : 1;
  logic [$clog2(CLK_PER_RO)-1:0] cyc;
  logic [IW-1:0] rr;        // next module in round-robin order

  // DHP read pointer model
  always_ff @(posedge clk) begin
    if (rst) begin
      cyc <= '0;
      row_ptr <= '0;
      frame_ptr <= '0;
    end else begin
      cyc <= (cyc == $bits(cyc)'(CLK_PER_RO-1)) ? '0 : cyc + 1'b1;
      if (cyc == $bits(cyc)'(CLK_PER_RO-1)) begin
        if (row_ptr == 10'(ROWS-FOLD)) begin
          row_ptr <= '0;
          frame_ptr <= frame_ptr + 1'b1;
        end else begin
          row_ptr <= row_ptr + 10'(FOLD);
        end
      end
    end
  end

  // first free module at or after rr
  logic          found;
  logic [IW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int unsigned k = 0; k < NDSM; k++) begin
      automatic logic [IW-1:0] idx = IW'((int'(rr) + k) % NDSM);
      if (!found && !busy[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rr <= '0;
      start <= '0;
      job <= '0;
      dropped <= '0;
    end else begin
      start <= '0;
      if (trig) begin
        if (found) begin
          start[pick] <= 1'b1;
          job <= '{trig_num: trig_num, first_row: row_ptr, frame_id: frame_ptr};
          rr <= IW'((int'(pick) + 1) % NDSM);
        end else begin
          dropped <= dropped + 1'b1;
        end
      end
    end
  end
endmodule
