// jtag_master: hardware JTAG master of the DHH. It executes shift commands
// that the slow-control software has built from its knowledge of the ASICs'
// JTAG registers: a command gives a bit count (1..32) and the TMS and TDI
// bit vectors, least significant bit first. The master clocks the bits out
// on TCK (one TCK period = 2*TCK_DIV system clocks; TMS/TDI change while TCK
// is low, TDO is sampled on the rising TCK edge) and returns the captured
// TDO bits. The same module serves as the switcher JTAG player. The command
// format and TCK divider are this design's choices; the paper gives only
// "a state machine that executes external commands" with registers on IPBus.
module jtag_master #(
  parameter int unsigned TCK_DIV = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [5:0]  cmd_len,
  input  logic [31:0] cmd_tms,
  input  logic [31:0] cmd_tdi,
  output logic        rsp_valid,
  output logic [31:0] rsp_tdo,
  output logic        tck,
  output logic        tms,
  output logic        tdi,
  input  logic        tdo
);
  typedef enum logic [1:0] {J_IDLE, J_LOW, J_HIGH} jstate_e;
  jstate_e st;
  logic [$clog2(TCK_DIV)-1:0] div;
  logic [5:0]  n, len;
  logic [31:0] sh_tms, sh_tdi;

  assign cmd_ready = st == J_IDLE;
  wire half_done = div == $bits(div)'(TCK_DIV - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= J_IDLE;
      div <= '0;
      n <= '0;
      len <= '0;
      sh_tms <= '0;
      sh_tdi <= '0;
      tck <= 1'b0;
      tms <= 1'b1;
      tdi <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_tdo <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (st)
        J_IDLE: if (cmd_valid && cmd_len != 0) begin
          len <= (cmd_len > 6'd32) ? 6'd32 : cmd_len;
          n <= '0;
          sh_tms <= cmd_tms;
          sh_tdi <= cmd_tdi;
          tms <= cmd_tms[0];
          tdi <= cmd_tdi[0];
          rsp_tdo <= '0;
          div <= '0;
          st <= J_LOW;
        end
        J_LOW: begin
          div <= half_done ? '0 : div + 1'b1;
          if (half_done) begin
            tck <= 1'b1;
            rsp_tdo[n[4:0]] <= tdo;
            st <= J_HIGH;
          end
        end
        J_HIGH: begin
          div <= half_done ? '0 : div + 1'b1;
          if (half_done) begin
            tck <= 1'b0;
            if (n + 1'b1 == len) begin
              rsp_valid <= 1'b1;
              st <= J_IDLE;
            end else begin
              n <= n + 1'b1;
              tms <= sh_tms[n[4:0] + 5'd1];
              tdi <= sh_tdi[n[4:0] + 5'd1];
              st <= J_LOW;
            end
          end
        end
        default: st <= J_IDLE;
      endcase
    end
  end
endmodule
