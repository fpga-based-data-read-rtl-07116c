// eth_data_mux: merges slow-control Ethernet replies into the DHH's data
// stream towards the controller. Data frames have the higher priority: at
// each frame boundary a waiting data frame is taken first and an Ethernet
// frame only when no data frame is waiting; a frame, once started, is sent
// to its end. Ethernet frames get a frame type word (FT_ETH) in front so
// that the controller can separate them again. One word per clock.
module eth_data_mux
  import dhh_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [5:0] dhh_id,
  input  logic       data_valid,
  output logic       data_ready,
  input  word_t      data_in,
  input  logic       eth_valid,
  output logic       eth_ready,
  input  word_t      eth_in,
  output logic       out_valid,
  input  logic       out_ready,
  output word_t      out_data
);
  typedef enum logic [1:0] {M_IDLE, M_DATA, M_ETH} mstate_e;
  mstate_e st;

  always_comb begin
    data_ready = 1'b0;
    eth_ready = 1'b0;
    out_valid = 1'b0;
    out_data = '0;
    unique case (st)
      M_IDLE: begin
        if (data_valid) begin
          out_valid = 1'b1;
          out_data = data_in;
          data_ready = out_ready;
        end else if (eth_valid) begin
          out_valid = 1'b1;
          out_data = '{sof: 1'b1, eof: 1'b0, data: dhh_frame_word(FT_ETH, 1'b0, dhh_id, 2'd0)};
        end
      end
      M_DATA: begin
        out_valid = data_valid;
        out_data = data_in;
        data_ready = out_ready;
      end
      M_ETH: begin
        out_valid = eth_valid;
        out_data = '{sof: 1'b0, eof: eth_in.eof, data: eth_in.data};
        eth_ready = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) st <= M_IDLE;
    else if (out_valid && out_ready) begin
      unique case (st)
        M_IDLE: st <= data_valid ? (data_in.eof ? M_IDLE : M_DATA) : M_ETH;
        M_DATA: if (data_in.eof) st <= M_IDLE;
        M_ETH:  if (eth_in.eof) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
