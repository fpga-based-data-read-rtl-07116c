// ddr3_mem_model: behavioural stand-in for the DDR3 SODIMM together with its
// memory controller (a vendor core), seen through the simplified user
// interface used by ddr3_fifo: one 256-bit read or write command per cycle
// while mem_ready is high; read data come back in order LATENCY cycles later.
// Every STALL_EVERY-th cycle mem_ready is low (0: never), to stand in for
// refresh and bank conflicts. DEPTH vectors are stored; the 4 GB of the real
// module (2^27 vectors) is scaled down to keep simulation memory small. Not
// meant for synthesis as is: the real part is an external chip.
module ddr3_mem_model #(
  parameter int unsigned ADDR_W      = 27,
  parameter int unsigned VEC_W       = 256,
  parameter int unsigned DEPTH       = 262144,
  parameter int unsigned LATENCY     = 12,
  parameter int unsigned STALL_EVERY = 7
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              mem_req,
  input  logic              mem_we,
  input  logic [ADDR_W-1:0] mem_addr,
  input  logic [VEC_W-1:0]  mem_wdata,
  output logic              mem_ready,
  output logic              mem_rvalid,
  output logic [VEC_W-1:0]  mem_rdata
);
  localparam int unsigned DAW = $clog2(DEPTH);
  logic [VEC_W-1:0] mem [DEPTH];
  logic [LATENCY-1:0] vpipe;
  logic [VEC_W-1:0]   dpipe [LATENCY];
  logic [7:0]         cyc;

  assign mem_ready  = (STALL_EVERY == 0) || (cyc != 8'(STALL_EVERY - 1));
  assign mem_rvalid = vpipe[LATENCY-1];
  assign mem_rdata  = dpipe[LATENCY-1];

  always_ff @(posedge clk) begin
    if (mem_req && mem_ready && mem_we) mem[mem_addr[DAW-1:0]] <= mem_wdata;
    dpipe[0] <= mem[mem_addr[DAW-1:0]];
    for (int i = 1; i < LATENCY; i++) dpipe[i] <= dpipe[i-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      vpipe <= '0;
      cyc <= '0;
    end else begin
      vpipe <= {vpipe[LATENCY-2:0], mem_req && mem_ready && !mem_we};
      cyc <= (STALL_EVERY == 0 || cyc == 8'(STALL_EVERY - 1)) ? 8'd0 : cyc + 8'd1;
    end
  end
endmodule
