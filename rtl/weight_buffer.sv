// weight_buffer: on-chip store for the weights of one DCL tile.
//
// The method does not draw a weight store; some store is needed to feed the
// weight operands of the computation engine, so this one is this design's
// choice. It has one bank per engine row (NB = ROWS banks), so every row
// receives its own weight in the same cycle. Each bank holds two regions of
// T_N*K_C^2 words: region 0 the offset-generating weights w_o of the output
// channel this row computes, region 1 the deformable weights w_deform. Word
// address inside a region: (n*K_C + ky)*K_C + kx.
//
// Ports: one write port (bank select plus address) from the memory side; one
// common read address for all banks with a registered (1-cycle) read.
module weight_buffer
  import dcn_pkg::*;
#(
  parameter int unsigned NB    = dcn_pkg::ROWS,
  parameter int unsigned DEPTH = dcn_pkg::W_BANK_WORDS,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned SW   = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [NB]
);

  data_t mem [NB][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr] <= wr_data;
    for (int b = 0; b < NB; b++) rd_data[b] <= mem[b][rd_addr];
  end

endmodule
