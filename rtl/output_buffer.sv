// output_buffer: on-chip buffer for the offsets, the interpolated inputs and
// the output tensor of one DCL tile.
//
// Capacity follows the method's formula (7), T_W x T_N x 2 x K_C^2 words.
// The storage is split into NB banks; logical word a lives in bank a % NB at
// bank word a / NB. The engine delivers at most one result per column per
// cycle, and the address maps used (see dcl_accelerator) place column y's
// results in bank y, so NB = COLS write ports never collide.
//
// Ports: NB write ports (bank-local addresses), one read port for the
// sampling controller, which fetches offsets, and one read port for the
// memory side. Both reads take a logical address and return the word one
// cycle later. The split into regions (interpolated inputs, offsets, outputs)
// is this design's choice.
module output_buffer
  import dcn_pkg::*;
#(
  parameter int unsigned DEPTH = dcn_pkg::OUT_BUF_WORDS,
  parameter int unsigned NB    = dcn_pkg::COLS,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(DEPTH / NB),
  localparam int unsigned NBW  = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic          clk,
  input  logic          wr_en   [NB],
  input  logic [BW-1:0] wr_addr [NB],
  input  data_t         wr_data [NB],
  input  logic [AW-1:0] rd0_addr,
  output data_t         rd0_data,
  input  logic [AW-1:0] rd1_addr,
  output data_t         rd1_data
);

  localparam int unsigned BDEPTH = DEPTH / NB;

  data_t mem [NB][BDEPTH];

  always_ff @(posedge clk) begin
    for (int b = 0; b < NB; b++)
      if (wr_en[b]) mem[b][wr_addr[b]] <= wr_data[b];
    rd0_data <= mem[NBW'(rd0_addr % AW'(NB))][BW'(rd0_addr / AW'(NB))];
    rd1_data <= mem[NBW'(rd1_addr % AW'(NB))][BW'(rd1_addr / AW'(NB))];
  end

endmodule
