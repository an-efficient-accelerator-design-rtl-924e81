// input_buffer: on-chip buffer for one input window of the DCL.
//
// Its capacity is the method's formula (6), RF x (S*T_W + RF - S) x T_N words:
// RF rows of the input feature map, wide enough for T_W output pixels plus
// the receptive-field margin, for all T_N channels of a tile. Because the
// offsets of the regularised network never exceed O_MAX, every pixel the
// deformable sampling needs lies inside this window and no irregular DRAM
// access is required.
//
// Word address of pixel (channel n, window row r, window column c) during the
// input sampling stage: (n*RF + r)*W_WIN + c. For the dynamic convolution
// stage the same storage is refilled with the interpolated inputs, laid out as
// in the output buffer's interpolation region.
//
// Interface: one write port (from the memory side) and NRD independent read
// ports, one per engine column, each with a registered (1-cycle) read. The
// number of read ports is this design's choice; on an FPGA it is built by
// banking or replicating block RAM.
module input_buffer
  import dcn_pkg::*;
#(
  parameter int unsigned DEPTH = dcn_pkg::IN_BUF_WORDS,
  parameter int unsigned NRD   = dcn_pkg::COLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  input  logic [AW-1:0] rd_addr [NRD],
  output data_t         rd_data [NRD]
);

  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int p = 0; p < NRD; p++) rd_data[p] <= mem[rd_addr[p]];
  end

  always_ff @(posedge clk) begin
    assert (!wr_en || wr_addr < AW'(DEPTH)) else $error("input_buffer: write address out of range");
  end

endmodule
