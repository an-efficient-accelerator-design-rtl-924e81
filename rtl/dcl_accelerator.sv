// dcl_accelerator: accelerator for one tile of a deformable convolutional
// layer (DCL): T_W output pixels of one output row, up to T_M output channels,
// up to T_N input channels, K_C x K_C kernel.
//
// A DCL is two convolutions with a sampling step between them. The tile runs
// through four phases on one shared computation engine (a T_M x T_W systolic
// PE array):
//   PH_OFFCONV  input sampling stage, part 1: the engine convolves the input
//               window with the offset weights w_o; the 2*K_C^2 offsets of the
//               T_W pixels go to the output buffer.
//   PH_SAMPLE   input sampling stage, part 2: the sampling controller reads
//               the offsets back, computes sampling positions and bilinear
//               coefficients, and sends absolute addresses to the input
//               buffer and coefficients to the engine, which interpolates.
//               The interpolated inputs go to the output buffer. The same
//               input window serves both parts, so no DRAM access is needed.
//   PH_XFER     the interpolated inputs leave through the memory side and come
//               back into the input buffer: xfer_req is raised, and the
//               memory side copies output-buffer words 0 .. T_W*K_C^2*T_N-1
//               (read port ext_rd_*) to the same input-buffer addresses
//               (write port in_wr_*) and pulses xfer_done.
//   PH_DCONV    dynamic convolution stage: the engine convolves the
//               interpolated inputs with w_deform; the m_ch x T_W outputs go
//               to the output buffer from logical word OB_OUT_BASE =
//               T_W*K_C^2*T_N + 2*K_C^2*T_W (word OB_OUT_BASE + m*T_W + y).
// 'done' pulses at the end.
//
// Before 'start' the memory side fills the input buffer with the input window
// (channel n, window row r, column c at (n*RF + r)*W_WIN + c, zeros where the
// window leaves the image) and the weight buffer (bank = PE row = output
// channel; word (n*K_C+ky)*K_C+kx of region 0 for w_o, region 1 for
// w_deform; offset channel 2k is dy and 2k+1 is dx of tap k = ky*K_C+kx).
//
// The phase sequence follows the method's description; running the phases
// one after another, the explicit transfer handshake, the port set (the
// memory and its interconnect are outside) and fixed-point arithmetic are
// this design's choices. clamp_cnt counts sampling points whose offset was
// outside +-O_MAX and was clamped.
module dcl_accelerator
  import dcn_pkg::*;
#(
  parameter int unsigned T_N    = dcn_pkg::T_N,
  parameter int unsigned T_M    = dcn_pkg::T_M,
  parameter int unsigned T_W    = dcn_pkg::T_W,
  parameter int unsigned K_C    = dcn_pkg::K_C,
  parameter int unsigned O_MAX  = dcn_pkg::O_MAX,
  parameter int unsigned STRIDE = dcn_pkg::STRIDE,
  localparam int unsigned ROWS  = T_M,
  localparam int unsigned COLS  = T_W,
  localparam int unsigned K2    = K_C * K_C,
  localparam int unsigned RF    = K_C + 2 * O_MAX,
  localparam int unsigned W_WIN = STRIDE * T_W + RF - STRIDE,
  localparam int unsigned IB_DEPTH = RF * W_WIN * T_N,
  localparam int unsigned OB_DEPTH = T_W * T_N * 2 * K2,
  localparam int unsigned WB_DEPTH = 2 * T_N * K2,
  localparam int unsigned IB_AW = $clog2(IB_DEPTH),
  localparam int unsigned OB_AW = $clog2(OB_DEPTH),
  localparam int unsigned WB_AW = $clog2(WB_DEPTH),
  localparam int unsigned SW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned NW    = $clog2(T_N + 1),
  localparam int unsigned RWD   = $clog2(ROWS + 1),
  localparam int unsigned GW    = $clog2(T_N / COLS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // control
  input  logic             start,
  input  logic [NW-1:0]    n_ch,        // input channels, multiple of T_W, <= T_N
  input  logic [RWD-1:0]   m_ch,        // output channels, 1..T_M
  output logic             busy,
  output logic             done,
  output phase_e           phase,
  output logic             xfer_req,
  input  logic             xfer_done,
  output logic [31:0]      clamp_cnt,
  // memory side: input buffer fill
  input  logic             in_wr_en,
  input  logic [IB_AW-1:0] in_wr_addr,
  input  data_t            in_wr_data,
  // memory side: weight buffer fill
  input  logic             w_wr_en,
  input  logic [SW-1:0]    w_wr_bank,
  input  logic [WB_AW-1:0] w_wr_addr,
  input  data_t            w_wr_data,
  // memory side: output buffer read (1-cycle latency)
  input  logic [OB_AW-1:0] ext_rd_addr,
  output data_t            ext_rd_data
);

  localparam int unsigned OB_BW = $clog2(OB_DEPTH / COLS);

  // size rules of this organisation
  initial begin
    assert (ROWS >= 2 * K2) else $fatal(1, "T_M must hold the 2*K_C^2 offset channels");
    assert (T_W * K2 * T_N <= IB_DEPTH) else $fatal(1, "input buffer too small for interpolated inputs");
    assert (T_N % COLS == 0) else $fatal(1, "T_N must be a multiple of T_W");
  end

  // ---------------- buffers ----------------
  logic [IB_AW-1:0] ib_rd_addr [COLS];
  data_t            ib_rd_data [COLS];

  input_buffer #(.DEPTH(IB_DEPTH), .NRD(COLS)) u_ibuf (
    .clk, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_addr(ib_rd_addr), .rd_data(ib_rd_data));

  logic [WB_AW-1:0] wb_rd_addr;
  data_t            wb_rd_data [ROWS];

  weight_buffer #(.NB(ROWS), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .wr_en(w_wr_en), .wr_bank(w_wr_bank), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_addr(wb_rd_addr), .rd_data(wb_rd_data));

  logic             ob_wr_en   [COLS];
  logic [OB_BW-1:0] ob_wr_addr [COLS];
  data_t            ob_wr_data [COLS];
  logic [OB_AW-1:0] sc_ob_addr;
  data_t            sc_ob_data;

  output_buffer #(.DEPTH(OB_DEPTH), .NB(COLS)) u_obuf (
    .clk, .wr_en(ob_wr_en), .wr_addr(ob_wr_addr), .wr_data(ob_wr_data),
    .rd0_addr(sc_ob_addr), .rd0_data(sc_ob_data),
    .rd1_addr(ext_rd_addr), .rd1_data(ext_rd_data));

  // ---------------- feeders ----------------
  logic             cf_start, cf_mode, cf_busy;
  logic [RWD-1:0]   cf_rows;
  logic [IB_AW-1:0] cf_ib_addr [COLS];
  tag_t             cf_tag [ROWS];

  conv_feeder #(.T_N(T_N), .T_W(T_W), .ROWS(ROWS), .K_C(K_C), .O_MAX(O_MAX), .STRIDE(STRIDE)) u_cf (
    .clk, .rst_n, .start(cf_start), .mode(cf_mode), .n_ch, .rows_used(cf_rows),
    .busy(cf_busy), .done(), .ib_addr(cf_ib_addr), .wb_addr(wb_rd_addr), .tag_out(cf_tag));

  logic             sc_start, sc_busy;
  logic [GW-1:0]    n_groups;
  logic [IB_AW-1:0] sc_ib_addr [COLS];
  data_t            sc_coef;
  tag_t             sc_tag;

  assign n_groups = GW'(n_ch / NW'(COLS));

  sampling_controller #(.T_N(T_N), .T_W(T_W), .COLS(COLS), .K_C(K_C), .O_MAX(O_MAX), .STRIDE(STRIDE)) u_sc (
    .clk, .rst_n, .start(sc_start), .n_groups, .busy(sc_busy), .done(),
    .ob_addr(sc_ob_addr), .ob_data(sc_ob_data), .ib_addr(sc_ib_addr),
    .coef(sc_coef), .tag_out(sc_tag), .clamp_cnt);

  // ---------------- engine ----------------
  data_t   eng_w   [ROWS];
  tag_t    eng_tag [ROWS];
  result_t eng_res [COLS];

  always_comb begin
    for (int c = 0; c < COLS; c++)
      ib_rd_addr[c] = (phase == PH_SAMPLE) ? sc_ib_addr[c] : cf_ib_addr[c];
    for (int x = 0; x < ROWS; x++) begin
      if (phase == PH_SAMPLE) begin
        eng_w[x]   = (x == 0) ? sc_coef : '0;
        eng_tag[x] = (x == 0) ? sc_tag  : '0;
      end else begin
        eng_w[x]   = wb_rd_data[x];
        eng_tag[x] = cf_tag[x];
      end
    end
  end

  computation_engine #(.ROWS(ROWS), .COLS(COLS)) u_eng (
    .clk, .rst_n, .fm_in(ib_rd_data), .w_in(eng_w), .tag_in(eng_tag), .res_out(eng_res));

  logic        col_clear;
  logic [31:0] n_written;

  result_collector #(.T_N(T_N), .T_W(T_W), .K_C(K_C)) u_col (
    .clk, .rst_n, .phase, .clear(col_clear), .n_groups, .res(eng_res),
    .wr_en(ob_wr_en), .wr_addr(ob_wr_addr), .wr_data(ob_wr_data), .n_written);

  // ---------------- phase sequencer ----------------
  logic [31:0] expect_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      cf_start <= 1'b0; cf_mode <= 1'b0; cf_rows <= '0;
      sc_start <= 1'b0; col_clear <= 1'b0;
      expect_n <= '0;
      done <= 1'b0;
    end else begin
      cf_start  <= 1'b0;
      sc_start  <= 1'b0;
      col_clear <= 1'b0;
      done      <= 1'b0;
      unique case (phase)
        PH_IDLE: if (start) begin
          phase     <= PH_OFFCONV;
          cf_start  <= 1'b1; cf_mode <= 1'b0; cf_rows <= RWD'(2 * K2);
          col_clear <= 1'b1;
          expect_n  <= 32'(2 * K2 * T_W);
        end
        PH_OFFCONV: if (!col_clear && !cf_start && n_written == expect_n) begin
          phase     <= PH_SAMPLE;
          sc_start  <= 1'b1;
          col_clear <= 1'b1;
          expect_n  <= 32'(T_W * K2) * 32'(n_ch);
        end
        PH_SAMPLE: if (!col_clear && !sc_start && !sc_busy && n_written == expect_n)
          phase <= PH_XFER;
        PH_XFER: if (xfer_done) begin
          phase     <= PH_DCONV;
          cf_start  <= 1'b1; cf_mode <= 1'b1; cf_rows <= m_ch;
          col_clear <= 1'b1;
          expect_n  <= 32'(m_ch) * 32'(T_W);
        end
        PH_DCONV: if (!col_clear && !cf_start && n_written == expect_n) begin
          phase <= PH_IDLE;
          done  <= 1'b1;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  assign busy     = (phase != PH_IDLE);
  assign xfer_req = (phase == PH_XFER);

  // the two feeders never run together, and no phase starts while a feeder runs
  a_one_feeder: assert property (@(posedge clk) disable iff (!rst_n) !(cf_busy && sc_busy))
    else $error("conv feeder and sampling controller both active");
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("start while busy");

endmodule
