// conv_feeder: address and tag generator for the two convolutions of a DCL
// tile, run on the computation engine.
//
// One reduction step per cycle, s = (n*K_C + ky)*K_C + kx for n < n_ch.
// Row x of the engine computes output channel x and column y output pixel y;
// each step reads one weight per row from the weight buffer (common address
// region*T_N*K_C^2 + s) and one input word per column from the input buffer:
//   mode 0, offset generation (eq. 1): the K_C x K_C neighbourhood of pixel y
//     in the input window, address (n*RF + O_MAX+ky)*W_WIN + y*STRIDE+O_MAX+kx;
//   mode 1, deformable convolution (eq. 2): the interpolated input of pixel y
//     at tap k = ky*K_C+kx, address (y*K_C^2 + k)*T_N + n.
// Rows below rows_used get tags valid, first (s = 0) and last (final s); the
// tags are delayed one cycle to meet the registered buffer reads.
//
// The loop order and address maps are this design's choice. Timing: after a
// 'start' pulse, n_ch*K_C^2 consecutive steps, then a 'done' pulse.
module conv_feeder
  import dcn_pkg::*;
#(
  parameter int unsigned T_N    = dcn_pkg::T_N,
  parameter int unsigned T_W    = dcn_pkg::T_W,
  parameter int unsigned ROWS   = dcn_pkg::ROWS,
  parameter int unsigned K_C    = dcn_pkg::K_C,
  parameter int unsigned O_MAX  = dcn_pkg::O_MAX,
  parameter int unsigned STRIDE = dcn_pkg::STRIDE,
  localparam int unsigned K2    = K_C * K_C,
  localparam int unsigned RF    = K_C + 2 * O_MAX,
  localparam int unsigned W_WIN = STRIDE * T_W + RF - STRIDE,
  localparam int unsigned IB_AW = $clog2(RF * W_WIN * T_N),
  localparam int unsigned WB_AW = $clog2(2 * T_N * K2),
  localparam int unsigned NW    = $clog2(T_N + 1),
  localparam int unsigned RWD   = $clog2(ROWS + 1),
  localparam int unsigned KW    = (K_C > 1) ? $clog2(K_C) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             mode,       // 0: offset conv, 1: deformable conv
  input  logic [NW-1:0]    n_ch,       // input channels, 1..T_N
  input  logic [RWD-1:0]   rows_used,  // output channels, 1..ROWS
  output logic             busy,
  output logic             done,
  output logic [IB_AW-1:0] ib_addr [T_W],
  output logic [WB_AW-1:0] wb_addr,
  output tag_t             tag_out [ROWS]
);

  logic          run, mode_q;
  logic [NW-1:0] n;
  logic [KW-1:0] ky, kx;
  logic [WB_AW-1:0] s;
  logic          first_d, last_d, valid_d;
  logic          last_step;

  assign last_step = (n == n_ch - 1) && (ky == KW'(K_C - 1)) && (kx == KW'(K_C - 1));
  assign wb_addr   = WB_AW'(int'(mode_q) * T_N * K2) + s;

  for (genvar y = 0; y < T_W; y++) begin : g_ib
    always_comb begin
      if (!mode_q)
        ib_addr[y] = IB_AW'((int'(n) * RF + O_MAX + int'(ky)) * W_WIN
                            + y * STRIDE + O_MAX + int'(kx));
      else
        ib_addr[y] = IB_AW'((y * K2 + int'(ky) * K_C + int'(kx)) * T_N + int'(n));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; mode_q <= 1'b0;
      n <= '0; ky <= '0; kx <= '0; s <= '0;
      valid_d <= 1'b0; first_d <= 1'b0; last_d <= 1'b0;
      done <= 1'b0;
    end else begin
      done    <= 1'b0;
      valid_d <= run;
      first_d <= run && (s == '0);
      last_d  <= run && last_step;
      if (!run) begin
        if (start) begin
          run <= 1'b1; mode_q <= mode;
          n <= '0; ky <= '0; kx <= '0; s <= '0;
        end
      end else begin
        s <= s + 1'b1;
        if (last_step) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else if (kx == KW'(K_C - 1)) begin
          kx <= '0;
          if (ky == KW'(K_C - 1)) begin ky <= '0; n <= n + 1'b1; end
          else ky <= ky + 1'b1;
        end else kx <= kx + 1'b1;
      end
    end
  end

  for (genvar x = 0; x < ROWS; x++) begin : g_tag
    always_comb begin
      tag_out[x].valid = valid_d && (RWD'(x) < rows_used);
      tag_out[x].first = tag_out[x].valid && first_d;
      tag_out[x].last  = tag_out[x].valid && last_d;
    end
  end

  assign busy = run;

endmodule
