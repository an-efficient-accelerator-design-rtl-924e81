// sampling_controller: drives the bilinear-interpolation pass of the input
// sampling stage.
//
// For every sampling point s = y*K_C^2 + (ky*K_C + kx) of the tile (T_W
// output pixels times K_C^2 taps) it
//   1. reads the two offsets dy (channel 2k) and dx (channel 2k+1) of pixel y
//      from the offset region of the output buffer,
//   2. computes the sampling position (sampling_position) and the four
//      bilinear coefficients (sampling_coeff) and stages them,
//   3. streams the interpolation through the computation engine: for each
//      group g of COLS channels and each neighbour j = 0..3 it sends the
//      absolute input-buffer address of neighbour j of channel g*COLS+c to
//      engine column c, and coefficient c[j] to engine row 0 with the tags
//      first (j = 0) and last (j = 3). Rows other than 0 get no valid tag.
// Engine column c thus produces sum_j c[j]*pixel_j, the interpolated input of
// channel g*COLS+c at point s.
//
// Steps 1-2 (the fetch unit, 5 cycles per point) run for the next point while
// step 3 (the streamer) works on the current one, so with G >= 2 channel
// groups the stream has no bubbles. The split into fetch unit and streamer,
// the use of row 0 only and the step order are this design's choices; the
// method states what the controller computes, not how.
//
// Timing: 'start' is a one-cycle pulse. The first beat leaves 5 cycles later;
// for G = n_groups >= 2 the pass is T_W*K_C^2*4*G beats without gaps, and
// 'done' pulses T_W*K_C^2*4*G + 6 cycles after the start cycle. coef/tag_out
// are delayed one cycle against ib_addr, matching the registered read of the
// input buffer, so they meet the read data at the engine. clamp_cnt counts
// sampling points whose offset was clamped to +-O_MAX.
module sampling_controller
  import dcn_pkg::*;
#(
  parameter int unsigned T_N    = dcn_pkg::T_N,
  parameter int unsigned T_W    = dcn_pkg::T_W,
  parameter int unsigned COLS   = dcn_pkg::T_W,
  parameter int unsigned K_C    = dcn_pkg::K_C,
  parameter int unsigned O_MAX  = dcn_pkg::O_MAX,
  parameter int unsigned STRIDE = dcn_pkg::STRIDE,
  localparam int unsigned K2    = K_C * K_C,
  localparam int unsigned RF    = K_C + 2 * O_MAX,
  localparam int unsigned W_WIN = STRIDE * T_W + RF - STRIDE,
  localparam int unsigned IB_AW = $clog2(RF * W_WIN * T_N),
  localparam int unsigned OB_AW = $clog2(T_W * T_N * 2 * K2),
  localparam int unsigned OFF_BASE = T_W * K2 * T_N,
  localparam int unsigned GW    = $clog2(T_N / COLS + 1),
  localparam int unsigned KW    = (K_C > 1) ? $clog2(K_C) : 1,
  localparam int unsigned YW    = (T_W > 1) ? $clog2(T_W) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [GW-1:0]    n_groups,      // N / COLS, at least 1
  output logic             busy,
  output logic             done,
  // offset read port of the output buffer (1-cycle read)
  output logic [OB_AW-1:0] ob_addr,
  input  data_t            ob_data,
  // absolute addresses to the input buffer, one per engine column
  output logic [IB_AW-1:0] ib_addr [COLS],
  // coefficient and tags for engine row 0 (aligned with input-buffer data)
  output data_t            coef,
  output tag_t             tag_out,
  output logic [31:0]      clamp_cnt
);

  localparam int unsigned RW = $clog2(RF);
  localparam int unsigned CW = $clog2(W_WIN);

  typedef enum logic [2:0] {F_IDLE, F_RD_DY, F_RD_DX, F_LAT_DX, F_CALC, F_HOLD} fst_e;
  fst_e fst;

  // ---------------- fetch unit ----------------
  logic [KW-1:0] ky, kx;
  logic [YW-1:0] y;
  data_t         dy_q, dx_q;
  logic          take;          // streamer takes the staged point this cycle
  logic          last_pt;       // fetch counters are at the final point

  logic [RW-1:0]   y0c, y1c;
  logic [CW-1:0]   x0c, x1c;
  logic [FRAC-1:0] fyc, fxc;
  logic            clampc;
  data_t           cc [4];

  sampling_position #(.K_C(K_C), .O_MAX(O_MAX), .STRIDE(STRIDE), .T_W(T_W)) u_pos (
    .dy(dy_q), .dx(dx_q), .ky, .kx, .y,
    .y0(y0c), .y1(y1c), .x0(x0c), .x1(x1c), .fy(fyc), .fx(fxc), .clamped(clampc));

  sampling_coeff u_coef (.fy(fyc), .fx(fxc), .c(cc));

  // staged point
  logic [RW-1:0] y0n, y1n;
  logic [CW-1:0] x0n, x1n;
  data_t         cn [4];

  logic [$clog2(K2)-1:0] k;
  assign k = ($clog2(K2))'(ky * KW'(K_C) + kx);
  assign last_pt = (y == YW'(T_W - 1)) && (ky == KW'(K_C - 1)) && (kx == KW'(K_C - 1));

  always_comb begin
    unique case (fst)
      F_RD_DY: ob_addr = OB_AW'(OFF_BASE + (2 * k) * T_W + y);
      F_RD_DX: ob_addr = OB_AW'(OFF_BASE + (2 * k + 1) * T_W + y);
      default: ob_addr = '0;
    endcase
  end

  // ---------------- streamer ----------------
  logic          s_act, all_taken;
  logic [GW-1:0] g;
  logic [1:0]    j;
  logic [RW-1:0] y0q, y1q;
  logic [CW-1:0] x0q, x1q;
  data_t         cq [4];
  logic          s_end;         // this cycle is the final beat of the current point

  assign s_end = s_act && (j == 2'd3) && (g == n_groups - 1);
  assign take  = (fst == F_HOLD) && (!s_act || s_end);

  // neighbour j: 0 (y0,x0), 1 (y0,x1), 2 (y1,x0), 3 (y1,x1)
  logic [RW-1:0] ry;
  logic [CW-1:0] rx;
  assign ry = j[1] ? y1q : y0q;
  assign rx = j[0] ? x1q : x0q;

  for (genvar c = 0; c < COLS; c++) begin : g_addr
    assign ib_addr[c] = s_act
      ? IB_AW'(((int'(g) * COLS + c) * RF + int'(ry)) * W_WIN + int'(rx))
      : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE;
      ky <= '0; kx <= '0; y <= '0;
      dy_q <= '0; dx_q <= '0;
      y0n <= '0; y1n <= '0; x0n <= '0; x1n <= '0;
      for (int i = 0; i < 4; i++) cn[i] <= '0;
      clamp_cnt <= '0;
      s_act <= 1'b0; all_taken <= 1'b0; g <= '0; j <= '0;
      y0q <= '0; y1q <= '0; x0q <= '0; x1q <= '0;
      for (int i = 0; i < 4; i++) cq[i] <= '0;
      coef <= '0; tag_out <= '0;
      done <= 1'b0;
    end else begin
      // fetch unit
      unique case (fst)
        F_IDLE: if (start && !s_act) begin
          fst <= F_RD_DY; ky <= '0; kx <= '0; y <= '0;
          clamp_cnt <= '0; all_taken <= 1'b0;
        end
        F_RD_DY:  fst <= F_RD_DX;
        F_RD_DX:  begin fst <= F_LAT_DX; dy_q <= ob_data; end
        F_LAT_DX: begin fst <= F_CALC;   dx_q <= ob_data; end
        F_CALC: begin
          y0n <= y0c; y1n <= y1c; x0n <= x0c; x1n <= x1c;
          for (int i = 0; i < 4; i++) cn[i] <= cc[i];
          if (clampc) clamp_cnt <= clamp_cnt + 1;
          fst <= F_HOLD;
        end
        F_HOLD: if (take) begin
          if (last_pt) begin
            fst <= F_IDLE;
            all_taken <= 1'b1;
          end else begin
            fst <= F_RD_DY;
            if (kx == KW'(K_C - 1)) begin
              kx <= '0;
              if (ky == KW'(K_C - 1)) begin ky <= '0; y <= y + 1'b1; end
              else ky <= ky + 1'b1;
            end else kx <= kx + 1'b1;
          end
        end
        default: fst <= F_IDLE;
      endcase

      // streamer
      done    <= 1'b0;
      tag_out <= '0;
      coef    <= '0;
      if (s_act) begin
        coef          <= cq[j];
        tag_out.valid <= 1'b1;
        tag_out.first <= (j == 2'd0);
        tag_out.last  <= (j == 2'd3);
        j <= j + 2'd1;
        if (j == 2'd3) g <= g + 1'b1;
      end
      if (take) begin
        y0q <= y0n; y1q <= y1n; x0q <= x0n; x1q <= x1n;
        for (int i = 0; i < 4; i++) cq[i] <= cn[i];
        s_act <= 1'b1; g <= '0; j <= '0;
      end else if (s_end) begin
        s_act <= 1'b0;
        if (all_taken) done <= 1'b1;
      end
    end
  end

  assign busy = (fst != F_IDLE) || s_act;

endmodule
