// dcl_accelerator_full_tb: end-to-end self-checking test of the DCL accelerator with every parameter at its
// default (T_N = 512, T_M = 64, T_W = 8, 3x3 kernel), running one full tile
// of N = 512 input and M = 64 output channels.
//
// The testbench plays the memory side. It fills the input buffer with a
// random input window (channels n < N, zero columns at the left edge as
// image padding) and the weight buffer with random offset weights w_o and
// deformable weights w_deform, starts a tile, copies the interpolated inputs
// from the output buffer back into the input buffer when the accelerator
// asks for the transfer, and reads the outputs at the end.
//
// An independent reference model computes, in the same fixed-point format,
// the offset convolution, the clamped sampling positions, the bilinear
// coefficients, the interpolated inputs and the deformable convolution.
// Checked: every offset, every interpolated input (as it is transferred) and
// every output word; that no input-buffer write happens during the input
// sampling stage (the window is reused for both of its parts); phase lengths
// against their bounds. Mechanisms that must occur at least once: the offset
// convolution, the sampling pass, the transfer handshake, the deformable
// convolution, offset clamping and fractional (true bilinear) sampling.
module dcl_accelerator_full_tb;
  import dcn_pkg::*;

  localparam int TN = 512, TM = 64, TW = dcn_pkg::T_W, KC = dcn_pkg::K_C;
  localparam int OM = dcn_pkg::O_MAX, S = dcn_pkg::STRIDE;
  localparam int K2L = KC * KC, RFL = KC + 2 * OM, WW = S * TW + RFL - S;
  localparam int IB_D = RFL * WW * TN, OB_D = TW * TN * 2 * K2L, WB_D = 2 * TN * K2L;
  localparam int IB_AW = $clog2(IB_D), OB_AW = $clog2(OB_D), WB_AW = $clog2(WB_D);
  localparam int SWL = $clog2(TM), NWL = $clog2(TN + 1), RWL = $clog2(TM + 1);
  localparam int OFFB = TW * K2L * TN, OUTB = OFFB + 2 * K2L * TW;
  localparam int NTILES = 1;
  localparam int WSCALE_O = 12;   // offset weights uniform in +-WSCALE_O
  localparam int WSCALE_D = 10;   // deformable weights uniform in +-WSCALE_D
  localparam int WATCHDOG = 2000000;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, xfer_req, xfer_done;
  logic [NWL-1:0] n_ch; logic [RWL-1:0] m_ch;
  phase_e phase;
  logic [31:0] clamp_cnt;
  logic in_wr_en; logic [IB_AW-1:0] in_wr_addr; data_t in_wr_data;
  logic w_wr_en; logic [SWL-1:0] w_wr_bank; logic [WB_AW-1:0] w_wr_addr; data_t w_wr_data;
  logic [OB_AW-1:0] ext_rd_addr; data_t ext_rd_data;

  dcl_accelerator dut (.*);

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL cyc=%0d: %s", cyc, what); end
  endtask

  // ---------------- data and reference model ----------------
  data_t in_win [TN][RFL][WW];
  data_t wo     [2 * K2L][TN][K2L];
  data_t wd     [TM][TN][K2L];
  data_t r_off  [2 * K2L][TW];
  data_t r_int  [TW][K2L][TN];
  data_t r_out  [TM][TW];
  int    n_frac = 0, n_clamp_ref = 0;

  function automatic data_t sat16(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > 32767) return 16'sd32767;
    if (s < -32768) return -16'sd32768;
    return data_t'(s);
  endfunction

  task automatic make_data(int N, int M);
    for (int n = 0; n < TN; n++)
      for (int r = 0; r < RFL; r++)
        for (int c = 0; c < WW; c++)
          in_win[n][r][c] = (n < N && c >= 2) ? data_t'(int'($urandom_range(0, 512)) - 256) : '0;
    for (int ch = 0; ch < 2 * K2L; ch++)
      for (int n = 0; n < TN; n++)
        for (int k = 0; k < K2L; k++)
          wo[ch][n][k] = data_t'(int'($urandom_range(0, 2 * WSCALE_O)) - WSCALE_O);
    for (int m = 0; m < TM; m++)
      for (int n = 0; n < TN; n++)
        for (int k = 0; k < K2L; k++)
          wd[m][n][k] = data_t'(int'($urandom_range(0, 2 * WSCALE_D)) - WSCALE_D);
  endtask

  task automatic reference(int N, int M);
    acc_t acc;
    n_clamp_ref = 0;
    // offsets: eq. (1), regular K_C x K_C convolution
    for (int ch = 0; ch < 2 * K2L; ch++)
      for (int y = 0; y < TW; y++) begin
        acc = 0;
        for (int n = 0; n < N; n++)
          for (int k = 0; k < K2L; k++)
            acc += acc_t'(wo[ch][n][k]) * acc_t'(in_win[n][OM + k / KC][y * S + OM + k % KC]);
        r_off[ch][y] = sat16(acc);
      end
    // sampling and bilinear interpolation
    for (int y = 0; y < TW; y++)
      for (int k = 0; k < K2L; k++) begin
        int dy, dx, py, px, y0, x0, y1, x1, fy, fx, c [4], ry [4], rx [4];
        dy = int'(r_off[2 * k][y]); dx = int'(r_off[2 * k + 1][y]);
        if (dy > OM * 256 || dy < -OM * 256 || dx > OM * 256 || dx < -OM * 256) n_clamp_ref++;
        dy = (dy > OM * 256) ? OM * 256 : (dy < -OM * 256) ? -OM * 256 : dy;
        dx = (dx > OM * 256) ? OM * 256 : (dx < -OM * 256) ? -OM * 256 : dx;
        py = (OM + k / KC) * 256 + dy;
        px = (y * S + OM + k % KC) * 256 + dx;
        y0 = py / 256; x0 = px / 256; fy = py % 256; fx = px % 256;
        if (fy != 0 || fx != 0) n_frac++;
        y1 = (y0 + 1 > RFL - 1) ? RFL - 1 : y0 + 1;
        x1 = (x0 + 1 > WW - 1) ? WW - 1 : x0 + 1;
        c[0] = ((256 - fy) * (256 - fx)) / 256; c[1] = ((256 - fy) * fx) / 256;
        c[2] = (fy * (256 - fx)) / 256;         c[3] = (fy * fx) / 256;
        ry = '{y0, y0, y1, y1}; rx = '{x0, x1, x0, x1};
        for (int n = 0; n < TN; n++) begin
          acc = 0;
          for (int j = 0; j < 4; j++) acc += acc_t'(c[j]) * acc_t'(in_win[n][ry[j]][rx[j]]);
          r_int[y][k][n] = sat16(acc);
        end
      end
    // deformable convolution: eq. (2)
    for (int m = 0; m < M; m++)
      for (int y = 0; y < TW; y++) begin
        acc = 0;
        for (int n = 0; n < N; n++)
          for (int k = 0; k < K2L; k++)
            acc += acc_t'(wd[m][n][k]) * acc_t'(r_int[y][k][n]);
        r_out[m][y] = sat16(acc);
      end
  endtask

  // ---------------- memory-side tasks ----------------
  task automatic load_buffers(int N, int M);
    for (int n = 0; n < N; n++)
      for (int r = 0; r < RFL; r++)
        for (int c = 0; c < WW; c++) begin
          in_wr_en = 1; in_wr_addr = IB_AW'((n * RFL + r) * WW + c); in_wr_data = in_win[n][r][c];
          @(negedge clk);
        end
    in_wr_en = 0;
    for (int ch = 0; ch < 2 * K2L; ch++)
      for (int n = 0; n < N; n++)
        for (int k = 0; k < K2L; k++) begin
          w_wr_en = 1; w_wr_bank = SWL'(ch); w_wr_addr = WB_AW'(n * K2L + k); w_wr_data = wo[ch][n][k];
          @(negedge clk);
        end
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++)
        for (int k = 0; k < K2L; k++) begin
          w_wr_en = 1; w_wr_bank = SWL'(m); w_wr_addr = WB_AW'(TN * K2L + n * K2L + k); w_wr_data = wd[m][n][k];
          @(negedge clk);
        end
    w_wr_en = 0;
  endtask

  // read one output-buffer word (1-cycle latency)
  task automatic ob_read(int a, output data_t d);
    ext_rd_addr = OB_AW'(a);
    @(negedge clk);
    d = ext_rd_data;
  endtask

  // mechanism counters
  int n_offconv = 0, n_sample = 0, n_xfer = 0, n_dconv = 0, n_clamp = 0, n_fracs = 0;
  int wr_in_sampling = 0;
  longint t_phase_start;
  phase_e last_phase = PH_IDLE;
  int len_off, len_smp, len_dconv;

  always @(posedge clk) if (rst_n) begin
    if ((phase == PH_OFFCONV || phase == PH_SAMPLE) && in_wr_en) wr_in_sampling++;
    if (phase != last_phase) begin
      case (last_phase)
        PH_OFFCONV: len_off   = int'(cyc - t_phase_start);
        PH_SAMPLE:  len_smp   = int'(cyc - t_phase_start);
        PH_DCONV:   len_dconv = int'(cyc - t_phase_start);
        default: ;
      endcase
      case (phase)
        PH_OFFCONV: n_offconv++;
        PH_SAMPLE:  n_sample++;
        PH_XFER:    n_xfer++;
        PH_DCONV:   n_dconv++;
        default: ;
      endcase
      t_phase_start = cyc;
      last_phase = phase;
    end
  end

  task automatic run_tile(int N, int M);
    data_t d;
    int G;
    G = N / TW;
    make_data(N, M);
    reference(N, M);
    n_fracs += n_frac;
    load_buffers(N, M);
    n_ch = NWL'(N); m_ch = RWL'(M);
    start = 1;
    @(negedge clk);
    start = 0;
    // transfer of the interpolated inputs: output buffer -> memory -> input buffer
    while (!xfer_req) @(negedge clk);
    for (int y = 0; y < TW; y++)
      for (int k = 0; k < K2L; k++)
        for (int n = 0; n < N; n++) begin
          int a;
          a = (y * K2L + k) * TN + n;
          ob_read(a, d);
          check(d == r_int[y][k][n], $sformatf("interpolated y=%0d k=%0d n=%0d: %0d vs %0d", y, k, n, d, r_int[y][k][n]));
          in_wr_en = 1; in_wr_addr = IB_AW'(a); in_wr_data = d;
          @(negedge clk);
          in_wr_en = 0;
        end
    xfer_done = 1;
    @(negedge clk);
    xfer_done = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
    // offsets and outputs
    for (int ch = 0; ch < 2 * K2L; ch++)
      for (int y = 0; y < TW; y++) begin
        ob_read(OFFB + ch * TW + y, d);
        check(d == r_off[ch][y], $sformatf("offset ch=%0d y=%0d: %0d vs %0d", ch, y, d, r_off[ch][y]));
      end
    for (int m = 0; m < M; m++)
      for (int y = 0; y < TW; y++) begin
        ob_read(OUTB + m * TW + y, d);
        check(d == r_out[m][y], $sformatf("output m=%0d y=%0d: %0d vs %0d", m, y, d, r_out[m][y]));
      end
    check(int'(clamp_cnt) == n_clamp_ref, $sformatf("clamp count %0d vs %0d", clamp_cnt, n_clamp_ref));
    n_clamp += int'(clamp_cnt);
    // phase lengths: offset conv streams N*K^2 steps, then drains (<= 2*TM+TW+8);
    // the sampling pass streams TW*K^2*4G beats without gaps for G >= 2
    // (5 cycles per point for G = 1, where the offset fetch cannot hide)
    check(len_off >= N * K2L && len_off <= N * K2L + 2 * TM + TW + 8, $sformatf("offset phase length %0d", len_off));
    check(len_smp >= TW * K2L * 4 * G && len_smp <= TW * K2L * ((G > 1) ? 4 * G : 5) + TW + 16,
          $sformatf("sampling phase length %0d", len_smp));
    check(len_dconv >= N * K2L && len_dconv <= N * K2L + 2 * TM + TW + 8, $sformatf("dconv phase length %0d", len_dconv));
    $display("tile N=%0d M=%0d: offconv %0d, sampling %0d, dconv %0d cycles, %0d clamped points",
             N, M, len_off, len_smp, len_dconv, clamp_cnt);
  endtask

  initial begin
    start = 0; xfer_done = 0; n_ch = 0; m_ch = 0;
    in_wr_en = 0; in_wr_addr = 0; in_wr_data = 0;
    w_wr_en = 0; w_wr_bank = 0; w_wr_addr = 0; w_wr_data = 0; ext_rd_addr = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    run_tile(512, 64);
    check(wr_in_sampling == 0, "no input-buffer traffic during the input sampling stage");
    check(n_offconv == NTILES, $sformatf("offset convolutions: %0d", n_offconv));
    check(n_sample == NTILES, $sformatf("sampling passes: %0d", n_sample));
    check(n_xfer == NTILES, $sformatf("transfers: %0d", n_xfer));
    check(n_dconv == NTILES, $sformatf("deformable convolutions: %0d", n_dconv));
    check(n_clamp > 0, $sformatf("offset clamping happened %0d times", n_clamp));
    check(n_fracs > 0, $sformatf("fractional sampling points: %0d", n_fracs));
    $display("mechanisms: offconv=%0d sample=%0d xfer=%0d dconv=%0d clamp=%0d frac=%0d",
             n_offconv, n_sample, n_xfer, n_dconv, n_clamp, n_fracs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
