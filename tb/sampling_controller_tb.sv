// sampling_controller_tb: self-checking test of the sampling controller with
// a reduced channel count (T_N = 32, four channel groups).
// A model of the output buffer's offset region answers the controller's
// offset reads one cycle later. Offsets are random, some outside +-O_MAX.
// For every sampling point the expected neighbour coordinates and bilinear
// coefficients are worked out here in real arithmetic, and the stream
// towards the engine is checked word by word: the absolute input-buffer
// address of every column, the coefficient on row 0 one cycle later, and the
// first/last tags. Also checked: the pass length (T_W*K_C^2*4*G beats without
// gaps, 'done' 6 cycles after the last point's start overhead) and the count
// of clamped points.
module sampling_controller_tb;
  import dcn_pkg::*;

  localparam int TN = 32, TW = T_W, CO = T_W, KC = K_C, OM = O_MAX, S = STRIDE;
  localparam int K2L = KC * KC, RFL = KC + 2 * OM, WW = S * TW + RFL - S;
  localparam int G = TN / CO;
  localparam int IB_AW = $clog2(RFL * WW * TN), OB_AW = $clog2(TW * TN * 2 * K2L);
  localparam int OFFB = TW * K2L * TN;
  localparam int GW = $clog2(TN / CO + 1);
  localparam int NPT = TW * K2L;

  logic clk = 0, rst_n = 0;
  logic start; logic [GW-1:0] n_groups;
  logic busy, done;
  logic [OB_AW-1:0] ob_addr; data_t ob_data;
  logic [IB_AW-1:0] ib_addr [CO];
  data_t coef; tag_t tag_out;
  logic [31:0] clamp_cnt;
  int checks = 0, failures = 0, cyc = 0;

  sampling_controller #(.T_N(TN), .T_W(TW), .COLS(CO), .K_C(KC), .O_MAX(OM), .STRIDE(S)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (NPT * (4 + 4 * G) + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL cyc=%0d: %s", cyc, what); end
  endtask

  // offset memory model (offset channel ch, pixel y at OFFB + ch*TW + y)
  data_t offs [2 * K2L][TW];
  always @(posedge clk) begin
    int a;
    a = int'(ob_addr) - OFFB;
    ob_data <= (a >= 0 && a < 2 * K2L * TW) ? offs[a / TW][a % TW] : data_t'(16'hdead);
  end

  // expected stream
  typedef struct { int addr [CO]; int c; bit first; bit last; } beat_t;
  beat_t expq [$];
  int exp_clamped = 0;

  function automatic real clampr(real v, real lim);
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  initial begin
    for (int ch = 0; ch < 2 * K2L; ch++)
      for (int y = 0; y < TW; y++)
        offs[ch][y] = ($urandom_range(0, 9) == 0) ? data_t'($urandom)
                     : data_t'(int'($urandom_range(0, 2 * OM * 256)) - OM * 256);
    // expected beats
    for (int y = 0; y < TW; y++)
      for (int k = 0; k < K2L; k++) begin
        real ry, rx, py, px, fy, fx;
        int y0, x0, y1, x1, cy [4], cx [4];
        real w [4];
        ry = real'(offs[2 * k][y]) / 256.0; rx = real'(offs[2 * k + 1][y]) / 256.0;
        if (ry > OM || ry < -OM || rx > OM || rx < -OM) exp_clamped++;
        py = OM + k / KC + clampr(ry, OM);
        px = y * S + OM + k % KC + clampr(rx, OM);
        y0 = $floor(py); x0 = $floor(px);
        fy = py - y0; fx = px - x0;
        y1 = (y0 + 1 > RFL - 1) ? RFL - 1 : y0 + 1;
        x1 = (x0 + 1 > WW - 1) ? WW - 1 : x0 + 1;
        cy = '{y0, y0, y1, y1}; cx = '{x0, x1, x0, x1};
        w = '{(1.0 - fy) * (1.0 - fx), (1.0 - fy) * fx, fy * (1.0 - fx), fy * fx};
        for (int g = 0; g < G; g++)
          for (int j = 0; j < 4; j++) begin
            beat_t b;
            for (int c = 0; c < CO; c++) b.addr[c] = ((g * CO + c) * RFL + cy[j]) * WW + cx[j];
            b.c = $floor(w[j] * 256.0);
            b.first = (j == 0); b.last = (j == 3);
            expq.push_back(b);
          end
      end
  end

  int addr_d [CO];
  int t_start, t_done, nbeats = 0;

  always @(negedge clk) if (rst_n) begin
    if (tag_out.valid) begin
      beat_t b;
      nbeats++;
      if (expq.size() == 0) check(0, "extra beat");
      else begin
        bit ok = 1;
        b = expq.pop_front();
        for (int c = 0; c < CO; c++) if (addr_d[c] != b.addr[c]) ok = 0;
        check(ok, $sformatf("addresses of beat %0d", nbeats));
        check(int'(coef) == b.c, $sformatf("coefficient of beat %0d: %0d vs %0d", nbeats, coef, b.c));
        check(tag_out.first == b.first && tag_out.last == b.last, "tags");
      end
    end
    for (int c = 0; c < CO; c++) addr_d[c] = int'(ib_addr[c]);
  end

  initial begin
    start = 0; n_groups = GW'(G);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk) start = 1; t_start = cyc;
    @(negedge clk) start = 0;
    check(busy, "busy after start");
    while (!done) @(negedge clk);
    t_done = cyc;
    check(t_done - t_start == NPT * 4 * G + 6,
          $sformatf("pass length %0d, expected %0d", t_done - t_start, NPT * 4 * G + 6));
    @(negedge clk);
    check(!busy, "idle after done");
    check(expq.size() == 0 && nbeats == NPT * G * 4, "all beats seen");
    check(int'(clamp_cnt) == exp_clamped && exp_clamped > 0, $sformatf("clamp count %0d vs %0d", clamp_cnt, exp_clamped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
