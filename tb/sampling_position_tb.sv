// sampling_position_tb: self-checking test of the sampling-position step.
// For random offsets (inside and outside +-O_MAX) and all pixels and taps,
// the expected point is computed here in real arithmetic: clamp each offset
// to +-O_MAX, add it to the regular grid position (O_MAX+ky, y*STRIDE+O_MAX+kx),
// take floor and fraction, and limit the lower/right neighbour to the window.
module sampling_position_tb;
  import dcn_pkg::*;

  localparam int KC = K_C, OM = O_MAX, S = STRIDE, TW = T_W;
  localparam int RFL = KC + 2 * OM, WW = S * TW + RFL - S;
  localparam int KW = $clog2(KC), YW = $clog2(TW), RW = $clog2(RFL), CW = $clog2(WW);

  data_t dy, dx;
  logic [KW-1:0] ky, kx;
  logic [YW-1:0] y;
  logic [RW-1:0] y0, y1;
  logic [CW-1:0] x0, x1;
  logic [FRAC-1:0] fy, fx;
  logic clamped;
  int checks = 0, failures = 0, n_clamped = 0;

  sampling_position #(.K_C(KC), .O_MAX(OM), .STRIDE(S), .T_W(TW)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic real clampr(real v, real lim);
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  initial begin
    real ry, rx, py, px;
    int ey0, ex0, efy, efx, ey1, ex1;
    bit ecl;
    for (int i = 0; i < 20000; i++) begin
      // mostly in range, sometimes far out, sometimes exactly on the limit
      case ($urandom_range(0, 5))
        0: begin dy = data_t'($urandom); dx = data_t'($urandom); end
        1: begin dy = data_t'(OM * 256); dx = -data_t'(OM * 256); end
        default: begin
          dy = data_t'(int'($urandom_range(0, 2 * OM * 256)) - OM * 256);
          dx = data_t'(int'($urandom_range(0, 2 * OM * 256)) - OM * 256);
        end
      endcase
      ky = KW'($urandom_range(0, KC - 1)); kx = KW'($urandom_range(0, KC - 1));
      y = YW'($urandom_range(0, TW - 1));
      #1;
      ry = real'(dy) / 256.0; rx = real'(dx) / 256.0;
      ecl = (ry > OM) || (ry < -OM) || (rx > OM) || (rx < -OM);
      py = OM + ky + clampr(ry, OM);
      px = y * S + OM + kx + clampr(rx, OM);
      ey0 = $floor(py); ex0 = $floor(px);
      efy = int'((py - ey0) * 256.0); efx = int'((px - ex0) * 256.0);
      ey1 = (ey0 + 1 > RFL - 1) ? RFL - 1 : ey0 + 1;
      ex1 = (ex0 + 1 > WW - 1) ? WW - 1 : ex0 + 1;
      check(int'(y0) == ey0 && int'(x0) == ex0, $sformatf("integer position dy=%0d dx=%0d", dy, dx));
      check(int'(fy) == efy && int'(fx) == efx, "fraction");
      check(int'(y1) == ey1 && int'(x1) == ex1, "far neighbour");
      check(clamped == ecl, "clamp flag");
      if (ecl) n_clamped++;
    end
    check(n_clamped > 100, "clamping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
