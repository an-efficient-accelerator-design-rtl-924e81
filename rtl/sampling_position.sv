// sampling_position: "calculate sampling position" step of the sampling
// controller.
//
// For output pixel y of the tile and kernel tap (ky,kx) the regular sampling
// point lies at window row O_MAX+ky and window column y*STRIDE+O_MAX+kx of the
// input buffer window. The learned offset (dy,dx), a fixed-point value with
// FRAC fraction bits, is added to it. Each offset component is first clamped
// to [-O_MAX, +O_MAX] so that the point can never leave the window held by
// the input buffer; with the regularised network this clamp should not act,
// and the clamp flag reports when it does (the clamp itself is this design's
// choice; the method relies on training to keep offsets within O_MAX).
//
// Outputs: the integer coordinates of the top-left neighbour (y0,x0), of the
// bottom-right neighbour (y1,x1) = (y0+1,x0+1) limited to the window edge,
// and the fractional parts fy, fx. Purely combinational.
module sampling_position
  import dcn_pkg::*;
#(
  parameter int unsigned K_C    = dcn_pkg::K_C,
  parameter int unsigned O_MAX  = dcn_pkg::O_MAX,
  parameter int unsigned STRIDE = dcn_pkg::STRIDE,
  parameter int unsigned T_W    = dcn_pkg::T_W,
  localparam int unsigned RF    = K_C + 2 * O_MAX,
  localparam int unsigned W_WIN = STRIDE * T_W + RF - STRIDE,
  localparam int unsigned RW    = $clog2(RF),
  localparam int unsigned CW    = $clog2(W_WIN),
  localparam int unsigned KW    = (K_C > 1) ? $clog2(K_C) : 1,
  localparam int unsigned YW    = (T_W > 1) ? $clog2(T_W) : 1
) (
  input  data_t           dy,
  input  data_t           dx,
  input  logic [KW-1:0]   ky,
  input  logic [KW-1:0]   kx,
  input  logic [YW-1:0]   y,
  output logic [RW-1:0]   y0,
  output logic [RW-1:0]   y1,
  output logic [CW-1:0]   x0,
  output logic [CW-1:0]   x1,
  output logic [FRAC-1:0] fy,
  output logic [FRAC-1:0] fx,
  output logic            clamped
);

  localparam int PW = ((CW + FRAC + 2 > DATA_W) ? CW + FRAC + 2 : DATA_W) + 1;  // signed position width
  localparam logic signed [PW-1:0] OLIM = PW'(O_MAX) <<< FRAC;

  logic signed [PW-1:0] dy_e, dx_e, dy_c, dx_c, py, px;
  logic [PW-FRAC-1:0]   iy, ix;

  always_comb begin
    dy_e = PW'(dy);
    dx_e = PW'(dx);
    dy_c = (dy_e > OLIM) ? OLIM : (dy_e < -OLIM) ? -OLIM : dy_e;
    dx_c = (dx_e > OLIM) ? OLIM : (dx_e < -OLIM) ? -OLIM : dx_e;
    clamped = (dy_c != dy_e) || (dx_c != dx_e);
    py = ((PW'(ky) + PW'(O_MAX)) <<< FRAC) + dy_c;
    px = ((PW'(y) * PW'(STRIDE) + PW'(kx) + PW'(O_MAX)) <<< FRAC) + dx_c;
    iy = py[PW-1:FRAC];
    ix = px[PW-1:FRAC];
    fy = py[FRAC-1:0];
    fx = px[FRAC-1:0];
    y0 = RW'(iy);
    x0 = CW'(ix);
    y1 = (iy + 1 > (PW-FRAC)'(RF - 1))    ? RW'(RF - 1)    : RW'(iy + 1);
    x1 = (ix + 1 > (PW-FRAC)'(W_WIN - 1)) ? CW'(W_WIN - 1) : CW'(ix + 1);
  end

endmodule
