// sampling_coeff: "calculate coefficients" step of the sampling controller.
//
// From the fractional parts (fy, fx) of a sampling point it forms the four
// bilinear interpolation weights of the neighbours
//   c[0] = (1-fy)(1-fx)  top-left      c[1] = (1-fy)fx  top-right
//   c[2] = fy(1-fx)      bottom-left   c[3] = fy*fx     bottom-right
// in the fixed-point data format (FRAC fraction bits; each product is cut
// back to FRAC bits by truncation). Purely combinational. The neighbour order
// and rounding are this design's choice.
module sampling_coeff
  import dcn_pkg::*;
(
  input  logic [FRAC-1:0] fy,
  input  logic [FRAC-1:0] fx,
  output data_t           c [4]
);

  localparam int unsigned W = 2 * FRAC + 2;
  logic [W-1:0] one, ay, ax, by, bx;

  always_comb begin
    one = W'(1) << FRAC;
    by  = W'(fy);
    bx  = W'(fx);
    ay  = one - by;
    ax  = one - bx;
    c[0] = data_t'((ay * ax) >> FRAC);
    c[1] = data_t'((ay * bx) >> FRAC);
    c[2] = data_t'((by * ax) >> FRAC);
    c[3] = data_t'((by * bx) >> FRAC);
  end

endmodule
