// pe: one processing element PE(x,y) of the systolic computation engine.
//
// Structure (after the PE diagram of the method): the feature-map operand
// arrives from the PE above, PE(x-1,y), and the weight operand from the PE to
// the left, PE(x,y-1). Their product is added to the accumulator OUT(x,y).
// Both operands are registered and passed on, the feature map downwards to
// PE(x+1,y) and the weight to the right to PE(x,y+1). A separate output
// register, fed by a two-way mux, either captures this PE's finished sum
// OUT(x,y) or takes the output of the PE below, PE(x+1,y); results therefore
// shift upwards and leave the array at row 0 while the accumulator is already
// working on the next sum.
//
// Design choices not fixed by the diagram: the control tags (valid, first,
// last) travel with the weight along the row; 'first' restarts the
// accumulator, and one cycle after 'last' the mux selects OUT(x,y) (the result
// is tagged with this PE's row index), otherwise it selects the PE below. The
// arithmetic is fixed point (see dcn_pkg), not floating point.
//
// Timing: operand registers and output register each add one cycle.
module pe
  import dcn_pkg::*;
#(
  parameter int unsigned ROW = 0    // x: row index, returned with each result
) (
  input  logic    clk,
  input  logic    rst_n,
  // feature-map operand from PE(x-1,y), forwarded to PE(x+1,y)
  input  data_t   fm_in,
  output data_t   fm_out,
  // weight operand and its tags from PE(x,y-1), forwarded to PE(x,y+1)
  input  data_t   w_in,
  input  tag_t    tag_in,
  output data_t   w_out,
  output tag_t    tag_out,
  // result chain: from PE(x+1,y) below, to PE(x-1,y) above
  input  result_t res_in,
  output result_t res_out
);

  acc_t acc;          // OUT(x,y)
  logic done_q;       // OUT(x,y) holds a finished sum this cycle
  acc_t prod;

  assign prod = acc_t'(fm_in) * acc_t'(w_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      done_q  <= 1'b0;
      fm_out  <= '0;
      w_out   <= '0;
      tag_out <= '0;
      res_out <= '0;
    end else begin
      fm_out  <= fm_in;
      w_out   <= w_in;
      tag_out <= tag_in;
      if (tag_in.valid)
        acc <= tag_in.first ? prod : acc + prod;
      done_q <= tag_in.valid & tag_in.last;
      // output mux + register
      if (done_q) begin
        res_out.valid <= 1'b1;
        res_out.row   <= ($bits(res_out.row))'(ROW);
        res_out.sum   <= acc;
      end else begin
        res_out <= res_in;
      end
    end
  end

endmodule
