// sampling_coeff_tb: exhaustive self-checking test of the bilinear
// coefficients. For every pair of fractions (fy, fx) the four weights are
// computed here in real arithmetic, floor(256*w), and compared. It also checks
// that the four weights sum to one within the truncation loss (at most 3 LSB).
module sampling_coeff_tb;
  import dcn_pkg::*;

  logic [FRAC-1:0] fy, fx;
  data_t c [4];
  int checks = 0, failures = 0;

  sampling_coeff dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    real a, b, one;
    int e [4];
    int sum;
    one = real'(1 << FRAC);
    for (int i = 0; i < (1 << FRAC); i++)
      for (int j = 0; j < (1 << FRAC); j++) begin
        fy = FRAC'(i); fx = FRAC'(j);
        #1;
        a = real'(i) / one; b = real'(j) / one;
        e[0] = $floor((1.0 - a) * (1.0 - b) * one);
        e[1] = $floor((1.0 - a) * b * one);
        e[2] = $floor(a * (1.0 - b) * one);
        e[3] = $floor(a * b * one);
        sum = 0;
        for (int k = 0; k < 4; k++) begin
          check(int'(c[k]) == e[k], $sformatf("c[%0d] fy=%0d fx=%0d: %0d vs %0d", k, i, j, c[k], e[k]));
          sum += int'(c[k]);
        end
        check(sum <= (1 << FRAC) && sum >= (1 << FRAC) - 3, "partition of unity");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
