// computation_engine_tb: self-checking test of the systolic array.
// Part 1 (convolution use): several matrix products C = W x F, each of a
// random reduction length L >= 2*ROWS, are streamed back to back through the
// array with all rows active. Every result leaving the top of a column is
// checked for its value and row tag, and for its arrival cycle
// T_last + 2*row + col + 2. Part 2 (interpolation use): back-to-back 4-term
// sums on row 0 only; each column must deliver one result every 4 cycles.
// Expected values are computed here from the stimulus.
module computation_engine_tb;
  import dcn_pkg::*;

  localparam int R = 64, C = 8;
  localparam int NT = 4;          // products in part 1
  localparam int NI = 50;         // 4-term sums in part 2

  logic clk = 0, rst_n = 0;
  data_t   fm_in [C];
  data_t   w_in  [R];
  tag_t    tag_in[R];
  result_t res_out[C];
  int checks = 0, failures = 0;
  int cyc = 0;

  computation_engine #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL cyc=%0d: %s", cyc, what);
    end
  endtask

  // expected results: per column a queue of (row, sum, cycle)
  typedef struct { int row; acc_t sum; int t; } exp_t;
  exp_t expq [C][$];
  int   got = 0, expected_n = 0;

  initial begin
    for (int y = 0; y < C; y++) fm_in[y] = 0;
    for (int x = 0; x < R; x++) begin w_in[x] = 0; tag_in[x] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // ---- part 1 ----
    for (int p = 0; p < NT; p++) begin
      int L = 2 * R + $urandom_range(0, 40);
      acc_t acc [R][C];
      for (int t = 0; t < L; t++) begin
        for (int y = 0; y < C; y++) fm_in[y] = data_t'($urandom);
        for (int x = 0; x < R; x++) begin
          w_in[x] = data_t'($urandom);
          tag_in[x].valid = 1; tag_in[x].first = (t == 0); tag_in[x].last = (t == L - 1);
          for (int y = 0; y < C; y++)
            acc[x][y] = (t == 0) ? acc_t'(fm_in[y]) * acc_t'(w_in[x])
                                 : acc[x][y] + acc_t'(fm_in[y]) * acc_t'(w_in[x]);
        end
        if (t == L - 1)
          for (int x = 0; x < R; x++)
            for (int y = 0; y < C; y++) begin
              expq[y].push_back('{x, acc[x][y], cyc + 2 * x + y + 2});
              expected_n++;
            end
        @(negedge clk);
      end
    end
    for (int x = 0; x < R; x++) tag_in[x] = '0;
    repeat (3 * R + C) @(negedge clk);

    // ---- part 2 ----
    for (int i = 0; i < NI; i++) begin
      acc_t acc [C];
      for (int j = 0; j < 4; j++) begin
        for (int y = 0; y < C; y++) fm_in[y] = data_t'($urandom);
        w_in[0] = data_t'($urandom_range(0, 256));
        tag_in[0].valid = 1; tag_in[0].first = (j == 0); tag_in[0].last = (j == 3);
        for (int y = 0; y < C; y++)
          acc[y] = (j == 0) ? acc_t'(fm_in[y]) * acc_t'(w_in[0]) : acc[y] + acc_t'(fm_in[y]) * acc_t'(w_in[0]);
        if (j == 3)
          for (int y = 0; y < C; y++) begin
            expq[y].push_back('{0, acc[y], cyc + y + 2});
            expected_n++;
          end
        @(negedge clk);
      end
    end
    tag_in[0] = '0;
    repeat (2 * R + C + 4) @(negedge clk);
    check(got == expected_n, $sformatf("result count %0d of %0d", got, expected_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor (outputs sampled in the middle of the cycle)
  always @(negedge clk) if (rst_n) begin
    for (int y = 0; y < C; y++) if (res_out[y].valid) begin
      got++;
      if (expq[y].size() == 0) check(0, "unexpected result");
      else begin
        exp_t e;
        e = expq[y].pop_front();
        check(int'(res_out[y].row) == e.row && res_out[y].sum == e.sum, $sformatf("value col %0d row %0d", y, e.row));
        check(cyc == e.t, $sformatf("timing col %0d row %0d: %0d vs %0d", y, e.row, cyc, e.t));
      end
    end
  end
endmodule
