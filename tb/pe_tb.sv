// pe_tb: self-checking test of one processing element.
// Drives random sums of random length (between a 'first' and a 'last' tag,
// with idle cycles in between) and checks cycle by cycle that
//  - fm and weight with their tags are forwarded one cycle later,
//  - the finished sum, tagged with the row index, appears on the result
//    output two cycles after its 'last' operand,
//  - in all other cycles the result from the PE below passes through.
// Expected sums are computed here from the stimulus.
module pe_tb;
  import dcn_pkg::*;

  localparam int NCYC = 3000;
  localparam int MYROW = 5;

  logic clk = 0, rst_n = 0;
  data_t fm_in, fm_out, w_in, w_out;
  tag_t tag_in, tag_out;
  result_t res_in, res_out;
  int checks = 0, failures = 0;

  pe #(.ROW(MYROW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t: %s", $time, what);
    end
  endtask

  data_t   s_fm [NCYC];
  data_t   s_w  [NCYC];
  tag_t    s_tag[NCYC];
  result_t s_res[NCYC];
  acc_t    s_sum[NCYC];   // sum finished by cycle t (valid when s_tag[t].last)
  int      n_sums = 0;

  initial begin
    acc_t acc = 0;
    int left = 0;
    for (int t = 0; t < NCYC; t++) begin
      s_fm[t] = data_t'($urandom);
      s_w[t]  = data_t'($urandom);
      s_res[t].valid = 1'($urandom);
      s_res[t].row   = 6;
      s_res[t].sum   = acc_t'($urandom);
      s_tag[t] = '0;
      if (left == 0 && $urandom_range(0, 3) == 0) begin
        // idle cycle
      end else begin
        if (left == 0) begin left = 1 + $urandom_range(0, 10); s_tag[t].first = 1; end
        s_tag[t].valid = 1;
        acc = s_tag[t].first ? acc_t'(s_fm[t]) * acc_t'(s_w[t]) : acc + acc_t'(s_fm[t]) * acc_t'(s_w[t]);
        left--;
        if (left == 0 || t == NCYC - 3) begin s_tag[t].last = 1; left = 0; n_sums++; end
      end
      s_sum[t] = acc;
      if (t >= NCYC - 2) s_tag[t] = '0;
    end

    fm_in = 0; w_in = 0; tag_in = '0; res_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < NCYC; t++) begin
      if (t > 0) begin
        check(fm_out == s_fm[t-1] && w_out == s_w[t-1] && tag_out == s_tag[t-1], "operand forwarding");
        if (t > 1 && s_tag[t-2].last)
          check(res_out.valid && res_out.row == MYROW && res_out.sum == s_sum[t-2], "finished sum");
        else
          check(res_out == s_res[t-1], "result pass-through");
      end
      fm_in = s_fm[t]; w_in = s_w[t]; tag_in = s_tag[t]; res_in = s_res[t];
      @(negedge clk);
    end
    check(n_sums > 100, "enough sums exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
