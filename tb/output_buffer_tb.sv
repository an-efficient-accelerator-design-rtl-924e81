// output_buffer_tb: self-checking test of the banked output buffer.
// Writes the whole buffer (default size, eq. 7) through its NB bank write
// ports, all banks in the same cycle, then reads it back through both read
// ports with logical addresses (bank = a % NB, word = a / NB) and checks the
// data one cycle later.
module output_buffer_tb;
  import dcn_pkg::*;

  localparam int D = OUT_BUF_WORDS, NB = COLS, AW = $clog2(D), BW = $clog2(D / NB);

  logic clk = 0;
  logic wr_en [NB]; logic [BW-1:0] wr_addr [NB]; data_t wr_data [NB];
  logic [AW-1:0] rd0_addr, rd1_addr; data_t rd0_data, rd1_data;
  int checks = 0, failures = 0;

  output_buffer #(.DEPTH(D), .NB(NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (D + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t pat(int a);
    return data_t'(a * 113 + 5);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int a0, a1;
    for (int b = 0; b < NB; b++) begin wr_en[b] = 0; wr_addr[b] = 0; wr_data[b] = 0; end
    rd0_addr = 0; rd1_addr = 0;
    @(negedge clk);
    for (int w = 0; w < D / NB; w++) begin
      for (int b = 0; b < NB; b++) begin
        wr_en[b] = 1; wr_addr[b] = BW'(w); wr_data[b] = pat(w * NB + b);
      end
      @(negedge clk);
    end
    for (int b = 0; b < NB; b++) wr_en[b] = 0;
    for (int k = 0; k < 5000; k++) begin
      a0 = $urandom_range(0, D - 1); a1 = $urandom_range(0, D - 1);
      rd0_addr = AW'(a0); rd1_addr = AW'(a1);
      @(negedge clk);
      check(rd0_data == pat(a0), $sformatf("rd0 addr %0d", a0));
      check(rd1_data == pat(a1), $sformatf("rd1 addr %0d", a1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
