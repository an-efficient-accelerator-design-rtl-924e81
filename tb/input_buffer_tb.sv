// input_buffer_tb: self-checking test of the input buffer.
// Fills the whole buffer (default size, eq. 6) with a position-dependent
// pattern, then reads random addresses on all read ports at once and checks
// the data one cycle later; also checks that a write is seen by a read issued
// in a later cycle and that reads return the previous content in the write
// cycle itself.
module input_buffer_tb;
  import dcn_pkg::*;

  localparam int D = IN_BUF_WORDS, P = COLS, AW = $clog2(D);

  logic clk = 0;
  logic wr_en; logic [AW-1:0] wr_addr; data_t wr_data;
  logic [AW-1:0] rd_addr [P];
  data_t rd_data [P];
  int checks = 0, failures = 0;

  input_buffer #(.DEPTH(D), .NRD(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (D + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t pat(int a);
    return data_t'(a * 37 + 11);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [AW-1:0] a [P];
    wr_en = 0; wr_addr = 0; wr_data = 0;
    for (int p = 0; p < P; p++) rd_addr[p] = 0;
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      wr_en = 1; wr_addr = AW'(i); wr_data = pat(i);
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < 2000; k++) begin
      for (int p = 0; p < P; p++) begin a[p] = AW'($urandom_range(0, D - 1)); rd_addr[p] = a[p]; end
      @(negedge clk);
      for (int p = 0; p < P; p++) check(rd_data[p] == pat(int'(a[p])), $sformatf("read port %0d addr %0d", p, a[p]));
    end
    // read-during-write returns old data, new data next time
    rd_addr[0] = 17; wr_en = 1; wr_addr = 17; wr_data = 16'h5a5a;
    @(negedge clk);
    wr_en = 0;
    check(rd_data[0] == pat(17), "old data during write");
    @(negedge clk);
    check(rd_data[0] == 16'h5a5a, "new data after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
