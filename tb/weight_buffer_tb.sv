// weight_buffer_tb: self-checking test of the per-row weight banks.
// Writes random words into random banks and addresses (reduced depth to keep
// the run short), then reads addresses and checks all banks one cycle later
// against a model array kept here.
module weight_buffer_tb;
  import dcn_pkg::*;

  localparam int NB = ROWS, D = 1024, AW = $clog2(D), SW = $clog2(NB);

  logic clk = 0;
  logic wr_en; logic [SW-1:0] wr_bank; logic [AW-1:0] wr_addr; data_t wr_data;
  logic [AW-1:0] rd_addr; data_t rd_data [NB];
  int checks = 0, failures = 0;
  data_t model [NB][D];

  weight_buffer #(.NB(NB), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NB * D + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int a;
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    @(negedge clk);
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < D; i++) begin
        wr_en = 1; wr_bank = SW'(b); wr_addr = AW'(i); wr_data = data_t'($urandom);
        model[b][i] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    for (int k = 0; k < 2000; k++) begin
      a = $urandom_range(0, D - 1);
      rd_addr = AW'(a);
      @(negedge clk);
      for (int b = 0; b < NB; b++) check(rd_data[b] == model[b][a], $sformatf("bank %0d addr %0d", b, a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
