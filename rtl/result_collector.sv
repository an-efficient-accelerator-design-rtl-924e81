// result_collector: writes the sums leaving the computation engine into the
// output buffer.
//
// Each engine column y delivers at most one tagged result per cycle. The sum
// is requantised to the data format and written to bank y of the output
// buffer at an address chosen by the current phase:
//   offset generation      offset region, logical word OFF_BASE + row*T_W + y
//   interpolation          interpolation region, logical word s*T_N + g*COLS + y,
//                          where s (sampling point) and g (channel group) are
//                          counted per column in arrival order
//   deformable convolution output region, OUT_BASE + row*T_W + y
// All three maps put column y's words in bank y (needs COLS = T_W and the
// region bases multiples of COLS). 'clear' resets the per-column counters and
// the write count 'n_written' at the start of a phase.
//
// The address maps are this design's choice. Timing: one register stage.
module result_collector
  import dcn_pkg::*;
#(
  parameter int unsigned T_N   = dcn_pkg::T_N,
  parameter int unsigned T_W   = dcn_pkg::T_W,
  parameter int unsigned K_C   = dcn_pkg::K_C,
  localparam int unsigned K2   = K_C * K_C,
  localparam int unsigned COLS = T_W,
  localparam int unsigned DEPTH = T_W * T_N * 2 * K2,
  localparam int unsigned BW   = $clog2(DEPTH / COLS),
  localparam int unsigned OFF_BASE = T_W * K2 * T_N,
  localparam int unsigned OUT_BASE = OFF_BASE + 2 * K2 * T_W,
  localparam int unsigned GW   = $clog2(T_N / COLS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  phase_e        phase,
  input  logic          clear,
  input  logic [GW-1:0] n_groups,
  input  result_t       res [COLS],
  output logic          wr_en   [COLS],
  output logic [BW-1:0] wr_addr [COLS],
  output data_t         wr_data [COLS],
  output logic [31:0]   n_written
);

  logic [GW-1:0] g_cnt [COLS];
  logic [$clog2(T_W * K2 + 1)-1:0] s_cnt [COLS];
  logic [$clog2(COLS + 1)-1:0] n_now;

  always_comb begin
    n_now = '0;
    for (int y = 0; y < COLS; y++) n_now += ($bits(n_now))'(res[y].valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_written <= '0;
      for (int y = 0; y < COLS; y++) begin
        g_cnt[y] <= '0; s_cnt[y] <= '0;
        wr_en[y] <= 1'b0; wr_addr[y] <= '0; wr_data[y] <= '0;
      end
    end else begin
      n_written <= clear ? '0 : n_written + 32'(n_now);
      for (int y = 0; y < COLS; y++) begin
        wr_en[y]   <= res[y].valid && !clear;
        wr_data[y] <= requant(res[y].sum);
        unique case (phase)
          PH_SAMPLE: wr_addr[y] <= BW'((int'(s_cnt[y]) * T_N + int'(g_cnt[y]) * COLS) / COLS);
          PH_DCONV:  wr_addr[y] <= BW'((OUT_BASE + int'(res[y].row) * T_W) / COLS);
          default:   wr_addr[y] <= BW'((OFF_BASE + int'(res[y].row) * T_W) / COLS);
        endcase
        if (clear) begin
          g_cnt[y] <= '0; s_cnt[y] <= '0;
        end else if (res[y].valid && phase == PH_SAMPLE) begin
          if (g_cnt[y] == n_groups - 1) begin
            g_cnt[y] <= '0;
            s_cnt[y] <= s_cnt[y] + 1'b1;
          end else g_cnt[y] <= g_cnt[y] + 1'b1;
        end
      end
    end
  end

endmodule
