// tb_sram_imc_array: checks the behavioural array model end to end.
// Random ternary cells are written row by row and random signed inputs are
// applied as PWM pulses generated by the testbench itself. The expected
// MAC of each column is sum_r q_r * w_rc, computed here from the written
// cells. After one cycle of 32 calibration pulses, ramp pulses follow one
// per cycle; each column must raise req exactly at ramp pulse
// 32 - min(31, floor(MAC/UNIT)) and never if MAC < 0. Every request is
// acknowledged at once; a column must not fire again after its ack.
module tb_sram_imc_array;
  import topkima_pkg::*;
  localparam int COLS = 12, W_ROWS = 4, UNIT = 16, CR = 3 * W_ROWS;
  logic clk = 0, rst_n = 0, precharge = 0, wr_en = 0;
  logic [1:0] wr_row;
  cell_t [2:0][COLS-1:0] wr_cells;
  logic [CR-1:0] rwl_p, rwl_n;
  logic [N_CAL-1:0] cal_pulse;
  logic [N_RAMP-1:0] ramp_pulse;
  logic [COLS-1:0] ack, req;
  int checks = 0, failures = 0;
  int wv [W_ROWS][COLS];   // weight value per row/column
  int q [W_ROWS];
  int mac [COLS], fired_at [COLS], fire_count [COLS];

  sram_imc_array #(.COLS(COLS), .W_ROWS(W_ROWS), .UNIT(UNIT)) dut (.*);
  always #1 clk = ~clk;

  function automatic cell_t enc(int v);
    return (v > 0) ? CELL_POS : (v < 0) ? CELL_NEG : CELL_ZERO;
  endfunction

  initial begin
    wr_row = 0; wr_cells = '0; rwl_p = '0; rwl_n = '0; cal_pulse = '0; ramp_pulse = '0; ack = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      // write K^T: weight -7..7 as three ternary cells of equal sign
      for (int r = 0; r < W_ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 2'(r);
        for (int c = 0; c < COLS; c++) begin
          int m, s;
          m = $urandom_range(0, 7);
          s = $urandom_range(0, 1) ? -1 : 1;
          wv[r][c] = s * m;
          for (int j = 0; j < 3; j++) wr_cells[j][c] = enc(((m >> j) & 1) * s);
        end
      end
      @(negedge clk) wr_en = 0; precharge = 1;
      @(negedge clk) precharge = 0;
      for (int r = 0; r < W_ROWS; r++) q[r] = $urandom_range(0, 62) - 31;
      if (trial == 0) for (int r = 0; r < W_ROWS; r++) q[r] = 31;   // drives saturation
      for (int c = 0; c < COLS; c++) begin
        mac[c] = 0;
        for (int r = 0; r < W_ROWS; r++) mac[c] += q[r] * wv[r][c];
        fired_at[c] = -1; fire_count[c] = 0;
      end
      // PWM: cell j of row r is on for |q|*2^j cycles
      for (int t = 0; t < 124; t++) begin
        for (int r = 0; r < W_ROWS; r++)
          for (int j = 0; j < 3; j++) begin
            logic on;
            on = (t < ((q[r] < 0 ? -q[r] : q[r]) << j));
            rwl_p[3*r+j] = on && q[r] > 0;
            rwl_n[3*r+j] = on && q[r] < 0;
          end
        @(negedge clk);
      end
      rwl_p = '0; rwl_n = '0;
      cal_pulse = '1;
      @(negedge clk) cal_pulse = '0;
      for (int s = 1; s <= 32; s++) begin
        ramp_pulse = N_RAMP'(1) << (s - 1);
        @(negedge clk);
        ramp_pulse = '0;
        for (int c = 0; c < COLS; c++) if (req[c]) begin
          fire_count[c]++;
          if (fired_at[c] < 0) fired_at[c] = s;
        end
        ack = req;
        @(negedge clk);
        ack = '0;
      end
      for (int c = 0; c < COLS; c++) begin
        int exp_s;
        if (mac[c] < 0) exp_s = -1;
        else exp_s = 32 - ((mac[c] / UNIT > 31) ? 31 : mac[c] / UNIT);
        checks++;
        if (fired_at[c] != exp_s || fire_count[c] > 1) begin
          failures++;
          $display("FAIL trial %0d col %0d mac=%0d fired at %0d (x%0d) expected %0d", trial, c, mac[c], fired_at[c], fire_count[c], exp_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
