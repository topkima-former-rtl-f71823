// tb_topkima_m: end-to-end test of one top-k in-memory ADC macro.
// A reduced macro (32 columns, 8 weight rows) is loaded with random 4-bit
// K^T rows and run on random signed 5-bit query vectors. The reference
// (topkima_ref_pkg) computes every column's MAC from the integer values and
// the expected top-k list (address and conversion cycle, in order), the
// start-to-done latency, early stop and the number of lengthened ramp
// steps. Extra cases: duplicated columns (ties beyond k, lower addresses
// must win), all-negative MACs (nothing found, full ramp) and k = 1.
module tb_topkima_m;
  import topkima_pkg::*;
  import topkima_ref_pkg::*;
  localparam int COLS = 32, W_ROWS = 8, KMAX = 3, UNIT = 32, RP = 8, AP = 5;
  localparam int AW = 5, KW = 2;
  logic clk = 0, rst_n = 0, kt_wr_en = 0, start = 0;
  logic [2:0] kt_wr_row;
  logic [COLS-1:0][3:0] kt_wr_data;
  logic [KW-1:0] k;
  logic [N_CAL-1:0] cal_mask;
  logic [W_ROWS-1:0] q_neg;
  logic [W_ROWS-1:0][4:0] q_mag;
  logic busy, done, early_stop;
  logic [KMAX-1:0] out_valid;
  logic [KMAX-1:0][AW-1:0] out_addr;
  logic [KMAX-1:0][ADC_BITS-1:0] out_cyc;
  logic [KW-1:0] count;
  logic [ADC_BITS:0] stall_steps;
  int checks = 0, failures = 0;
  int w [W_ROWS][COLS];
  int q [W_ROWS];
  int mac [] = new[COLS];
  int n_early = 0, n_tie = 0, n_stall = 0, n_full = 0;

  topkima_m #(.COLS(COLS), .W_ROWS(W_ROWS), .KMAX(KMAX), .UNIT(UNIT),
              .RAMP_PERIOD(RP), .ARB_PERIOD(AP)) dut (.*);
  always #1 clk = ~clk;

  task automatic load_kt();
    for (int r = 0; r < W_ROWS; r++) begin
      @(negedge clk);
      kt_wr_en = 1; kt_wr_row = 3'(r);
      for (int c = 0; c < COLS; c++)
        kt_wr_data[c] = (w[r][c] < 0) ? {1'b1, 3'(-w[r][c])} : {1'b0, 3'(w[r][c])};
    end
    @(negedge clk) kt_wr_en = 0;
  endtask

  task automatic run(int kk);
    sel_t s;
    int lat;
    for (int c = 0; c < COLS; c++) begin
      mac[c] = 0;
      for (int r = 0; r < W_ROWS; r++) mac[c] += q[r] * w[r][c];
    end
    s = select(mac, kk, UNIT, RP, AP);
    for (int r = 0; r < W_ROWS; r++) begin
      q_neg[r] = q[r] < 0;
      q_mag[r] = 5'((q[r] < 0) ? -q[r] : q[r]);
    end
    k = KW'(kk);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done && lat < 2000) begin lat++; @(negedge clk); end
    checks++;
    if (lat != s.latency || early_stop != s.early || int'(stall_steps) != s.stalls || int'(count) != s.n) begin
      failures++;
      $display("FAIL status: lat %0d/%0d early %b/%b stalls %0d/%0d count %0d/%0d", lat, s.latency, early_stop, s.early, stall_steps, s.stalls, count, s.n);
    end
    for (int i = 0; i < KMAX; i++) begin
      checks++;
      if (out_valid[i] != (i < s.n) || (i < s.n && (int'(out_addr[i]) != s.addr[i] || int'(out_cyc[i]) != s.cyc[i]))) begin
        failures++;
        $display("FAIL entry %0d: v=%b addr=%0d cyc=%0d, expected addr=%0d cyc=%0d (n=%0d)", i, out_valid[i], out_addr[i], out_cyc[i], s.addr[i], s.cyc[i], s.n);
      end
    end
    if (s.early) n_early++; else n_full++;
    if (s.tie_drop) n_tie++;
    if (s.stalls > 0) n_stall++;
  endtask

  initial begin
    cal_mask = '1; kt_wr_row = 0; kt_wr_data = '0; q_neg = '0; q_mag = '0; k = KMAX;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      for (int r = 0; r < W_ROWS; r++)
        for (int c = 0; c < COLS; c++) w[r][c] = $urandom_range(0, 14) - 7;
      if (t == 1) // four identical columns: ties beyond k
        for (int r = 0; r < W_ROWS; r++) begin w[r][9] = 7; w[r][4] = 7; w[r][20] = 7; w[r][27] = 7; end
      if (t == 2) // all weights positive, all queries negative: nothing fires
        for (int r = 0; r < W_ROWS; r++) for (int c = 0; c < COLS; c++) w[r][c] = $urandom_range(1, 7);
      load_kt();
      for (int r = 0; r < W_ROWS; r++) q[r] = $urandom_range(0, 62) - 31;
      if (t == 1) for (int r = 0; r < W_ROWS; r++) q[r] = 6;
      if (t == 2) for (int r = 0; r < W_ROWS; r++) q[r] = -$urandom_range(1, 31);
      run((t == 5) ? 1 : KMAX);
    end
    checks++;
    if (n_early == 0 || n_tie == 0 || n_stall == 0 || n_full == 0) begin
      failures++;
      $display("FAIL coverage early=%0d tie=%0d stall=%0d full=%0d", n_early, n_tie, n_stall, n_full);
    end
    $display("coverage: early stop %0d, tie drop %0d, stalled %0d, full ramp %0d", n_early, n_tie, n_stall, n_full);
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
