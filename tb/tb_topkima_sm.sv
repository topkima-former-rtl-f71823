// tb_topkima_sm: end-to-end test of the top-k softmax macro at full size.
// The top runs with its default parameters: d = 384 keys split into a
// 256-column sub-array (sub-top-3) and a 128-column sub-array (sub-top-2),
// 64 weight rows, 5-bit query, k = 5. Each test loads a K^T head (64 row
// writes), applies query rows and compares the sparse attention row with
// the reference model: the selected key indices and codes of each
// sub-array, the 5-bit probabilities of the joined list, the per-array
// early-stop flags and stall counts, and the start-to-done latency
// (slower sub-array + softmax). It counts how often each mechanism
// occurs (early stop, full ramp, tie beyond k, stalled ramp step,
// saturated code 31, both sub-arrays contributing) and fails if one never
// does.
module tb_topkima_sm;
  import topkima_pkg::*;
  import topkima_ref_pkg::*;
  localparam int D = 384, C0 = 256, K0 = 3, K1 = 2, WR = 64, UNIT = 64, RP = 8, AP = 5, K = 5;
  logic clk = 0, rst_n = 0, kt_wr_en = 0, start = 0;
  logic [5:0] kt_wr_row;
  logic [D-1:0][3:0] kt_wr_data;
  logic [N_CAL-1:0] cal_mask;
  logic [WR-1:0] q_neg;
  logic [WR-1:0][4:0] q_mag;
  logic busy, done;
  logic [K-1:0] a_valid;
  logic [K-1:0][8:0] a_idx;
  logic [K-1:0][4:0] a_code, a_prob;
  logic [1:0] early_stop;
  logic [5:0] stall_steps_0, stall_steps_1;
  logic [1:0] count_0;
  logic [1:0] count_1;
  int checks = 0, failures = 0;
  int w [WR][D];
  int q [WR];
  int mac0 [] = new[C0];
  int mac1 [] = new[D - C0];
  int n_early = 0, n_full = 0, n_tie = 0, n_stall = 0, n_sat = 0, n_both = 0;

  topkima_sm dut (.*);
  always #1 clk = ~clk;

  task automatic load_kt();
    for (int r = 0; r < WR; r++) begin
      @(negedge clk);
      kt_wr_en = 1; kt_wr_row = 6'(r);
      for (int c = 0; c < D; c++)
        kt_wr_data[c] = (w[r][c] < 0) ? {1'b1, 3'(-w[r][c])} : {1'b0, 3'(w[r][c])};
    end
    @(negedge clk) kt_wr_en = 0;
  endtask

  task automatic run();
    sel_t s0, s1;
    int lat, exp_lat, nv;
    int cyc [] = new[K];
    bit val [] = new[K];
    int pr [] = new[K];
    int idx [K];
    for (int c = 0; c < D; c++) begin
      int m;
      m = 0;
      for (int r = 0; r < WR; r++) m += q[r] * w[r][c];
      if (c < C0) mac0[c] = m; else mac1[c - C0] = m;
    end
    s0 = select(mac0, K0, UNIT, RP, AP);
    s1 = select(mac1, K1, UNIT, RP, AP);
    for (int i = 0; i < K; i++) begin
      if (i < K0) begin val[i] = (i < s0.n); cyc[i] = s0.cyc[i]; idx[i] = s0.addr[i]; end
      else begin val[i] = (i - K0 < s1.n); cyc[i] = s1.cyc[i - K0]; idx[i] = C0 + s1.addr[i - K0]; end
      if (!val[i]) cyc[i] = 0;
    end
    softmax(cyc, val, 51039, 5, pr);
    nv = s0.n + s1.n;
    exp_lat = ((s0.latency > s1.latency) ? s0.latency : s1.latency) + ((nv > 0) ? 3 + K * 7 : 4 + K);
    for (int r = 0; r < WR; r++) begin
      q_neg[r] = q[r] < 0;
      q_mag[r] = 5'((q[r] < 0) ? -q[r] : q[r]);
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done && lat < 4000) begin lat++; @(negedge clk); end
    checks++;
    if (lat != exp_lat || early_stop != {s1.early, s0.early} ||
        int'(stall_steps_0) != s0.stalls || int'(stall_steps_1) != s1.stalls ||
        int'(count_0) != s0.n || int'(count_1) != s1.n) begin
      failures++;
      $display("FAIL status lat %0d/%0d early %b/%b%b stalls %0d,%0d/%0d,%0d", lat, exp_lat, early_stop, s1.early, s0.early,
               stall_steps_0, stall_steps_1, s0.stalls, s1.stalls);
    end
    for (int i = 0; i < K; i++) begin
      checks++;
      if (a_valid[i] != val[i] || int'(a_prob[i]) != (val[i] ? pr[i] : 0) ||
          (val[i] && (int'(a_idx[i]) != idx[i] || int'(a_code[i]) != 31 - cyc[i]))) begin
        failures++;
        $display("FAIL entry %0d: v=%b idx=%0d code=%0d prob=%0d; expected v=%b idx=%0d code=%0d prob=%0d",
                 i, a_valid[i], a_idx[i], a_code[i], a_prob[i], val[i], idx[i], 31 - cyc[i], pr[i]);
      end
      if (val[i] && cyc[i] == 0) n_sat++;
    end
    if (s0.early) n_early++;
    if (s1.early) n_early++;
    if (!s0.early) n_full++;
    if (!s1.early) n_full++;
    if (s0.tie_drop || s1.tie_drop) n_tie++;
    n_stall += s0.stalls + s1.stalls;
    if (s0.n > 0 && s1.n > 0) n_both++;
  endtask

  initial begin
    cal_mask = '1; kt_wr_row = 0; kt_wr_data = '0; q_neg = '0; q_mag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // head 1: random K^T, several random query rows
    for (int r = 0; r < WR; r++) for (int c = 0; c < D; c++) w[r][c] = $urandom_range(0, 14) - 7;
    load_kt();
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < WR; r++) q[r] = $urandom_range(0, 62) - 31;
      run();
    end
    // a query that matches column 300 exactly: strong winner, saturates
    for (int r = 0; r < WR; r++) q[r] = (w[r][300] >= 0) ? 31 : -31;
    run();
    // head 2: sub-array 1 all positive weights, sub-array 0 random;
    // negative queries leave sub-array 1 empty (full ramp, nothing found)
    for (int r = 0; r < WR; r++) for (int c = 0; c < D; c++)
      w[r][c] = (c < C0) ? $urandom_range(0, 14) - 7 : $urandom_range(1, 7);
    // columns 10, 11, 12, 13 identical and large: ties beyond sub-top-3
    for (int r = 0; r < WR; r++) begin
      w[r][10] = 7; w[r][11] = 7; w[r][12] = 7; w[r][13] = 7; w[r][40] = -7;
    end
    load_kt();
    for (int r = 0; r < WR; r++) q[r] = -$urandom_range(0, 3);
    run();
    for (int r = 0; r < WR; r++) q[r] = -$urandom_range(1, 31);
    run();
    checks++;
    if (n_early == 0 || n_full == 0 || n_tie == 0 || n_stall == 0 || n_sat == 0 || n_both == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("coverage: early stop %0d, full ramp %0d, tie beyond k %0d, stalled steps %0d, saturated entries %0d, both sub-arrays %0d",
             n_early, n_full, n_tie, n_stall, n_sat, n_both);
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
