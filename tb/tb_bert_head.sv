// tb_bert_head: one BERT-base attention head through the top-k softmax macro.
// Workload of the paper's hardware evaluation: per head, Q is 384 x 64 and
// K^T is 64 x 384, k = 5 split 3 + 2 over the two sub-arrays, Q 5 bits and
// K^T 4 bits. Real BERT activations are not available here, so K^T and Q
// are drawn at random (uniform weights -7..7; queries built as a noisy copy
// of one key column, so that each row has a clear best match, with a
// random sign-magnitude 5-bit range). The top runs with its default
// parameters. For every one of the 384 query rows the sparse output row is
// compared with the reference model (indices, codes, probabilities,
// latency). It reports the mean fraction of the 32-step ramp that was used
// (the paper's alpha, about 0.31 on its data) and the mean latency per row.
module tb_bert_head;
  import topkima_pkg::*;
  import topkima_ref_pkg::*;
  localparam int D = 384, C0 = 256, K0 = 3, K1 = 2, WR = 64, UNIT = 64, RP = 8, AP = 5, K = 5;
  localparam int SL = 384;
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
  logic [1:0] count_0, count_1;
  int checks = 0, failures = 0;
  int w [WR][D];
  int q [WR];
  int mac0 [] = new[C0];
  int mac1 [] = new[D - C0];
  longint total_lat = 0, total_steps = 0;
  int best_hit = 0;

  topkima_sm dut (.*);
  always #1 clk = ~clk;

  // ramp steps used by one sub-array: conversion cycle of its last entry + 1,
  // or all 32 when it did not reach its k
  function automatic int steps_used(sel_t s, int kk);
    return (s.n >= kk) ? s.cyc[s.n - 1] + 1 : 32;
  endfunction

  initial begin
    cal_mask = '1; kt_wr_row = 0; kt_wr_data = '0; q_neg = '0; q_mag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < WR; r++) for (int c = 0; c < D; c++) w[r][c] = $urandom_range(0, 14) - 7;
    for (int r = 0; r < WR; r++) begin
      @(negedge clk);
      kt_wr_en = 1; kt_wr_row = 6'(r);
      for (int c = 0; c < D; c++)
        kt_wr_data[c] = (w[r][c] < 0) ? {1'b1, 3'(-w[r][c])} : {1'b0, 3'(w[r][c])};
    end
    @(negedge clk) kt_wr_en = 0;
    for (int row = 0; row < SL; row++) begin
      sel_t s0, s1;
      int lat, exp_lat, nv, target, amp;
      int cyc [] = new[K];
      bit val [] = new[K];
      int pr [] = new[K];
      int idx [K];
      target = $urandom_range(0, D - 1);
      amp = $urandom_range(1, 4);
      for (int r = 0; r < WR; r++) begin
        q[r] = amp * w[r][target] + $urandom_range(0, 8) - 4;
        if (q[r] > 31) q[r] = 31;
        if (q[r] < -31) q[r] = -31;
      end
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
      if (lat != exp_lat) begin failures++; $display("FAIL row %0d latency %0d expected %0d", row, lat, exp_lat); end
      for (int i = 0; i < K; i++) begin
        checks++;
        if (a_valid[i] != val[i] || int'(a_prob[i]) != (val[i] ? pr[i] : 0) ||
            (val[i] && (int'(a_idx[i]) != idx[i] || int'(a_code[i]) != 31 - cyc[i]))) begin
          failures++;
          $display("FAIL row %0d entry %0d", row, i);
        end
        if (val[i] && int'(a_idx[i]) == target) best_hit++;
      end
      total_lat += lat;
      total_steps += steps_used(s0, K0) + steps_used(s1, K1);
    end
    $display("head of %0d rows: mean latency %0d cycles per row, mean ramp fraction used %0d/1000, best key kept in %0d rows",
             SL, int'(total_lat / SL), int'(total_steps * 1000 / (2 * 32 * SL)), best_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
