// tb_softmax_core: checks the digital softmax against the reference.
// Random cycle lists and valid masks are fed in; each probability must
// equal the reference value from topkima_ref_pkg exactly and lie within
// 1.5 LSB of the real-valued softmax exp(-0.25*(c_i - c_min)) / sum * 31.
// The start-to-done time must be 3 + K*(PROB_BITS+2) cycles (4 + K when
// no entry is valid).
module tb_softmax_core;
  import topkima_pkg::*;
  import topkima_ref_pkg::*;
  localparam int K = 5, PB = 5, R = 51039;
  logic clk = 0, rst_n = 0, start = 0;
  logic [K-1:0] in_valid;
  logic [K-1:0][ADC_BITS-1:0] in_cyc;
  logic busy, done;
  logic [K-1:0][PB-1:0] prob;
  int checks = 0, failures = 0;
  int cyc [] = new[K];
  bit val [] = new[K];
  int pr [] = new[K];

  softmax_core #(.K(K), .PROB_BITS(PB), .R_Q16(R)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    in_valid = '0; in_cyc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int lat, base;
      real sumr;
      base = $urandom_range(0, 20);
      for (int i = 0; i < K; i++) begin
        cyc[i] = base + $urandom_range(0, 11);
        val[i] = (t % 10 == 3) ? 0 : ($urandom_range(0, 5) != 0);
        in_cyc[i] = ADC_BITS'(cyc[i]);
        in_valid[i] = val[i];
      end
      softmax(cyc, val, R, PB, pr);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done && lat < 200) begin lat++; @(negedge clk); end
      checks++;
      if (lat != ((val.sum() with (int'(item)) > 0) ? 3 + K * (PB + 2) : 4 + K)) begin failures++; $display("FAIL latency %0d", lat); end
      sumr = 0.0;
      for (int i = 0; i < K; i++) if (val[i]) sumr += $exp(-0.25 * (cyc[i] - base));
      for (int i = 0; i < K; i++) begin
        real ideal, got;
        got = real'(prob[i]);
        ideal = val[i] ? 31.0 * $exp(-0.25 * (cyc[i] - base)) / sumr : 0.0;
        checks++;
        if (int'(prob[i]) != pr[i] || (got - ideal > 1.5) || (ideal - got > 1.5)) begin
          failures++;
          $display("FAIL t=%0d i=%0d cyc=%0d v=%b prob=%0d ref=%0d ideal=%f", t, i, cyc[i], val[i], prob[i], pr[i], ideal);
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
