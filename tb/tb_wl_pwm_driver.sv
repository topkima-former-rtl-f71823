// tb_wl_pwm_driver: checks pulse widths, polarity and the MAC window.
// Random signed q vectors are applied; for every cell row the testbench
// counts the cycles its +RWL and -RWL are high and compares with |q|*2^j on
// the line selected by the sign and 0 on the other. It also checks that
// busy lasts exactly (2^5-1)*4 = 124 cycles (62 ns at 2 GHz) and that done
// is high only in the last of them.
module tb_wl_pwm_driver;
  localparam int W_ROWS = 8, QBITS = 5, NC = 3 * W_ROWS, MAC_CYCLES = 124;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W_ROWS-1:0] q_neg;
  logic [W_ROWS-1:0][QBITS-1:0] q_mag;
  logic [NC-1:0] rwl_p, rwl_n;
  logic busy, done;
  int checks = 0, failures = 0;
  int cnt_p [NC], cnt_n [NC];
  int busy_cycles, done_cycles, done_pos;

  wl_pwm_driver #(.W_ROWS(W_ROWS), .QBITS(QBITS)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    q_neg = '0; q_mag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      for (int r = 0; r < W_ROWS; r++) begin
        q_neg[r] = 1'($urandom_range(0, 1));
        q_mag[r] = QBITS'($urandom_range(0, 31));
      end
      if (trial == 0) begin q_mag[0] = 31; q_neg[0] = 0; q_mag[1] = 0; end
      for (int i = 0; i < NC; i++) begin cnt_p[i] = 0; cnt_n[i] = 0; end
      busy_cycles = 0; done_cycles = 0; done_pos = -1;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (busy) begin
        for (int i = 0; i < NC; i++) begin
          cnt_p[i] += rwl_p[i];
          cnt_n[i] += rwl_n[i];
        end
        if (done) begin done_cycles++; done_pos = busy_cycles; end
        busy_cycles++;
        @(negedge clk);
      end
      for (int i = 0; i < NC; i++) begin
        int r, j, exp;
        r = i / 3; j = i % 3;
        exp = int'(q_mag[r]) * (1 << j);
        checks++;
        if (cnt_p[i] != (q_neg[r] ? 0 : exp) || cnt_n[i] != (q_neg[r] ? exp : 0)) begin
          failures++;
          $display("FAIL row %0d cell %0d: p=%0d n=%0d q=%s%0d", r, j, cnt_p[i], cnt_n[i], q_neg[r] ? "-" : "+", q_mag[r]);
        end
      end
      checks++;
      if (busy_cycles != MAC_CYCLES || done_cycles != 1 || done_pos != MAC_CYCLES - 1) begin
        failures++;
        $display("FAIL window busy=%0d done=%0d at %0d", busy_cycles, done_cycles, done_pos);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
