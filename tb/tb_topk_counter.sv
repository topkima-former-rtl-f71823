// tb_topk_counter: checks counting of grants and the count >= k stop flag
// against a reference count, for random increment patterns, clears and k.
module tb_topk_counter;
  localparam int KMAX = 5, CW = 3;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [CW-1:0] k, count;
  logic stop;
  int checks = 0, failures = 0, ref_cnt = 0;

  topk_counter #(.KMAX(KMAX), .CW(CW)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    k = 3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != ref_cnt || stop != (ref_cnt >= int'(k))) begin
        failures++;
        $display("FAIL t=%0d count=%0d ref=%0d stop=%b k=%0d", t, count, ref_cnt, stop, k);
      end
      if (t % 40 == 0) k = CW'($urandom_range(1, KMAX));
      clr = ($urandom_range(0, 15) == 0);
      inc = 1'($urandom_range(0, 1));
      if (clr) ref_cnt = 0;
      else if (inc && ref_cnt < 7) ref_cnt++;
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
