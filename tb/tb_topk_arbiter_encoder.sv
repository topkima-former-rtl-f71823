// tb_topk_arbiter_encoder: checks lowest-address-first arbitration.
// Random request vectors, with and without the slot enable; expected
// address is found by scanning from column 0. ack must be one-hot on the
// winner when enabled and all zero otherwise.
module tb_topk_arbiter_encoder;
  localparam int N = 16;
  logic [N-1:0] req, ack;
  logic en, valid;
  logic [$clog2(N)-1:0] addr;
  int checks = 0, failures = 0;

  topk_arbiter_encoder #(.N(N)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      int first;
      req = N'($urandom);
      if (t % 7 == 0) req = '0;
      if (t % 11 == 0) req = N'(1) << (N - 1);
      en = (t % 5 != 0);
      #1;
      first = -1;
      for (int i = 0; i < N; i++) if (req[i] && first < 0) first = i;
      checks++;
      if (en && first >= 0) begin
        if (!valid || int'(addr) != first || ack != (N'(1) << first)) begin
          failures++;
          $display("FAIL req=%b addr=%0d ack=%b exp %0d", req, addr, ack, first);
        end
      end else if (valid || ack != '0) begin
        failures++;
        $display("FAIL idle req=%b en=%b valid=%b ack=%b", req, en, valid, ack);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
