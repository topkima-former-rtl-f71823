// tb_topk_register: writes random (address, cycle) pairs into the result
// slots and compares every entry with a reference copy; also checks clear.
module tb_topk_register;
  localparam int K = 3, ADDR_W = 8, CYC_W = 5, SW = 2;
  logic clk = 0, rst_n = 0, clr = 0, we = 0;
  logic [SW-1:0] slot;
  logic [ADDR_W-1:0] addr;
  logic [CYC_W-1:0] cyc;
  logic [K-1:0] out_valid;
  logic [K-1:0][ADDR_W-1:0] out_addr;
  logic [K-1:0][CYC_W-1:0] out_cyc;
  int checks = 0, failures = 0;
  bit rv [K]; int ra [K]; int rc [K];

  topk_register #(.K(K), .ADDR_W(ADDR_W), .CYC_W(CYC_W), .SW(SW)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    slot = 0; addr = 0; cyc = 0;
    for (int i = 0; i < K; i++) begin rv[i] = 0; ra[i] = 0; rc[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int i = 0; i < K; i++) begin
        checks++;
        if (out_valid[i] != rv[i] || (rv[i] && (int'(out_addr[i]) != ra[i] || int'(out_cyc[i]) != rc[i]))) begin
          failures++;
          $display("FAIL t=%0d slot %0d v=%b a=%0d c=%0d", t, i, out_valid[i], out_addr[i], out_cyc[i]);
        end
      end
      clr  = ($urandom_range(0, 20) == 0);
      we   = 1'($urandom_range(0, 1));
      slot = SW'($urandom_range(0, 3));
      addr = ADDR_W'($urandom);
      cyc  = CYC_W'($urandom);
      if (clr) for (int i = 0; i < K; i++) rv[i] = 0;
      else if (we && slot < K) begin rv[slot] = 1; ra[slot] = addr; rc[slot] = cyc; end
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
