// tb_kt_weight_encoder: checks the weight-to-ternary-cell encoding.
// For every 4-bit sign-magnitude code it checks that the three cells hold
// legal states and that cell0 + 2*cell1 + 4*cell2 equals the signed weight,
// then checks two rows of random codes and two hand-worked cell patterns.
module tb_kt_weight_encoder;
  import topkima_pkg::*;
  localparam int COLS = 16;
  logic  [COLS-1:0][W_BITS-1:0]          w;
  cell_t [CELLS_PER_WEIGHT-1:0][COLS-1:0] cells;
  int checks = 0, failures = 0;

  kt_weight_encoder #(.COLS(COLS)) dut (.w, .cells);

  function automatic int ref_weight(logic [3:0] code);
    int m;
    m = code[0] + 2 * code[1] + 4 * code[2];
    return code[3] ? -m : m;
  endfunction

  task automatic check_all();
    for (int c = 0; c < COLS; c++) begin
      int v;
      v = 0;
      for (int j = 0; j < 3; j++) begin
        checks++;
        if (cells[j][c] == 2'b11) begin
          failures++;
          $display("FAIL col %0d cell %0d illegal (H,H)", c, j);
        end
        v += (1 << j) * ((cells[j][c] == 2'b10) ? 1 : (cells[j][c] == 2'b01) ? -1 : 0);
      end
      checks++;
      if (v !== ref_weight(w[c])) begin
        failures++;
        $display("FAIL col %0d code %b value %0d expected %0d", c, w[c], v, ref_weight(w[c]));
      end
    end
  endtask

  initial begin
    for (int c = 0; c < COLS; c++) w[c] = 4'(c);
    #1 check_all();
    for (int n = 0; n < 2; n++) begin
      for (int c = 0; c < COLS; c++) w[c] = 4'($urandom_range(0, 15));
      #1 check_all();
    end
    // +5 = 0101: cells (scale1,2,4) = (+1, 0, +1) = (H,L),(L,L),(H,L)
    w[0] = 4'b0101;
    // -7 = 1111: all three cells -1 = (L,H)
    w[1] = 4'b1111;
    #1;
    checks++; if ({cells[2][0], cells[1][0], cells[0][0]} !== 6'b10_00_10) begin failures++; $display("FAIL +5 pattern"); end
    checks++; if ({cells[2][1], cells[1][1], cells[0][1]} !== 6'b01_01_01) begin failures++; $display("FAIL -7 pattern"); end
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
