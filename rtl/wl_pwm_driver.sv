// wl_pwm_driver: pulse-width-modulated read word-line drivers for Q.
//
// Each query element q arrives as a sign and a QBITS-bit magnitude. For the
// three cell rows of weight row r the driver raises one read word line for
// |q|, 2|q| and 4|q| clock cycles: +RWL when q is positive, -RWL when it is
// negative (signed inputs, as in the paper's cell table). All pulses start
// in the first cycle after start, and the MAC window is always
// (2^QBITS-1)*4 cycles long, the width of the largest MSB pulse. With the
// paper's 2 GHz PWM clock and QBITS = 5 this is 15.5 ns for the LSB cell
// and 62 ns for the MSB cell, the paper's numbers. Sign-magnitude input
// coding and the fixed-length window are this design's choices.
//
// Timing: start (1 cycle) latches q; busy is high for MAC_CYCLES cycles,
// in which the word lines are driven; done pulses in the last of them.
module wl_pwm_driver
  import topkima_pkg::*;
#(
  parameter int W_ROWS = 64,
  parameter int QBITS  = 5
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [W_ROWS-1:0]                  q_neg,
  input  logic [W_ROWS-1:0][QBITS-1:0]       q_mag,
  output logic [CELLS_PER_WEIGHT*W_ROWS-1:0] rwl_p,
  output logic [CELLS_PER_WEIGHT*W_ROWS-1:0] rwl_n,
  output logic                               busy,
  output logic                               done
);

  localparam int MAC_CYCLES = ((1 << QBITS) - 1) * (1 << (CELLS_PER_WEIGHT - 1));
  localparam int TW         = $clog2(MAC_CYCLES + 1);

  logic [W_ROWS-1:0]            neg_q;
  logic [W_ROWS-1:0][QBITS-1:0] mag_q;
  logic [TW-1:0]                t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      t     <= '0;
      neg_q <= '0;
      mag_q <= '0;
    end else if (start && !busy) begin
      busy  <= 1'b1;
      t     <= '0;
      neg_q <= q_neg;
      mag_q <= q_mag;
    end else if (busy) begin
      if (t == TW'(MAC_CYCLES - 1)) begin
        busy <= 1'b0;
        t    <= '0;
      end else begin
        t <= t + 1'b1;
      end
    end
  end

  assign done = busy && (t == TW'(MAC_CYCLES - 1));

  always_comb begin
    for (int r = 0; r < W_ROWS; r++) begin
      for (int j = 0; j < CELLS_PER_WEIGHT; j++) begin
        logic on;
        on = busy && (int'(t) < (int'(mag_q[r]) << j));
        rwl_p[CELLS_PER_WEIGHT*r + j] = on && !neg_q[r];
        rwl_n[CELLS_PER_WEIGHT*r + j] = on &&  neg_q[r];
      end
    end
  end

endmodule
