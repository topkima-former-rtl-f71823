// sram_imc_array: behavioural model of the dual 10T SRAM in-memory-ADC array.
//
// This is a behavioural model of an analog block (bit cells, pre-charged
// read bit lines, replica cells and sense amplifiers), not a circuit. It has
// the real part's ports and reproduces its function in integer "discharge
// units" so that the digital top-k logic around it can be simulated.
//
// MAC: every cycle that a cell row's +RWL (or -RWL) is high, each column
// adds (or subtracts) that cell's ternary value to its MAC level, following
// the paper's input x weight table. A weight's three cells see 1x, 2x and 4x
// wide pulses, so after the PWM window acc[c] = sum_r q_r * w_rc.
//
// Ramp ADC: the 32 calibration replica cells are pulsed together in one
// cycle and set the ramp start to 32*UNIT; each later ramp pulse lowers the
// ramp by UNIT (one ramp replica cell). The ramp therefore falls, and a
// column's sense amplifier fires at the first ramp pulse whose level is at
// or below its MAC level: larger MACs fire earlier. Firing at ramp pulse
// r (1..32) means floor(acc/UNIT) = 32-r, clamped to 31; negative MACs never
// fire. UNIT, the worth of one replica pulse in MAC units, is this design's
// assumption; the paper sets it by circuit sizing and calibration.
//
// Sense amplifiers: compare on the clock edge of each ramp pulse and latch.
// A latched output is a request (req) and stays high until ack; ack also
// disables that amplifier until the next pre-charge, as in the paper's
// AER-style scheme.
//
// Write port: one weight row (its three cell rows) per cycle, as in the
// paper's row-by-row writing (64 writes of 5 ns = 320 ns).
//
// Timing: precharge (1 cycle) clears the MAC levels, ramp, latches and
// disables; all other inputs act on the rising clock edge.
module sram_imc_array
  import topkima_pkg::*;
#(
  parameter int COLS   = 256,
  parameter int W_ROWS = 64,
  parameter int UNIT   = 64
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   precharge,
  input  logic                                   wr_en,
  input  logic [$clog2(W_ROWS)-1:0]              wr_row,
  input  cell_t [CELLS_PER_WEIGHT-1:0][COLS-1:0] wr_cells,
  input  logic [CELLS_PER_WEIGHT*W_ROWS-1:0]     rwl_p,
  input  logic [CELLS_PER_WEIGHT*W_ROWS-1:0]     rwl_n,
  input  logic [N_CAL-1:0]                       cal_pulse,
  input  logic [N_RAMP-1:0]                      ramp_pulse,
  input  logic [COLS-1:0]                        ack,
  output logic [COLS-1:0]                        req
);

  localparam int CELL_ROWS = CELLS_PER_WEIGHT * W_ROWS;
  localparam int CW        = $clog2(CELL_ROWS + 1);

  int              acc   [COLS];     // MAC level per column, discharge units
  int              ramp_level;       // current ramp level, discharge units
  int              next_ramp;
  logic [COLS-1:0] sa_en;
  logic            ramp_any;

  // Replica cells: calibration pulses raise the ramp start, ramp pulses
  // lower it, UNIT per pulse.
  assign next_ramp = ramp_level + UNIT * ($countones(cal_pulse) - $countones(ramp_pulse));
  assign ramp_any  = |ramp_pulse;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ramp_level <= 0;
    else if (precharge) ramp_level <= 0;
    else                ramp_level <= next_ramp;
  end

  // One bit-line pair and sense amplifier per column.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    cell_t [CELL_ROWS-1:0] cells;   // this column's bit cells
    logic [CELL_ROWS-1:0] up, dn;   // cells adding +1 / -1 this cycle
    logic [CW-1:0]        n_up, n_dn;
    int                   d;        // discharge added this cycle

    always_comb begin
      for (int r = 0; r < CELL_ROWS; r++) begin
        up[r] = (rwl_p[r] && !rwl_n[r] && cells[r] == CELL_POS) ||
                (rwl_n[r] && !rwl_p[r] && cells[r] == CELL_NEG);
        dn[r] = (rwl_p[r] && !rwl_n[r] && cells[r] == CELL_NEG) ||
                (rwl_n[r] && !rwl_p[r] && cells[r] == CELL_POS);
      end
      n_up = '0;
      n_dn = '0;
      for (int r = 0; r < CELL_ROWS; r++) begin
        n_up = n_up + CW'(up[r]);
        n_dn = n_dn + CW'(dn[r]);
      end
      d = int'(n_up) - int'(n_dn);
    end

    // Write port (no reset: contents are written before use).
    always_ff @(posedge clk) begin
      if (wr_en)
        for (int j = 0; j < CELLS_PER_WEIGHT; j++)
          cells[CELLS_PER_WEIGHT*int'(wr_row) + j] <= wr_cells[j][c];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc[c]   <= 0;
        sa_en[c] <= 1'b0;
        req[c]   <= 1'b0;
      end else if (precharge) begin
        acc[c]   <= 0;
        sa_en[c] <= 1'b1;
        req[c]   <= 1'b0;
      end else begin
        acc[c] <= acc[c] + d;
        if (ack[c]) begin
          req[c]   <= 1'b0;
          sa_en[c] <= 1'b0;
        end else if (ramp_any && sa_en[c] && !req[c] && (acc[c] >= next_ramp)) begin
          req[c] <= 1'b1;
        end
      end
    end
  end

endmodule
