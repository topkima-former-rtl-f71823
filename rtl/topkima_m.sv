// topkima_m: top-k in-memory ADC macro for one sub-crossbar of K^T.
//
// Computes q . K^T for one query vector against COLS key columns and returns
// only the KMAX (or k, if smaller) largest results, without sorting. The
// word-line drivers apply q as PWM pulses; the array accumulates the MAC on
// its bit lines; a falling ramp then crosses the largest MAC levels first,
// so the order in which sense amplifiers fire is the sort order. Fired
// columns are served by the arbiter-encoder lowest address first, each
// grant stores (address, conversion cycle) in the result registers and
// increments the counter, and the conversion stops when the counter reaches
// k. The block structure (WL drivers, MAC and ramp arrays, SA, arbiter +
// encoder, register, counter, Cnt==k -> Stop Ramp) is the paper's; timing
// details are this design's (see ima_controller).
//
// Interface:
//   kt_wr_*   one K^T row (COLS sign-magnitude 4-bit weights) per cycle
//   start     begin a conversion of (q_neg, q_mag) with top-k = k
//   done      one-cycle pulse; out_* then hold the entries, entry 0 is the
//             largest; out_cyc is the ramp cycle (ADC code = 31 - cyc)
//   early_stop  conversion ended because k columns were found
//   stall_steps number of ramp steps lengthened by arbitration
// Latency: 1 + 124 + 1 + sum of ramp steps (8 cycles each when no more
// than one column fires) + 1.
module topkima_m
  import topkima_pkg::*;
#(
  parameter int COLS        = 256,
  parameter int W_ROWS      = 64,
  parameter int QBITS       = 5,
  parameter int KMAX        = 3,
  parameter int UNIT        = 64,
  parameter int RAMP_PERIOD = 8,
  parameter int ARB_PERIOD  = 5,
  parameter int AW          = $clog2(COLS),
  parameter int KW          = $clog2(KMAX + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              kt_wr_en,
  input  logic [$clog2(W_ROWS)-1:0]         kt_wr_row,
  input  logic [COLS-1:0][W_BITS-1:0]       kt_wr_data,
  input  logic                              start,
  input  logic [KW-1:0]                     k,
  input  logic [N_CAL-1:0]                  cal_mask,
  input  logic [W_ROWS-1:0]                 q_neg,
  input  logic [W_ROWS-1:0][QBITS-1:0]      q_mag,
  output logic                              busy,
  output logic                              done,
  output logic [KMAX-1:0]                   out_valid,
  output logic [KMAX-1:0][AW-1:0]           out_addr,
  output logic [KMAX-1:0][ADC_BITS-1:0]     out_cyc,
  output logic [KW-1:0]                     count,
  output logic                              early_stop,
  output logic [ADC_BITS:0]                 stall_steps
);

  localparam int CELL_ROWS = CELLS_PER_WEIGHT * W_ROWS;

  cell_t [CELLS_PER_WEIGHT-1:0][COLS-1:0] wr_cells;
  logic [CELL_ROWS-1:0] rwl_p, rwl_n;
  logic                 pwm_busy, pwm_done;
  logic                 precharge, clr, pwm_start, arb_en, stop;
  logic [N_CAL-1:0]     cal_pulse;
  logic [N_RAMP-1:0]    ramp_pulse;
  logic [ADC_BITS-1:0]  cyc;
  logic [COLS-1:0]      req, ack;
  logic                 gnt_valid;
  logic [AW-1:0]        gnt_addr;
  logic [KW-1:0]        k_eff;

  assign k_eff = (int'(k) > KMAX) ? KW'(KMAX) : k;

  kt_weight_encoder #(.COLS(COLS)) u_enc (
    .w     (kt_wr_data),
    .cells (wr_cells)
  );

  wl_pwm_driver #(.W_ROWS(W_ROWS), .QBITS(QBITS)) u_wl (
    .clk, .rst_n,
    .start (pwm_start),
    .q_neg, .q_mag,
    .rwl_p, .rwl_n,
    .busy  (pwm_busy),
    .done  (pwm_done)
  );

  sram_imc_array #(.COLS(COLS), .W_ROWS(W_ROWS), .UNIT(UNIT)) u_array (
    .clk, .rst_n,
    .precharge,
    .wr_en    (kt_wr_en),
    .wr_row   (kt_wr_row),
    .wr_cells (wr_cells),
    .rwl_p, .rwl_n,
    .cal_pulse, .ramp_pulse,
    .ack, .req
  );

  ima_controller #(.RAMP_PERIOD(RAMP_PERIOD), .ARB_PERIOD(ARB_PERIOD)) u_ctrl (
    .clk, .rst_n,
    .start, .cal_mask,
    .pwm_done,
    .stop,
    .req_any (|req),
    .busy,
    .precharge, .clr, .pwm_start,
    .cal_pulse, .ramp_pulse,
    .arb_en, .cyc,
    .done, .early_stop, .stall_steps
  );

  topk_arbiter_encoder #(.N(COLS)) u_arb (
    .req, .en (arb_en),
    .ack, .valid (gnt_valid), .addr (gnt_addr)
  );

  topk_counter #(.KMAX(KMAX), .CW(KW)) u_cnt (
    .clk, .rst_n, .clr,
    .inc (gnt_valid),
    .k   (k_eff),
    .count, .stop
  );

  // Rules of the REQ/ACK handshake: at most one ACK per cycle, only to a
  // requesting column, and no grant once k entries are held.
  a_ack_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ack));
  a_ack_to_req: assert property (@(posedge clk) disable iff (!rst_n) (ack & ~req) == '0);
  a_no_grant_after_stop: assert property (@(posedge clk) disable iff (!rst_n) stop |-> !gnt_valid);
  a_one_ramp_pulse: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ramp_pulse));
  a_no_ramp_in_mac: assert property (@(posedge clk) disable iff (!rst_n) pwm_busy |-> (ramp_pulse == '0 && cal_pulse == '0));

  topk_register #(.K(KMAX), .ADDR_W(AW), .CYC_W(ADC_BITS), .SW(KW)) u_reg (
    .clk, .rst_n, .clr,
    .we   (gnt_valid),
    .slot (count),
    .addr (gnt_addr),
    .cyc  (cyc),
    .out_valid, .out_addr, .out_cyc
  );

endmodule
