// topkima_sm: top-k in-memory softmax macro for one attention head.
//
// Takes one (already 1/sqrt(d_k)-scaled) query row q and produces the
// attention-score row A = softmax(q . K^T) restricted to its k = K0+K1
// largest entries, for d = COLS0+COLS1 keys. K^T does not fit one
// crossbar, so it is split over two topkima_m macros: columns 0..COLS0-1
// with a sub-top-K0 selection and columns COLS0.. with a sub-top-K1
// selection ("sub top-k"). Both convert in parallel; their result lists
// are joined (array 1 addresses offset by COLS0) and passed to the digital
// softmax, which normalises over the joined list. The defaults are the
// paper's BERT-base configuration: d = 384 split 256 + 128, k = 3 + 2,
// 64 weight rows (192 cell rows) per crossbar.
//
// Interface:
//   kt_wr_*  write one of the W_ROWS rows of K^T (all d weights, 4-bit
//            sign-magnitude) per cycle; 64 cycles load a head
//   start    run one query row; done pulses when a_* are valid
//   a_valid/a_idx/a_code/a_prob   the sparse A row: key index, 5-bit ADC
//            code of the logit (31 = largest) and 5-bit probability
//   early_stop[i], stall_steps_*, count_*  per sub-array status of the
//            conversion (ended by reaching k, lengthened steps, entries found)
// Latency: the softmax starts in the cycle the slower sub-array reports
// done, so start-to-done is that sub-array's latency plus
// 3 + K*(PROB_BITS+2) cycles (4 + K if no entry was found).
module topkima_sm
  import topkima_pkg::*;
#(
  parameter int COLS0       = 256,
  parameter int COLS1       = 128,
  parameter int K0          = 3,
  parameter int K1          = 2,
  parameter int W_ROWS      = 64,
  parameter int QBITS       = 5,
  parameter int UNIT        = 64,
  parameter int RAMP_PERIOD = 8,
  parameter int ARB_PERIOD  = 5,
  parameter int PROB_BITS   = 5,
  parameter int R_Q16       = 51039,
  parameter int D           = COLS0 + COLS1,
  parameter int K           = K0 + K1,
  parameter int IDXW        = $clog2(D)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          kt_wr_en,
  input  logic [$clog2(W_ROWS)-1:0]     kt_wr_row,
  input  logic [D-1:0][W_BITS-1:0]      kt_wr_data,
  input  logic [N_CAL-1:0]              cal_mask,
  input  logic                          start,
  input  logic [W_ROWS-1:0]             q_neg,
  input  logic [W_ROWS-1:0][QBITS-1:0]  q_mag,
  output logic                          busy,
  output logic                          done,
  output logic [K-1:0]                  a_valid,
  output logic [K-1:0][IDXW-1:0]        a_idx,
  output logic [K-1:0][ADC_BITS-1:0]    a_code,
  output logic [K-1:0][PROB_BITS-1:0]   a_prob,
  output logic [1:0]                    early_stop,
  output logic [ADC_BITS:0]             stall_steps_0,
  output logic [ADC_BITS:0]             stall_steps_1,
  output logic [$clog2(K0+1)-1:0]       count_0,
  output logic [$clog2(K1+1)-1:0]       count_1
);

  localparam int AW0 = $clog2(COLS0);
  localparam int AW1 = $clog2(COLS1);
  localparam int KW0 = $clog2(K0 + 1);
  localparam int KW1 = $clog2(K1 + 1);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_SOFTMAX} state_t;

  state_t state;
  logic   done0, done1, fin0, fin1, busy0, busy1;
  logic   sm_start, sm_busy, sm_done;

  logic [K0-1:0]                 v0;
  logic [K0-1:0][AW0-1:0]        addr0;
  logic [K0-1:0][ADC_BITS-1:0]   cyc0;
  logic [K1-1:0]                 v1;
  logic [K1-1:0][AW1-1:0]        addr1;
  logic [K1-1:0][ADC_BITS-1:0]   cyc1;

  logic [K-1:0]                  j_valid;
  logic [K-1:0][ADC_BITS-1:0]    j_cyc;

  topkima_m #(
    .COLS(COLS0), .W_ROWS(W_ROWS), .QBITS(QBITS), .KMAX(K0), .UNIT(UNIT),
    .RAMP_PERIOD(RAMP_PERIOD), .ARB_PERIOD(ARB_PERIOD)
  ) u_m0 (
    .clk, .rst_n,
    .kt_wr_en, .kt_wr_row,
    .kt_wr_data  (kt_wr_data[COLS0-1:0]),
    .start       (start && state == S_IDLE),
    .k           (KW0'(K0)),
    .cal_mask,
    .q_neg, .q_mag,
    .busy        (busy0),
    .done        (done0),
    .out_valid   (v0), .out_addr (addr0), .out_cyc (cyc0),
    .count       (count_0),
    .early_stop  (early_stop[0]),
    .stall_steps (stall_steps_0)
  );

  topkima_m #(
    .COLS(COLS1), .W_ROWS(W_ROWS), .QBITS(QBITS), .KMAX(K1), .UNIT(UNIT),
    .RAMP_PERIOD(RAMP_PERIOD), .ARB_PERIOD(ARB_PERIOD)
  ) u_m1 (
    .clk, .rst_n,
    .kt_wr_en, .kt_wr_row,
    .kt_wr_data  (kt_wr_data[D-1:COLS0]),
    .start       (start && state == S_IDLE),
    .k           (KW1'(K1)),
    .cal_mask,
    .q_neg, .q_mag,
    .busy        (busy1),
    .done        (done1),
    .out_valid   (v1), .out_addr (addr1), .out_cyc (cyc1),
    .count       (count_1),
    .early_stop  (early_stop[1]),
    .stall_steps (stall_steps_1)
  );

  // Join the two sub-top-k lists into the global list of K entries.
  always_comb begin
    for (int i = 0; i < K0; i++) begin
      j_valid[i] = v0[i];
      j_cyc[i]   = cyc0[i];
      a_idx[i]   = IDXW'(addr0[i]);
    end
    for (int i = 0; i < K1; i++) begin
      j_valid[K0+i] = v1[i];
      j_cyc[K0+i]   = cyc1[i];
      a_idx[K0+i]   = IDXW'(COLS0) + IDXW'(addr1[i]);
    end
    for (int i = 0; i < K; i++)
      a_code[i] = ADC_BITS'(N_RAMP - 1) - j_cyc[i];
  end
  assign a_valid = j_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      fin0  <= 1'b0;
      fin1  <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_CONV;
          fin0  <= 1'b0;
          fin1  <= 1'b0;
        end
        S_CONV: begin
          if (done0) fin0 <= 1'b1;
          if (done1) fin1 <= 1'b1;
          if (sm_start) state <= S_SOFTMAX;
        end
        S_SOFTMAX: if (sm_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign sm_start = (state == S_CONV) && (fin0 || done0) && (fin1 || done1);
  assign done     = sm_done;
  assign busy     = (state != S_IDLE) || busy0 || busy1 || sm_busy;

  softmax_core #(.K(K), .PROB_BITS(PROB_BITS), .R_Q16(R_Q16)) u_sm (
    .clk, .rst_n,
    .start    (sm_start),
    .in_valid (j_valid),
    .in_cyc   (j_cyc),
    .busy     (sm_busy),
    .done     (sm_done),
    .prob     (a_prob)
  );

endmodule
