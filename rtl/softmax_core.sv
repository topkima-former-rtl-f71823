// softmax_core: digital softmax over the k selected attention logits.
//
// Input entries carry the ramp conversion cycle at which each selected
// column crossed; an earlier cycle means a larger logit, and one cycle is
// one ADC code, worth delta in logit units. Since softmax is unchanged by
// subtracting the largest logit, exp(x_i - x_max) = R^(cyc_i - cyc_min)
// with R = exp(-delta). The core
//   1. finds cyc_min over the valid entries            (1 cycle)
//   2. looks up e_i = R^(cyc_i - cyc_min) in a Q16 table
//      and accumulates the sum, one entry per cycle    (K cycles)
//   3. divides, one entry at a time, with a restoring
//      divider: prob_i = round(e_i * (2^PROB_BITS-1) / sum)
//                                                      (K * (PROB_BITS+1) cycles)
// The table (32 entries) is computed at elaboration as
// lut[0] = 2^16, lut[d] = round(lut[d-1] * R_Q16 / 2^16).
// The paper only names a digital softmax core taken from earlier work;
// everything inside this module, and the default delta = 0.25
// (R_Q16 = round(2^16 * e^-0.25) = 51039), is this design's choice. The
// 5-bit output matches the paper's 5-bit quantization of A.
//
// Interface: start (1 cycle) samples in_valid/in_cyc; done pulses when
// prob is ready, 3 + K*(PROB_BITS+2) cycles after start (4 + K when no
// entry is valid); invalid entries get probability 0.
module softmax_core
  import topkima_pkg::*;
#(
  parameter int K         = 5,
  parameter int PROB_BITS = 5,
  parameter int R_Q16     = 51039
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [K-1:0]                  in_valid,
  input  logic [K-1:0][ADC_BITS-1:0]    in_cyc,
  output logic                          busy,
  output logic                          done,
  output logic [K-1:0][PROB_BITS-1:0]   prob
);

  localparam int NLUT = 1 << ADC_BITS;
  localparam int EW   = 17;                       // e_i in Q16, <= 2^16
  localparam int SW   = EW + $clog2(K + 1);       // sum width
  localparam int NW   = SW + PROB_BITS + 1;       // numerator width
  localparam int IW   = (K > 1) ? $clog2(K) : 1;
  localparam int BW   = (PROB_BITS > 1) ? $clog2(PROB_BITS) : 1;

  typedef logic [NLUT-1:0][EW-1:0] lut_t;

  function automatic lut_t make_lut();
    lut_t   l;
    longint v;
    v = 64'd65536;
    for (int d = 0; d < NLUT; d++) begin
      l[d] = EW'(v);
      v = (v * R_Q16 + 64'd32768) >>> 16;
    end
    return l;
  endfunction

  localparam lut_t LUT = make_lut();

  typedef enum logic [2:0] {S_IDLE, S_MIN, S_EXP, S_DIV_LOAD, S_DIV, S_DONE} state_t;

  state_t                     state;
  logic [K-1:0]               valid_q;
  logic [K-1:0][ADC_BITS-1:0] cyc_q;
  logic [ADC_BITS-1:0]        cyc_min;
  logic [K-1:0][EW-1:0]       e_q;
  logic [SW-1:0]              sum;
  logic [IW-1:0]              idx;
  logic [BW-1:0]              bitn;
  logic [NW-1:0]              rem;
  logic [PROB_BITS-1:0]       quo;

  // Smallest conversion cycle among the valid entries (largest logit).
  logic [ADC_BITS-1:0] min_c;
  always_comb begin
    min_c = '1;
    for (int i = 0; i < K; i++)
      if (valid_q[i] && cyc_q[i] < min_c) min_c = cyc_q[i];
  end

  wire [NW-1:0] div_shift = NW'(sum) << bitn;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      valid_q <= '0;
      cyc_q   <= '0;
      cyc_min <= '0;
      e_q     <= '0;
      sum     <= '0;
      idx     <= '0;
      bitn    <= '0;
      rem     <= '0;
      quo     <= '0;
      prob    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          valid_q <= in_valid;
          cyc_q   <= in_cyc;
          state   <= S_MIN;
        end
        S_MIN: begin
          cyc_min <= min_c;
          sum     <= '0;
          idx     <= '0;
          state   <= S_EXP;
        end
        S_EXP: begin
          logic [EW-1:0] e;
          e = valid_q[idx] ? LUT[cyc_q[idx] - cyc_min] : '0;
          e_q[idx] <= e;
          sum      <= sum + SW'(e);
          if (int'(idx) == K - 1) begin
            idx   <= '0;
            state <= S_DIV_LOAD;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DIV_LOAD: begin
          // rounded numerator e_i * (2^P - 1) + sum/2
          rem   <= NW'(e_q[idx]) * NW'((1 << PROB_BITS) - 1) + NW'(sum >> 1);
          quo   <= '0;
          bitn  <= BW'(PROB_BITS - 1);
          state <= (sum == '0) ? S_DONE : S_DIV;
        end
        S_DIV: begin
          logic [PROB_BITS-1:0] qn;
          qn = quo;
          if (rem >= div_shift) begin
            rem      <= rem - div_shift;
            qn[bitn] = 1'b1;
          end
          quo <= qn;
          if (bitn == '0) begin
            prob[idx] <= qn;
            if (int'(idx) == K - 1) begin
              state <= S_DONE;
            end else begin
              idx   <= idx + 1'b1;
              state <= S_DIV_LOAD;
            end
          end else begin
            bitn <= bitn - 1'b1;
          end
        end
        S_DONE: begin
          if (sum == '0) prob <= '0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
