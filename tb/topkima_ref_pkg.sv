// topkima_ref_pkg: reference model used by the macro-level testbenches.
//
// Works from integer key/query values, not from the RTL: the MAC of a
// column is sum_r q_r * w_rc; the ramp ADC fires a column with MAC >= 0 at
// conversion cycle 31 - min(31, floor(MAC/UNIT)); the top-k list is the
// firing columns ordered by (cycle, address), cut to k; the conversion
// latency is 127 cycles plus the ramp steps, a step lasting
// max(RAMP_PERIOD, n*ARB_PERIOD + 2) cycles for n grants or m*ARB_PERIOD + 2
// when the k-th grant ends it; the softmax is
// round(31 * R^(c_i - c_min) / sum_j R^(c_j - c_min)) with R^d taken from the
// Q16 recurrence lut[d] = round(lut[d-1] * R_Q16 / 2^16).
package topkima_ref_pkg;

  typedef struct {
    int n;            // entries found
    int addr [8];
    int cyc  [8];
    int latency;      // cycles from start to done of the macro
    bit early;        // ended by the counter
    int stalls;       // steps longer than RAMP_PERIOD
    bit tie_drop;     // a step had more requests than free places
  } sel_t;

  function automatic int fire_cycle(int mac, int unit);
    int code;
    if (mac < 0) return -1;
    code = mac / unit;
    if (code > 31) code = 31;
    return 31 - code;
  endfunction

  function automatic sel_t select(const ref int mac [], input int k, int unit, int rp, int ap);
    sel_t s;
    s.n = 0; s.latency = 127; s.early = 0; s.stalls = 0; s.tie_drop = 0;
    for (int c = 0; c < 32; c++) begin
      int n;
      n = 0;
      for (int a = 0; a < mac.size(); a++) begin
        if (fire_cycle(mac[a], unit) == c) begin
          if (s.n < k) begin
            s.addr[s.n] = a; s.cyc[s.n] = c; s.n++;
            n++;
          end else begin
            s.tie_drop = 1;
          end
        end
      end
      if (s.n >= k && k > 0) begin
        s.latency += n * ap + 2;
        if (n * ap + 2 > rp) s.stalls++;
        s.early = 1;
        return s;
      end
      if (n * ap + 2 > rp) begin
        s.latency += n * ap + 2;
        s.stalls++;
      end else begin
        s.latency += rp;
      end
    end
    return s;
  endfunction

  function automatic int lut(int d, int r_q16);
    longint v;
    v = 65536;
    for (int i = 0; i < d; i++) v = (v * r_q16 + 32768) >>> 16;
    return int'(v);
  endfunction

  // probabilities for a list of cycles (valid entries only)
  function automatic void softmax(const ref int cyc [], const ref bit valid [], input int r_q16, int pbits,
                                  ref int prob []);
    int mn;
    longint sum;
    longint e [];
    e = new[cyc.size()];
    mn = 1000;
    for (int i = 0; i < cyc.size(); i++) if (valid[i] && cyc[i] < mn) mn = cyc[i];
    sum = 0;
    for (int i = 0; i < cyc.size(); i++) begin
      e[i] = valid[i] ? lut(cyc[i] - mn, r_q16) : 0;
      sum += e[i];
    end
    for (int i = 0; i < cyc.size(); i++)
      prob[i] = (sum == 0) ? 0 : int'((e[i] * ((1 << pbits) - 1) + sum / 2) / sum);
  endfunction

endpackage
