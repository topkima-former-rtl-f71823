// tb_ima_controller: checks the conversion sequence and its cycle counts.
// The testbench stands in for the array, arbiter and counter: at each ramp
// pulse a scripted number of columns starts requesting, every arb_en grants
// one, and stop rises once k grants were made. It checks: one pre-charge
// cycle, a 124-cycle MAC phase, one cycle with all 32 calibration pulses,
// ramp pulses one-hot in order 0..31, one grant per ARB_PERIOD, and the
// start-to-done latency 127 + sum of step lengths, with a step lasting
// max(RAMP_PERIOD, n*ARB_PERIOD + 2) cycles for n grants (m*ARB_PERIOD + 2
// if cut short by the counter). Scenarios: no requests (full ramp), a few
// spread out (early stop), a burst larger than k (stall, early stop).
module tb_ima_controller;
  import topkima_pkg::*;
  localparam int RP = 8, AP = 5;
  logic clk = 0, rst_n = 0, start = 0, pwm_done, stop, req_any;
  logic [N_CAL-1:0] cal_mask, cal_pulse;
  logic busy, precharge, clr, pwm_start, arb_en, done, early_stop;
  logic [N_RAMP-1:0] ramp_pulse;
  logic [ADC_BITS-1:0] cyc;
  logic [ADC_BITS:0] stall_steps;
  int checks = 0, failures = 0;
  int new_req [32];
  int pending, grants, kk, pwm_t, lat, n_pre, n_cal, ramp_seen, last_ramp, last_grant;
  bit in_pwm;

  ima_controller #(.RAMP_PERIOD(RP), .ARB_PERIOD(AP)) dut (.*);
  always #1 clk = ~clk;

  assign req_any = pending > 0;
  assign stop    = grants >= kk;

  // Stand-in for the PWM driver (124-cycle window) and the request side.
  always @(posedge clk) begin
    if (pwm_start) begin in_pwm <= 1; pwm_t <= 0; end
    else if (in_pwm) begin
      pwm_t <= pwm_t + 1;
      if (pwm_t == 123) in_pwm <= 0;
    end
    if (clr) begin pending <= 0; grants <= 0; end
    else begin
      pending <= pending + ((ramp_pulse != 0) ? new_req[cyc] : 0) - (arb_en ? 1 : 0);
      if (arb_en) grants <= grants + 1;
    end
  end
  assign pwm_done = in_pwm && pwm_t == 123;

  task automatic run(int k_in, int exp_lat, bit exp_early, int exp_grants, int exp_stalls);
    kk = k_in;
    n_pre = 0; n_cal = 0; ramp_seen = 0; last_ramp = -1; lat = 0; last_grant = -100;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done && lat < 2000) begin
      if (precharge) n_pre++;
      if (cal_pulse != 0) begin
        n_cal++;
        checks++; if (cal_pulse != '1) begin failures++; $display("FAIL cal pattern"); end
      end
      if (ramp_pulse != 0) begin
        checks++;
        if (ramp_pulse != (N_RAMP'(1) << (last_ramp + 1))) begin failures++; $display("FAIL ramp order %b", ramp_pulse); end
        last_ramp++; ramp_seen++;
      end
      if (arb_en) begin
        checks++;
        if (lat - last_grant < AP) begin failures++; $display("FAIL grants too close"); end
        last_grant = lat;
      end
      lat++;
      @(negedge clk);
    end
    checks++;
    if (lat != exp_lat || n_pre != 1 || n_cal != 1 || early_stop != exp_early || grants != exp_grants || int'(stall_steps) != exp_stalls) begin
      failures++;
      $display("FAIL run k=%0d: lat=%0d exp %0d pre=%0d cal=%0d early=%b grants=%0d stalls=%0d ramps=%0d",
               k_in, lat, exp_lat, n_pre, n_cal, early_stop, grants, stall_steps, ramp_seen);
    end
  endtask

  initial begin
    cal_mask = '1; pending = 0; grants = 0; in_pwm = 0; pwm_t = 0; kk = 3;
    for (int i = 0; i < 32; i++) new_req[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1: nothing fires: 32 steps of RP cycles
    run(3, 127 + 32 * RP, 0, 0, 0);
    // 2: one column at steps 3, 10 and 20 -> stop in step 20 after 1 grant
    new_req[3] = 1; new_req[10] = 1; new_req[20] = 1;
    run(3, 127 + 20 * RP + (1 * AP + 2), 1, 3, 0);
    // 3: burst of 4 at step 5 with k = 3: 3 grants, cut short, stall
    for (int i = 0; i < 32; i++) new_req[i] = 0;
    new_req[5] = 4;
    run(3, 127 + 5 * RP + (3 * AP + 2), 1, 3, 1);
    // 4: 2 at step 0 (step of max(8, 12) = 12 cycles), then nothing, k = 5
    for (int i = 0; i < 32; i++) new_req[i] = 0;
    new_req[0] = 2;
    run(5, 127 + (2 * AP + 2) + 31 * RP, 0, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
