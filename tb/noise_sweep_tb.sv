// noise_sweep_tb: the ten-pulse readout demonstration at three noise levels.
//
// Same stimulus as the end-to-end test (30 MHz tone of 8 us, 3932 samples
// per pulse at 491.52 Msample/s, amplitude 0.4 full scale, mu = 10/2^14,
// 64 taps, d = running ensemble average), repeated for white-noise
// deviations of 0.2, 0.4 and 0.8 full-scale units, with the filter reset
// between runs. For each run it checks every e beat against a model of the
// synchroniser, that mean e^2 of pulse 10 is below half that of pulse 1
// (it cannot fall below the noise left in d, sigma^2/10 after ten pulses),
// and that the filter output y of pulse 10 is closer to the clean tone than
// the input x is (mean squared distance below half).
module noise_sweep_tb;
  import lms_pkg::*;

  localparam int    NT        = lms_pkg::MAX_TAPS;
  localparam int    PULSE_LEN = 3932;       // 8 us at 491.52 Msample/s
  localparam int    N_PULSES  = 10;
  localparam real   FS        = 491.52e6;
  localparam real   F0        = 30.0e6;
  localparam real   AMP       = 0.4;
  localparam real   SCALE     = 16384.0;
  localparam real   PI        = 3.14159265358979;

  logic        clk = 1'b0, reset_n = 1'b0;
  logic [31:0] mu = 32'd10;
  tap_idx_t    taps = tap_idx_t'(NT - 1);
  sample_t     x_tdata = '0, d_tdata = '0;
  logic        x_tlast = 1'b0, x_tvalid = 1'b0, x_tready;
  logic        d_tlast = 1'b0, d_tvalid = 1'b0, d_tready;
  sample_t     e_tdata;
  logic        e_tlast, e_tvalid, e_tready = 1'b1;
  sample_t     y_mon_tdata;
  logic        y_mon_tlast, y_mon_valid;
  weight_t     weight_tdata;
  tap_idx_t    weight_index;
  logic        weight_tvalid, weight_tlast, weight_clipped;
  logic        fir_reload_done, sync_realign;

  lms_filter_top dut (.*);

  always #1 clk = ~clk;   // period is arbitrary; time is counted in clocks

  int unsigned checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
  endtask

  // ---- stimulus queues -------------------------------------------------------
  typedef struct { sample_t v; bit last; } beat_t;
  beat_t xq[$], dq[$];
  real   clean_q[$];               // clean tone for each queued x sample
  real   d_old [PULSE_LEN];
  real   SIGMA = 0.4;
  int    e_gaps = 0;

  function automatic sample_t quant(input real v);
    real s = v * SCALE;
    if (s > 32767.0) return 16'sh7fff;
    if (s < -32768.0) return 16'sh8000;
    return sample_t'($rtoi(s + ((s >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic real gauss();
    real u1 = (real'($urandom) + 1.0) / 4294967297.0;
    real u2 = (real'($urandom) + 1.0) / 4294967297.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  // pulse k of the ensemble: x and the updated running average d
  task automatic push_pulse(input int k, input int len, input int d_len);
    for (int j = 0; j < len; j++) begin
      automatic real c  = AMP * $sin(2.0 * PI * F0 * real'(j) / FS);
      automatic real xr = c + SIGMA * gauss();
      automatic sample_t xs = quant(xr);
      automatic real dn;
      beat_t b;
      b.v = xs; b.last = (j == len - 1);
      xq.push_back(b);
      clean_q.push_back(c);
      dn = (j < PULSE_LEN) ? (d_old[j] * real'(k) + real'(xs) / SCALE) / real'(k + 1)
                           : real'(xs) / SCALE;
      if (j < PULSE_LEN) d_old[j] = dn;
      if (j < d_len) begin
        b.v = quant(dn); b.last = (j == d_len - 1);
        dq.push_back(b);
      end
    end
    for (int j = len; j < d_len; j++) begin
      beat_t b;
      b.v = 16'sh0000; b.last = (j == d_len - 1);
      dq.push_back(b);
    end
  endtask

  // ---- drivers ---------------------------------------------------------------
  logic x_fire = 1'b0, d_fire = 1'b0;
  always @(posedge clk) begin
    x_fire <= x_tvalid && x_tready;
    d_fire <= d_tvalid && d_tready;
  end
  always @(negedge clk) if (reset_n) begin
    if (!x_tvalid || x_fire) begin
      if (xq.size() > 0) begin
        automatic beat_t b = xq.pop_front();
        x_tdata = b.v; x_tlast = b.last; x_tvalid = 1'b1;
      end else x_tvalid = 1'b0;
    end
    if (!d_tvalid || d_fire) begin
      if (dq.size() > 0) begin
        automatic beat_t b = dq.pop_front();
        d_tdata = b.v; d_tlast = b.last; d_tvalid = 1'b1;
      end else d_tvalid = 1'b0;
    end
    e_tready = (e_gaps == 0) || ($urandom_range(2) != 0);
  end

  // ---- monitors and models ---------------------------------------------------
  beat_t  ym[$], dm[$];
  beat_t  exp_e[$];
  real    clean_acc[$];            // clean tone of accepted x, matched to y
  longint n_x = 0, n_sets = 0, n_stall = 0, n_reload = 0, n_realign = 0;
  longint n_clip = 0, n_ebp = 0, n_sets_small = 0, n_e = 0;
  int     w_expect_idx = 0;
  int     phase = 0;
  int     e_pulse = 0, y_pulse = 0;
  real    e_pow [N_PULSES], y_err [N_PULSES], x_err [N_PULSES];
  int     e_cnt [N_PULSES], y_cnt [N_PULSES];
  real    x_err_acc = 0.0;

  always @(posedge clk) if (reset_n) begin
    if (x_tvalid && !x_tready) n_stall++;
    if (e_tvalid && !e_tready) n_ebp++;
    if (fir_reload_done) n_reload++;
    if (sync_realign) n_realign++;
    if (x_tvalid && x_tready) n_x++;

    // weight stream: indices 0..taps, TLAST on the last
    if (weight_tvalid) begin
      checks++;
      if (int'(weight_index) != w_expect_idx || weight_tlast != (w_expect_idx == int'(taps)))
        fail($sformatf("weight index %0d last %0d, expected %0d", weight_index, weight_tlast, w_expect_idx));
      if (weight_clipped) n_clip++;
      if (weight_tlast) begin
        w_expect_idx = 0; n_sets++;
        if (int'(taps) == 15) n_sets_small++;
      end else w_expect_idx++;
    end

    // y against the clean tone (phase 1 only)
    if (y_mon_valid) begin
      automatic beat_t b;
      b.v = y_mon_tdata; b.last = y_mon_tlast;
      ym.push_back(b);
      if (phase == 1 && y_pulse < N_PULSES) begin
        automatic real c = clean_q.pop_front();
        automatic real yv = real'(y_mon_tdata) / SCALE;
        y_err[y_pulse] += (yv - c) * (yv - c);
        y_cnt[y_pulse]++;
        if (y_mon_tlast) y_pulse++;
      end
    end
    if (d_tvalid && d_tready) begin
      automatic beat_t b;
      b.v = d_tdata; b.last = d_tlast;
      dm.push_back(b);
    end
    // synchroniser model
    while (ym.size() > 0 && dm.size() > 0) begin
      if (ym[0].last == dm[0].last) begin
        automatic beat_t b;
        automatic int dv = int'(dm[0].v) - int'(ym[0].v);
        b.v = sample_t'((dv > 32767) ? 32767 : (dv < -32768) ? -32768 : dv);
        b.last = dm[0].last;
        exp_e.push_back(b);
        void'(ym.pop_front()); void'(dm.pop_front());
      end else if (dm[0].last) begin
        void'(ym.pop_front());
      end else begin
        void'(dm.pop_front());
      end
    end

    if (e_tvalid && e_tready) begin
      checks++; n_e++;
      if (exp_e.size() == 0) fail("unexpected e beat");
      else begin
        automatic beat_t b = exp_e.pop_front();
        if (e_tdata != b.v || e_tlast != b.last)
          fail($sformatf("e=%0d last=%0d expected %0d last=%0d", e_tdata, e_tlast, b.v, b.last));
      end
      if (phase == 1 && e_pulse < N_PULSES) begin
        automatic real ev = real'(e_tdata) / SCALE;
        e_pow[e_pulse] += ev * ev;
        e_cnt[e_pulse]++;
        if (e_tlast) e_pulse++;
      end
    end
  end

  task automatic drain();
    wait (xq.size() == 0 && dq.size() == 0 && !x_tvalid && !d_tvalid);
    repeat (4 * NT + 20) @(negedge clk);
    checks++;
    if (exp_e.size() != 0) fail($sformatf("%0d e beats missing", exp_e.size()));
    checks++;
    if (n_sets != n_x) fail($sformatf("%0d weight sets for %0d x samples", n_sets, n_x));
  endtask

  initial begin
    real sig [3];
    sig[0] = 0.2; sig[1] = 0.4; sig[2] = 0.8;
    for (int r = 0; r < 3; r++) begin
      SIGMA = sig[r];
      x_err_acc = 0.0; e_pulse = 0; y_pulse = 0;
      for (int j = 0; j < PULSE_LEN; j++) d_old[j] = 0.0;
      for (int k = 0; k < N_PULSES; k++) begin
        e_pow[k] = 0.0; y_err[k] = 0.0; x_err[k] = 0.0; e_cnt[k] = 0; y_cnt[k] = 0;
      end
      reset_n = 1'b0;
      repeat (4) @(negedge clk);
      n_x = 0; n_sets = 0; w_expect_idx = 0;
      reset_n = 1'b1;
      phase = 1;
      for (int k = 0; k < N_PULSES; k++) push_pulse(k, PULSE_LEN, PULSE_LEN);
      for (int j = 0; j < PULSE_LEN; j++) begin
        automatic real xv = real'(xq[(N_PULSES - 1) * PULSE_LEN + j].v) / SCALE;
        automatic real c  = clean_q[(N_PULSES - 1) * PULSE_LEN + j];
        x_err_acc += (xv - c) * (xv - c);
      end
      drain();
      phase = 0;
      begin
        automatic real e1 = e_pow[0] / real'(e_cnt[0]);
        automatic real eN = e_pow[N_PULSES-1] / real'(e_cnt[N_PULSES-1]);
        automatic real yN = y_err[N_PULSES-1] / real'(y_cnt[N_PULSES-1]);
        automatic real xN = x_err_acc / real'(PULSE_LEN);
        $display("noise deviation %0.1f: pulse 1 mean e^2 %0.5f, pulse 10 mean e^2 %0.5f, (y - tone)^2 %0.5f, (x - tone)^2 %0.5f",
                 SIGMA, e1, eN, yN, xN);
        checks++;
        if (!(eN < 0.5 * e1)) fail("mean e^2 did not fall to half");
        checks++;
        if (!(yN < 0.5 * xN)) fail("y is not closer to the tone than x");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
