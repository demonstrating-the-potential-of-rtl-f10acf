// fir_reload_tb: self-checking testbench of the reloadable FIR filter.
//
// The testbench keeps its own copy of the shadow coefficient bank, a history
// of every committed bank (taken on the clock reload_done reports) and the x
// history of every accepted sample. When y appears it recomputes
// round(sum w[i]*x[n-i] / 2^42) with saturation to Q2.14, using the bank that
// was active when the sample was accepted, and compares. With y always
// ready it also checks the latency (y valid taps+2 clocks after the accept)
// and the sample spacing (taps+2 clocks). Phases: reload while idle, reloads
// arriving in the middle of an accumulation (the switch must wait for the
// sample to finish), random backpressure on y with 10 taps, large
// coefficients that saturate y.
module fir_reload_tb;
  import lms_pkg::*;

  localparam int unsigned NT = lms_pkg::MAX_TAPS;

  logic     clk = 1'b0, reset_n = 1'b0;
  tap_idx_t taps = tap_idx_t'(NT - 1);
  sample_t  x_tdata = '0;
  logic     x_tlast = 1'b0, x_tvalid = 1'b0, x_tready;
  weight_t  coef_tdata = '0;
  tap_idx_t coef_index = '0;
  logic     coef_tlast = 1'b0, coef_tvalid = 1'b0, reload_done;
  sample_t  y_tdata;
  logic     y_tlast, y_tvalid, y_tready = 1'b1;

  fir_reload dut (.*);

  always #5 clk = ~clk;

  // a beat counts as taken when valid and ready were both high at the edge
  logic x_fire = 1'b0;
  always @(posedge clk) x_fire <= x_tvalid && x_tready;

  int unsigned checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef longint bank_t [NT];
  typedef struct {
    longint x [NT];
    longint at;      // accept edge
    bit     last;
    int     ntaps;
  } samp_t;

  longint sh_now [NT];
  longint sh_prev [NT];       // shadow as it was before the previous edge's write
  longint bank_hist [$][NT];
  longint bank_at [$];
  longint xh [NT];
  samp_t  sq[$];
  int     timing_on = 1, commits = 0, sats = 0, mid_commits = 0, deferred = 0;
  longint tlast_at = 0;
  longint last_accept = -1;
  longint mac_start = -1, mac_end = -1;

  function automatic longint pick_bank_sum(input samp_t s, output bit sat);
    int b = -1;
    longint acc = 0, r;
    for (int k = 0; k < bank_at.size(); k++) if (bank_at[k] <= s.at) b = k;
    for (int i = 0; i < s.ntaps; i++) begin
      automatic longint w = (b < 0) ? 0 : bank_hist[b][i];
      // exact 70-bit product sum is not needed: |x*w| < 2^62 fits when w is
      // limited as in this testbench, and 64 terms are summed in 128 bits.
      acc += (s.x[i] * (w >>> 20));   // scaled to keep within 64 bits
    end
    sat = 0;
    // acc now holds sum * 2^-20 exactly because w's low 20 bits are zero
    r = (acc + (64'sd1 <<< 21)) >>> 22;
    if (r > 32767) begin r = 32767; sat = 1; end
    if (r < -32768) begin r = -32768; sat = 1; end
    return r;
  endfunction

  longint pending_prev [NT];
  always @(posedge clk) begin
    if (reset_n) begin
      // reload_done seen now: the copy was made at the previous edge, from
      // the shadow as it stood before that edge's write
      if (reload_done) begin
        bank_hist.push_back(sh_prev);
        bank_at.push_back(cycle - 1);
        commits++;
        if (cycle - 1 - tlast_at > 1) deferred++;
        if (mac_start >= 0 && cycle - 1 > mac_start && cycle - 1 <= mac_end) mid_commits++;
      end
      sh_prev = sh_now;
      if (coef_tvalid) sh_now[coef_index] = longint'(coef_tdata);
      if (coef_tvalid && coef_tlast) tlast_at = cycle;
      if (x_tvalid && x_tready) begin
        automatic samp_t s;
        for (int k = NT - 1; k > 0; k--) xh[k] = xh[k-1];
        xh[0] = longint'(x_tdata);
        s.x = xh; s.at = cycle; s.last = x_tlast; s.ntaps = int'(taps) + 1;
        sq.push_back(s);
        if (timing_on != 0 && last_accept >= 0) begin
          checks++;
          if (cycle - last_accept != longint'(int'(taps) + 2)) begin
            failures++; $display("FAIL: accept spacing %0d", cycle - last_accept);
          end
        end
        last_accept = cycle;
        mac_start = cycle; mac_end = cycle + int'(taps) + 1;
      end
      if (y_tvalid && y_tready) begin
        checks++;
        if (sq.size() == 0) begin
          failures++; $display("FAIL: unexpected y");
        end else begin
          automatic samp_t s = sq.pop_front();
          automatic bit sat;
          automatic longint e = pick_bank_sum(s, sat);
          if (sat) sats++;
          if (longint'(y_tdata) != e || y_tlast != s.last) begin
            failures++;
            $display("FAIL: y=%0d last=%0d expected %0d last=%0d (accepted @%0d)", y_tdata, y_tlast, e, s.last, s.at);
          end
          if (timing_on != 0) begin
            checks++;
            if (cycle != s.at + s.ntaps + 1) begin
              failures++; $display("FAIL: y latency %0d", cycle - s.at);
            end
          end
        end
      end
    end
  end

  // coefficients: multiples of 2^20 so the reference fits in 64 bits
  function automatic weight_t rnd_coef(input int mag_bits);
    longint v = longint'($urandom_range((1 << mag_bits) - 1)) - longint'(1 << (mag_bits - 1));
    return weight_t'(v <<< 20);
  endfunction

  task automatic send_set(input int n, input int mag_bits);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      coef_tvalid = 1'b1; coef_index = tap_idx_t'(i); coef_tlast = (i == n - 1);
      coef_tdata = rnd_coef(mag_bits);
    end
    @(negedge clk);
    coef_tvalid = 1'b0; coef_tlast = 1'b0;
  endtask

  task automatic send_samples(input int n, input bit gaps);
    int sent = 0;
    last_accept = -1;
    while (sent < n) begin
      @(negedge clk);
      if (x_fire) sent++;
      if (sent >= n) break;
      if (!x_tvalid || x_fire) begin
        x_tvalid = !gaps || ($urandom_range(3) != 0);
        x_tdata  = sample_t'($urandom);
        x_tlast  = ((sent + 1) % 8 == 0);
      end
    end
    x_tvalid = 1'b0;
    wait (sq.size() == 0);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    for (int k = 0; k < NT; k++) begin sh_now[k] = 0; sh_prev[k] = 0; xh[k] = 0; end
    repeat (3) @(negedge clk);
    reset_n = 1'b1;
    // phase 1: load while idle, 64 taps, y always ready
    send_set(NT, 14);
    repeat (3) @(negedge clk);
    send_samples(20, 1'b0);
    // phase 2: reloads in the middle of accumulations
    fork
      send_samples(40, 1'b0);
      begin
        repeat (5) begin
          repeat ($urandom_range(80, 20)) @(negedge clk);
          send_set(NT, 14);
        end
      end
    join
    // phase 3: 10 taps, random backpressure, gaps on x
    timing_on = 0; last_accept = -1;
    taps = 6'd9;
    send_set(10, 16);
    fork
      send_samples(60, 1'b1);
      begin
        repeat (2000) begin @(negedge clk); y_tready = ($urandom_range(2) != 0); end
        y_tready = 1'b1;
      end
    join
    // phase 4: large coefficients saturate y
    taps = tap_idx_t'(NT - 1);
    send_set(NT, 27);
    repeat (3) @(negedge clk);
    send_samples(10, 1'b0);
    checks++;
    if (commits < 8) begin failures++; $display("FAIL: only %0d commits", commits); end
    checks++;
    if (mid_commits != 0) begin failures++; $display("FAIL: %0d commits during accumulation", mid_commits); end
    checks++;
    if (deferred == 0) begin failures++; $display("FAIL: no reload had to wait for an accumulation"); end
    checks++;
    if (sats == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("commits=%0d deferred=%0d saturated outputs=%0d", commits, deferred, sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
