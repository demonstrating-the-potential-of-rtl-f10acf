// lms_block_tb: self-checking testbench of the LMS coefficient-update engine.
//
// A reference model in the testbench keeps its own x history and weights and
// applies w[i] <- clip48(w[i] + ((x[n-i]*e[n]) * mu)) with exact integer
// arithmetic for every pair the engine accepts. Every weight beat is checked
// for value, tap index, TLAST and the clock on which it appears (tap i
// leaves i+3 clocks after its pair was accepted). Phases: random pairs with
// random valid gaps at 64 taps; back-to-back pairs to check the rate of one
// pair per taps+1 clocks at several tap counts (including a single tap);
// a large mu with full-scale inputs to drive the weights into clipping.
module lms_block_tb;
  import lms_pkg::*;

  localparam int unsigned NT = lms_pkg::MAX_TAPS;

  logic        clk = 1'b0;
  logic        reset_n = 1'b0;
  logic [31:0] mu = '0;
  tap_idx_t    taps = '0;
  sample_t     x_tdata = '0, e_tdata = '0;
  logic        x_tvalid = 1'b0, e_tvalid = 1'b0;
  logic        x_tready, e_tready;
  weight_t     weight_tdata;
  tap_idx_t    coeff_index;
  logic        weight_tvalid, weight_tlast, clipped;

  lms_block dut (.*);

  always #5 clk = ~clk;

  // a beat counts as taken when valid and ready were both high at the edge
  logic x_fire = 1'b0;
  always @(posedge clk) x_fire <= x_tvalid && x_tready;

  int unsigned checks = 0, failures = 0;
  longint      cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- reference model -------------------------------------------------------
  typedef struct {
    longint w;
    int     idx;
    bit     last;
    bit     clip;
    longint at;
  } beat_t;
  beat_t  exp_q[$];
  longint ref_w [NT];
  longint ref_x [NT];
  longint last_accept = -1;
  int     accepts = 0, rate_checks_on = 0, clip_seen = 0;
  int     cur_period;

  localparam longint WMAX = (64'sd1 <<< 47) - 1;
  localparam longint WMIN = -(64'sd1 <<< 47);

  function automatic longint sx16(input logic [15:0] v);
    return longint'($signed(v));
  endfunction

  always @(posedge clk) begin
    if (reset_n && x_tvalid && x_tready) begin
      automatic longint e = sx16(e_tdata);
      automatic longint m = sx16(mu[15:0]);
      automatic int     last = int'(taps);
      if (!(e_tvalid && e_tready)) begin
        failures++; $display("FAIL: x taken without e at cycle %0d", cycle);
      end
      checks++;
      if (rate_checks_on != 0 && last_accept >= 0) begin
        checks++;
        if (cycle - last_accept != longint'(cur_period)) begin
          failures++;
          $display("FAIL: pair spacing %0d, expected %0d", cycle - last_accept, cur_period);
        end
      end
      last_accept = cycle;
      accepts++;
      for (int k = NT - 1; k > 0; k--) ref_x[k] = ref_x[k-1];
      ref_x[0] = sx16(x_tdata);
      for (int i = 0; i <= last; i++) begin
        automatic longint p1 = ref_x[i] * e;
        automatic longint p2 = p1 * m;
        automatic longint s  = ref_w[i] + p2;
        automatic beat_t  b;
        b.clip = 0;
        if (s > WMAX) begin s = WMAX; b.clip = 1; end
        if (s < WMIN) begin s = WMIN; b.clip = 1; end
        ref_w[i] = s;
        b.w = s; b.idx = i; b.last = (i == last); b.at = cycle + 4 + i;  // valid after the 3rd edge following the accepting edge
        exp_q.push_back(b);
      end
    end
  end

  always @(posedge clk) begin
    if (reset_n && weight_tvalid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected weight beat at cycle %0d", cycle);
      end else begin
        automatic beat_t b = exp_q.pop_front();
        if (longint'(weight_tdata) != b.w || int'(coeff_index) != b.idx ||
            weight_tlast != b.last || clipped != b.clip || cycle != b.at) begin
          failures++;
          $display("FAIL: beat w=%0d idx=%0d last=%0d clip=%0d @%0d, expected w=%0d idx=%0d last=%0d clip=%0d @%0d",
                   weight_tdata, coeff_index, weight_tlast, clipped, cycle,
                   b.w, b.idx, b.last, b.clip, b.at);
        end
        if (b.clip) clip_seen++;
      end
    end
  end

  // ---- stimulus --------------------------------------------------------------
  task automatic send_pairs(input int n, input bit gaps, input bit full_scale);
    int sent = 0;
    while (sent < n) begin
      @(negedge clk);
      if (x_fire) sent++;
      if (sent >= n) break;
      if (!x_tvalid || x_fire) begin
        x_tvalid = !gaps || ($urandom_range(3) != 0);
        e_tvalid = x_tvalid;
        if (full_scale) begin
          x_tdata = 16'sh8000;
          e_tdata = 16'sh8000;
        end else begin
          x_tdata = sample_t'($urandom);
          e_tdata = sample_t'($urandom);
        end
      end
    end
    x_tvalid = 1'b0;
    e_tvalid = 1'b0;
    repeat (NT + 8) @(negedge clk);
  endtask

  initial begin
    for (int k = 0; k < NT; k++) begin ref_w[k] = 0; ref_x[k] = 0; end
    repeat (3) @(negedge clk);
    reset_n = 1'b1;
    // phase 1: random data and gaps, 64 taps, mu ~ 0.0006 (10 / 2^14)
    mu = 32'd10; taps = tap_idx_t'(NT - 1);
    send_pairs(40, 1'b1, 1'b0);
    // phase 2: rate checks at several tap counts, random mu
    for (int t = 0; t < 4; t++) begin
      automatic int tv = (t == 0) ? NT - 1 : (t == 1) ? 7 : (t == 2) ? 1 : 0;
      taps = tap_idx_t'(tv);
      mu = {16'h0, 16'($urandom_range(200))};
      cur_period = tv + 1;
      last_accept = -1;
      rate_checks_on = 1;
      send_pairs(12, 1'b0, 1'b0);
      rate_checks_on = 0;
    end
    // phase 3: large mu and full-scale inputs drive the weights into clipping
    taps = 6'd3; mu = 32'h0000_7fff;
    send_pairs(12, 1'b0, 1'b1);
    checks++;
    if (clip_seen == 0) begin failures++; $display("FAIL: clipping never happened"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d weight beats missing", exp_q.size()); end
    $display("pairs accepted=%0d clipped beats=%0d", accepts, clip_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
