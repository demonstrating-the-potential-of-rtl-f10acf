// error_sync_tb: self-checking testbench of the error / synchronising unit.
//
// The testbench sends pulses (packets) on d and y. Most have equal length;
// some differ, as if one stream had lost or gained samples. The expected
// output is worked out per packet: with lengths Ld and Ly and L = min(Ld,Ly),
// beats 0..L-2 pair position by position and the last output beat pairs the
// two TLAST beats; each carries sat(d - y). When y is the longer packet,
// Ly - Ld filler beats (TUSER = 1, value 0) come before the last beat, one
// per dropped y sample. The number of realign pulses must be |Ld - Ly|
// summed over packets. A first
// phase with both inputs always valid and e always ready checks the rate of
// one e per clock; later phases add random gaps and backpressure.
module error_sync_tb;
  import lms_pkg::*;

  logic    clk = 1'b0, reset_n = 1'b0;
  sample_t d_tdata = '0, y_tdata = '0;
  logic    d_tlast = 1'b0, d_tvalid = 1'b0, d_tready;
  logic    y_tlast = 1'b0, y_tvalid = 1'b0, y_tready;
  sample_t e_tdata;
  logic    e_tlast, e_tuser, e_tvalid, e_tready = 1'b1, realign;

  error_sync dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint v; bit last; bit user; } beat_t;
  beat_t  exp_q[$];
  int     exp_realign = 0, realigns = 0, e_count = 0;
  int     gaps = 0;

  sample_t dq[$], yq[$];
  bit      dl[$], yl[$];

  function automatic longint sat16(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  task automatic make_packet(input int ld, input int ly);
    sample_t d[], y[];
    int l = (ld < ly) ? ld : ly;
    d = new[ld]; y = new[ly];
    foreach (d[j]) begin d[j] = sample_t'($urandom); dq.push_back(d[j]); dl.push_back(j == ld - 1); end
    foreach (y[j]) begin y[j] = sample_t'($urandom); yq.push_back(y[j]); yl.push_back(j == ly - 1); end
    for (int j = 0; j < l - 1; j++) begin
      automatic beat_t b;
      b.v = sat16(longint'(d[j]) - longint'(y[j])); b.last = 0; b.user = 0;
      exp_q.push_back(b);
    end
    for (int j = ld; j < ly; j++) begin
      automatic beat_t b;
      b.v = 0; b.last = 0; b.user = 1;
      exp_q.push_back(b);
    end
    begin
      automatic beat_t b;
      b.v = sat16(longint'(d[ld-1]) - longint'(y[ly-1])); b.last = 1; b.user = 0;
      exp_q.push_back(b);
    end
    exp_realign += (ld > ly) ? ld - ly : ly - ld;
  endtask

  // drivers: a beat is replaced after the clock edge that took it
  logic d_fire = 1'b0, y_fire = 1'b0;
  always @(posedge clk) begin
    d_fire <= d_tvalid && d_tready;
    y_fire <= y_tvalid && y_tready;
  end
  always @(negedge clk) if (reset_n) begin
    if (!d_tvalid || d_fire) begin
      if (dq.size() > 0 && (gaps == 0 || $urandom_range(3) != 0)) begin
        d_tdata = dq.pop_front(); d_tlast = dl.pop_front(); d_tvalid = 1'b1;
      end else d_tvalid = 1'b0;
    end
    if (!y_tvalid || y_fire) begin
      if (yq.size() > 0 && (gaps == 0 || $urandom_range(3) != 0)) begin
        y_tdata = yq.pop_front(); y_tlast = yl.pop_front(); y_tvalid = 1'b1;
      end else y_tvalid = 1'b0;
    end
    e_tready = (gaps == 0) || ($urandom_range(2) != 0);
  end

  // monitor
  always @(posedge clk) if (reset_n) begin
    if (realign) realigns++;
    if (e_tvalid && e_tready) begin
      checks++; e_count++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected e");
      end else begin
        automatic beat_t b = exp_q.pop_front();
        if (longint'(e_tdata) != b.v || e_tlast != b.last || e_tuser != b.user) begin
          failures++;
          $display("FAIL: e=%0d last=%0d user=%0d expected %0d last=%0d user=%0d",
                   e_tdata, e_tlast, e_tuser, b.v, b.last, b.user);
        end
      end
    end
  end

  initial begin
    longint t0;
    repeat (3) @(negedge clk);
    reset_n = 1'b1;
    // phase 1: rate, 4 equal packets of 50 with no gaps
    for (int p = 0; p < 4; p++) make_packet(50, 50);
    t0 = cycle;
    wait (exp_q.size() == 0);
    @(posedge clk);
    checks++;
    if (cycle - t0 > 200 + 4) begin
      failures++; $display("FAIL: 200 beats took %0d clocks", cycle - t0);
    end
    // phase 2: mismatched lengths, gaps and backpressure
    gaps = 1;
    for (int p = 0; p < 40; p++) begin
      automatic int ld = $urandom_range(12, 1);
      automatic int ly = ($urandom_range(2) == 0) ? $urandom_range(12, 1) : ld;
      make_packet(ld, ly);
    end
    wait (exp_q.size() == 0 && dq.size() == 0 && yq.size() == 0);
    repeat (5) @(negedge clk);
    // extreme values exercise saturation
    gaps = 0;
    dq.push_back(16'sh7fff); dl.push_back(1'b1); yq.push_back(16'sh8000); yl.push_back(1'b1);
    exp_q.push_back('{32767, 1'b1, 1'b0});
    dq.push_back(16'sh8000); dl.push_back(1'b1); yq.push_back(16'sh7fff); yl.push_back(1'b1);
    exp_q.push_back('{-32768, 1'b1, 1'b0});
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    if (realigns != exp_realign || exp_realign == 0) begin
      failures++; $display("FAIL: realign pulses %0d, expected %0d", realigns, exp_realign);
    end
    $display("e beats=%0d realign drops=%0d", e_count, realigns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
