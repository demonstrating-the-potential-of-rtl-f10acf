// fir_reload: FIR filter with run-time reloadable coefficients.
//
// Computes y[n] = sum_{i=0}^{taps} w[i] * x[n-i] for every input sample. It
// stands in the place of a library FIR core that is fed, coefficient by
// coefficient, from the LMS weight stream.
//
// Structure: one multiply-accumulate unit walks the taps, one tap per clock
// (taps+1 clocks per sample), which matches the rate at which the LMS engine
// produces a full weight set. Samples are Q2.14, coefficients Q6.42; the
// accumulator keeps the full 70-bit product sum (Q8.56 plus 6 guard bits)
// and the result is rounded to nearest and saturated back to Q2.14.
//
// Coefficient reload: each beat on the coef stream writes one entry of a
// shadow bank at coef_index. The beat with coef_tlast marks a complete set;
// the shadow bank is then copied into the active bank on the first clock on
// which no sample is being accumulated, so a sample is always filtered with
// one bank. reload_done pulses on that clock. The copy takes the shadow bank
// as it stands, so beats of a following set that arrive before the copy are
// already included.
//
// Interface: x is an AXI4-Stream slave, y an AXI4-Stream master; y_tlast
// copies the x_tlast of the sample it belongs to. The coef stream has no
// TREADY and is always accepted. Timing: a sample is accepted in the idle
// state, accumulated over taps+1 clocks and y is valid on the clock after
// the last tap; the filter is ready again one clock later, so it takes one
// sample every taps+2 clocks while y is drained.
//
// Design choices not fixed by the paper: the serial MAC structure, the
// shadow/active bank handshake, rounding and saturation of y, zero reset of
// the delay line and of both banks.
module fir_reload
  import lms_pkg::*;
#(
  parameter int unsigned TAPS_MAX = lms_pkg::MAX_TAPS
) (
  input  logic     clk,
  input  logic     reset_n,
  input  tap_idx_t taps,
  // input samples
  input  sample_t  x_tdata,
  input  logic     x_tlast,
  input  logic     x_tvalid,
  output logic     x_tready,
  // coefficient reload stream
  input  weight_t  coef_tdata,
  input  tap_idx_t coef_index,
  input  logic     coef_tlast,
  input  logic     coef_tvalid,
  output logic     reload_done,
  // output samples
  output sample_t  y_tdata,
  output logic     y_tlast,
  output logic     y_tvalid,
  input  logic     y_tready
);

  localparam int unsigned ACC_W = X_W + W_W + TAP_W;  // 70

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_HOLD} state_t;
  state_t state;

  sample_t  xd     [TAPS_MAX];
  weight_t  shadow [TAPS_MAX];
  weight_t  active [TAPS_MAX];
  logic     pending;
  tap_idx_t i_cnt, last_lat;
  logic     tlast_lat;
  logic signed [ACC_W-1:0] acc;

  tap_idx_t               last_eff;
  logic signed [ACC_W-1:0] acc_next;
  logic                    out_free;

  always_comb begin
    last_eff = (32'(taps) > TAPS_MAX - 1) ? tap_idx_t'(TAPS_MAX - 1) : taps;
    acc_next = acc + ACC_W'(xd[i_cnt]) * ACC_W'(active[i_cnt]);
    out_free = !y_tvalid || y_tready;
  end

  assign x_tready = (state == S_IDLE);

  // Round to nearest (ties up) and saturate to Q2.14.
  function automatic sample_t to_sample(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] r;
    r = (a + (ACC_W'(1) <<< (W_FRAC - 1))) >>> W_FRAC;
    if (r > ACC_W'(sample_t'({1'b0, {(X_W-1){1'b1}}})))
      return {1'b0, {(X_W-1){1'b1}}};
    else if (r < ACC_W'(sample_t'({1'b1, {(X_W-1){1'b0}}})))
      return {1'b1, {(X_W-1){1'b0}}};
    else
      return r[X_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      state     <= S_IDLE;
      i_cnt     <= '0;
      last_lat  <= '0;
      tlast_lat <= 1'b0;
      acc       <= '0;
      y_tdata   <= '0;
      y_tlast   <= 1'b0;
      y_tvalid  <= 1'b0;
      for (int k = 0; k < TAPS_MAX; k++) xd[k] <= '0;
    end else begin
      if (y_tvalid && y_tready) y_tvalid <= 1'b0;
      unique case (state)
        S_IDLE: if (x_tvalid) begin
          xd[0] <= x_tdata;
          for (int k = 1; k < TAPS_MAX; k++) xd[k] <= xd[k-1];
          tlast_lat <= x_tlast;
          last_lat  <= last_eff;
          i_cnt     <= '0;
          acc       <= '0;
          state     <= S_MAC;
        end
        S_MAC: begin
          acc   <= acc_next;
          i_cnt <= i_cnt + 1'b1;
          if (i_cnt == last_lat) begin
            if (out_free) begin
              y_tdata  <= to_sample(acc_next);
              y_tlast  <= tlast_lat;
              y_tvalid <= 1'b1;
              state    <= S_IDLE;
            end else begin
              state <= S_HOLD;
            end
          end
        end
        S_HOLD: if (out_free) begin
          y_tdata  <= to_sample(acc);
          y_tlast  <= tlast_lat;
          y_tvalid <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Coefficient banks.
  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      pending     <= 1'b0;
      reload_done <= 1'b0;
      for (int k = 0; k < TAPS_MAX; k++) begin
        shadow[k] <= '0;
        active[k] <= '0;
      end
    end else begin
      reload_done <= 1'b0;
      if (pending && state != S_MAC) begin
        for (int k = 0; k < TAPS_MAX; k++) active[k] <= shadow[k];
        pending     <= 1'b0;
        reload_done <= 1'b1;
      end
      if (coef_tvalid) begin
        if (32'(coef_index) < TAPS_MAX) shadow[coef_index] <= coef_tdata;
        if (coef_tlast) pending <= 1'b1;
      end
    end
  end

  // AXI4-Stream rule: y holds its data while waiting for TREADY.
  assert property (@(posedge clk) disable iff (!reset_n)
                   (y_tvalid && !y_tready) |=> (y_tvalid && $stable(y_tdata) && $stable(y_tlast)))
    else $error("fir_reload: y changed while stalled");

endmodule
