// lms_block: LMS coefficient-update engine of the adaptive readout filter.
//
// For every pair of input sample x[n] and error sample e[n] it applies the
// LMS rule  w[i] <- w[i] + mu * e[n] * x[n-i]  to taps i = 0 .. taps, one tap
// per clock, and streams each new weight out with its tap index so that a
// FIR filter can reload its coefficients.
//
// Pipeline (as drawn for the LMS IP): stage A multiplies x[n-i] by e[n]
// (16 x 16 -> 32 bits, Q4.28) into a register; stage B multiplies that by mu
// (32 x 16 -> 48 bits, Q6.42) into a register; stage C adds the product to
// the stored weight, clips the sum to the 48-bit range, writes it back and
// registers it as the output beat. Read and write-back of a weight happen in
// the same stage, so consecutive samples never see a stale weight.
//
// Interface: x and e are AXI4-Stream slaves joined together - a pair is taken
// only when both are valid. weight_tdata/coeff_index/weight_tvalid form an
// AXI4-Stream master without TREADY (the FIR reload port always accepts);
// weight_tlast marks the beat of the last tap. The port names follow the
// packaged IP (x, e, clk, reset, mu[31:0], taps[5:0], weight,
// coeff_index[5:0]); reset is active low as its bubble shows.
//
// Timing: a pair is accepted, then taps are issued on the next taps+1 clocks;
// the next pair can be accepted on the clock that issues the last tap, so the
// block takes one sample every taps+1 clocks. The weight of tap i leaves
// i+3 clocks after the pair was accepted.
//
// Design choices not fixed by the paper: the mu port is 32 bits wide as on
// the packaged IP, but only its low 16 bits are used, as the Q2.14 value the
// pipeline drawing gives; mu and taps are sampled once per pair; the x delay
// line and all weights reset to zero; "clipping" saturates to the 48-bit
// signed range; 'clipped' is an extra status output.
module lms_block
  import lms_pkg::*;
#(
  parameter int unsigned TAPS_MAX = lms_pkg::MAX_TAPS
) (
  input  logic        clk,
  input  logic        reset_n,
  input  logic [31:0] mu,
  input  tap_idx_t    taps,
  // x[n] stream
  input  sample_t     x_tdata,
  input  logic        x_tvalid,
  output logic        x_tready,
  // e[n] stream
  input  sample_t     e_tdata,
  input  logic        e_tvalid,
  output logic        e_tready,
  // weight reload stream
  output weight_t     weight_tdata,
  output tap_idx_t    coeff_index,
  output logic        weight_tvalid,
  output logic        weight_tlast,
  output logic        clipped
);

  sample_t  xd [TAPS_MAX];   // x[n], x[n-1], ... x[n-TAPS_MAX+1]
  weight_t  w  [TAPS_MAX];   // working weights
  sample_t  e_lat;
  mu_t      mu_lat;
  tap_idx_t last_lat;
  tap_idx_t i_cnt;
  logic     busy;

  tap_idx_t last_eff;
  logic     issue_last, can_accept, accept;

  always_comb begin
    last_eff   = (32'(taps) > TAPS_MAX - 1) ? tap_idx_t'(TAPS_MAX - 1) : taps;
    issue_last = busy && (i_cnt == last_lat);
    can_accept = !busy || issue_last;
    accept     = can_accept && x_tvalid && e_tvalid;
  end

  assign x_tready = can_accept && e_tvalid;
  assign e_tready = can_accept && x_tvalid;

  // ---- issue and stage A: x[n-i] * e[n] ------------------------------------
  logic     a_valid, a_last;
  tap_idx_t a_idx;
  prod_t    a_prod;
  mu_t      a_mu;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      busy     <= 1'b0;
      i_cnt    <= '0;
      last_lat <= '0;
      e_lat    <= '0;
      mu_lat   <= '0;
      a_valid  <= 1'b0;
      a_last   <= 1'b0;
      a_idx    <= '0;
      a_prod   <= '0;
      a_mu     <= '0;
      for (int k = 0; k < TAPS_MAX; k++) xd[k] <= '0;
    end else begin
      a_valid <= busy;
      if (busy) begin
        a_prod <= prod_t'(xd[i_cnt]) * prod_t'(e_lat);
        a_idx  <= i_cnt;
        a_last <= issue_last;
        a_mu   <= mu_lat;
        i_cnt  <= i_cnt + 1'b1;
        if (issue_last) busy <= 1'b0;
      end
      if (accept) begin
        xd[0] <= x_tdata;
        for (int k = 1; k < TAPS_MAX; k++) xd[k] <= xd[k-1];
        e_lat    <= e_tdata;
        mu_lat   <= mu_t'(mu[MU_W-1:0]);
        last_lat <= last_eff;
        i_cnt    <= '0;
        busy     <= 1'b1;
      end
    end
  end

  // ---- stage B: * mu -----------------------------------------------------------
  logic     b_valid, b_last;
  tap_idx_t b_idx;
  weight_t  b_prod;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      b_valid <= 1'b0;
      b_last  <= 1'b0;
      b_idx   <= '0;
      b_prod  <= '0;
    end else begin
      b_valid <= a_valid;
      b_last  <= a_last;
      b_idx   <= a_idx;
      b_prod  <= weight_t'(a_prod) * weight_t'(a_mu);
    end
  end

  // ---- stage C: accumulate with clipping, write back -------------------------
  logic signed [W_W:0] sum;
  weight_t             sum_clip;
  logic                sum_ovf;

  always_comb begin
    sum     = {w[b_idx][W_W-1], w[b_idx]} + {b_prod[W_W-1], b_prod};
    sum_ovf = sum[W_W] != sum[W_W-1];
    if (sum_ovf)
      sum_clip = sum[W_W] ? {1'b1, {(W_W-1){1'b0}}} : {1'b0, {(W_W-1){1'b1}}};
    else
      sum_clip = sum[W_W-1:0];
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      weight_tvalid <= 1'b0;
      weight_tlast  <= 1'b0;
      weight_tdata  <= '0;
      coeff_index   <= '0;
      clipped       <= 1'b0;
      for (int k = 0; k < TAPS_MAX; k++) w[k] <= '0;
    end else begin
      weight_tvalid <= b_valid;
      if (b_valid) begin
        w[b_idx]     <= sum_clip;
        weight_tdata <= sum_clip;
        coeff_index  <= b_idx;
        weight_tlast <= b_last;
        clipped      <= sum_ovf;
      end
    end
  end

  // A tap index never exceeds the configured last tap.
  assert property (@(posedge clk) disable iff (!reset_n)
                   busy |-> (i_cnt <= last_lat))
    else $error("lms_block: tap counter past last tap");

endmodule
