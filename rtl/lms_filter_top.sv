// lms_filter_top: adaptive LMS noise-cancelling filter for down-converted
// qubit readout pulses.
//
// The input x[n] is a noisy readout pulse from the ADC side of the data
// converter; d[n] is the desired signal, an ensemble average of earlier
// pulses formed outside this design and streamed in. Inside:
//
//   x --+--> fir_reload  --y--> error_sync (e = d - y) --+--> e out
//       |        ^                     ^                 |
//       |        | weights             d                 |
//       +--> axis_fifo --x--> lms_block <-------e--------+
//
// x is offered to the FIR filter and, in the same handshake, written into a
// FIFO that keeps it until the error of that sample is known; the LMS engine
// then pairs x[n] with e[n], updates all weights and streams them back into
// the FIR filter, which switches to the new set between samples. e leaves
// the design (to the DAC and the read-out DMA in the demonstrator) and feeds
// the LMS engine in one joint handshake. When the synchroniser has to drop
// a y sample to realign d and y at a pulse end, it sends a filler beat that
// only the LMS engine sees: the engine shifts the matching x in and leaves
// the weights as they are.
//
// Interface: AXI4-Stream style valid/ready on x (slave), d (slave) and e
// (master), TLAST marking the last sample of a pulse. mu (Q2.14 in bits 15:0)
// and taps (index of the last tap) are quasi-static register values,
// expected to change only while no pulse is streaming; they are not
// synchronised here. y_mon_* and weight_* mirror the internal streams for
// observation; fir_reload_done, sync_realign and weight_clipped are status
// pulses.
//
// Timing: the loop is rate-limited by the serial tap walk: one sample every
// taps+2 clocks in steady state (64 taps at the 491.52 MHz fabric clock:
// about 7.4 Msample/s). The FIR filter uses the weights of an earlier sample
// (delayed LMS); the delay is a few samples.
//
// Departures from the demonstrator: the FIFO and the joint handshakes are
// this design's choices; the desired-signal averaging, the DMAs, the data
// converter and the register blocks lie outside.
module lms_filter_top
  import lms_pkg::*;
#(
  parameter int unsigned TAPS_MAX     = lms_pkg::MAX_TAPS,
  parameter int unsigned X_FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        reset_n,
  input  logic [31:0] mu,
  input  tap_idx_t    taps,
  // noisy input x[n]
  input  sample_t     x_tdata,
  input  logic        x_tlast,
  input  logic        x_tvalid,
  output logic        x_tready,
  // desired signal d[n]
  input  sample_t     d_tdata,
  input  logic        d_tlast,
  input  logic        d_tvalid,
  output logic        d_tready,
  // error / processed output e[n]
  output sample_t     e_tdata,
  output logic        e_tlast,
  output logic        e_tvalid,
  input  logic        e_tready,
  // observation
  output sample_t     y_mon_tdata,
  output logic        y_mon_tlast,
  output logic        y_mon_valid,
  output weight_t     weight_tdata,
  output tap_idx_t    weight_index,
  output logic        weight_tvalid,
  output logic        weight_tlast,
  output logic        weight_clipped,
  output logic        fir_reload_done,
  output logic        sync_realign
);

  // ---- x fork: FIR filter and x FIFO take each sample together ------------
  logic    fir_x_ready, xq_in_ready;
  sample_t xq_tdata;
  logic    xq_tvalid, xq_tready;

  assign x_tready = fir_x_ready && xq_in_ready;

  axis_fifo #(.WIDTH(X_W), .DEPTH(X_FIFO_DEPTH)) u_xq (
    .clk, .reset_n,
    .in_tdata  (x_tdata),
    .in_tvalid (x_tvalid && fir_x_ready),
    .in_tready (xq_in_ready),
    .out_tdata (xq_tdata),
    .out_tvalid(xq_tvalid),
    .out_tready(xq_tready)
  );

  // ---- FIR filter ------------------------------------------------------------
  sample_t y_tdata;
  logic    y_tlast, y_tvalid, y_tready;

  fir_reload #(.TAPS_MAX(TAPS_MAX)) u_fir (
    .clk, .reset_n, .taps,
    .x_tdata,
    .x_tlast,
    .x_tvalid   (x_tvalid && xq_in_ready),
    .x_tready   (fir_x_ready),
    .coef_tdata (weight_tdata),
    .coef_index (weight_index),
    .coef_tlast (weight_tlast),
    .coef_tvalid(weight_tvalid),
    .reload_done(fir_reload_done),
    .y_tdata,
    .y_tlast,
    .y_tvalid,
    .y_tready
  );

  assign y_mon_tdata = y_tdata;
  assign y_mon_tlast = y_tlast;
  assign y_mon_valid = y_tvalid && y_tready;

  // ---- error unit ------------------------------------------------------------
  sample_t s_tdata;
  logic    s_tlast, s_tuser, s_tvalid, s_tready;

  error_sync u_sync (
    .clk, .reset_n,
    .d_tdata, .d_tlast, .d_tvalid, .d_tready,
    .y_tdata, .y_tlast, .y_tvalid, .y_tready,
    .e_tdata (s_tdata),
    .e_tlast (s_tlast),
    .e_tuser (s_tuser),
    .e_tvalid(s_tvalid),
    .e_tready(s_tready),
    .realign (sync_realign)
  );

  // ---- e fork: output port and LMS engine take each sample together -------
  // Filler beats (s_tuser, one per y sample the synchroniser dropped) go to
  // the LMS engine only, so that its x FIFO stays in step with e.
  logic lms_e_ready, out_ok;

  assign out_ok   = e_tready || s_tuser;
  assign e_tdata  = s_tdata;
  assign e_tlast  = s_tlast;
  assign e_tvalid = s_tvalid && !s_tuser && lms_e_ready;
  assign s_tready = out_ok && lms_e_ready;

  lms_block #(.TAPS_MAX(TAPS_MAX)) u_lms (
    .clk, .reset_n, .mu, .taps,
    .x_tdata      (xq_tdata),
    .x_tvalid     (xq_tvalid),
    .x_tready     (xq_tready),
    .e_tdata      (s_tdata),
    .e_tvalid     (s_tvalid && out_ok),
    .e_tready     (lms_e_ready),
    .weight_tdata,
    .coeff_index  (weight_index),
    .weight_tvalid,
    .weight_tlast,
    .clipped      (weight_clipped)
  );

endmodule
