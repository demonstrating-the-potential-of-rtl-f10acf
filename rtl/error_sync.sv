// error_sync: error-signal unit, e[n] = d[n] - y[n], with TLAST realignment.
//
// Pairs each sample of the desired signal d with the FIR output y of the
// same position in the pulse and emits their difference, saturated to Q2.14.
// Both inputs are AXI4-Stream slaves whose TLAST marks the last sample of a
// pulse. A pair is taken only when both are valid and the output register
// is free. If the two streams disagree on TLAST, the stream that has not yet
// reached the end of its pulse is ahead in length: its samples are dropped,
// one per clock, until its TLAST arrives, and the two pulse ends are then
// paired. This keeps d and y aligned on pulse boundaries even when one
// stream lost or gained samples. 'realign' pulses for each dropped sample.
// A dropped y sample still belongs to the x history of the LMS engine, so
// for each one the unit emits a filler beat, e_tuser = 1 with e = 0: the
// LMS engine shifts the matching x in and its update adds nothing. Fillers
// are not error samples and are kept off the external e output by the top
// level. A dropped d sample has no x behind it and produces no beat.
//
// Interface: e is an AXI4-Stream master with TLAST taken from the pair and
// TUSER marking fillers.
// Timing: one pair per clock when nothing stalls; e leaves one clock after
// its pair was taken (registered output).
//
// The subtraction order follows equation (3) and the drawing of the summing
// node (d with +, y with -); the text's wording ("subtracts it from the
// output of the FIR") could be read the other way. The drop-until-TLAST
// rule, the filler beats, saturation and the registered output are this
// design's choices.
module error_sync
  import lms_pkg::*;
(
  input  logic    clk,
  input  logic    reset_n,
  // desired signal d[n]
  input  sample_t d_tdata,
  input  logic    d_tlast,
  input  logic    d_tvalid,
  output logic    d_tready,
  // FIR output y[n]
  input  sample_t y_tdata,
  input  logic    y_tlast,
  input  logic    y_tvalid,
  output logic    y_tready,
  // error e[n]
  output sample_t e_tdata,
  output logic    e_tlast,
  output logic    e_tuser,
  output logic    e_tvalid,
  input  logic    e_tready,
  output logic    realign
);

  logic both, pair, drop_d, drop_y;

  always_comb begin
    both   = d_tvalid && y_tvalid && (!e_tvalid || e_tready);
    pair   = both && (d_tlast == y_tlast);
    drop_y = both && d_tlast && !y_tlast;
    drop_d = both && y_tlast && !d_tlast;
  end

  assign d_tready = pair || drop_d;
  assign y_tready = pair || drop_y;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      e_tdata  <= '0;
      e_tlast  <= 1'b0;
      e_tuser  <= 1'b0;
      e_tvalid <= 1'b0;
      realign  <= 1'b0;
    end else begin
      realign <= drop_d || drop_y;
      if (e_tvalid && e_tready) e_tvalid <= 1'b0;
      if (pair) begin
        e_tdata  <= sat_sample((X_W+2)'(d_tdata) - (X_W+2)'(y_tdata));
        e_tlast  <= d_tlast;
        e_tuser  <= 1'b0;
        e_tvalid <= 1'b1;
      end else if (drop_y) begin
        e_tdata  <= '0;
        e_tlast  <= 1'b0;
        e_tuser  <= 1'b1;
        e_tvalid <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!reset_n)
                   (e_tvalid && !e_tready) |=> (e_tvalid && $stable(e_tdata)))
    else $error("error_sync: e changed while stalled");

endmodule
