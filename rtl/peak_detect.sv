// peak_detect -- finds one cavity resonance in the acquired transmission
// signal and gates the injection of its laser.
//
// During every acquisition the block keeps the largest photodetector sample
// whose index lies inside its time range [center - size/2, center + size/2]
// and the index where it occurred (the first one, if the maximum repeats).
// When the acquisition has passed the end of the range, or ends early, the
// result is final: `done` pulses for one clock and `valid` tells whether
// the maximum reached the threshold `height`. Only a valid result replaces
// `pos`, so an undetected peak leaves the last position in place (sample and
// hold); the controller that uses it is halted through `valid`.
//
// The same range drives `gate`, the enable of the laser's AOM: high while the
// acquisition is inside the range and the laser is enabled, or always when
// `always_active` is set (used when both lasers must reach a beat-note
// detector together). A reference laser is gated by the OR of the gates of
// its two detectors, which gives the two enabling windows of the reference.
//
// Interface: sample stream from acq_timebase (`smp_stb`, `smp_idx`) plus the
// ADC word `sample`. Timing: `done`, `valid` and `pos` change in the clock
// after the first strobe past the range (or after `acq_end`); `gate` follows
// the sample index with one clock of delay. Maximum search inside a time range
// synchronised to the acquisition trigger, the threshold and the sample-and-
// hold follow the paper; ending the search at the end of the range (rather
// than at the end of the acquisition) and the center/size range format taken
// from the GUI are this design's choices.
module peak_detect
  import stcl_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  peak_cfg_t cfg,
  input  logic      acq_start,
  input  logic      acq_end,
  input  logic      acq_active,
  input  logic      smp_stb,
  input  pos_t      smp_idx,
  input  sample_t   sample,
  output pos_t      pos,
  output sample_t   peak_height,
  output logic      valid,
  output logic      done,
  output logic      gate
);

  logic [POS_BITS:0] half, lo, hi;
  logic              in_win, past_win;
  logic              armed;
  sample_t           max_val;
  pos_t              max_pos;

  always_comb begin
    half = {2'b0, cfg.size[POS_BITS-1:1]};
    lo   = ({1'b0, cfg.center} >= half) ? ({1'b0, cfg.center} - half) : '0;
    hi   = {1'b0, cfg.center} + half;
    if (hi > {1'b0, {POS_BITS{1'b1}}}) hi = {1'b0, {POS_BITS{1'b1}}};
    in_win   = ({1'b0, smp_idx} >= lo) && ({1'b0, smp_idx} <= hi);
    past_win = ({1'b0, smp_idx} > hi);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      armed       <= 1'b0;
      max_val     <= '0;
      max_pos     <= '0;
      pos         <= '0;
      peak_height <= '0;
      valid       <= 1'b0;
      done        <= 1'b0;
      gate        <= 1'b0;
    end else begin
      done <= 1'b0;
      gate <= cfg.enabled & (cfg.always_active | (acq_active & in_win));
      // close the search of the running acquisition
      if (armed && (acq_end || (smp_stb && past_win))) begin
        armed       <= 1'b0;
        done        <= 1'b1;
        valid       <= (max_val >= cfg.height);
        peak_height <= max_val;
        if (max_val >= cfg.height) pos <= max_pos;
      end else if (armed && smp_stb && in_win && (sample > max_val)) begin
        max_val <= sample;
        max_pos <= smp_idx;
      end
      // a new acquisition restarts the search with its first sample
      if (acq_start) begin
        armed   <= 1'b1;
        max_pos <= smp_idx;
        max_val <= (smp_stb && in_win) ? sample : sample_t'(-14'sd8192);
      end
    end
  end

  // a held position is only replaced by a valid result
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (pos != $past(pos)) |-> done && valid);

endmodule
