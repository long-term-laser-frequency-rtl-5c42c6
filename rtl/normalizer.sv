// normalizer -- position of a slave resonance relative to the two reference
// resonances of the same scan.
//
// Computes N = (S - S_refL) / (S_refR - S_refL), where S is the slave peak
// position and S_refL, S_refR are the left and right reference peaks, one
// free spectral range apart. Referring the slave to the reference peaks
// removes drifts of the cavity length and of the scan amplitude that move
// all peaks together.
//
// The block collects, per acquisition, the `done` pulses of the three peak
// detectors (in any order). When all three have reported it starts a serial
// division of |S - S_refL| << 14 by (S_refR - S_refL); the result is signed
// Q2.14 (16384 = 1.0), truncated toward zero and saturated to the 16-bit
// range. `valid` is high only when all three peaks were valid and the right
// reference lies after the left one; otherwise `n` keeps its last value and
// the slave controller is halted. `acq_start` forgets the pulses of the last
// scan. Timing: `done` pulses 31 clocks after the last of the three input
// pulses. The formula and the halting rule follow the paper; the Q2.14
// format, saturation and the serial divider (instead of a vendor divider
// core) are this design's choices.
module normalizer
  import stcl_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic acq_start,
  input  pos_t s_pos,
  input  logic s_valid,
  input  logic s_done,
  input  pos_t l_pos,
  input  logic l_valid,
  input  logic l_done,
  input  pos_t r_pos,
  input  logic r_valid,
  input  logic r_done,
  output err_t n,
  output logic valid,
  output logic done
);

  localparam int unsigned DW = POS_BITS + 1 + NORM_FRAC;   // 29
  localparam int unsigned VW = POS_BITS + 1;               // 15

  logic got_s, got_l, got_r, ok_s, ok_l, ok_r;
  logic have_all, launched, go;
  logic signed [POS_BITS+1:0] num, den;
  logic neg_q, div_ok;
  logic [DW-1:0] quo;
  logic          div_done, div_busy;
  logic [VW-1:0] rem_unused;

  assign num      = $signed({2'b0, s_pos}) - $signed({2'b0, l_pos});
  assign den      = $signed({2'b0, r_pos}) - $signed({2'b0, l_pos});
  assign have_all = (got_s | s_done) & (got_l | l_done) & (got_r | r_done);
  assign go       = have_all & ~launched & ~div_busy;

  logic [POS_BITS:0] num_mag;
  assign num_mag = num[POS_BITS+1] ? (POS_BITS+1)'(-num) : num[POS_BITS:0];

  serial_divider #(.DW(DW), .VW(VW)) u_div (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (go),
    .dividend ({num_mag, {NORM_FRAC{1'b0}}}),
    .divisor  ((den > 0) ? den[POS_BITS:0] : VW'(1)),
    .busy     (div_busy),
    .done     (div_done),
    .quotient (quo),
    .remainder(rem_unused)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {got_s, got_l, got_r, ok_s, ok_l, ok_r} <= '0;
      launched <= 1'b0;
      neg_q    <= 1'b0;
      div_ok   <= 1'b0;
      n        <= '0;
      valid    <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (s_done) begin got_s <= 1'b1; ok_s <= s_valid; end
      if (l_done) begin got_l <= 1'b1; ok_l <= l_valid; end
      if (r_done) begin got_r <= 1'b1; ok_r <= r_valid; end
      if (go) begin
        launched <= 1'b1;
        neg_q    <= num[POS_BITS+1];
        div_ok   <= (s_done ? s_valid : ok_s) & (l_done ? l_valid : ok_l) &
                    (r_done ? r_valid : ok_r) & (den > 0);
      end
      if (div_done) begin
        done  <= 1'b1;
        valid <= div_ok;
        if (div_ok) begin
          if (quo > DW'(32767))
            n <= neg_q ? err_t'(-16'sd32768) : err_t'(16'sd32767);
          else
            n <= neg_q ? -err_t'(quo[15:0]) : err_t'(quo[15:0]);
        end
      end
      if (acq_start) begin
        {got_s, got_l, got_r} <= '0;
        launched <= 1'b0;
      end
    end
  end

endmodule
