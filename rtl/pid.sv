// pid -- sampled PID controller with sample-and-hold, one update per scan.
//
// Each cavity scan yields one new measurement: a peak position (reference
// loops) or a normalised position (slave loops). The controller is updated
// once per scan, when `upd` pulses, using the error e = setpoint - in:
//   I[k]   = clamp(I[k-1] + ki*e)                   (I holds I_SHIFT fraction bits)
//   out[k] = clamp((kp*e >>> P_SHIFT) + (I[k] >>> I_SHIFT)
//                  + (kd*(e - e_prev) >>> D_SHIFT))
// with both clamps set by out_min/out_max, which also prevents integrator
// wind-up. If the measurement is not valid, or `locking` is low, the update
// is skipped: the controller is halted and its output held (sample and hold).
// `ival_wr` loads the integrator with `ival`, so the loop can be engaged
// from the current actuator value without a jump.
//
// Timing: `out` changes in the clock after `upd`. The P/I/D structure, the
// gains p, i, the integrator value ival, the output limits and the halting on
// an invalid peak follow the paper and its control GUI; the fixed-point
// scaling, the once-per-scan update, the sign of the error and the clamp
// order are this design's choices.
module pid
  import stcl_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pid_cfg_t cfg,
  input  err_t     in,
  input  logic     in_valid,
  input  logic     upd,
  output sample_t  out,
  output logic     updated     // pulses when an update was applied
);

  localparam int unsigned IW = SAMPLE_BITS + I_SHIFT + 2;

  logic signed [ERR_BITS:0]   e, e_prev, de;
  logic signed [IW-1:0]       integ, integ_next, i_min, i_max;
  logic signed [47:0]         i_sum, p_term, d_term, total;
  logic signed [47:0]         o_min, o_max;

  always_comb begin
    e      = $signed({cfg.setpoint[ERR_BITS-1], cfg.setpoint}) - $signed({in[ERR_BITS-1], in});
    de     = e - e_prev;
    i_min  = IW'(cfg.out_min) <<< I_SHIFT;
    i_max  = IW'(cfg.out_max) <<< I_SHIFT;
    i_sum  = 48'(integ) + 48'(cfg.ki) * 48'(e);
    if (i_sum > 48'(i_max))      integ_next = i_max;
    else if (i_sum < 48'(i_min)) integ_next = i_min;
    else                         integ_next = IW'(i_sum);
    p_term = (48'(cfg.kp) * 48'(e)) >>> P_SHIFT;
    d_term = (48'(cfg.kd) * 48'(de)) >>> D_SHIFT;
    total  = p_term + (48'(integ_next) >>> I_SHIFT) + d_term;
    o_min  = 48'(cfg.out_min);
    o_max  = 48'(cfg.out_max);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      integ   <= '0;
      e_prev  <= '0;
      out     <= '0;
      updated <= 1'b0;
    end else begin
      updated <= 1'b0;
      if (cfg.ival_wr) begin
        integ <= IW'(cfg.ival) <<< I_SHIFT;
        out   <= cfg.ival;
      end else if (upd && in_valid && cfg.locking) begin
        integ   <= integ_next;
        e_prev  <= e;
        updated <= 1'b1;
        if (total > o_max)      out <= cfg.out_max;
        else if (total < o_min) out <= cfg.out_min;
        else                    out <= sample_t'(total);
      end
    end
  end

endmodule
