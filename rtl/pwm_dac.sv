// pwm_dac -- 14-bit pulse-width modulated analog output.
//
// Drives one PWM pin whose low-pass filtered level is proportional to the
// 14-bit signed input (-8192 -> 0 % duty, +8191 -> 16383/16384 duty). The
// paper raises the resolution of the board's 8-bit PWM to 14 bit. Here this
// is done by keeping a short 256-clock PWM period for the upper 8 bits and
// spreading the lower 6 bits over a frame of 64 periods: in each period one
// extra clock is added if the bit-reversed period number is below the lower
// 6 bits. Over a frame (2^14 clocks) the high time is exactly the input
// code, while most of the ripple stays at the 488 kHz period rate where the
// external RC filter removes it. The input is sampled at the start of each
// frame. Timing: the pin is registered; a new value takes effect at the next
// frame boundary. The 14-bit resolution follows the paper; the coarse/fine
// split is this design's choice.
module pwm_dac
  import stcl_pkg::*;
#(
  parameter int unsigned COARSE_BITS = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t value,
  output logic    pwm,
  output logic    frame_start
);

  localparam int unsigned FINE_BITS = SAMPLE_BITS - COARSE_BITS;

  logic [COARSE_BITS-1:0] cnt;
  logic [FINE_BITS-1:0]   period, period_rev;
  logic [SAMPLE_BITS-1:0] code;
  logic [COARSE_BITS:0]   high_len;

  always_comb begin
    for (int i = 0; i < FINE_BITS; i++) period_rev[i] = period[FINE_BITS-1-i];
    high_len = {1'b0, code[SAMPLE_BITS-1:FINE_BITS]} +
               {{COARSE_BITS{1'b0}}, (period_rev < code[FINE_BITS-1:0])};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt         <= '0;
      period      <= '0;
      code        <= '0;
      pwm         <= 1'b0;
      frame_start <= 1'b0;
    end else begin
      cnt         <= cnt + 1'b1;
      frame_start <= 1'b0;
      if (cnt == '1) begin
        period <= period + 1'b1;
        if (period == '1) begin
          code        <= {~value[SAMPLE_BITS-1], value[SAMPLE_BITS-2:0]};
          frame_start <= 1'b1;
        end
      end
      pwm <= ({1'b0, cnt} < high_len);
    end
  end

endmodule
