// ramp_gen -- cavity scan generator with scan trigger.
//
// Produces the voltage ramp that scans the cavity length (or, in the AOM
// scanning mode, the sawtooth that sweeps the AOM drive frequency) and a
// one-cycle trigger at the start of every scan, which starts the acquisition
// and is sent to the other boards.
//
// How it works: a 32-bit phase accumulator advances by `step` each clock, so
// the period is 2^32/step clocks. The default step (8590) gives 3.99997 ms at
// 125 MHz, the 4 ms scan period of the paper. In triangle mode the first half
// of the period rises (this is the slope used for the scan) and the second
// half falls back slowly; in sawtooth mode the whole period rises and the
// output then jumps back, as used for AOM scanning. The normalised waveform
// w in [-8192, 8191] is scaled and shifted like an arbitrary signal generator:
//   ramp = offset + (amplitude * w) >>> 13, saturated to 14 bit,
// so amplitude is Q1.13 of full scale and offset is in DAC counts. The scan
// offset and amplitude are the two quantities the reference-peak PIDs act on.
//
// Timing: `trig` is high for the one clock in which the phase wraps; `ramp`
// is registered and shows the first rising sample in the clock after the
// trigger. Symmetric triangle, rising scan slope, 4 ms period and sawtooth
// for AOM scanning follow the paper; the phase-accumulator structure, the
// scaling format and the trigger at the start of the rising slope are this
// design's choices.
module ramp_gen
  import stcl_pkg::*;
#(
  parameter logic [31:0] DEFAULT_STEP = 32'd8590
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,        // phase advances while high
  input  logic [31:0] step,       // 0 selects DEFAULT_STEP
  input  logic        sawtooth,
  input  sample_t     amplitude,
  input  sample_t     offset,
  output sample_t     ramp,
  output logic        trig,
  output logic        rising      // high while the scan slope is output
);

  logic [31:0] phase, step_eff;
  logic [32:0] phase_sum;
  logic signed [SAMPLE_BITS:0] w;
  logic signed [31:0] scaled;

  assign step_eff  = (step == '0) ? DEFAULT_STEP : step;
  assign phase_sum = {1'b0, phase} + {1'b0, step_eff};

  always_comb begin
    if (sawtooth)
      w = $signed({1'b0, phase[31:18]}) - 15'sd8192;
    else if (!phase[31])
      w = $signed({1'b0, phase[30:17]}) - 15'sd8192;
    else
      w = 15'sd8191 - $signed({1'b0, phase[30:17]});
    scaled = 32'(offset) + ((32'(amplitude) * 32'(w)) >>> 13);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase  <= '0;
      trig   <= 1'b0;
      ramp   <= '0;
      rising <= 1'b0;
    end else begin
      trig <= 1'b0;
      if (run) begin
        phase <= phase_sum[31:0];
        trig  <= phase_sum[32];
      end
      ramp   <= sat_sample(scaled);
      rising <= sawtooth | ~phase[31];
    end
  end

endmodule
