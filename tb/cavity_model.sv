// cavity_model -- behavioural model of the optical plant, for testbenches only.
//
// Models the scanned cavity, three lasers and the transmission photodetector
// in units of the piezo DAC code. The cavity length follows the scan ramp;
// the reference laser is resonant whenever ramp = REF_V + dl + m*FSR (any
// integer m), slave laser B when ramp = B_V + dl + drift_b + ctrl_b and
// slave C when ramp = C_V + dl + drift_c + ctrl_c, i.e. each slave's
// frequency moves by one DAC code per control count. `dl` is a common
// cavity-length drift. A laser contributes only while its AOM gate is open;
// each resonance is a triangle of half-width W codes and the given height on
// a small negative baseline. The signal is registered, one clock behind the
// ramp. Not synthesizable logic: it stands in for analog parts.
module cavity_model
  import stcl_pkg::*;
#(
  parameter int FSR   = 6000,
  parameter int REF_V = -3000,
  parameter int B_V   = -1000,
  parameter int C_V   = 1000,
  parameter int W     = 40
) (
  input  logic    clk,
  input  sample_t ramp,
  input  logic    ref_gate,
  input  logic    b_gate,
  input  logic    c_gate,
  input  sample_t ctrl_b,
  input  sample_t ctrl_c,
  input  int      dl,
  input  int      drift_b,
  input  int      drift_c,
  input  int      h_ref,
  input  int      h_b,
  input  int      h_c,
  output sample_t pd
);

  function automatic int line(input int v, input int res, input int h);
    int d = (v > res) ? v - res : res - v;
    return (d < W) ? h * (W - d) / W : 0;
  endfunction

  always_ff @(posedge clk) begin
    int v, acc;
    v = int'(ramp);
    acc = -40;
    if (ref_gate)
      for (int m = -2; m <= 2; m++) acc += line(v, REF_V + dl + m * FSR, h_ref);
    if (b_gate) acc += line(v, B_V + dl + drift_b + int'(ctrl_b), h_b);
    if (c_gate) acc += line(v, C_V + dl + drift_c + int'(ctrl_c), h_c);
    if (acc > 8191) acc = 8191;
    pd <= sample_t'(acc);
  end

endmodule
