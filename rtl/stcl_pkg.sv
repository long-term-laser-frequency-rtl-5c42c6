// stcl_pkg -- shared types and constants of the scanning transfer cavity lock
// (STCL) firmware.
//
// One FPGA samples the cavity photodetector with a 14-bit ADC, finds the
// transmission peaks of the reference and slave lasers during each cavity
// scan, normalises the slave positions to the two reference peaks and closes
// one PID loop per laser. The 14-bit sample width and the six peak detectors
// per device (two reference peaks plus four slaves) follow the paper; the
// fixed-point formats of positions, normalised values and gains are this
// design's own choice and are documented next to each type.
package stcl_pkg;

  // ADC/DAC/PWM resolution: 14 bit, as on the Red Pitaya.
  localparam int unsigned SAMPLE_BITS = 14;
  // Peak positions are indices into a 2^14-sample acquisition record.
  localparam int unsigned POS_BITS    = 14;
  // PID inputs and setpoints: 16-bit signed. A peak position is used as a
  // plain integer (0..16383); a normalised position is Q2.14 (1.0 = 16384).
  localparam int unsigned ERR_BITS    = 16;
  localparam int unsigned NORM_FRAC   = 14;
  // Gains: 16-bit signed. P and D have 8 fraction bits, I has 12.
  localparam int unsigned GAIN_BITS   = 16;
  localparam int unsigned P_SHIFT     = 8;
  localparam int unsigned I_SHIFT     = 12;
  localparam int unsigned D_SHIFT     = 8;

  // Peak detectors per device: left reference, right reference, 4 slaves.
  localparam int unsigned N_SLAVE     = 4;
  localparam int unsigned N_PEAK      = N_SLAVE + 2;
  localparam int unsigned PK_REF_L    = 0;
  localparam int unsigned PK_REF_R    = 1;

  typedef logic signed [SAMPLE_BITS-1:0] sample_t;
  typedef logic        [POS_BITS-1:0]    pos_t;
  typedef logic signed [ERR_BITS-1:0]    err_t;
  typedef logic signed [GAIN_BITS-1:0]   gain_t;

  // Settings of one peak detector (names as in the control GUI).
  typedef struct packed {
    pos_t    center;        // middle of the time range, in samples
    pos_t    size;          // width of the time range, in samples
    sample_t height;        // threshold: a smaller maximum is not a peak
    logic    enabled;       // laser may be injected (AOM gate allowed)
    logic    always_active; // keep the AOM gate open for the whole scan
  } peak_cfg_t;

  // Settings of one PID controller.
  typedef struct packed {
    err_t    setpoint;
    gain_t   kp;
    gain_t   ki;
    gain_t   kd;
    sample_t out_min;       // output clamp (also bounds the integrator)
    sample_t out_max;
    sample_t ival;          // value loaded into the integrator by ival_wr
    logic    ival_wr;
    logic    locking;       // loop engaged; when low the output is held
  } pid_cfg_t;

  // Settings of the scan ramp generator (main device only).
  typedef struct packed {
    logic [31:0] step;          // phase increment per clock: period = 2^32/step
    logic        sawtooth;      // 0: symmetric triangle (piezo), 1: sawtooth (AOM scan)
    sample_t     scan_ampl;     // manual amplitude, Q1.13 of full scale
    sample_t     scan_offs;     // manual offset, DAC counts
    logic        ampl_from_pid; // amplitude taken from the right-reference PID
    logic        offs_from_pid; // offset taken from the left-reference PID
    logic        ext_trigger;   // acquire on trig_in instead of the own ramp
  } scan_cfg_t;

  // Source of one fast DAC output.
  typedef enum logic [2:0] {
    DAC_RAMP   = 3'd0,
    DAC_SLAVE0 = 3'd1,
    DAC_SLAVE1 = 3'd2,
    DAC_SLAVE2 = 3'd3,
    DAC_SLAVE3 = 3'd4,
    DAC_ZERO   = 3'd7
  } dac_sel_e;

  function automatic sample_t sat_sample(input logic signed [31:0] v);
    if (v > 32'sd8191)       return sample_t'(14'sd8191);
    else if (v < -32'sd8192) return sample_t'(-14'sd8192);
    else                     return sample_t'(v);
  endfunction

endpackage
