// stcl_top -- one FPGA board of the scanning transfer cavity lock (STCL).
//
// A Fabry-Perot cavity is scanned periodically; the reference laser and up to
// four slave lasers each produce a transmission peak at some time in the
// scan. This block finds those peaks in the photodetector signal, expresses
// every slave peak as a fraction of the distance between two consecutive
// reference peaks (one free spectral range apart), and feeds that fraction to
// one PID per slave laser, whose output tunes the laser. On the main board
// the reference peaks also steer the scan itself: the left reference peak is
// held in place by a PID acting on the scan offset and the right one by a PID
// acting on the scan amplitude, which removes drifts of the cavity length and
// of the piezo response.
//
// Data path (all in parallel, one result per scan):
//   ramp_gen -> trigger -> acq_timebase -> 6 x peak_detect
//   peak 0 (ref L) -> PID 0 -> scan offset      (main board only)
//   peak 1 (ref R) -> PID 1 -> scan amplitude   (main board only)
//   peak 2+slave_src[k], peaks 0,1 -> normalizer k -> PID 2+k -> laser k
// Each peak detector also gates its laser's AOM during its time range; the
// reference AOM is gated by the OR of the two reference ranges. slave_src[k]
// picks which of the four slave detectors serves laser k, for both its
// measurement and its AOM gate (identity normally). Pointing a laser at a
// second detector with a different range lets it jump between two
// frequencies: the host switches slave_src, the setpoint and, as a
// feed-forward step, the PID integrator (ival_wr).
//
// Outputs: two fast DAC codes, each selectable (dac_sel) between the scan
// ramp and a slave PID; four PWM pins carrying the four slave PIDs; AOM
// enables; a scan trigger for auxiliary boards. An auxiliary board
// (IS_MAIN = 0) has no ramp generator and no reference PIDs and runs from
// trig_in. All settings, normally written by the host software, are input
// ports; the results are output ports for read-back.
//
// Clock: the 125 MHz ADC clock; reset is synchronous, active low. The
// structure (Fig.-2-like: ramp generator, peak detectors, normaliser, PIDs,
// left reference -> offset, right reference -> amplitude, six detectors and
// four slaves per board, 14-bit outputs) follows the paper. The host
// register map is replaced by ports, and the trigger output pulse length,
// the input synchroniser, the DAC routing and the detector select (the paper
// only says that two detectors can serve one laser) are this design's
// choices.
module stcl_top
  import stcl_pkg::*;
#(
  parameter bit          IS_MAIN    = 1'b1,
  parameter int unsigned N_SAMPLES  = 16384,
  parameter int unsigned DECIMATION = 32,
  parameter logic [31:0] RAMP_STEP  = 32'd8590,
  parameter int unsigned TRIG_LEN   = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // photodetector (cavity transmission) from the ADC
  input  sample_t   adc_pd,
  // scan trigger between boards
  input  logic      trig_in,
  output logic      trig_out,
  // settings
  input  scan_cfg_t scan_cfg,
  input  peak_cfg_t peak_cfg [N_PEAK],
  input  pid_cfg_t  pid_cfg  [N_PEAK],
  input  dac_sel_e  dac_sel  [2],
  input  logic [1:0] slave_src [N_SLAVE],
  // actuators
  output sample_t   dac_out  [2],
  output logic      pwm_out  [N_SLAVE],
  output logic      aom_en   [N_SLAVE],
  output logic      ref_aom_en,
  // read-back
  output sample_t   ramp,
  output logic      scan_rising,
  output pos_t      peak_pos   [N_PEAK],
  output logic      peak_valid [N_PEAK],
  output logic      peak_done  [N_PEAK],
  output sample_t   peak_height[N_PEAK],
  output err_t      norm       [N_SLAVE],
  output logic      norm_valid [N_SLAVE],
  output sample_t   ctrl_out   [N_PEAK],
  output logic      ctrl_upd   [N_PEAK]
);

  // ---------------------------------------------------------------- trigger
  logic ramp_trig, acq_trig;
  logic [2:0] trig_sync;
  logic ext_trig;

  always_ff @(posedge clk) begin
    if (!rst_n) trig_sync <= '0;
    else        trig_sync <= {trig_sync[1:0], trig_in};
  end
  assign ext_trig = trig_sync[1] & ~trig_sync[2];

  if (IS_MAIN) begin : g_main
    sample_t ampl, offs;
    assign offs = scan_cfg.offs_from_pid ? ctrl_out[PK_REF_L] : scan_cfg.scan_offs;
    assign ampl = scan_cfg.ampl_from_pid ? ctrl_out[PK_REF_R] : scan_cfg.scan_ampl;

    ramp_gen #(.DEFAULT_STEP(RAMP_STEP)) u_ramp (
      .clk      (clk),
      .rst_n    (rst_n),
      .run      (1'b1),
      .step     (scan_cfg.step),
      .sawtooth (scan_cfg.sawtooth),
      .amplitude(ampl),
      .offset   (offs),
      .ramp     (ramp),
      .trig     (ramp_trig),
      .rising   (scan_rising)
    );

    // stretched copy of the scan trigger for the auxiliary boards
    logic [$clog2(TRIG_LEN+1)-1:0] tcnt;
    always_ff @(posedge clk) begin
      if (!rst_n)          tcnt <= '0;
      else if (ramp_trig)  tcnt <= ($clog2(TRIG_LEN+1))'(TRIG_LEN);
      else if (tcnt != '0) tcnt <= tcnt - 1'b1;
    end
    assign trig_out = (tcnt != '0);
    assign acq_trig = scan_cfg.ext_trigger ? ext_trig : ramp_trig;
  end else begin : g_aux
    assign ramp      = '0;
    assign scan_rising = 1'b0;
    assign ramp_trig = 1'b0;
    assign trig_out  = 1'b0;
    assign acq_trig  = ext_trig;
  end

  // ------------------------------------------------------------ acquisition
  logic acq_start, acq_end, acq_active, smp_stb;
  pos_t smp_idx;

  acq_timebase #(.N_SAMPLES(N_SAMPLES), .DECIMATION(DECIMATION)) u_acq (
    .clk       (clk),
    .rst_n     (rst_n),
    .trig      (acq_trig),
    .acq_start (acq_start),
    .acq_end   (acq_end),
    .acq_active(acq_active),
    .smp_stb   (smp_stb),
    .smp_idx   (smp_idx)
  );

  // --------------------------------------------------------- peak detection
  logic    gate [N_PEAK];

  for (genvar p = 0; p < N_PEAK; p++) begin : g_peak
    peak_detect u_pk (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg        (peak_cfg[p]),
      .acq_start  (acq_start),
      .acq_end    (acq_end),
      .acq_active (acq_active),
      .smp_stb    (smp_stb),
      .smp_idx    (smp_idx),
      .sample     (adc_pd),
      .pos        (peak_pos[p]),
      .peak_height(peak_height[p]),
      .valid      (peak_valid[p]),
      .done       (peak_done[p]),
      .gate       (gate[p])
    );
  end

  assign ref_aom_en = IS_MAIN ? (gate[PK_REF_L] | gate[PK_REF_R]) : 1'b0;

  // ------------------------------------------- reference loops (main only)
  for (genvar r = 0; r < 2; r++) begin : g_ref
    if (IS_MAIN) begin : g_pid
      pid u_pid (
        .clk     (clk),
        .rst_n   (rst_n),
        .cfg     (pid_cfg[r]),
        .in      (err_t'({2'b00, peak_pos[r]})),
        .in_valid(peak_valid[r]),
        .upd     (peak_done[r]),
        .out     (ctrl_out[r]),
        .updated (ctrl_upd[r])
      );
    end else begin : g_none
      assign ctrl_out[r] = '0;
      assign ctrl_upd[r] = 1'b0;
    end
  end

  // ------------------------------------------------------------ slave loops
  logic norm_done [N_SLAVE];

  for (genvar k = 0; k < N_SLAVE; k++) begin : g_slave
    normalizer u_norm (
      .clk      (clk),
      .rst_n    (rst_n),
      .acq_start(acq_start),
      .s_pos    (peak_pos[2+slave_src[k]]),
      .s_valid  (peak_valid[2+slave_src[k]]),
      .s_done   (peak_done[2+slave_src[k]]),
      .l_pos    (peak_pos[PK_REF_L]),
      .l_valid  (peak_valid[PK_REF_L]),
      .l_done   (peak_done[PK_REF_L]),
      .r_pos    (peak_pos[PK_REF_R]),
      .r_valid  (peak_valid[PK_REF_R]),
      .r_done   (peak_done[PK_REF_R]),
      .n        (norm[k]),
      .valid    (norm_valid[k]),
      .done     (norm_done[k])
    );

    pid u_pid (
      .clk     (clk),
      .rst_n   (rst_n),
      .cfg     (pid_cfg[2+k]),
      .in      (norm[k]),
      .in_valid(norm_valid[k]),
      .upd     (norm_done[k]),
      .out     (ctrl_out[2+k]),
      .updated (ctrl_upd[2+k])
    );

    pwm_dac u_pwm (
      .clk        (clk),
      .rst_n      (rst_n),
      .value      (ctrl_out[2+k]),
      .pwm        (pwm_out[k]),
      .frame_start()
    );

    assign aom_en[k] = gate[2+slave_src[k]];
  end

  // ------------------------------------------------------------ DAC routing
  for (genvar d = 0; d < 2; d++) begin : g_dac
    always_ff @(posedge clk) begin
      if (!rst_n) dac_out[d] <= '0;
      else begin
        unique case (dac_sel[d])
          DAC_RAMP:   dac_out[d] <= ramp;
          DAC_SLAVE0: dac_out[d] <= ctrl_out[2];
          DAC_SLAVE1: dac_out[d] <= ctrl_out[3];
          DAC_SLAVE2: dac_out[d] <= ctrl_out[4];
          DAC_SLAVE3: dac_out[d] <= ctrl_out[5];
          default:    dac_out[d] <= '0;
        endcase
      end
    end
  end

endmodule
