// stcl_scenario -- end-to-end stimulus and checker for stcl_top, shared by the
// reduced-size and the full-size system testbenches.
//
// It configures a main board (and, if WITH_AUX, an auxiliary board) for a
// cavity with one reference laser and two slave lasers (B on the main board,
// C on the auxiliary board), drives the cavity_model and walks through the
// lock's operating cases, one scan at a time:
//   1. detection with all loops open;
//   2. closing all loops: left/right reference peaks and the normalised slave
//      positions must settle on their setpoints;
//   3. a common cavity-length drift, corrected by the scan-offset loop;
//   4. a slave laser frequency drift, corrected by its own loop;
//   5. a slave laser that disappears: its peak is invalid and its controller
//      holds its output;
//   6. a reference laser that disappears: both reference loops and every
//      slave loop halt;
//   7. a controller driven into its output limit (clamp);
//   8. a frequency jump of slave B: it is moved to a second detector with a
//      different range, with a new setpoint and a feed-forward step, locks
//      there, and jumps back;
//   9. a switch of the scan to the sawtooth waveform of the AOM-scan mode.
// Throughout it checks the DAC routing, counts the retriggered acquisitions,
// the two reference gate windows per scan, the auxiliary board's
// acquisitions and the PWM activity. Every mechanism must have occurred at
// least once. HALF is the number of acquisition samples in the rising half of
// the scan; loop gains are scaled from it so that both sizes converge alike.
module stcl_scenario
  import stcl_pkg::*;
#(
  parameter int  HALF     = 2000,
  parameter bit  WITH_AUX = 1'b1,
  parameter int  SCANS_SETTLE = 60
) (
  input  logic      clk,
  output logic      rst_n,
  // main board
  output scan_cfg_t scan_cfg,
  output peak_cfg_t peak_cfg [N_PEAK],
  output pid_cfg_t  pid_cfg  [N_PEAK],
  output dac_sel_e  dac_sel  [2],
  output logic [1:0] slave_src [N_SLAVE],
  input  logic      trig_out,
  input  sample_t   ramp,
  input  logic      scan_rising,
  input  pos_t      peak_pos   [N_PEAK],
  input  logic      peak_valid [N_PEAK],
  input  err_t      norm       [N_SLAVE],
  input  logic      norm_valid [N_SLAVE],
  input  sample_t   ctrl_out   [N_PEAK],
  input  logic      ctrl_upd   [N_PEAK],
  input  sample_t   dac_out    [2],
  input  logic      pwm_out    [N_SLAVE],
  input  logic      ref_aom_en,
  input  logic      retrig,
  // auxiliary board
  output peak_cfg_t aux_peak_cfg [N_PEAK],
  output pid_cfg_t  aux_pid_cfg  [N_PEAK],
  input  pos_t      aux_peak_pos [N_PEAK],
  input  err_t      aux_norm     [N_SLAVE],
  input  sample_t   aux_ctrl_out [N_PEAK],
  input  logic      aux_acq_start,
  // plant
  output int        dl,
  output int        drift_b,
  output int        drift_c,
  output int        h_ref,
  output int        h_b,
  output int        h_c,
  output int        checks,
  output int        failures,
  output logic      finished
);

  localparam int A0     = 4096;                 // initial scan amplitude (Q1.13)
  localparam int SET_L  = HALF * 15 / 100;
  localparam int SET_R  = HALF * 85 / 100;
  localparam int SIZE   = HALF / 10;
  localparam int SET_NB = 5734;                 // 0.35 in Q2.14
  localparam int SET_NC = 10650;                // 0.65 in Q2.14
  localparam int SET_NJ = 7373;                 // 0.45 in Q2.14: jump target of B
  localparam int FF_JUMP = 560;                 // feed-forward (0.10 FSR = 600 codes needed)
  localparam int SPAN   = SET_R - SET_L;
  // tolerance on a normalised position: 3 samples
  localparam int NTOL   = 3 * 16384 / SPAN + 2;
  // loop gains (see module header): 0.2 of the plant sensitivity per scan
  localparam int KI_OFF = -(2 * 4096 * A0) / (10 * (HALF / 2));
  localparam int KI_AMP = -(2 * 4096 * A0 / 3000 * A0) / (10 * (HALF / 2));
  localparam int KI_SL  = 450;

  typedef enum int {M_CONVERGE, M_CAVITY_DRIFT, M_LASER_DRIFT, M_PEAK_HOLD,
                    M_REF_HALT, M_CLAMP, M_SAWTOOTH, M_RETRIGGER, M_REF_WINDOWS,
                    M_AUX_ACQ, M_PWM, M_NORMALIZE, M_JUMP, M_COUNT} mech_e;
  localparam string MECH_NAME [M_COUNT] = '{"lock", "cavity_drift", "laser_drift",
      "peak_hold", "ref_halt", "clamp", "sawtooth", "retrigger", "ref_windows",
      "aux_acquire", "pwm", "normalize", "freq_jump"};
  int mech [M_COUNT];
  int scans = 0;
  logic trig_d = 1'b0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL (scan %0d): %s", scans, msg); end
  endtask

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic wait_scans(input int n);
    int s0 = scans;
    while (scans < s0 + n) @(posedge clk);
  endtask

  // ---------------------------------------------------------- monitors
  sample_t ramp_d = '0, ctrl_b_d = '0;
  int ref_edges = 0, pwm_edges = 0, aux_acqs = 0;
  logic ref_d = 1'b0, pwm_d = 1'b0;
  bit check_dac = 1'b0;

  always @(posedge clk) begin
    trig_d <= trig_out;
    if (trig_out && !trig_d) begin
      scans <= scans + 1;
      if (scans > 2) begin
        checks++;
        if (ref_edges != 2) begin
          failures++;
          $display("FAIL (scan %0d): %0d reference windows", scans, ref_edges);
        end else mech[M_REF_WINDOWS]++;
      end
      ref_edges <= 0;
    end else if (ref_aom_en && !ref_d) ref_edges <= ref_edges + 1;
    ref_d <= ref_aom_en;
    pwm_d <= pwm_out[0];
    if (pwm_out[0] != pwm_d) pwm_edges <= pwm_edges + 1;
    if (retrig) mech[M_RETRIGGER]++;
    if (aux_acq_start) aux_acqs <= aux_acqs + 1;
    ramp_d   <= ramp;
    ctrl_b_d <= ctrl_out[2];
    if (check_dac) begin
      checks++;
      if (dac_out[0] != ramp_d || dac_out[1] != ctrl_b_d) begin
        failures++;
        if (failures < 30) $display("FAIL: DAC routing");
      end
    end
  end

  // ---------------------------------------------------------- configuration
  function automatic peak_cfg_t pk(input int center, input int height);
    peak_cfg_t c;
    c.center = pos_t'(center);
    c.size = pos_t'(SIZE);
    c.height = sample_t'(height);
    c.enabled = 1'b1;
    c.always_active = 1'b0;
    return c;
  endfunction

  function automatic pid_cfg_t pc(input int sp, input int ki, input int lo, input int hi,
                                  input int ival);
    pid_cfg_t c;
    c = '0;
    c.setpoint = err_t'(sp);
    c.ki = gain_t'(ki);
    c.out_min = sample_t'(lo);
    c.out_max = sample_t'(hi);
    c.ival = sample_t'(ival);
    return c;
  endfunction

  task automatic set_locking(input bit on);
    for (int i = 0; i < N_PEAK; i++) begin
      pid_cfg[i].locking = on;
      aux_pid_cfg[i].locking = on;
    end
  endtask

  initial begin
    int held_b, held0, held1, held_c, upd_seen, gap, t0;
    bit saw_ok;
    for (int m = 0; m < M_COUNT; m++) mech[m] = 0;
    checks = 0; failures = 0; finished = 1'b0;
    rst_n = 1'b0;
    dl = 0; drift_b = 0; drift_c = 0; h_ref = 3000; h_b = 1500; h_c = 1200;
    scan_cfg = '{step: 32'd0, sawtooth: 1'b0, scan_ampl: sample_t'(A0), scan_offs: '0,
                 ampl_from_pid: 1'b1, offs_from_pid: 1'b1, ext_trigger: 1'b0};
    dac_sel[0] = DAC_RAMP;
    dac_sel[1] = DAC_SLAVE0;
    for (int k = 0; k < N_SLAVE; k++) slave_src[k] = 2'(k);
    peak_cfg[0] = pk(SET_L, 500);
    peak_cfg[1] = pk(SET_R, 500);
    peak_cfg[2] = pk(SET_L + SPAN * 35 / 100, 500);
    peak_cfg[3] = pk(HALF / 2, 500); peak_cfg[3].enabled = 1'b0;
    peak_cfg[4] = peak_cfg[3];
    peak_cfg[5] = peak_cfg[3];
    aux_peak_cfg = peak_cfg;
    aux_peak_cfg[2] = pk(SET_L + SPAN * 65 / 100, 500);
    pid_cfg[0] = pc(SET_L, KI_OFF, -2000, 2000, 0);
    pid_cfg[1] = pc(SET_R, KI_AMP, 1000, 8191, A0);
    pid_cfg[2] = pc(SET_NB, KI_SL, -2000, 2000, 0);
    for (int i = 3; i < N_PEAK; i++) pid_cfg[i] = pc(0, 0, -8192, 8191, 0);
    aux_pid_cfg = pid_cfg;
    aux_pid_cfg[2] = pc(SET_NC, KI_SL, -2000, 2000, 0);
    for (int i = 0; i < N_PEAK; i++) begin
      pid_cfg[i].ival_wr = 1'b1;
      aux_pid_cfg[i].ival_wr = 1'b1;
    end
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    for (int i = 0; i < N_PEAK; i++) begin
      pid_cfg[i].ival_wr = 1'b0;
      aux_pid_cfg[i].ival_wr = 1'b0;
    end
    check_dac = 1'b1;

    // 1. open loop: peaks found where the plant puts them
    wait_scans(3);
    check(peak_valid[0] && peak_valid[1] && peak_valid[2], "open-loop peaks valid");
    check(iabs(int'(peak_pos[0]) - HALF / 2 * (A0 - 3000) / A0) <= 2,
          $sformatf("open-loop left reference at %0d", peak_pos[0]));
    check(norm_valid[0], "open-loop normalised value valid");
    begin
      // independent check of the normaliser on live data
      int e;
      e = (int'(peak_pos[2]) - int'(peak_pos[0])) * 16384 /
          (int'(peak_pos[1]) - int'(peak_pos[0]));
      check(int'(norm[0]) == e, $sformatf("N = %0d expected %0d", norm[0], e));
      if (int'(norm[0]) == e) mech[M_NORMALIZE]++;
    end

    // 2. close all loops
    set_locking(1'b1);
    wait_scans(SCANS_SETTLE);
    check(iabs(int'(peak_pos[0]) - SET_L) <= 2, $sformatf("left reference %0d", peak_pos[0]));
    check(iabs(int'(peak_pos[1]) - SET_R) <= 2, $sformatf("right reference %0d", peak_pos[1]));
    check(iabs(int'(norm[0]) - SET_NB) <= NTOL, $sformatf("slave B N=%0d", norm[0]));
    if (WITH_AUX) check(iabs(int'(aux_norm[0]) - SET_NC) <= NTOL, $sformatf("slave C N=%0d", aux_norm[0]));
    if (iabs(int'(peak_pos[0]) - SET_L) <= 2 && iabs(int'(norm[0]) - SET_NB) <= NTOL)
      mech[M_CONVERGE]++;

    // 3. cavity length drift
    held0 = int'(ctrl_out[0]);
    dl = 250;
    wait_scans(1);
    check(iabs(int'(peak_pos[0]) - SET_L) > 5, "drift moves the reference peak");
    wait_scans(SCANS_SETTLE);
    check(iabs(int'(peak_pos[0]) - SET_L) <= 2, $sformatf("left reference after drift %0d", peak_pos[0]));
    check(iabs(int'(norm[0]) - SET_NB) <= NTOL, $sformatf("slave B after drift N=%0d", norm[0]));
    check(iabs(int'(ctrl_out[0]) - held0 - 250) <= 20,
          $sformatf("scan offset moved by %0d", int'(ctrl_out[0]) - held0));
    if (iabs(int'(ctrl_out[0]) - held0 - 250) <= 20) mech[M_CAVITY_DRIFT]++;

    // 4. slave laser drift
    held_b = int'(ctrl_out[2]);
    drift_b = 150;
    wait_scans(SCANS_SETTLE);
    check(iabs(int'(norm[0]) - SET_NB) <= NTOL, $sformatf("slave B after laser drift N=%0d", norm[0]));
    check(iabs(int'(ctrl_out[2]) - held_b + 150) <= 10,
          $sformatf("slave B control moved by %0d", int'(ctrl_out[2]) - held_b));
    if (iabs(int'(ctrl_out[2]) - held_b + 150) <= 10) mech[M_LASER_DRIFT]++;

    // 5. slave laser B disappears: hold
    wait_scans(1);
    held_b = int'(ctrl_out[2]);
    h_b = 0;
    upd_seen = 0;
    fork
      begin wait_scans(4); end
      begin forever begin @(posedge clk); if (ctrl_upd[2] && scans > 0) upd_seen++; end end
    join_any
    disable fork;
    check(!peak_valid[2] && !norm_valid[0], "missing slave peak is invalid");
    check(int'(ctrl_out[2]) == held_b && upd_seen <= 1,
          $sformatf("slave B control held (%0d -> %0d, %0d updates)", held_b, ctrl_out[2], upd_seen));
    if (!peak_valid[2] && int'(ctrl_out[2]) == held_b) mech[M_PEAK_HOLD]++;
    h_b = 1500;
    wait_scans(3);
    check(peak_valid[2] && norm_valid[0], "slave peak back");

    // 6. reference laser disappears: all loops halt
    wait_scans(1);
    held0 = int'(ctrl_out[0]); held1 = int'(ctrl_out[1]);
    held_b = int'(ctrl_out[2]); held_c = int'(aux_ctrl_out[2]);
    h_ref = 0;
    wait_scans(3);
    check(!peak_valid[0] && !peak_valid[1] && !norm_valid[0], "references invalid");
    check(int'(ctrl_out[0]) == held0 && int'(ctrl_out[1]) == held1, "scan loops held");
    check(int'(ctrl_out[2]) == held_b, "slave B held while references missing");
    if (WITH_AUX) check(int'(aux_ctrl_out[2]) == held_c, "slave C held while references missing");
    if (int'(ctrl_out[0]) == held0 && int'(ctrl_out[2]) == held_b) mech[M_REF_HALT]++;
    h_ref = 3000;
    wait_scans(SCANS_SETTLE / 2);
    check(iabs(int'(norm[0]) - SET_NB) <= NTOL, $sformatf("relocked after reference loss N=%0d", norm[0]));

    // 7. clamp: limit slave B below what the drift needs
    pid_cfg[2].out_max = sample_t'(int'(ctrl_out[2]) - 40);
    drift_b = 0;     // loop would need +150
    wait_scans(10);
    check(ctrl_out[2] == pid_cfg[2].out_max, $sformatf("clamped at %0d", ctrl_out[2]));
    if (ctrl_out[2] == pid_cfg[2].out_max) mech[M_CLAMP]++;
    pid_cfg[2].out_max = sample_t'(2000);

    // 8. frequency jump of slave B through a second detector
    wait_scans(SCANS_SETTLE / 2);
    check(iabs(int'(norm[0]) - SET_NB) <= NTOL, $sformatf("B relocked after clamp N=%0d", norm[0]));
    peak_cfg[3] = pk(SET_L + SPAN * 45 / 100, 500);
    held_b = int'(ctrl_out[2]);
    slave_src[0] = 2'd1;
    pid_cfg[2].setpoint = err_t'(SET_NJ);
    pid_cfg[2].ival = sample_t'(held_b + FF_JUMP);
    pid_cfg[2].ival_wr = 1'b1;
    @(posedge clk); #1 pid_cfg[2].ival_wr = 1'b0;
    wait_scans(SCANS_SETTLE);
    check(peak_valid[3] && iabs(int'(norm[0]) - SET_NJ) <= NTOL,
          $sformatf("B after jump N=%0d", norm[0]));
    check(iabs(int'(ctrl_out[2]) - held_b - 600) <= 15,
          $sformatf("B control moved by %0d for the jump", int'(ctrl_out[2]) - held_b));
    if (iabs(int'(norm[0]) - SET_NJ) <= NTOL) mech[M_JUMP]++;
    held_c = int'(ctrl_out[2]);
    slave_src[0] = 2'd0;
    pid_cfg[2].setpoint = err_t'(SET_NB);
    pid_cfg[2].ival = sample_t'(held_c - FF_JUMP);
    pid_cfg[2].ival_wr = 1'b1;
    @(posedge clk); #1 pid_cfg[2].ival_wr = 1'b0;
    wait_scans(SCANS_SETTLE);
    check(iabs(int'(norm[0]) - SET_NB) <= NTOL, $sformatf("B after jump back N=%0d", norm[0]));

    // 9. AOM-scan waveform: sawtooth, loops paused
    set_locking(1'b0);
    wait_scans(1);
    // period of the triangle
    @(posedge trig_out); t0 = 0;
    @(negedge trig_out);
    gap = 0; while (!trig_out) begin @(posedge clk); gap++; end
    scan_cfg.sawtooth = 1'b1;
    wait_scans(1);
    @(negedge trig_out);
    t0 = 0; saw_ok = 1'b1;
    while (!trig_out) begin
      @(posedge clk); t0++;
      if (!scan_rising) saw_ok = 1'b0;
    end
    check(saw_ok, "sawtooth rises over the whole period");
    check(t0 >= gap - 1 && t0 <= gap + 1, $sformatf("sawtooth period %0d vs %0d", t0, gap));
    if (saw_ok) mech[M_SAWTOOTH]++;
    scan_cfg.sawtooth = 1'b0;
    wait_scans(2);

    if (pwm_edges > 10) mech[M_PWM]++;
    if (!WITH_AUX || aux_acqs >= scans - 2) mech[M_AUX_ACQ]++;
    if (WITH_AUX) check(aux_acqs >= scans - 2, $sformatf("aux acquisitions %0d of %0d", aux_acqs, scans));

    for (int m = 0; m < M_COUNT; m++) begin
      $display("mechanism %-14s occurred %0d times", MECH_NAME[m], mech[m]);
      checks++;
      if (mech[m] == 0) failures++;
    end
    finished = 1'b1;
  end

endmodule
