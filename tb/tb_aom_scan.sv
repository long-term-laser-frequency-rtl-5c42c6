// tb_aom_scan -- workload test: the AOM-scanning mode at a 7.5 kHz sweep rate.
//
// The main board runs at its default size, but the generator is switched to
// the sawtooth with step 257,698 (2^32/257,698 = 16,666.6 clocks = 7.5 kHz at
// 125 MHz). The sweep then spans 520 samples of the 16,384-sample record,
// and every record is cut by the next trigger. The sweep is routed to the
// second DAC, which drives the AOM frequency modulation. The scan loops stay
// open: the sweep amplitude and offset are manual. One slave laser is locked
// through its normalised position.
// The normaliser needs two reference features in the sweep. The behavioural
// cavity provides them by placing two reference resonances in the sweep
// range. How the reference is obtained with a real AOM sweep, which covers a
// few percent of a free spectral range, is not covered by this test.
// Checks: sweep period; one detection and one PID update per sweep, each
// within its own sweep; the slave locks to its setpoint; after a laser drift
// it re-locks within 60 sweeps (8 ms).
module tb_aom_scan;
  import stcl_pkg::*;

  localparam logic [31:0] STEP = 32'd257698;
  localparam int SPS   = 520;                   // samples per sweep (16,667 / 32)
  localparam int SET_L = 70, SET_R = 450;
  localparam int SET_N = 5734;                  // 0.35 in Q2.14
  localparam int NTOL  = 3 * 16384 / (SET_R - SET_L) + 2;

  logic clk = 1'b0;
  always #4 clk = ~clk;

  logic rst_n = 1'b0;
  scan_cfg_t scan_cfg;
  peak_cfg_t peak_cfg [N_PEAK];
  pid_cfg_t  pid_cfg  [N_PEAK];
  dac_sel_e  dac_sel  [2];
  logic [1:0] slave_src [N_SLAVE];
  sample_t   pd, ramp;
  logic      trig_out, ref_aom_en, scan_rising;
  sample_t   dac_out [2];
  logic      pwm_out [N_SLAVE], aom_en [N_SLAVE];
  pos_t      peak_pos [N_PEAK];
  logic      peak_valid [N_PEAK], peak_done [N_PEAK];
  sample_t   peak_height [N_PEAK];
  err_t      norm [N_SLAVE];
  logic      norm_valid [N_SLAVE];
  sample_t   ctrl_out [N_PEAK];
  logic      ctrl_upd [N_PEAK];
  int        drift_b = 0;
  int        checks = 0, failures = 0;

  stcl_top u_main (
    .clk, .rst_n, .adc_pd(pd), .trig_in(1'b0), .trig_out, .scan_cfg, .peak_cfg, .pid_cfg,
    .dac_sel, .slave_src, .dac_out, .pwm_out, .aom_en, .ref_aom_en, .ramp, .scan_rising,
    .peak_pos, .peak_valid, .peak_done, .peak_height, .norm, .norm_valid, .ctrl_out,
    .ctrl_upd);

  // the sweep reaches the cavity through the second DAC
  cavity_model #(.W(120)) u_cav (
    .clk, .ramp(dac_out[1]), .ref_gate(ref_aom_en), .b_gate(aom_en[0]), .c_gate(1'b0),
    .ctrl_b(ctrl_out[2]), .ctrl_c('0), .dl(0), .drift_b, .drift_c(0),
    .h_ref(3000), .h_b(1500), .h_c(0), .pd);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (8_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // per-sweep bookkeeping
  int sweeps = 0, since_trig = 0, upd_in_sweep = 0, det_in_sweep = 0;
  int total_upd = 0, last_period = 0;
  bit count_on = 1'b0;
  always @(posedge clk) begin
    since_trig <= since_trig + 1;
    if (ctrl_upd[2]) begin upd_in_sweep <= upd_in_sweep + 1; total_upd <= total_upd + 1; end
    if (peak_done[2]) det_in_sweep <= det_in_sweep + 1;
    if (u_main.u_acq.acq_start) begin
      if (count_on && sweeps > 2) begin
        checks += 3;
        if (since_trig + 1 < 16666 || since_trig + 1 > 16667) begin
          failures++; $display("FAIL: sweep period %0d", since_trig + 1);
        end
        if (det_in_sweep != 1) begin failures++; $display("FAIL: %0d detections", det_in_sweep); end
        if (upd_in_sweep != 1) begin failures++; $display("FAIL: %0d updates", upd_in_sweep); end
      end
      last_period <= since_trig + 1;
      since_trig <= 0;
      upd_in_sweep <= 0;
      det_in_sweep <= 0;
      sweeps <= sweeps + 1;
    end
  end

  function automatic peak_cfg_t pk(input int center, input bit en);
    peak_cfg_t c;
    c.center = pos_t'(center);
    c.size = pos_t'(40);
    c.height = sample_t'(500);
    c.enabled = en;
    c.always_active = 1'b0;
    return c;
  endfunction

  task automatic wait_sweeps(input int n);
    int s0 = sweeps;
    while (sweeps < s0 + n) @(posedge clk);
  endtask

  initial begin
    int c0;
    scan_cfg = '{step: STEP, sawtooth: 1'b1, scan_ampl: sample_t'(4096), scan_offs: '0,
                 ampl_from_pid: 1'b0, offs_from_pid: 1'b0, ext_trigger: 1'b0};
    dac_sel[0] = DAC_ZERO;
    dac_sel[1] = DAC_RAMP;
    for (int k = 0; k < N_SLAVE; k++) slave_src[k] = 2'(k);
    peak_cfg[0] = pk(SET_L, 1);
    peak_cfg[1] = pk(SET_R, 1);
    peak_cfg[2] = pk(SET_L + (SET_R - SET_L) * 35 / 100, 1);
    for (int i = 3; i < N_PEAK; i++) peak_cfg[i] = pk(10, 0);
    for (int i = 0; i < N_PEAK; i++) begin
      pid_cfg[i] = '0;
      pid_cfg[i].out_min = -14'sd2000;
      pid_cfg[i].out_max = 14'sd2000;
    end
    pid_cfg[2].setpoint = err_t'(SET_N);
    pid_cfg[2].ki = 16'sd450;
    pid_cfg[2].locking = 1'b1;
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;
    wait_sweeps(3);
    count_on = 1'b1;
    check(peak_valid[0] && peak_valid[1] && peak_valid[2], "all peaks seen at 7.5 kHz");
    wait_sweeps(60);
    check(iabs(int'(norm[0]) - SET_N) <= NTOL, $sformatf("locked N=%0d", norm[0]));
    c0 = int'(ctrl_out[2]);
    drift_b = 100;
    wait_sweeps(2);
    check(iabs(int'(norm[0]) - SET_N) > NTOL, "drift visible");
    wait_sweeps(58);
    check(iabs(int'(norm[0]) - SET_N) <= NTOL, $sformatf("re-locked N=%0d", norm[0]));
    check(iabs(int'(ctrl_out[2]) - c0 + 100) <= 20,
          $sformatf("control moved by %0d", int'(ctrl_out[2]) - c0));
    check(total_upd >= 115, $sformatf("%0d updates in 120 sweeps", total_upd));
    $display("AOM scan: %0d sweeps of %0d clocks, %0d PID updates", sweeps, last_period, total_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction
endmodule
