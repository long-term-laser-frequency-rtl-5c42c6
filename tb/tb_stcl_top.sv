// tb_stcl_top -- end-to-end test of the scanning transfer cavity lock at
// reduced size: a main board and an auxiliary board (triggered by the main
// one) on one behavioural cavity with a reference laser and two slave lasers.
// The acquisition has 4096 samples at decimation 2 and the scan period is
// 8000 clocks (2^32/536871), so the rising half spans 2000 samples and every
// acquisition is cut short by the next trigger, as in the full-size design.
// The scenario and all checks live in stcl_scenario.
module tb_stcl_top;
  import stcl_pkg::*;

  localparam int NS = 4096, DEC = 2;
  localparam logic [31:0] STEP = 32'd536871;

  logic clk = 1'b0;
  always #4 clk = ~clk;

  logic rst_n;
  scan_cfg_t scan_cfg;
  peak_cfg_t peak_cfg [N_PEAK], aux_peak_cfg [N_PEAK];
  pid_cfg_t  pid_cfg  [N_PEAK], aux_pid_cfg  [N_PEAK];
  dac_sel_e  dac_sel  [2];
  logic [1:0] slave_src [N_SLAVE];
  sample_t   pd;
  logic      trig_out, aux_trig_out, ref_aom_en, aux_ref_aom_en, scan_rising, aux_rising;
  sample_t   dac_out [2], aux_dac_out [2], ramp, aux_ramp;
  logic      pwm_out [N_SLAVE], aux_pwm [N_SLAVE], aom_en [N_SLAVE], aux_aom_en [N_SLAVE];
  pos_t      peak_pos [N_PEAK], aux_peak_pos [N_PEAK];
  logic      peak_valid [N_PEAK], aux_peak_valid [N_PEAK];
  logic      peak_done [N_PEAK], aux_peak_done [N_PEAK];
  sample_t   peak_height [N_PEAK], aux_peak_height [N_PEAK];
  err_t      norm [N_SLAVE], aux_norm [N_SLAVE];
  logic      norm_valid [N_SLAVE], aux_norm_valid [N_SLAVE];
  sample_t   ctrl_out [N_PEAK], aux_ctrl_out [N_PEAK];
  logic      ctrl_upd [N_PEAK], aux_ctrl_upd [N_PEAK];
  int dl, drift_b, drift_c, h_ref, h_b, h_c, checks, failures;
  logic finished;

  stcl_top #(.N_SAMPLES(NS), .DECIMATION(DEC), .RAMP_STEP(STEP)) u_main (
    .clk, .rst_n, .adc_pd(pd), .trig_in(1'b0), .trig_out, .scan_cfg, .peak_cfg, .pid_cfg,
    .dac_sel, .slave_src, .dac_out, .pwm_out, .aom_en, .ref_aom_en, .ramp, .scan_rising, .peak_pos,
    .peak_valid, .peak_done, .peak_height, .norm, .norm_valid, .ctrl_out, .ctrl_upd);

  stcl_top #(.IS_MAIN(1'b0), .N_SAMPLES(NS), .DECIMATION(DEC), .RAMP_STEP(STEP)) u_aux (
    .clk, .rst_n, .adc_pd(pd), .trig_in(trig_out), .trig_out(aux_trig_out),
    .scan_cfg, .peak_cfg(aux_peak_cfg), .pid_cfg(aux_pid_cfg), .dac_sel,
    .slave_src('{2'd0, 2'd1, 2'd2, 2'd3}),
    .dac_out(aux_dac_out), .pwm_out(aux_pwm), .aom_en(aux_aom_en),
    .ref_aom_en(aux_ref_aom_en), .ramp(aux_ramp), .scan_rising(aux_rising),
    .peak_pos(aux_peak_pos), .peak_valid(aux_peak_valid), .peak_done(aux_peak_done),
    .peak_height(aux_peak_height), .norm(aux_norm), .norm_valid(aux_norm_valid),
    .ctrl_out(aux_ctrl_out), .ctrl_upd(aux_ctrl_upd));

  cavity_model u_cav (
    .clk, .ramp, .ref_gate(ref_aom_en), .b_gate(aom_en[0]), .c_gate(aux_aom_en[0]),
    .ctrl_b(ctrl_out[2]), .ctrl_c(aux_ctrl_out[2]), .dl, .drift_b, .drift_c,
    .h_ref, .h_b, .h_c, .pd);

  stcl_scenario #(.HALF(2000), .WITH_AUX(1'b1), .SCANS_SETTLE(60)) u_scn (
    .clk, .rst_n, .scan_cfg, .peak_cfg, .pid_cfg, .dac_sel, .slave_src, .trig_out, .ramp, .scan_rising,
    .peak_pos, .peak_valid, .norm, .norm_valid, .ctrl_out, .ctrl_upd, .dac_out, .pwm_out,
    .ref_aom_en, .retrig(u_main.u_acq.acq_end & u_main.u_acq.acq_start),
    .aux_peak_cfg, .aux_pid_cfg, .aux_peak_pos, .aux_norm, .aux_ctrl_out,
    .aux_acq_start(u_aux.u_acq.acq_start),
    .dl, .drift_b, .drift_c, .h_ref, .h_b, .h_c, .checks, .failures, .finished);

  initial begin
    // 600 scans of 8000 clocks
    repeat (4_800_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(posedge finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
