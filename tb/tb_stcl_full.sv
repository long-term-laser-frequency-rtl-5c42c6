// tb_stcl_full -- end-to-end test of one main board at its default size:
// 16384-sample acquisition, decimation 32, 125 MHz clock and the 4 ms scan
// (2^32/8590 = 499,996 clocks, 7812 samples on the rising half). The same
// scenario as tb_stcl_top runs on the single board with one slave laser
// (no auxiliary board), with 40 scans allowed for each settling step; about
// 270 scans in all.
module tb_stcl_full;
  import stcl_pkg::*;

  logic clk = 1'b0;
  always #4 clk = ~clk;

  logic rst_n;
  scan_cfg_t scan_cfg;
  peak_cfg_t peak_cfg [N_PEAK], aux_peak_cfg [N_PEAK];
  pid_cfg_t  pid_cfg  [N_PEAK], aux_pid_cfg  [N_PEAK];
  dac_sel_e  dac_sel  [2];
  logic [1:0] slave_src [N_SLAVE];
  sample_t   pd;
  logic      trig_out, ref_aom_en, scan_rising;
  sample_t   dac_out [2], ramp;
  logic      pwm_out [N_SLAVE], aom_en [N_SLAVE];
  pos_t      peak_pos [N_PEAK], aux_peak_pos [N_PEAK];
  logic      peak_valid [N_PEAK], peak_done [N_PEAK];
  sample_t   peak_height [N_PEAK];
  err_t      norm [N_SLAVE], aux_norm [N_SLAVE];
  logic      norm_valid [N_SLAVE];
  sample_t   ctrl_out [N_PEAK], aux_ctrl_out [N_PEAK];
  logic      ctrl_upd [N_PEAK];
  int dl, drift_b, drift_c, h_ref, h_b, h_c, checks, failures;
  logic finished;

  assign aux_peak_pos = '{default: '0};
  assign aux_norm     = '{default: '0};
  assign aux_ctrl_out = '{default: '0};

  stcl_top u_main (
    .clk, .rst_n, .adc_pd(pd), .trig_in(1'b0), .trig_out, .scan_cfg, .peak_cfg, .pid_cfg,
    .dac_sel, .slave_src, .dac_out, .pwm_out, .aom_en, .ref_aom_en, .ramp, .scan_rising, .peak_pos,
    .peak_valid, .peak_done, .peak_height, .norm, .norm_valid, .ctrl_out, .ctrl_upd);

  cavity_model u_cav (
    .clk, .ramp, .ref_gate(ref_aom_en), .b_gate(aom_en[0]), .c_gate(1'b0),
    .ctrl_b(ctrl_out[2]), .ctrl_c('0), .dl, .drift_b, .drift_c,
    .h_ref, .h_b, .h_c, .pd);

  stcl_scenario #(.HALF(7812), .WITH_AUX(1'b0), .SCANS_SETTLE(40)) u_scn (
    .clk, .rst_n, .scan_cfg, .peak_cfg, .pid_cfg, .dac_sel, .slave_src, .trig_out, .ramp, .scan_rising,
    .peak_pos, .peak_valid, .norm, .norm_valid, .ctrl_out, .ctrl_upd, .dac_out, .pwm_out,
    .ref_aom_en, .retrig(u_main.u_acq.acq_end & u_main.u_acq.acq_start),
    .aux_peak_cfg, .aux_pid_cfg, .aux_peak_pos, .aux_norm, .aux_ctrl_out,
    .aux_acq_start(1'b0),
    .dl, .drift_b, .drift_c, .h_ref, .h_b, .h_c, .checks, .failures, .finished);

  initial begin
    // 400 scans of 499,996 clocks
    repeat (200_000_000) @(posedge clk);
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
