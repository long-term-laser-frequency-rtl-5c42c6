// tb_pid -- self-checking testbench of pid.
//
// Applies random measurements, gains and limits and compares the output
// after each update with a reference model written here with 64-bit
// integers (e = setpoint - in, integrator clamped to the output limits,
// P/I/D shifts 8/12/8). It checks that nothing changes when the
// measurement is invalid or locking is off (sample and hold), that ival_wr
// presets the integrator, and that the output changes one clock after upd.
module tb_pid;
  import stcl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  pid_cfg_t cfg;
  err_t in;
  logic in_valid, upd = 1'b0;
  sample_t out;
  logic updated;
  int checks = 0, failures = 0;
  longint m_i, m_eprev, m_out;

  always #4 clk = ~clk;

  pid dut (.clk, .rst_n, .cfg, .in, .in_valid, .upd, .out, .updated);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic longint clampl(input longint v, input longint lo, input longint hi);
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  task automatic step(input int meas, input bit v);
    longint e, isum, total, pt, dt;
    @(posedge clk); #1;
    in = err_t'(meas); in_valid = v; upd = 1'b1;
    @(posedge clk); #1;
    upd = 1'b0;
    if (v && cfg.locking) begin
      e = longint'(cfg.setpoint) - longint'(meas);
      isum = m_i + longint'(cfg.ki) * e;
      m_i = clampl(isum, longint'(cfg.out_min) * 4096, longint'(cfg.out_max) * 4096);
      pt = (longint'(cfg.kp) * e) >>> 8;
      dt = (longint'(cfg.kd) * (e - m_eprev)) >>> 8;
      total = pt + (m_i >>> 12) + dt;
      m_out = clampl(total, longint'(cfg.out_min), longint'(cfg.out_max));
      m_eprev = e;
      check(updated, "updated pulse");
    end else begin
      check(!updated, "no update while halted");
    end
    check(longint'(out) == m_out, $sformatf("out %0d expected %0d", out, m_out));
  endtask

  initial begin
    cfg = '0;
    cfg.out_min = -14'sd8192; cfg.out_max = 14'sd8191;
    in = '0; in_valid = 0;
    m_i = 0; m_eprev = 0; m_out = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // pure integrator: constant error ramps the output by ki*e/4096 per update
    cfg.locking = 1; cfg.ki = 16'sd4096; cfg.setpoint = 16'sd100;
    for (int i = 0; i < 5; i++) step(90, 1);
    check(out == 50, $sformatf("integrator after 5 steps: %0d", out));

    // halted by an invalid peak and by locking off
    step(0, 0);
    check(out == 50, "held on invalid");
    cfg.locking = 0; step(0, 1); cfg.locking = 1;
    check(out == 50, "held when not locking");

    // ival preset
    @(posedge clk); #1 cfg.ival = 14'sd1234; cfg.ival_wr = 1;
    @(posedge clk); #1 cfg.ival_wr = 0; m_i = 1234 * 4096; m_out = 1234;
    check(out == 1234, "ival preset output");

    // random PID with limits
    for (int i = 0; i < 2000; i++) begin
      if (i % 200 == 0) begin
        cfg.kp = gain_t'($urandom_range(0, 2000)) - 16'sd1000;
        cfg.ki = gain_t'($urandom_range(0, 4000)) - 16'sd2000;
        cfg.kd = gain_t'($urandom_range(0, 1000)) - 16'sd500;
        cfg.out_min = sample_t'(-$signed($urandom_range(0, 8192)));
        cfg.out_max = sample_t'($urandom_range(0, 8191));
        cfg.setpoint = err_t'($urandom_range(0, 16383));
      end
      step(int'($urandom_range(0, 16383)), ($urandom_range(0, 9) != 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
