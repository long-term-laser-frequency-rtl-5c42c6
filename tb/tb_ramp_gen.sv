// tb_ramp_gen -- self-checking testbench of ramp_gen.
//
// Runs the generator with a 1000-clock period and compares every output
// sample with a reference computed in floating point from the ideal
// triangle (or sawtooth) shape, scaled by amplitude and shifted by offset
// (tolerance 2 counts). It also checks that the trigger comes exactly when
// the phase wraps, that the scan period is 2^32/step clocks, that the output
// saturates at the 14-bit limits and that step 0 selects the default period.
module tb_ramp_gen;
  import stcl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] step;
  logic sawtooth;
  sample_t amplitude, offset, ramp;
  logic trig, rising;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  ramp_gen #(.DEFAULT_STEP(32'd8590)) dut (.clk, .rst_n, .run(1'b1), .step, .sawtooth,
                                           .amplitude, .offset, .ramp, .trig, .rising);

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ideal(input longint unsigned ph, input bit saw,
                                input int amp, input int off);
    real f, w, v;
    f = real'(ph) / 4294967296.0;
    if (saw)           w = -8192.0 + f * 16384.0;
    else if (f < 0.5)  w = -8192.0 + f * 32768.0;
    else               w = 8191.0 - (f - 0.5) * 32768.0;
    v = real'(off) + real'(amp) * w / 8192.0;
    if (v > 8191.0)  v = 8191.0;
    if (v < -8192.0) v = -8192.0;
    return v;
  endfunction

  task automatic run_check(input int cycles, input bit saw, input int amp, input int off,
                           inout longint unsigned ph, output int ntrig, output int last_trig_gap);
    longint unsigned prev;
    int since = 0;
    real e, d;
    bit wrap;
    ntrig = 0; last_trig_gap = 0;
    for (int c = 0; c < cycles; c++) begin
      @(posedge clk);
      prev = ph;
      ph = (ph + longint'(step)) & 64'hFFFF_FFFF;
      wrap = (prev + longint'(step)) > 64'hFFFF_FFFF;
      #1;
      e = ideal(prev, saw, amp, off);
      d = real'(ramp) - e;
      checks++;
      if (d > 2.0 || d < -2.0) begin
        failures++;
        if (failures < 10) $display("ramp mismatch cycle %0d: got %0d expected %f", c, ramp, e);
      end
      checks++;
      if (trig !== wrap) begin
        failures++;
        if (failures < 10) $display("trigger mismatch cycle %0d", c);
      end
      since++;
      if (trig) begin
        ntrig++;
        last_trig_gap = since;
        since = 0;
      end
    end
  endtask

  longint unsigned ph;
  int nt, gap;

  initial begin
    step = 32'd4294967;          // period 1000.0000 clocks
    sawtooth = 1'b0;
    amplitude = 14'sd4096;       // half scale
    offset = 14'sd100;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    ph = 0;
    // the DUT holds phase 0 until the first clock after reset
    run_check(3010, 1'b0, 4096, 100, ph, nt, gap);
    checks++; if (nt != 3) begin failures++; $display("triangle: %0d triggers", nt); end
    checks++; if (gap < 1000 || gap > 1001) begin failures++; $display("period %0d", gap); end

    // full-scale amplitude with offset: output must saturate
    amplitude = 14'sd8191; offset = 14'sd3000;
    run_check(1000, 1'b0, 8191, 3000, ph, nt, gap);

    // sawtooth (AOM scanning), negative amplitude
    sawtooth = 1'b1; amplitude = -14'sd2000; offset = -14'sd50;
    run_check(2000, 1'b1, -2000, -50, ph, nt, gap);
    checks++; if (nt != 2) begin failures++; $display("sawtooth: %0d triggers", nt); end
    checks++; if (!rising) begin failures++; $display("sawtooth not rising"); end

    // step 0 selects the default 4 ms period: 2^32/8590 = 499,996.2 clocks
    sawtooth = 1'b0;
    step = 32'd0;
    begin
      int c = 0, first = -1, second = -1;
      while (second < 0 && c < 1_100_000) begin
        @(posedge clk); #1; c++;
        if (trig) begin if (first < 0) first = c; else second = c; end
      end
      checks++;
      if (second - first < 499996 || second - first > 499997) begin
        failures++; $display("default period %0d", second - first);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
