// tb_peak_detect -- self-checking testbench of peak_detect.
//
// The testbench plays acquisitions of 256 samples (one strobe every 2
// clocks) containing triangular peaks at chosen indices, some inside and
// some outside the detector's time range, and checks: the reported position
// is the index of the largest in-range sample; `done` comes in the clock
// after the first strobe past the range; peaks below the threshold are
// invalid and leave the held position unchanged; a range that reaches the
// end of the record is closed by acq_end; the AOM gate is open exactly
// while the index is inside the range (one clock later), always open with
// always_active and closed when the laser is disabled.
module tb_peak_detect;
  import stcl_pkg::*;

  localparam int NS = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  peak_cfg_t cfg;
  logic acq_start = 0, acq_end = 0, acq_active = 0, smp_stb = 0;
  pos_t smp_idx = '0;
  sample_t sample = '0;
  pos_t pos;
  sample_t peak_height;
  logic valid, done, gate;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  peak_detect dut (.clk, .rst_n, .cfg, .acq_start, .acq_end, .acq_active, .smp_stb,
                   .smp_idx, .sample, .pos, .peak_height, .valid, .done, .gate);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // signal: up to two triangular peaks plus an offset baseline of -100
  function automatic sample_t sig(input int i, input int p1, input int h1,
                                  input int p2, input int h2);
    int v = -100, d;
    d = (i > p1) ? i - p1 : p1 - i;
    if (d < 4) v += h1 * (4 - d) / 4;
    d = (i > p2) ? i - p2 : p2 - i;
    if (d < 4) v += h2 * (4 - d) / 4;
    return sample_t'(v);
  endfunction

  // one acquisition; returns the index at whose strobe the done pulse was
  // seen one clock later, and the gate statistics
  task automatic acquire(input int p1, input int h1, input int p2, input int h2,
                         input int lo, input int hi,
                         output int done_idx, output int gate_err, output int gate_on);
    int last_idx = -1;
    done_idx = -1; gate_err = 0; gate_on = 0;
    for (int i = 0; i < NS; i++) begin
      for (int c = 0; c < 2; c++) begin
        @(posedge clk); #1;
        // outputs registered from the previous clock
        if (done) done_idx = last_idx;
        if (gate) gate_on++;
        if (cfg.enabled && !cfg.always_active && (i > 0 || c > 0)) begin
          if (gate !== ((last_idx >= lo) && (last_idx <= hi))) gate_err++;
        end
        acq_start  = (i == 0 && c == 0);
        acq_active = 1'b1;
        smp_stb    = (c == 0);
        smp_idx    = pos_t'(i);
        sample     = sig(i, p1, h1, p2, h2);
        last_idx   = i;
      end
    end
    @(posedge clk); #1;
    if (done) done_idx = last_idx;
    smp_stb = 0; acq_active = 0; acq_end = 1;
    @(posedge clk); #1;
    if (done) done_idx = NS;
    acq_end = 0;
    repeat (2) @(posedge clk);
    #1;
  endtask

  initial begin
    int di, ge, gon;
    cfg = '{center: pos_t'(100), size: pos_t'(40), height: sample_t'(200),
            enabled: 1'b1, always_active: 1'b0};
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1: peak at 95 inside [80,120], a larger one at 150 outside
    acquire(95, 1000, 150, 3000, 80, 120, di, ge, gon);
    check(valid && pos == 95, $sformatf("peak 1 pos %0d valid %0d", pos, valid));
    check(peak_height == sample_t'(900), $sformatf("peak 1 height %0d", peak_height));
    check(di == 121, $sformatf("done after index %0d", di));
    check(ge == 0, $sformatf("gate mismatches %0d", ge));
    check(gon == 2 * 41, $sformatf("gate open %0d clocks", gon));

    // 2: two peaks in range, the larger wins
    acquire(85, 600, 110, 1500, 80, 120, di, ge, gon);
    check(valid && pos == 110, $sformatf("peak 2 pos %0d", pos));

    // 3: peak below threshold: invalid, position held at 110
    acquire(90, 250, 200, 0, 80, 120, di, ge, gon);
    check(!valid && pos == 110, $sformatf("weak peak: valid %0d pos %0d", valid, pos));
    check(di == 121, "done also for an invalid peak");

    // 4: range reaching the end of the record is closed by acq_end
    cfg.center = pos_t'(250); cfg.size = pos_t'(20);
    acquire(248, 800, 10, 4000, 240, 260, di, ge, gon);
    check(valid && pos == 248, $sformatf("end-range peak pos %0d", pos));
    check(di == NS, $sformatf("end-range done at %0d", di));

    // 5: range clipped at index 0
    cfg.center = pos_t'(5); cfg.size = pos_t'(30);
    acquire(2, 700, 40, 4000, 0, 20, di, ge, gon);
    check(valid && pos == 2, $sformatf("start-range peak pos %0d", pos));

    // 6: always_active and disabled gates
    cfg.center = pos_t'(100); cfg.size = pos_t'(40); cfg.always_active = 1'b1;
    acquire(100, 900, 0, 0, 80, 120, di, ge, gon);
    check(gon >= 2 * NS, $sformatf("always_active gate %0d", gon));
    cfg.always_active = 1'b0; cfg.enabled = 1'b0;
    acquire(100, 900, 0, 0, 80, 120, di, ge, gon);
    check(gon == 0, $sformatf("disabled gate %0d", gon));
    check(valid && pos == 100, "detection independent of the gate enable");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
