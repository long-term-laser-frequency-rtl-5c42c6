// tb_acq_timebase -- self-checking testbench of acq_timebase.
//
// With 16 samples and decimation 4 it checks: the sample strobes come every
// 4 clocks starting with acq_start, the indices run 0..15, the acquisition
// lasts 64 clocks and ends with one acq_end pulse; a trigger during an
// acquisition ends it and restarts the index at 0.
module tb_acq_timebase;
  import stcl_pkg::*;

  localparam int N = 16, D = 4;
  logic clk = 1'b0, rst_n = 1'b0, trig = 1'b0;
  logic acq_start, acq_end, acq_active, smp_stb;
  pos_t smp_idx;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  acq_timebase #(.N_SAMPLES(N), .DECIMATION(D)) dut (.clk, .rst_n, .trig, .acq_start,
                                                    .acq_end, .acq_active, .smp_stb, .smp_idx);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse_trig();
    @(posedge clk); #1 trig = 1'b1;
    @(posedge clk); #1 trig = 1'b0;
  endtask

  initial begin
    int t0, nstb, cyc, ends;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!acq_active, "idle after reset");
    pulse_trig();
    // we are now 1 clock after the trigger edge: acq_start visible
    check(acq_start && smp_stb && smp_idx == 0, "acq_start with first strobe");
    nstb = 1; cyc = 0; ends = 0;
    while (!acq_end && cyc < 200) begin
      @(posedge clk); #1; cyc++;
      if (smp_stb) begin
        check(cyc % D == 0, $sformatf("strobe spacing at %0d", cyc));
        check(smp_idx == pos_t'(nstb), $sformatf("index %0d expected %0d", smp_idx, nstb));
        nstb++;
      end
    end
    check(nstb == N, $sformatf("%0d strobes", nstb));
    check(cyc == N * D, $sformatf("acquisition took %0d clocks", cyc));
    @(posedge clk); #1;
    check(!acq_active && !acq_end, "idle after end");

    // retrigger in the middle of an acquisition
    pulse_trig();
    repeat (20) @(posedge clk);
    #1 check(acq_active && smp_idx == 5, $sformatf("mid acquisition index %0d", smp_idx));
    trig = 1'b1;
    @(posedge clk); #1 trig = 1'b0;
    check(acq_end && acq_start && smp_idx == 0, "retrigger ends and restarts");
    repeat (3) @(posedge clk);
    #1 check(!acq_end && acq_active, "running after retrigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
