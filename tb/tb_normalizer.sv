// tb_normalizer -- self-checking testbench of normalizer.
//
// For random peak triples it delivers the three done pulses in random order
// and compares the result with trunc(((S - L) * 16384) / (R - L)), saturated
// to 16 bits, computed here with integer arithmetic. It checks that the
// result is valid only when all three peaks are valid and R > L, that an
// invalid result keeps the previous value, that an acq_start discards
// partial pulses, and that the result arrives within 31 clocks of the last
// input pulse.
module tb_normalizer;
  import stcl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, acq_start = 1'b0;
  pos_t s_pos, l_pos, r_pos;
  logic s_valid, l_valid, r_valid, s_done = 0, l_done = 0, r_done = 0;
  err_t n;
  logic valid, done;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  normalizer dut (.clk, .rst_n, .acq_start, .s_pos, .s_valid, .s_done, .l_pos, .l_valid,
                  .l_done, .r_pos, .r_valid, .r_done, .n, .valid, .done);

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

  function automatic longint expect_n(input int s, input int l, input int r);
    longint q;
    q = (longint'(s - l) * 16384) / longint'(r - l);   // truncates toward zero
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return q;
  endfunction

  task automatic one(input int s, input int l, input int r,
                     input bit vs, input bit vl, input bit vr);
    int order, lat;
    err_t prev_n;
    bit exp_valid;
    prev_n = n;
    @(posedge clk); #1 acq_start = 1; @(posedge clk); #1 acq_start = 0;
    s_pos = pos_t'(s); l_pos = pos_t'(l); r_pos = pos_t'(r);
    s_valid = vs; l_valid = vl; r_valid = vr;
    order = $urandom_range(0, 2);
    for (int k = 0; k < 3; k++) begin
      int which = (order + k) % 3;
      @(posedge clk); #1;
      s_done = (which == 0); l_done = (which == 1); r_done = (which == 2);
      @(posedge clk); #1;
      s_done = 0; l_done = 0; r_done = 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
    end
    lat = 0;
    while (!done && lat < 100) begin @(posedge clk); #1; lat++; end
    exp_valid = vs && vl && vr && (r > l);
    check(done, "done seen");
    check(lat <= 31, $sformatf("latency %0d", lat));
    check(valid == exp_valid, $sformatf("valid %0d expected %0d (s=%0d l=%0d r=%0d)",
                                        valid, exp_valid, s, l, r));
    if (exp_valid)
      check(longint'(n) == expect_n(s, l, r),
            $sformatf("N(%0d,%0d,%0d) = %0d expected %0d", s, l, r, n, expect_n(s, l, r)));
    else
      check(n == prev_n, "value held when invalid");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    one(3000, 1000, 5000, 1, 1, 1);    // 0.5
    one(1000, 1000, 5000, 1, 1, 1);    // 0
    one(5000, 1000, 5000, 1, 1, 1);    // 1.0
    one(500, 1000, 5000, 1, 1, 1);     // negative
    one(16383, 0, 1, 1, 1, 1);         // saturates high
    one(0, 16383, 16384 - 1 + 0, 1, 1, 1); // R == L: invalid
    one(3000, 1000, 5000, 0, 1, 1);    // slave invalid
    one(3000, 1000, 5000, 1, 0, 1);    // left reference invalid
    one(3000, 1000, 5000, 1, 1, 0);    // right reference invalid
    one(3000, 5000, 1000, 1, 1, 1);    // R prev_n L
    for (int i = 0; i < 300; i++) begin
      int l = $urandom_range(0, 8000);
      int r = l + $urandom_range(1, 8000);
      int s = $urandom_range(0, 16383);
      one(s, l, r, 1, 1, 1);
    end
    // partial pulses followed by a new acquisition: no result
    @(posedge clk); #1 s_done = 1; l_done = 1; @(posedge clk); #1 s_done = 0; l_done = 0;
    @(posedge clk); #1 acq_start = 1; @(posedge clk); #1 acq_start = 0;
    @(posedge clk); #1 r_done = 1; @(posedge clk); #1 r_done = 0;
    begin
      int seen = 0;
      repeat (60) begin @(posedge clk); #1; if (done) seen++; end
      check(seen == 0, "stale pulses discarded at acq_start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
