// tb_pwm_dac -- self-checking testbench of pwm_dac.
//
// For a set of codes, including both ends of the range, it counts the high
// clocks of the pin over a whole 2^14-clock frame (which must equal
// code + 8192) and checks that every 256-clock period is high for either
// floor(u/64) or floor(u/64)+1 clocks, i.e. that the fine bits are spread
// over the frame instead of forming one long pulse: each aligned block of 8
// periods must hold floor or ceil of (u mod 64)/8 lengthened periods.
module tb_pwm_dac;
  import stcl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  sample_t value;
  logic pwm, frame_start;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  pwm_dac dut (.clk, .rst_n, .value, .pwm, .frame_start);

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic measure(input int code);
    int u, high, ph, bad, flen, extra8, badspread;
    value = sample_t'(code);
    // wait for the frame in which the new value is used
    do @(posedge clk); while (!frame_start);
    // frame_start is registered together with the new code; the pin lags one clock
    @(posedge clk);
    u = code + 8192;
    high = 0; ph = 0; bad = 0; flen = 0; extra8 = 0; badspread = 0;
    for (int c = 0; c < 16384; c++) begin
      #1;
      if (pwm) begin high++; ph++; end
      if (c % 256 == 255) begin
        if (ph != u / 64 && ph != u / 64 + 1) bad++;
        if (ph == u / 64 + 1) extra8++;
        // every aligned block of 8 periods holds floor or ceil of fine/8 extras
        if (c % 2048 == 2047) begin
          if (extra8 != (u % 64) / 8 && extra8 != (u % 64 + 7) / 8) badspread++;
          extra8 = 0;
        end
        ph = 0;
      end
      @(posedge clk);
    end
    check(high == u, $sformatf("code %0d: %0d high clocks, expected %0d", code, high, u));
    check(bad == 0, $sformatf("code %0d: %0d periods with wrong length", code, bad));
    check(badspread == 0, $sformatf("code %0d: fine bits bunched in %0d blocks", code, badspread));
  endtask

  initial begin
    value = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    measure(0);
    measure(-8192);
    measure(8191);
    measure(1);
    measure(-1);
    measure(1234);
    measure(-5000);
    for (int i = 0; i < 5; i++) measure(int'($urandom_range(0, 16383)) - 8192);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
