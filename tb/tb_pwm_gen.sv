// Self-checking testbench for pwm_gen.
//
// Runs four channels with different duties, including 0, 50 % (the duty of
// the platform's PWM power measurement) and >= period, and measures each
// channel's high and low time per period. Checks that a duty change made
// in the middle of a period only shows from the next period (no cut pulse),
// that a period change takes effect, and that disabling forces the outputs
// low. A 50 MHz clock and a 20 kHz PWM (2500 clocks) are used for the
// 50 % case, where the output must change within 1 us of the period start.
module tb_pwm_gen;
  localparam int N = 4;
  localparam int W = 20;

  logic               clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [W-1:0]       period = W'(100);
  logic [N-1:0][W-1:0] duty = '0;
  logic [N-1:0]       pwm;
  logic               pstart;
  int checks = 0, failures = 0;

  pwm_gen #(.N_CH(N), .CNT_W(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en), .period_i(period), .duty_i(duty),
    .pwm_o(pwm), .period_start_o(pstart)
  );

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // measure one full period (from a period_start to the next)
  int hi [N];
  int len;
  task automatic measure();
    @(posedge clk iff pstart);     // period_start seen: this clock is count 0
    foreach (hi[n]) hi[n] = 0;
    len = 0;
    do begin
      foreach (hi[n]) if (pwm[n]) hi[n]++;
      len++;
      @(posedge clk);
    end while (!pstart);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(pwm == '0, "outputs low while disabled");

    duty[0] = W'(0); duty[1] = W'(50); duty[2] = W'(100); duty[3] = W'(7);
    @(negedge clk); en = 1'b1;
    measure();
    check(len == 100, $sformatf("period 100, measured %0d", len));
    check(hi[0] == 0,   $sformatf("ch0 duty 0 -> %0d", hi[0]));
    check(hi[1] == 50,  $sformatf("ch1 duty 50 -> %0d", hi[1]));
    check(hi[2] == 100, $sformatf("ch2 duty 100 -> %0d", hi[2]));
    check(hi[3] == 7,   $sformatf("ch3 duty 7 -> %0d", hi[3]));

    // change the duty in mid period: the running period must be unchanged
    @(posedge clk iff pstart);
    repeat (10) @(posedge clk);
    @(negedge clk); duty[1] = W'(20); duty[3] = W'(200);
    begin
      int h1 = 0, h3 = 0, l = 0;
      // rest of this period counted from clock 10 on
      while (!pstart) begin
        if (pwm[1]) h1++;
        if (pwm[3]) h3++;
        l++;
        @(posedge clk);
      end
      check(h1 == 40 && l == 90, $sformatf("old duty of ch1 kept in the running period (%0d high of %0d)", h1, l));
      check(h3 == 0, "old duty of ch3 kept in the running period");
    end
    measure();
    check(hi[1] == 20,  $sformatf("new duty 20 from next period -> %0d", hi[1]));
    check(hi[3] == 100, $sformatf("duty above period keeps output high -> %0d", hi[3]));

    // 50 % duty at 20 kHz from 50 MHz
    @(negedge clk); period = W'(2500); duty = '{default: W'(1250)};
    measure(); measure();
    check(len == 2500, $sformatf("period 2500, measured %0d", len));
    foreach (hi[n]) check(hi[n] == 1250, $sformatf("ch%0d 50%% duty: %0d of 2500", n, hi[n]));

    // output follows the period start within 1 us (50 clocks) -> here 0 clocks
    @(posedge clk iff pstart);
    check(pwm == '1, "outputs rise with the period start");

    @(negedge clk); en = 1'b0;
    @(negedge clk);
    check(pwm == '0, "disable forces outputs low");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
