// Self-checking testbench for sample_gen.
//
// Runs the timer with a short period and checks that SAMPLE requests come
// exactly every period clocks, that the first one comes period clocks after
// enable, that a request falling due while busy is replaced by a skip pulse,
// that the period register takes effect, and that the default 7.2 kHz period
// (6944 clocks at 50 MHz) gives 7200 requests per simulated second within
// rounding. Expected times are computed by the testbench from the enable time.
module tb_sample_gen;
  import colibri_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        en = 1'b0, busy = 1'b0;
  logic [15:0] period = 16'd10;
  logic        sample, skip;
  int          checks = 0, failures = 0;
  longint      cyc = 0;

  sample_gen #(.PERIOD_W(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en), .period_i(period),
    .busy_i(busy), .sample_o(sample), .skip_o(skip)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  // log of sample / skip pulses
  longint sample_t[$], skip_t[$];
  always @(posedge clk) if (rst_n) begin
    if (sample) sample_t.push_back(cyc);
    if (skip)   skip_t.push_back(cyc);
    if (sample && skip) begin checks++; failures++; $display("FAIL: sample and skip together"); end
  end

  initial begin
    #200000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t0;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (5) @(posedge clk);
    check(sample_t.size() == 0 && skip_t.size() == 0, "no request while disabled");

    // ---- period 10 ----
    @(negedge clk); en = 1'b1; t0 = cyc;
    repeat (55) @(posedge clk);
    #1;
    check(sample_t.size() == 5, $sformatf("5 requests in 55 clocks, got %0d", sample_t.size()));
    for (int i = 0; i < sample_t.size(); i++)
      check(sample_t[i] == t0 + 10 * (i + 1), $sformatf("request %0d at %0d, expected %0d", i, sample_t[i], t0 + 10*(i+1)));

    // ---- busy: the next due request becomes a skip ----
    sample_t.delete(); skip_t.delete();
    @(negedge clk); busy = 1'b1;
    repeat (10) @(posedge clk);
    @(negedge clk); busy = 1'b0;
    repeat (20) @(posedge clk);
    #1;
    check(skip_t.size() == 1, $sformatf("one skip while busy, got %0d", skip_t.size()));
    check(sample_t.size() == 2, $sformatf("two requests after busy, got %0d", sample_t.size()));
    if (skip_t.size() == 1 && sample_t.size() >= 1)
      check(sample_t[0] - skip_t[0] == 10, "skip keeps the period grid");

    // ---- disable, then period change ----
    @(negedge clk); en = 1'b0; period = 16'd3;
    repeat (10) @(posedge clk);
    sample_t.delete(); skip_t.delete();
    @(negedge clk); en = 1'b1; t0 = cyc;
    repeat (31) @(posedge clk);
    #1;
    check(sample_t.size() == 10, $sformatf("10 requests at period 3, got %0d", sample_t.size()));
    for (int i = 1; i < sample_t.size(); i++)
      check(sample_t[i] - sample_t[i-1] == 3, "period 3 spacing");

    // ---- period 1 is clamped to 2 ----
    @(negedge clk); en = 1'b0; period = 16'd1;
    @(negedge clk); sample_t.delete(); en = 1'b1;
    repeat (20) @(posedge clk);
    #1;
    check(sample_t.size() == 9, $sformatf("period 1 runs as 2: 9 requests in 20 clocks, got %0d", sample_t.size()));
    for (int i = 1; i < sample_t.size(); i++)
      check(sample_t[i] - sample_t[i-1] == 2, "period 1 clamped to spacing 2");

    // ---- default 7.2 kHz at 50 MHz: 72 requests in 10 ms = 500000 clocks ----
    @(negedge clk); en = 1'b0; period = 16'(SAMPLE_PERIOD_DEFAULT);
    @(negedge clk); sample_t.delete(); en = 1'b1;
    repeat (500000) @(posedge clk);
    #1;
    check(SAMPLE_PERIOD_DEFAULT == 6944, "default period is 6944 clocks");
    check(sample_t.size() == 72, $sformatf("72 requests in 10 ms at 50 MHz, got %0d", sample_t.size()));
    for (int i = 1; i < sample_t.size(); i++)
      check(sample_t[i] - sample_t[i-1] == 6944, "7.2 kHz spacing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
