// End-to-end testbench of colibri_io_top at its default parameters.
//
// A behavioural DVS132S model is attached to the SAER pins and the processor
// side is played by APB tasks. The test runs the platform's operating point,
// a 7.2 kHz SAMPLE rate at a 50 MHz clock with full-size 66x52-group frames,
// and checks:
//   * SAMPLE requests every 6944 clocks, each giving one complete frame whose
//     readout (3486 clocks here) fits in the period, so 7200 frames/s hold;
//   * event counts of random frames and of a fully populated 13728-event frame
//     against the pattern function;
//   * frame bytes read over APB while the next frame is being received
//     (ping-pong overlap), compared byte for byte;
//   * skipped SAMPLE requests when the period is set shorter than a readout,
//     with the frames that are read still intact;
//   * a protocol error from a stray camera word;
//   * the interrupt and its write-1-to-clear;
//   * 50 % duty PWM on all four channels.
// Each mechanism is counted and a failure is counted for one that never
// happened.
module tb_colibri_io_top;
  import colibri_pkg::*;
  import dvs_tb_pkg::*;

  localparam int unsigned FULL_FRAME = 2;   // frame number the camera sends fully populated

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        psel = 0, penable = 0, pwrite = 0;
  logic [15:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic        pready, pslverr;
  logic        sample, irq;
  saer_word_t  saer;
  logic [3:0]  pwm;
  logic        err_word = 1'b0;
  int unsigned cam_frames;
  logic        cam_busy, full;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_sample, n_frames_ok, n_overlap_reads, n_skip, n_err, n_full, n_irq_clear, n_pwm50;

  assign full = (cam_frames == FULL_FRAME);

  dvs132s_model #(.START_LAT(2)) cam (
    .clk_i(clk), .sample_i(sample), .full_i(full), .err_word_i(err_word),
    .saer_o(saer), .frames_o(cam_frames), .streaming_o(cam_busy)
  );

  colibri_io_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite), .paddr_i(paddr), .pwdata_i(pwdata),
    .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .saer_sample_o(sample), .saer_i(saer), .pwm_o(pwm), .irq_o(irq)
  );

  always #10 clk = ~clk;    // 50 MHz
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    #20000000;   // 1,000,000 clocks
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // SAMPLE spacing monitor
  longint last_sample = -1, sample_gap = 0;
  always @(posedge clk) if (rst_n && sample) begin
    n_sample++;
    if (last_sample >= 0) sample_gap = cyc - last_sample;
    last_sample = cyc;
  end

  logic last_err;
  task automatic apb_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1;
    while (!pready) begin @(negedge clk); #1; end
    last_err = pslverr;
    @(posedge clk); #1 psel = 0; penable = 0;
  endtask

  task automatic apb_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1;
    #1;
    while (!pready) begin @(negedge clk); #1; end
    d = prdata; last_err = pslverr;
    @(posedge clk); #1 psel = 0; penable = 0;
  endtask

  function automatic logic [7:0] exp_byte(input int unsigned f, input int unsigned i);
    return ev_byte(f, i / DVS_GX, i % DVS_GX, f == FULL_FRAME);
  endfunction

  // Wait for a frame, check its counters and read `nbytes` bytes of it
  // (starting at `first`) while the next frame arrives.
  task automatic take_frame(input int unsigned first, input int unsigned nbytes,
                            input bit check_cycles);
    logic [31:0] d;
    int unsigned f, e_on, e_off, bad, overl;
    wait (irq);
    @(negedge clk);
    f = cam_frames - 1;
    e_on = 0; e_off = 0;
    for (int i = 0; i < DVS_GROUPS; i++) begin
      e_on += n_on(exp_byte(f, i)); e_off += n_off(exp_byte(f, i));
    end
    apb_read(REG_EV_COUNT, d);
    check(d[15:0] == 16'(e_on) && d[31:16] == 16'(e_off),
          $sformatf("frame %0d counts ON %0d OFF %0d, expected %0d %0d", f, d[15:0], d[31:16], e_on, e_off));
    if (f == FULL_FRAME) begin
      check(d[15:0] + d[31:16] == DVS_MAX_EV, "full frame: 13728 events");
      n_full++;
    end
    if (check_cycles) begin
      apb_read(REG_FRAME_CYC, d);
      check(d == 2 + DVS_GROUPS + DVS_GY, $sformatf("readout %0d clocks", d));
      check(d < SAMPLE_PERIOD_DEFAULT, "readout fits in the 7.2 kHz period");
    end
    apb_write(REG_STATUS, 32'b010);
    check(!irq, "interrupt cleared");
    n_irq_clear++;
    bad = 0; overl = 0;
    for (int i = first; i < first + nbytes && i < DVS_GROUPS; i++) begin
      apb_read(FB_BASE + 16'(4 * i), d);
      if (d != {24'b0, exp_byte(f, i)}) bad++;
      if (cam_busy) overl++;
    end
    check(bad == 0, $sformatf("frame %0d: %0d of %0d bytes read wrong", f, bad, nbytes));
    check(cam_frames == f + 1 || nbytes == 0 || overl == 0, "read finished before the next frame replaced it");
    n_overlap_reads += overl;
    if (bad == 0 && d[15:0] != 16'hFFFF) n_frames_ok++;
  endtask

  logic [31:0] d;
  longint t_en, t_first;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    apb_read(REG_SAMPLE_PER, d);
    check(d == SAMPLE_PERIOD_DEFAULT, "default SAMPLE period 6944 (7.2 kHz at 50 MHz)");

    // ---- PWM at 50 % duty, 20 kHz ----
    apb_write(REG_PWM_PERIOD, 32'd2500);
    for (int n = 0; n < 4; n++) apb_write(REG_PWM_DUTY0 + 16'(4 * n), 32'd1250);

    // ---- event frames at 7.2 kHz ----
    apb_write(REG_CTRL, 32'b11);
    t_en = cyc;
    wait (sample); t_first = cyc;
    check(t_first - t_en >= SAMPLE_PERIOD_DEFAULT - 2 && t_first - t_en <= SAMPLE_PERIOD_DEFAULT + 2,
          $sformatf("first SAMPLE %0d clocks after enable", t_first - t_en));
    take_frame(0, 1900, 1'b1);
    take_frame(1532, 1900, 1'b1);
    take_frame(0, 1900, 1'b1);        // frame 2 is fully populated
    take_frame(1900, 1532, 1'b1);
    check(sample_gap == SAMPLE_PERIOD_DEFAULT, $sformatf("SAMPLE spacing %0d clocks", sample_gap));
    apb_read(REG_SKIP_CNT, d);
    check(d == 0, "no skipped request at 7.2 kHz");
    apb_read(REG_FRAME_CNT, d);
    check(d == cam_frames, $sformatf("frame counter %0d = camera frames %0d", d, cam_frames));

    // ---- PWM measurement over two periods ----
    begin
      int hi [4];
      foreach (hi[n]) hi[n] = 0;
      for (int k = 0; k < 5000; k++) begin
        @(posedge clk);
        foreach (hi[n]) if (pwm[n]) hi[n]++;
      end
      foreach (hi[n]) begin
        check(hi[n] == 2500, $sformatf("PWM ch%0d 50%% duty: %0d of 5000", n, hi[n]));
        if (hi[n] == 2500) n_pwm50++;
      end
    end

    // ---- SAMPLE period shorter than a readout: requests are skipped ----
    apb_write(REG_SAMPLE_PER, 32'd3000);
    take_frame(0, 0, 1'b0);
    take_frame(100, 200, 1'b0);
    take_frame(0, 0, 1'b0);
    apb_read(REG_SKIP_CNT, d);
    n_skip = d;
    check(d > 0, $sformatf("requests skipped while busy: %0d", d));
    apb_read(REG_FRAME_CNT, d);
    check(d == cam_frames, "every served request gave one frame");

    // ---- stray word from the camera ----
    apb_write(REG_CTRL, 32'b10);          // stop sampling, PWM keeps running
    wait (!cam_busy);
    repeat (10) @(posedge clk);
    @(negedge clk); err_word = 1'b1;
    @(negedge clk); err_word = 1'b0;
    repeat (5) @(posedge clk);
    apb_read(REG_ERR_CNT, d);
    n_err = d;
    check(d == 1, $sformatf("one protocol error, got %0d", d));
    apb_read(REG_STATUS, d);
    check(d[2], "error bit set");

    // ---- mechanisms seen ----
    check(n_sample > 0,        "mechanism: SAMPLE requests");
    check(n_frames_ok >= 7,    $sformatf("mechanism: frames received and verified (%0d)", n_frames_ok));
    check(n_overlap_reads > 0, $sformatf("mechanism: reads while the next frame streams (%0d)", n_overlap_reads));
    check(n_skip > 0,          "mechanism: skipped SAMPLE request");
    check(n_err > 0,           "mechanism: protocol error");
    check(n_full > 0,          "mechanism: fully populated frame");
    check(n_irq_clear > 0,     "mechanism: interrupt clear");
    check(n_pwm50 == 4,        "mechanism: 50% PWM on four channels");
    $display("mechanisms: sample=%0d frames=%0d overlap_reads=%0d skip=%0d err=%0d full=%0d irq_clear=%0d pwm50=%0d",
             n_sample, n_frames_ok, n_overlap_reads, n_skip, n_err, n_full, n_irq_clear, n_pwm50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
