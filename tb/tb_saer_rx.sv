// Self-checking testbench for saer_rx.
//
// A behavioural DVS132S model streams full-size (66x52-group) frames after
// each SAMPLE pulse. The testbench captures the receiver's buffer writes and
// compares every byte and address with the pattern function, checks the ON
// and OFF counts (random frame and a fully populated 13728-event frame), the
// readout time (3432 group words + 52 row words + camera latency, which at
// 50 MHz must stay under the 0.069 ms single-frame figure plus the row words
// and inside the 6944-clock SAMPLE period), busy, and the error pulses for a
// word outside a frame, an address out of range and a group word before the
// first row word.
module tb_saer_rx;
  import colibri_pkg::*;
  import dvs_tb_pkg::*;

  localparam int unsigned LAT = 2;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       sample = 1'b0, full = 1'b0, err_word = 1'b0;
  saer_word_t cam_w, man_w, saer;
  logic       use_man = 1'b0;
  int unsigned cam_frames;
  logic       cam_busy;

  logic        busy, wr_en, frame_done, err;
  logic [11:0] wr_addr;
  logic [7:0]  wr_data;
  logic [15:0] on_c, off_c, cyc_c;

  int checks = 0, failures = 0;

  assign saer = use_man ? man_w : cam_w;

  dvs132s_model #(.START_LAT(LAT)) cam (
    .clk_i(clk), .sample_i(sample), .full_i(full), .err_word_i(err_word),
    .saer_o(cam_w), .frames_o(cam_frames), .streaming_o(cam_busy)
  );

  saer_rx dut (
    .clk_i(clk), .rst_ni(rst_n), .sample_i(sample), .saer_i(saer),
    .busy_o(busy), .wr_en_o(wr_en), .wr_addr_o(wr_addr), .wr_data_o(wr_data),
    .frame_done_o(frame_done), .on_count_o(on_c), .off_count_o(off_c),
    .frame_cycles_o(cyc_c), .err_o(err)
  );

  always #10 clk = ~clk;   // 50 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  // capture of the write port
  logic [7:0] got [DVS_GROUPS];
  int         n_wr, n_bad_addr, n_err, n_done;
  always @(posedge clk) begin
    if (wr_en) begin
      n_wr++;
      if (wr_addr < DVS_GROUPS) got[wr_addr] = wr_data; else n_bad_addr++;
    end
    if (err) n_err++;
    if (frame_done) n_done++;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_sample();
    @(negedge clk); sample = 1'b1;
    @(negedge clk); sample = 1'b0;
  endtask

  task automatic run_frame(input int unsigned f, input bit is_full);
    int unsigned exp_on, exp_off, bad;
    int t_start, t_done;
    full = is_full;
    n_wr = 0; n_done = 0; n_bad_addr = 0;
    foreach (got[i]) got[i] = 8'hFF;   // 11 never occurs in the pattern
    @(negedge clk); sample = 1'b1; t_start = $time;
    @(negedge clk); sample = 1'b0;
    check(busy, "busy after SAMPLE");
    wait (frame_done); t_done = $time;
    @(posedge clk);       // the capture above takes the last write at this edge
    @(negedge clk);
    check(!busy, "idle after frame_done");
    check(n_wr == DVS_GROUPS, $sformatf("frame %0d: %0d writes, expected 3432", f, n_wr));
    check(n_bad_addr == 0, "write addresses in range");
    exp_on = 0; exp_off = 0; bad = 0;
    for (int y = 0; y < DVS_GY; y++)
      for (int x = 0; x < DVS_GX; x++) begin
        logic [7:0] e;
        e = ev_byte(f, y, x, is_full);
        exp_on += n_on(e); exp_off += n_off(e);
        if (got[y * DVS_GX + x] !== e) bad++;
      end
    check(bad == 0, $sformatf("frame %0d: %0d group bytes wrong", f, bad));
    check(on_c == exp_on, $sformatf("frame %0d ON count %0d, expected %0d", f, on_c, exp_on));
    check(off_c == exp_off, $sformatf("frame %0d OFF count %0d, expected %0d", f, off_c, exp_off));
    check(cyc_c == LAT + DVS_GROUPS + DVS_GY,
          $sformatf("readout %0d clocks, expected %0d", cyc_c, LAT + DVS_GROUPS + DVS_GY));
    check(cyc_c < SAMPLE_PERIOD_DEFAULT, "frame readout fits in one 7.2 kHz period");
    if (is_full) check(on_c + off_c == DVS_MAX_EV, "full frame holds 13728 events");
  endtask

  task automatic man(input bit v, input bit is_y, input int unsigned a, input logic [7:0] d);
    @(negedge clk);
    man_w = '{valid: v, is_y: is_y, addr: 8'(a), data: d};
  endtask

  initial begin
    man_w = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(!busy && on_c == 0 && off_c == 0, "reset state");

    run_frame(0, 1'b0);
    run_frame(1, 1'b1);
    check(n_err == 0, "no errors in clean frames");

    // stray word while idle
    @(negedge clk); err_word = 1'b1;
    @(negedge clk); err_word = 1'b0;
    repeat (4) @(posedge clk);
    check(n_err == 1, $sformatf("stray word flagged (%0d)", n_err));

    // manual protocol errors inside a frame
    use_man = 1'b1;
    n_wr = 0;
    pulse_sample();
    man(1, 0, 3, 8'h01);          // group word before any row word
    man(1, 1, DVS_GY, 8'h00);     // row out of range
    man(1, 1, 5, 8'h00);          // valid row 5
    man(1, 0, DVS_GX, 8'h01);     // column out of range
    man(1, 0, 7, 8'h05);          // good word: row 5, col 7, 2 ON
    man(0, 0, 0, 8'h00);
    repeat (3) @(posedge clk);
    check(n_err == 4, $sformatf("three in-frame errors flagged, total %0d", n_err));
    check(n_wr == 1, $sformatf("only the good word written (%0d)", n_wr));
    check(got[5 * DVS_GX + 7] == 8'h05, "good word at row 5, column 7");
    check(busy, "frame still open after partial stream");
    // finish this frame by hand: last group of the last row
    man(1, 1, DVS_GY - 1, 8'h00);
    man(1, 0, DVS_GX - 1, 8'h0A);  // 2 OFF
    man(0, 0, 0, 8'h00);
    repeat (3) @(posedge clk);
    check(!busy, "frame closed by the last group word");
    check(on_c == 2 && off_c == 2, $sformatf("counts of the hand frame %0d/%0d", on_c, off_c));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
