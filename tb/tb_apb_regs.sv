// Self-checking testbench for apb_regs.
//
// An APB3 requester task drives setup and access phases. The testbench checks
// the reset values (SAMPLE period 6944), write/read-back of the writable
// registers and what they drive on cfg_o / pwm_duty_o, the read-only status
// and counter registers against pulses it generates, write-1-to-clear of the
// frame-ready and error bits and the interrupt, pslverr for unmapped and
// read-only addresses, and frame-buffer reads through a small memory model
// that answers one clock after fb_rd_en_o.
module tb_apb_regs;
  import colibri_pkg::*;

  localparam int N = 4;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        psel = 0, penable = 0, pwrite = 0;
  logic [15:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic        pready, pslverr;
  io_cfg_t     cfg;
  logic [N-1:0][PWM_CNT_W-1:0] duty;
  logic        busy = 0, frame_done = 0, skip = 0, err = 0;
  logic [15:0] on_c = 16'd1234, off_c = 16'd4321, cyc_c = 16'd3486;
  logic        fb_rd_en, fb_bank = 1'b1;
  logic [11:0] fb_rd_addr;
  logic [7:0]  fb_rd_data;
  logic        irq;
  int checks = 0, failures = 0;

  apb_regs #(.N_CH(N)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite), .paddr_i(paddr), .pwdata_i(pwdata),
    .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .cfg_o(cfg), .pwm_duty_o(duty),
    .busy_i(busy), .frame_done_i(frame_done), .skip_i(skip), .err_i(err),
    .on_count_i(on_c), .off_count_i(off_c), .frame_cycles_i(cyc_c),
    .fb_rd_en_o(fb_rd_en), .fb_rd_addr_o(fb_rd_addr), .fb_rd_data_i(fb_rd_data),
    .fb_rd_bank_i(fb_bank), .irq_o(irq)
  );

  // frame buffer model: byte i holds (i * 7 + 3) mod 256, synchronous read
  always @(posedge clk) if (fb_rd_en) fb_rd_data <= 8'(fb_rd_addr * 7 + 3);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  logic [31:0] d;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    apb_read(REG_SAMPLE_PER, d);
    check(d == 6944 && !last_err, $sformatf("reset SAMPLE period 6944, got %0d", d));
    apb_read(REG_CTRL, d);
    check(d == 0 && !cfg.sample_en && !cfg.pwm_en, "CTRL resets to 0");
    check(!irq, "no interrupt after reset");

    apb_write(REG_CTRL, 32'h3);
    check(cfg.sample_en && cfg.pwm_en && !last_err, "CTRL enables");
    apb_write(REG_SAMPLE_PER, 32'd1000);
    check(cfg.sample_period == 1000, "SAMPLE period drives cfg");
    apb_write(REG_PWM_PERIOD, 32'd50000);
    check(cfg.pwm_period == 50000, "PWM period drives cfg");
    for (int n = 0; n < N; n++) apb_write(REG_PWM_DUTY0 + 16'(4 * n), 32'(1000 * (n + 1)));
    for (int n = 0; n < N; n++) begin
      check(duty[n] == PWM_CNT_W'(1000 * (n + 1)), $sformatf("duty %0d drives output", n));
      apb_read(REG_PWM_DUTY0 + 16'(4 * n), d);
      check(d == 32'(1000 * (n + 1)), $sformatf("duty %0d reads back %0d", n, d));
    end

    // status and counters
    busy = 1;
    apb_read(REG_STATUS, d);
    check(d == 32'b1001, $sformatf("STATUS busy + read bank 1, got %b", d));
    busy = 0;
    pulse(frame_done); pulse(frame_done); pulse(skip); pulse(err);
    @(negedge clk);
    check(irq, "interrupt on frame done");
    apb_read(REG_STATUS, d);
    check(d[2:1] == 2'b11, "frame-ready and error bits set");
    apb_read(REG_FRAME_CNT, d); check(d == 2, $sformatf("FRAME_CNT 2, got %0d", d));
    apb_read(REG_SKIP_CNT, d);  check(d == 1, "SKIP_CNT 1");
    apb_read(REG_ERR_CNT, d);   check(d == 1, "ERR_CNT 1");
    apb_read(REG_EV_COUNT, d);  check(d == {16'd4321, 16'd1234}, "EV_COUNT {OFF, ON}");
    apb_read(REG_FRAME_CYC, d); check(d == 3486, "FRAME_CYC");
    apb_write(REG_STATUS, 32'b010);
    apb_read(REG_STATUS, d);
    check(d[2:1] == 2'b10 && !irq, "W1C clears frame-ready only");
    apb_write(REG_STATUS, 32'b100);
    apb_read(REG_STATUS, d);
    check(d[2:1] == 2'b00, "W1C clears error");

    // errors
    apb_write(REG_FRAME_CNT, 32'd5);
    check(last_err, "write to read-only register -> pslverr");
    apb_read(REG_FRAME_CNT, d); check(d == 2, "read-only register unchanged");
    apb_read(16'h0100, d);
    check(last_err, "unmapped address -> pslverr");
    apb_read(FB_BASE + 16'(4 * DVS_GROUPS), d);
    check(last_err, "beyond the frame window -> pslverr");

    // frame-buffer window
    for (int i = 0; i < DVS_GROUPS; i += 97) begin
      apb_read(FB_BASE + 16'(4 * i), d);
      check(d == {24'b0, 8'(i * 7 + 3)} && !last_err, $sformatf("frame byte %0d = %0d err %0d", i, d, last_err));
    end
    apb_read(FB_BASE + 16'(4 * (DVS_GROUPS - 1)), d);
    check(d == {24'b0, 8'((DVS_GROUPS - 1) * 7 + 3)}, "last frame byte");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
