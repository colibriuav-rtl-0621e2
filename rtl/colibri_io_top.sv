// Event-camera and motor-command I/O subsystem of the drone's SoC.
//
// This is the path from perception to actuation that the SoC handles in
// hardware: a DVS132S event camera is read over its synchronous
// address-event (SAER) port, and motor commands leave as PWM signals towards
// the flight controller. The processor (the SoC's fabric controller, not part
// of this RTL) sees everything through one APB completer.
//
//   sample_gen ──SAMPLE──► camera ──SAER words──► saer_rx ──► event_frame_buf
//        ▲ busy ◄────────────────────────────────────┘  frame_done = swap
//   apb_regs ◄─► APB (fabric controller): configuration, status, frame reads
//   apb_regs ──period/duty──► pwm_gen ──► pwm_o (flight controller)
//
// A SAMPLE request every 6944 clocks (7.2 kHz at 50 MHz) makes the camera
// stream one event frame; the receiver writes its 3432 group bytes into the
// fill bank of the ping-pong buffer and swaps the banks when the frame is
// complete, raising irq_o. The processor then reads the frame from the read
// bank while the next one arrives. A full frame takes 3484 clocks in the word
// format used here (3432 group words plus one row word per row), well inside
// the 6944-clock SAMPLE period, so every request is served at 7.2 kHz.
//
// Everything runs on the single system clock clk_i; rst_ni is an active-low
// asynchronous reset. What follows the paper: the 132x104 array read as 66x52
// bytes of 2x2 groups, one group per clock, the 7.2 kHz SAMPLE rate at 50 MHz,
// the APB control and the PWM output. This design's own choices: the SAER word
// format, the double buffer, the register map, four PWM channels.
module colibri_io_top
  import colibri_pkg::*;
#(
  parameter int unsigned N_CH = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // APB completer towards the fabric controller
  input  logic             psel_i,
  input  logic             penable_i,
  input  logic             pwrite_i,
  input  logic [15:0]      paddr_i,
  input  logic [31:0]      pwdata_i,
  output logic [31:0]      prdata_o,
  output logic             pready_o,
  output logic             pslverr_o,
  // SAER port of the DVS132S
  output logic             saer_sample_o,
  input  saer_word_t       saer_i,
  // PWM towards the flight controller
  output logic [N_CH-1:0]  pwm_o,
  // frame-ready interrupt to the fabric controller
  output logic             irq_o
);

  io_cfg_t                        cfg;
  logic [N_CH-1:0][PWM_CNT_W-1:0] duty;

  logic             busy, skip, frame_done, rx_err;
  logic             wr_en;
  logic [FB_AW-1:0] wr_addr, fb_rd_addr;
  logic [7:0]       wr_data, fb_rd_data;
  logic             fb_rd_en, fb_rd_bank;
  logic [15:0]      on_count, off_count, frame_cycles;

  sample_gen #(.PERIOD_W(16)) u_sample (
    .clk_i, .rst_ni,
    .enable_i (cfg.sample_en),
    .period_i (cfg.sample_period),
    .busy_i   (busy),
    .sample_o (saer_sample_o),
    .skip_o   (skip)
  );

  saer_rx #(.GX(DVS_GX), .GY(DVS_GY), .CNT_W(16)) u_rx (
    .clk_i, .rst_ni,
    .sample_i       (saer_sample_o),
    .saer_i,
    .busy_o         (busy),
    .wr_en_o        (wr_en),
    .wr_addr_o      (wr_addr),
    .wr_data_o      (wr_data),
    .frame_done_o   (frame_done),
    .on_count_o     (on_count),
    .off_count_o    (off_count),
    .frame_cycles_o (frame_cycles),
    .err_o          (rx_err)
  );

  event_frame_buf #(.DEPTH(DVS_GROUPS), .W(8)) u_fb (
    .clk_i, .rst_ni,
    .wr_en_i   (wr_en),
    .wr_addr_i (wr_addr),
    .wr_data_i (wr_data),
    .swap_i    (frame_done),
    .rd_en_i   (fb_rd_en),
    .rd_addr_i (fb_rd_addr),
    .rd_data_o (fb_rd_data),
    .rd_bank_o (fb_rd_bank)
  );

  apb_regs #(.N_CH(N_CH), .ADDR_W(16), .CNT_W(16)) u_regs (
    .clk_i, .rst_ni,
    .psel_i, .penable_i, .pwrite_i, .paddr_i, .pwdata_i,
    .prdata_o, .pready_o, .pslverr_o,
    .cfg_o          (cfg),
    .pwm_duty_o     (duty),
    .busy_i         (busy),
    .frame_done_i   (frame_done),
    .skip_i         (skip),
    .err_i          (rx_err),
    .on_count_i     (on_count),
    .off_count_i    (off_count),
    .frame_cycles_i (frame_cycles),
    .fb_rd_en_o     (fb_rd_en),
    .fb_rd_addr_o   (fb_rd_addr),
    .fb_rd_data_i   (fb_rd_data),
    .fb_rd_bank_i   (fb_rd_bank),
    .irq_o
  );

  pwm_gen #(.N_CH(N_CH), .CNT_W(PWM_CNT_W)) u_pwm (
    .clk_i, .rst_ni,
    .enable_i       (cfg.pwm_en),
    .period_i       (cfg.pwm_period),
    .duty_i         (duty),
    .pwm_o,
    .period_start_o ()
  );

endmodule
