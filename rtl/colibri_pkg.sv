// Shared constants and types of the event-camera / motor-command I/O subsystem.
//
// The DVS132S event camera has 132x104 pixels. Its synchronous address-event
// (SAER) port delivers the events of a 2x2 pixel group in one byte, so a whole
// event frame is 66x52 = 3432 group bytes. The numbers below (array size,
// 50 MHz system clock, 7.2 kHz SAMPLE rate) follow the published platform;
// the word format on the SAER pins, the event-byte bit layout and the APB
// register map are this design's own choices and are defined here so that
// every module and testbench uses the same ones.
package colibri_pkg;

  // ---- array geometry (from the platform description) ----
  localparam int unsigned DVS_PIX_X    = 132;
  localparam int unsigned DVS_PIX_Y    = 104;
  localparam int unsigned DVS_GX       = DVS_PIX_X / 2;      // 66 groups per row
  localparam int unsigned DVS_GY       = DVS_PIX_Y / 2;      // 52 group rows
  localparam int unsigned DVS_GROUPS   = DVS_GX * DVS_GY;    // 3432 bytes per frame
  localparam int unsigned DVS_MAX_EV   = 4 * DVS_GROUPS;     // 13728 events per frame
  localparam int unsigned FB_AW        = $clog2(DVS_GROUPS); // 12-bit group address

  // ---- clocking (from the platform description) ----
  localparam int unsigned SYS_CLK_HZ   = 50_000_000;
  localparam int unsigned SAMPLE_HZ    = 7_200;
  // 50e6 / 7200 = 6944.4 -> 6944 system clocks between SAMPLE requests
  localparam int unsigned SAMPLE_PERIOD_DEFAULT = SYS_CLK_HZ / SAMPLE_HZ;

  // ---- one SAER word as seen by the receiver (own choice) ----
  // is_y = 1: auxiliary row clock, addr = row (Y) index, data unused.
  // is_y = 0: group word, addr = column-group (X) index, data = event byte.
  typedef struct packed {
    logic       valid;
    logic       is_y;
    logic [7:0] addr;
    logic [7:0] data;
  } saer_word_t;

  // Event byte: bit 2p = ON, bit 2p+1 = OFF of pixel p (p = 0..3) of the 2x2 group.
  localparam logic [7:0] EV_ON_MASK  = 8'b0101_0101;
  localparam logic [7:0] EV_OFF_MASK = 8'b1010_1010;

  // ---- APB register map (byte addresses, own choice) ----
  localparam logic [15:0] REG_CTRL         = 16'h0000; // [0] sample enable, [1] pwm enable
  localparam logic [15:0] REG_SAMPLE_PER   = 16'h0004; // SAMPLE period in system clocks
  localparam logic [15:0] REG_STATUS       = 16'h0008; // [0] busy, [1] frame ready (W1C), [2] error (W1C), [3] read bank
  localparam logic [15:0] REG_EV_COUNT     = 16'h000C; // {OFF count, ON count} of the last frame
  localparam logic [15:0] REG_FRAME_CNT    = 16'h0010; // frames received
  localparam logic [15:0] REG_SKIP_CNT     = 16'h0014; // SAMPLE requests skipped (readout still busy)
  localparam logic [15:0] REG_ERR_CNT      = 16'h0018; // protocol errors seen
  localparam logic [15:0] REG_FRAME_CYC    = 16'h001C; // readout time of the last frame in clocks
  localparam logic [15:0] REG_PWM_PERIOD   = 16'h0020; // PWM period in system clocks
  localparam logic [15:0] REG_PWM_DUTY0    = 16'h0040; // PWM duty of channel n at 0x40 + 4n
  localparam logic [15:0] FB_BASE          = 16'h4000; // group byte i of the last frame at 0x4000 + 4i

  localparam int unsigned PWM_CNT_W = 20;

  // Configuration written by the processor.
  typedef struct packed {
    logic                 sample_en;
    logic [15:0]          sample_period;
    logic                 pwm_en;
    logic [PWM_CNT_W-1:0] pwm_period;
  } io_cfg_t;

  // Number of ON / OFF events in an event byte.
  function automatic logic [2:0] ev_count(input logic [7:0] b, input logic [7:0] mask);
    logic [2:0] n;
    n = '0;
    for (int i = 0; i < 8; i++) n += 3'(b[i] & mask[i]);
    return n;
  endfunction

endpackage
