// APB register file of the event-camera / motor-command I/O subsystem.
//
// The fabric controller of the SoC reaches all peripherals over APB. Through
// this completer it enables and times the SAMPLE requests, reads the status
// and counters of the SAER receiver, reads the last complete event frame out
// of the ping-pong buffer, and sets the PWM period and duties. The register
// map is this design's own (addresses in colibri_pkg):
//
//   0x0000 CTRL        rw  [0] sample enable, [1] PWM enable
//   0x0004 SAMPLE_PER  rw  SAMPLE period in system clocks (reset 6944 = 7.2 kHz)
//   0x0008 STATUS      r/w1c [0] busy, [1] frame ready, [2] error, [3] read bank
//   0x000C EV_COUNT    r   {OFF events, ON events} of the last frame
//   0x0010 FRAME_CNT   r   frames received     0x0014 SKIP_CNT r  requests skipped
//   0x0018 ERR_CNT     r   protocol errors     0x001C FRAME_CYC r readout clocks
//   0x0020 PWM_PERIOD  rw  PWM period in system clocks
//   0x0040+4n PWM_DUTY rw  high time of PWM channel n
//   0x4000+4i FRAME    r   group byte i (0..3431) of the last complete frame
//
// Protocol: AMBA APB3. Register accesses complete without wait states. A frame
// read starts the buffer read in the setup phase, so its data is ready in the
// access phase and needs no wait state either; pready_o is therefore always
// high. An address outside the map, or a write to a read-only location,
// answers with pslverr_o. irq_o follows the frame-ready bit.
module apb_regs
  import colibri_pkg::*;
#(
  parameter int unsigned N_CH   = 4,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned CNT_W  = 16
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // APB completer
  input  logic                            psel_i,
  input  logic                            penable_i,
  input  logic                            pwrite_i,
  input  logic [ADDR_W-1:0]               paddr_i,
  input  logic [31:0]                     pwdata_i,
  output logic [31:0]                     prdata_o,
  output logic                            pready_o,
  output logic                            pslverr_o,
  // configuration
  output io_cfg_t                         cfg_o,
  output logic [N_CH-1:0][PWM_CNT_W-1:0]  pwm_duty_o,
  // status from the sample timer and receiver
  input  logic                            busy_i,
  input  logic                            frame_done_i,
  input  logic                            skip_i,
  input  logic                            err_i,
  input  logic [CNT_W-1:0]                on_count_i,
  input  logic [CNT_W-1:0]                off_count_i,
  input  logic [CNT_W-1:0]                frame_cycles_i,
  // frame buffer read port
  output logic                            fb_rd_en_o,
  output logic [FB_AW-1:0]                fb_rd_addr_o,
  input  logic [7:0]                      fb_rd_data_i,
  input  logic                            fb_rd_bank_i,
  output logic                            irq_o
);

  io_cfg_t                        cfg_q;
  logic [N_CH-1:0][PWM_CNT_W-1:0] duty_q;
  logic                           ready_q, error_q;
  logic [31:0]                    frame_cnt_q, skip_cnt_q, err_cnt_q;

  logic        setup, access, wr, rd;
  logic [15:0] a;
  logic        is_fb, is_duty, mapped, writable;
  int unsigned duty_idx;

  assign setup  = psel_i && !penable_i;
  assign access = psel_i && penable_i;
  assign wr     = access && pwrite_i;
  assign rd     = access && !pwrite_i;
  assign a      = 16'(paddr_i);

  assign is_fb    = (a >= FB_BASE) && (a < FB_BASE + 16'(4 * DVS_GROUPS)) && (a[1:0] == 2'b00);
  assign duty_idx = 32'(a - REG_PWM_DUTY0) >> 2;
  assign is_duty  = (a >= REG_PWM_DUTY0) && (a < REG_PWM_DUTY0 + 16'(4 * N_CH)) && (a[1:0] == 2'b00);

  always_comb begin
    unique case (a)
      REG_CTRL, REG_SAMPLE_PER, REG_STATUS, REG_PWM_PERIOD: begin mapped = 1'b1; writable = 1'b1; end
      REG_EV_COUNT, REG_FRAME_CNT, REG_SKIP_CNT, REG_ERR_CNT, REG_FRAME_CYC:
                                                           begin mapped = 1'b1; writable = 1'b0; end
      default: begin mapped = is_duty || is_fb; writable = is_duty; end
    endcase
  end

  // frame buffer read is started in the setup phase
  assign fb_rd_en_o   = setup && !pwrite_i && is_fb;
  assign fb_rd_addr_o = FB_AW'((a - FB_BASE) >> 2);

  assign pready_o  = 1'b1;
  assign pslverr_o = access && (!mapped || (pwrite_i && !writable));
  assign cfg_o      = cfg_q;
  assign pwm_duty_o = duty_q;
  assign irq_o      = ready_q;

  always_comb begin
    prdata_o = '0;
    if (rd) begin
      if (is_fb) prdata_o = {24'b0, fb_rd_data_i};
      else if (is_duty) prdata_o = 32'(duty_q[duty_idx[$clog2(N_CH+1)-1:0]]);
      else begin
        unique case (a)
          REG_CTRL:       prdata_o = {30'b0, cfg_q.pwm_en, cfg_q.sample_en};
          REG_SAMPLE_PER: prdata_o = 32'(cfg_q.sample_period);
          REG_STATUS:     prdata_o = {28'b0, fb_rd_bank_i, error_q, ready_q, busy_i};
          REG_EV_COUNT:   prdata_o = {16'(off_count_i), 16'(on_count_i)};
          REG_FRAME_CNT:  prdata_o = frame_cnt_q;
          REG_SKIP_CNT:   prdata_o = skip_cnt_q;
          REG_ERR_CNT:    prdata_o = err_cnt_q;
          REG_FRAME_CYC:  prdata_o = 32'(frame_cycles_i);
          REG_PWM_PERIOD: prdata_o = 32'(cfg_q.pwm_period);
          default:        prdata_o = '0;
        endcase
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q.sample_en     <= 1'b0;
      cfg_q.sample_period <= 16'(SAMPLE_PERIOD_DEFAULT);
      cfg_q.pwm_en        <= 1'b0;
      cfg_q.pwm_period    <= '0;
      duty_q              <= '0;
      ready_q             <= 1'b0;
      error_q             <= 1'b0;
      frame_cnt_q         <= '0;
      skip_cnt_q          <= '0;
      err_cnt_q           <= '0;
    end else begin
      if (frame_done_i) begin
        ready_q     <= 1'b1;
        frame_cnt_q <= frame_cnt_q + 32'd1;
      end
      if (err_i) begin
        error_q   <= 1'b1;
        err_cnt_q <= err_cnt_q + 32'd1;
      end
      if (skip_i) skip_cnt_q <= skip_cnt_q + 32'd1;

      if (wr && writable) begin
        if (is_duty) duty_q[duty_idx[$clog2(N_CH+1)-1:0]] <= PWM_CNT_W'(pwdata_i);
        else begin
          unique case (a)
            REG_CTRL: begin
              cfg_q.sample_en <= pwdata_i[0];
              cfg_q.pwm_en    <= pwdata_i[1];
            end
            REG_SAMPLE_PER: cfg_q.sample_period <= pwdata_i[15:0];
            REG_STATUS: begin
              // write 1 to clear; a new event in the same clock wins
              if (pwdata_i[1] && !frame_done_i) ready_q <= 1'b0;
              if (pwdata_i[2] && !err_i)        error_q <= 1'b0;
            end
            REG_PWM_PERIOD: cfg_q.pwm_period <= PWM_CNT_W'(pwdata_i);
            default: ;
          endcase
        end
      end
    end
  end

  // APB rules: penable only inside a selected transfer, address and
  // direction stable from setup into access.
  assert property (@(posedge clk_i) disable iff (!rst_ni) penable_i |-> psel_i)
    else $error("apb_regs: penable without psel");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (psel_i && !penable_i) |=> (psel_i && penable_i && $stable(paddr_i) && $stable(pwrite_i)))
    else $error("apb_regs: setup phase not followed by matching access phase");

endmodule
