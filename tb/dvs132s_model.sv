// Behavioural model of the DVS132S event camera's SAER readout, for
// testbenches only (not synthesizable, not part of the design).
//
// On each SAMPLE request it waits START_LAT clocks and then streams the frame
// in raster order, one word per clock: per row an auxiliary row word
// (is_y = 1, addr = row) followed by GX group words (is_y = 0, addr = column
// group, data = event byte from dvs_tb_pkg::ev_byte). Frame numbers count
// from 0. full_i selects fully populated frames. err_word_i, pulsed while the
// model is idle, sends one stray group word outside any frame. A SAMPLE that
// arrives during a readout is ignored.
module dvs132s_model
  import colibri_pkg::*;
#(
  parameter int unsigned GX        = DVS_GX,
  parameter int unsigned GY        = DVS_GY,
  parameter int unsigned START_LAT = 2
) (
  input  logic       clk_i,
  input  logic       sample_i,
  input  logic       full_i,
  input  logic       err_word_i,
  output saer_word_t saer_o,
  output int unsigned frames_o,
  output logic       streaming_o
);
  int unsigned frame_no = 0;
  bit          busy = 0;

  assign frames_o    = frame_no;
  assign streaming_o = busy;

  initial saer_o = '0;

  always @(posedge clk_i) begin
    if (err_word_i && !busy) begin
      saer_o <= '{valid: 1'b1, is_y: 1'b0, addr: 8'd0, data: 8'h01};
      @(posedge clk_i);
      saer_o <= '0;
    end
  end

  always @(posedge clk_i) begin
    if (sample_i && !busy) begin
      busy = 1;
      repeat (START_LAT) @(posedge clk_i);
      for (int y = 0; y < GY; y++) begin
        saer_o <= '{valid: 1'b1, is_y: 1'b1, addr: 8'(y), data: 8'h00};
        @(posedge clk_i);
        for (int x = 0; x < GX; x++) begin
          saer_o <= '{valid: 1'b1, is_y: 1'b0, addr: 8'(x),
                      data: dvs_tb_pkg::ev_byte(frame_no, y, x, full_i)};
          @(posedge clk_i);
        end
      end
      saer_o <= '0;
      frame_no = frame_no + 1;
      busy = 0;
    end
  end
endmodule
