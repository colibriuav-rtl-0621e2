// SAER event-frame receiver for the DVS132S event camera.
//
// After a SAMPLE request the camera streams its frozen event frame over the
// synchronous address-event (SAER) port, one word per system clock. Two byte
// streams travel side by side: an address byte and an event byte that holds
// the ON/OFF bits of one 2x2 pixel group. With 66x52 groups a completely
// filled frame (13728 events) therefore needs only 3432 group clocks, plus the
// sparse auxiliary clocks.
//
// Word format (this design's choice, see colibri_pkg): a word with is_y = 1
// is the auxiliary row clock and carries the row address; a word with
// is_y = 0 carries a column-group address and its event byte. The receiver
// keeps the current row, writes each event byte into the frame buffer at
// row*GX + column, and adds the ON and OFF bits of the byte to two counters.
// The frame ends with the group word of column GX-1 in row GY-1 (the camera is
// taken to stream every group in raster order); the receiver then pulses
// frame_done_o for one clock and publishes the counts and the readout time
// (clocks from SAMPLE to the last word) until the next frame ends.
//
// Protocol errors pulse err_o and the offending word is dropped: a word while
// no frame is open, an address outside the array, or a group word before the
// first row word of the frame.
//
// Timing: the write for a word is issued in the clock after it is received.
// frame_done_o comes one clock after the last word. busy_o is high from the
// clock after sample_i until frame_done_o.
module saer_rx
  import colibri_pkg::*;
#(
  parameter int unsigned GX    = DVS_GX,
  parameter int unsigned GY    = DVS_GY,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned AW   = $clog2(GX * GY)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             sample_i,
  input  saer_word_t       saer_i,
  output logic             busy_o,
  output logic             wr_en_o,
  output logic [AW-1:0]    wr_addr_o,
  output logic [7:0]       wr_data_o,
  output logic             frame_done_o,
  output logic [CNT_W-1:0] on_count_o,
  output logic [CNT_W-1:0] off_count_o,
  output logic [CNT_W-1:0] frame_cycles_o,
  output logic             err_o
);

  typedef enum logic [1:0] {IDLE, WAIT_ROW, READ} state_e;

  state_e           state_q;
  logic [7:0]       row_q;
  logic [CNT_W-1:0] on_q, off_q, cyc_q;

  logic in_frame, is_last, row_ok, col_ok;

  assign in_frame = (state_q != IDLE);
  assign row_ok   = (32'(saer_i.addr) < GY);
  assign col_ok   = (32'(saer_i.addr) < GX);
  assign is_last  = !saer_i.is_y && (32'(row_q) == GY - 1) && (32'(saer_i.addr) == GX - 1);
  assign busy_o   = in_frame;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q        <= IDLE;
      row_q          <= '0;
      on_q           <= '0;
      off_q          <= '0;
      cyc_q          <= '0;
      wr_en_o        <= 1'b0;
      wr_addr_o      <= '0;
      wr_data_o      <= '0;
      frame_done_o   <= 1'b0;
      on_count_o     <= '0;
      off_count_o    <= '0;
      frame_cycles_o <= '0;
      err_o          <= 1'b0;
    end else begin
      wr_en_o      <= 1'b0;
      frame_done_o <= 1'b0;
      err_o        <= 1'b0;

      if (in_frame) cyc_q <= cyc_q + CNT_W'(1);

      if (sample_i && !in_frame) begin
        state_q <= WAIT_ROW;
        on_q    <= '0;
        off_q   <= '0;
        cyc_q   <= CNT_W'(1);
      end

      if (saer_i.valid) begin
        if (!in_frame) begin
          err_o <= 1'b1;
        end else if (saer_i.is_y) begin
          if (row_ok) begin
            row_q   <= saer_i.addr;
            state_q <= READ;
          end else begin
            err_o <= 1'b1;
          end
        end else if (state_q != READ || !col_ok) begin
          err_o <= 1'b1;
        end else begin
          wr_en_o   <= 1'b1;
          wr_addr_o <= AW'(32'(row_q) * GX + 32'(saer_i.addr));
          wr_data_o <= saer_i.data;
          on_q      <= on_q  + CNT_W'(ev_count(saer_i.data, EV_ON_MASK));
          off_q     <= off_q + CNT_W'(ev_count(saer_i.data, EV_OFF_MASK));
          if (is_last) begin
            state_q        <= IDLE;
            frame_done_o   <= 1'b1;
            on_count_o     <= on_q  + CNT_W'(ev_count(saer_i.data, EV_ON_MASK));
            off_count_o    <= off_q + CNT_W'(ev_count(saer_i.data, EV_OFF_MASK));
            frame_cycles_o <= cyc_q;
          end
        end
      end
    end
  end

  // A SAMPLE request must not arrive while a frame is still being read
  // (the sample timer holds requests back while busy_o is high).
  assert property (@(posedge clk_i) disable iff (!rst_ni) sample_i |-> !in_frame)
    else $error("saer_rx: SAMPLE request during readout");

endmodule
