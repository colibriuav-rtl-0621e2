// SAMPLE request timer for the DVS132S event camera.
//
// The camera freezes its pixel array into an event frame and streams it out
// each time it sees a SAMPLE request, so the rate of this timer is the event
// frame rate. The platform runs it at 7.2 kHz from the 50 MHz system clock,
// i.e. one request every 6944 clocks (period_i = 6944).
//
// How it works: a down-counter is reloaded with period_i - 1 and counts to
// zero. At zero it emits sample_o for one clock, unless the SAER receiver still
// reports busy_i (the previous frame is not finished): then the request is
// dropped and skip_o pulses instead, so a frame is never cut short. Dropping
// late requests, and clamping periods below 2 to 2, are this design's choices.
//
// Timing: with enable_i held high from reset release, the first sample_o comes
// period_i clocks after enable_i rises and then every period_i clocks.
// Clearing enable_i stops the timer and restarts it from a full period.
module sample_gen #(
  parameter int unsigned PERIOD_W = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                enable_i,
  input  logic [PERIOD_W-1:0] period_i,
  input  logic                busy_i,
  output logic                sample_o,
  output logic                skip_o
);

  logic [PERIOD_W-1:0] cnt_q;
  logic [PERIOD_W-1:0] reload;

  assign reload = (period_i < PERIOD_W'(2)) ? PERIOD_W'(1) : period_i - PERIOD_W'(1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q    <= '0;
      sample_o <= 1'b0;
      skip_o   <= 1'b0;
    end else begin
      sample_o <= 1'b0;
      skip_o   <= 1'b0;
      if (!enable_i) begin
        cnt_q <= reload;
      end else if (cnt_q == '0) begin
        cnt_q    <= reload;
        sample_o <= !busy_i;
        skip_o   <= busy_i;
      end else begin
        cnt_q <= cnt_q - PERIOD_W'(1);
      end
    end
  end

endmodule
