// Multi-channel PWM generator for the motor commands.
//
// The processor turns its decision into motor commands and hands them to the
// flight controller as PWM signals, one channel per motor (four on the
// quadrotor; the channel count is this design's choice). All channels share
// one period counter that runs from 0 to period-1; channel n is high while the
// counter is below its duty value, so duty = period/2 gives the 50 % duty
// signal used in the platform's power measurement and duty >= period keeps the
// output high.
//
// Period and duties are copied into shadow registers at the first clock of
// every period (period_start_o), so a new command never cuts or stretches a
// pulse that is already running; a command takes effect at the next period
// boundary, at most one period later. Shadow registers are this design's
// choice.
//
// Timing: after enable_i rises, the first period starts on the next clock and
// pwm_o is registered (one clock after the counter). With enable_i low the
// outputs are low and the counter waits at zero. Periods below 2 are run as 2.
module pwm_gen #(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned CNT_W = colibri_pkg::PWM_CNT_W
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        enable_i,
  input  logic [CNT_W-1:0]            period_i,
  input  logic [N_CH-1:0][CNT_W-1:0]  duty_i,
  output logic [N_CH-1:0]             pwm_o,
  output logic                        period_start_o
);

  logic [CNT_W-1:0]           cnt_q, period_q;
  logic [N_CH-1:0][CNT_W-1:0] duty_q;
  logic                       run_q;
  logic                       wrap;

  assign wrap = !run_q || (cnt_q >= period_q - CNT_W'(1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q          <= '0;
      period_q       <= CNT_W'(2);
      duty_q         <= '0;
      run_q          <= 1'b0;
      pwm_o          <= '0;
      period_start_o <= 1'b0;
    end else if (!enable_i) begin
      cnt_q          <= '0;
      run_q          <= 1'b0;
      pwm_o          <= '0;
      period_start_o <= 1'b0;
    end else begin
      run_q          <= 1'b1;
      period_start_o <= wrap;
      if (wrap) begin
        // first clock of a new period: take the new command
        cnt_q    <= '0;
        period_q <= (period_i < CNT_W'(2)) ? CNT_W'(2) : period_i;
        duty_q   <= duty_i;
        for (int n = 0; n < N_CH; n++) pwm_o[n] <= (duty_i[n] != '0);
      end else begin
        cnt_q <= cnt_q + CNT_W'(1);
        for (int n = 0; n < N_CH; n++) pwm_o[n] <= (cnt_q + CNT_W'(1) < duty_q[n]);
      end
    end
  end

endmodule
