// pwm_gen: PWM wave generator, a counter, a register and a comparator.
//
// Each PWM period lasts 2^CNT_W clocks. A free-running counter steps through
// the period; a register holds the pulse width for the current period; a
// comparator drives the output high while the counter is below that width.
// A width of 0 gives no pulse and a width of 2^CNT_W - 1 a pulse one clock
// short of the whole period. The three parts are as the paper lists them;
// the single-edge (trailing-edge) pulse shape, the registered output and the
// load strobe are this design's choices.
//
// Interface
//   en       counts while high; while low the counter stays at 0 and the
//            output low.
//   duty_in  width for the next period, sampled on the last clock of the
//            current period.
//   load     high for one clock on the last clock of each period: the width
//            register takes duty_in on that edge, and the noise shaper uses
//            the same strobe to compute the following width.
//   pwm_out  the pulse, registered: it lags the counter by one clock, so a
//            period's pulse starts one clock after the counter wraps to 0.
// Reset (synchronous, active low) clears the counter and loads mid-scale.
module pwm_gen #(
  parameter int unsigned CNT_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [CNT_W-1:0] duty_in,
  output logic             load,
  output logic             pwm_out
);

  logic [CNT_W-1:0] cnt;       // the counter
  logic [CNT_W-1:0] duty_q;    // the register

  assign load = en && (cnt == '1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      duty_q  <= CNT_W'(1 << (CNT_W-1));
      pwm_out <= 1'b0;
    end else begin
      if (en) cnt <= cnt + 1'b1;
      else    cnt <= '0;
      if (load) duty_q <= duty_in;
      pwm_out <= en && (cnt < duty_q);   // the comparator
    end
  end

endmodule
