// noise_shaper: requantizer with error feedback (the MOLD stage).
//
// The PWM can make only 2^OUT_W different pulse widths per period, far fewer
// than the 2^IN_W levels of a PCM sample. The noise shaper keeps the audio
// quality by feeding each requantization error back into the next sample,
// which moves the requantization noise up in frequency, above the audio band
// that the upsampling has opened. This is the block the paper's chosen
// hardware/software split puts in hardware. The paper gives its function
// only; the structure here, the simplest one that does the job, is this
// design's choice: a first-order error-feedback loop,
//
//   v[n] = x[n] + e[n-1]
//   y[n] = floor(v[n] / 2^S),  S = IN_W - OUT_W, clipped to the OUT_W-bit range
//   e[n] = v[n] - y[n]*2^S,    held to 0 .. 2^S-1
//
// so that y[n]*2^S = x[n] - (e[n] - e[n-1]): the error is shaped by
// (1 - z^-1). When v[n] is above the top code, y[n] clips and the stored
// error is held at its maximum so the loop cannot run away.
//
// Interface
//   step            one sample period: take the next input and compute a
//                   new output. Driven by the PWM generator once per period.
//   in_avail/in_data/in_pop  sample source (the FIFO read side). On a step
//                   with in_avail high the sample is used and in_pop pulses
//                   in the same cycle. On a step with in_avail low the input
//                   counts as silence (0) and underrun pulses.
//   duty            output code, offset binary: 2^(OUT_W-1) is silence.
//   clip, underrun  one-cycle flags, registered with the duty they belong to.
// Timing: duty changes on the clock edge that ends a step cycle. Reset
// (synchronous, active low) clears the error and sets duty to mid-scale.
module noise_shaper #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   step,
  input  logic                   in_avail,
  input  logic signed [IN_W-1:0] in_data,
  output logic                   in_pop,
  output logic [OUT_W-1:0]       duty,
  output logic                   clip,
  output logic                   underrun
);

  localparam int unsigned S = IN_W - OUT_W;
  localparam logic signed [OUT_W:0] Y_MAX = (OUT_W+1)'((1 << (OUT_W-1)) - 1);

  logic        [S-1:0]      err_q;      // e[n-1], always 0 .. 2^S-1
  logic signed [IN_W:0]     x, v;       // one bit wider than a sample
  logic signed [OUT_W:0]    y_raw, y;   // one bit wider than the output
  logic        [S-1:0]      e_next;
  logic                     sat;

  always_comb begin
    x      = in_avail ? (IN_W+1)'(in_data) : '0;
    v      = x + (IN_W+1)'($signed({1'b0, err_q}));
    y_raw  = (OUT_W+1)'(v >>> S);
    // v >= -2^(IN_W-1), so only the top end can overflow.
    sat    = (y_raw > Y_MAX);
    y      = sat ? Y_MAX : y_raw;
    // y*2^S has S zero low bits, so without clipping e[n] is v's low bits
    e_next = sat ? {S{1'b1}} : v[S-1:0];
  end

  assign in_pop = step && in_avail;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      err_q    <= '0;
      duty     <= OUT_W'(1 << (OUT_W-1));
      clip     <= 1'b0;
      underrun <= 1'b0;
    end else begin
      clip     <= 1'b0;
      underrun <= 1'b0;
      if (step) begin
        err_q    <= e_next;
        // offset binary: flip the sign bit of the two's complement code
        duty     <= {~y[OUT_W-1], y[OUT_W-2:0]};
        clip     <= sat;
        underrun <= !in_avail;
      end
    end
  end

endmodule
