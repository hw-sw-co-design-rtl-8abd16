// Shared sizes and types of the PCM-to-PWM converter hardware.
//
// The converter takes audio samples that a DSP has already upsampled and
// linearized, requantizes them in a noise shaper and turns each requantized
// value into one PWM pulse. The numbers below tie the three pieces together:
//
//   PCM_W   width of a PCM sample (two's complement). CD audio has 2^16
//           levels, so 16 bits follows the paper.
//   DUTY_W  width of a requantized sample, i.e. log2 of the number of pulse
//           widths the PWM can make. This design's choice: 7 bits gives 128
//           clocks per PWM period; with 8x upsampling of 44.1 kHz audio
//           (352.8 kHz) that is a 45.1584 MHz clock, close to the "about
//           45 MHz" the paper reports for its original hardware.
//   FIFO_DEPTH  samples the DSP-side buffer holds (this design's choice).
package pcm_pwm_pkg;

  localparam int unsigned PCM_W      = 16;
  localparam int unsigned DUTY_W     = 7;
  localparam int unsigned FIFO_DEPTH = 8;

endpackage
