// pcm_pwm_hw: hardware part of the PCM-to-PWM converter.
//
// The converter is the core of a Class-D audio amplifier. Its algorithm has
// four stages in a row: upsampling, linearization, noise shaping and wave
// generation. The hardware/software split this design follows runs
// upsampling and linearization as software on a DSP and puts the noise
// shaper, plus the PWM wave generator, in hardware. This module is that
// hardware:
//
//   DSP bus --> sample_fifo --> noise_shaper --> pwm_gen --> output stage
//               (buffer,        (MOLD,           (counter, register,
//                handshake)      error feedback)  comparator)
//
// The PWM generator sets the pace. On the last clock of each PWM period it
// loads the width the noise shaper computed during that period and strobes
// the noise shaper, which pops the next sample from the FIFO and computes
// the width for the period after. One sample is consumed every 2^DUTY_W
// clocks: 128 clocks by default, i.e. 352.8 kHz (8 x 44.1 kHz) at a
// 45.1584 MHz clock. The pulse for a sample therefore starts one PWM period
// plus one clock after the strobe that took it from the FIFO.
//
// Ports
//   s_valid/s_ready/s_data  samples from the DSP: two's complement, already
//                           upsampled and linearized; valid/ready handshake.
//   en                      runs the PWM; while low nothing is consumed.
//   pwm_out                 to the power output stage.
//   underrun                pulses when a period found the FIFO empty (that
//                           period carries silence).
//   clip                    pulses when a requantized sample hit full scale.
//   fifo_level              samples waiting in the FIFO.
// Reset: rst_n, synchronous, active low.
module pcm_pwm_hw
  import pcm_pwm_pkg::*;
#(
  parameter int unsigned IN_W   = PCM_W,
  parameter int unsigned OUT_W  = DUTY_W,
  parameter int unsigned DEPTH  = FIFO_DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    s_valid,
  output logic                    s_ready,
  input  logic signed [IN_W-1:0]  s_data,
  output logic                    pwm_out,
  output logic                    underrun,
  output logic                    clip,
  output logic [$clog2(DEPTH):0]  fifo_level
);

  logic                   f_valid, f_pop;
  logic [IN_W-1:0]        f_data;
  logic [OUT_W-1:0]       duty;
  logic                   load;

  sample_fifo #(.W(IN_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_valid (s_valid),
    .wr_ready (s_ready),
    .wr_data  (s_data),
    .rd_valid (f_valid),
    .rd_data  (f_data),
    .rd_pop   (f_pop),
    .level    (fifo_level)
  );

  noise_shaper #(.IN_W(IN_W), .OUT_W(OUT_W)) u_mold (
    .clk, .rst_n,
    .step     (load),
    .in_avail (f_valid),
    .in_data  ($signed(f_data)),
    .in_pop   (f_pop),
    .duty     (duty),
    .clip     (clip),
    .underrun (underrun)
  );

  pwm_gen #(.CNT_W(OUT_W)) u_pwm (
    .clk, .rst_n,
    .en,
    .duty_in  (duty),
    .load     (load),
    .pwm_out  (pwm_out)
  );

endmodule
