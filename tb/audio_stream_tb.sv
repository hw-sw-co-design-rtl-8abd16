// audio_stream_tb: streams an audio tone through the converter at its
// default sizes and judges the result only from the PWM output.
//
// The DSP model keeps the FIFO topped up, as a DSP that meets real time
// would, and sends an already-upsampled tone: a 1 kHz sine at -6 dBFS plus a
// quieter 5.5 kHz sine, at 352.8 kHz (8 x 44.1 kHz), i.e. one sample per
// 128-clock PWM period. Over NSAMP samples (1,517,040: 4.3 s of audio, the
// length of the test recording the converter must play in real time)
// it checks:
//   * real time: no period ever finds the FIFO empty, and exactly one
//     sample is consumed per 128 clocks;
//   * noise shaping: the measured pulse widths, scaled back to 16 bits,
//     add up to the input over every block of 8 samples (one 44.1 kHz input
//     sample) to within one 7-bit step. Plain truncation without error
//     feedback would be off by up to 8 steps on such a block.
// Pulse widths are measured by counting high clocks of pwm_out per period;
// the first two periods after en carry the reset width.
module audio_stream_tb;

  localparam int IN_W   = 16;
  localparam int OUT_W  = 7;
  localparam int S      = IN_W - OUT_W;
  localparam int PERIOD = 1 << OUT_W;
  localparam int NSAMP  = 1517040;   // 4.3 s of audio
  localparam int BLOCK  = 8;

  logic                   clk = 1'b0;
  logic                   rst_n;
  logic                   en;
  logic                   s_valid;
  logic                   s_ready;
  logic signed [IN_W-1:0] s_data;
  logic                   pwm_out;
  logic                   underrun;
  logic                   clip;
  logic [3:0]             fifo_level;

  int checks = 0, failures = 0;

  pcm_pwm_hw dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat ((NSAMP + 20) * PERIOD + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tone(int n);
    real t;
    t = n / 352800.0;
    return $rtoi(16384.0 * $sin(2.0 * 3.14159265358979 * 1000.0 * t)
               +  4096.0 * $sin(2.0 * 3.14159265358979 * 5512.5 * t));
  endfunction

  // DSP: offer the next sample whenever the FIFO has room
  int nsent = 0;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_data  <= '0;
    end else if (!s_valid || s_ready) begin
      if (s_valid) nsent <= nsent + 1;
      s_valid <= (nsent + (s_valid ? 1 : 0)) < NSAMP + 4;
      s_data  <= IN_W'(tone(nsent + (s_valid ? 1 : 0)));
    end
  end

  int widths[$];
  int n_under = 0, n_clip = 0;
  longint worst = 0;

  initial begin
    int highs;
    rst_n = 1'b0; en = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (20) @(negedge clk);          // FIFO fills first
    en = 1'b1;
    for (int p = 0; p < NSAMP + 2; p++) begin
      highs = 0;
      for (int i = 0; i < PERIOD; i++) begin
        @(negedge clk);
        if (pwm_out) highs++;
        if (underrun) n_under++;
        if (clip) n_clip++;
      end
      widths.push_back(highs);
    end
    check(n_clip == 0, "no clipping at a -4 dBFS peak");
    check(n_under == 0, "real time: FIFO never ran dry");
    check(widths[0] == PERIOD / 2 && widths[1] == PERIOD / 2, "reset width");
    // blocks of 8 samples: sum of widths vs sum of inputs
    for (int b = 0; b + BLOCK <= NSAMP; b += BLOCK) begin
      longint sx, sy, d;
      sx = 0; sy = 0;
      for (int k = b; k < b + BLOCK; k++) begin
        sx += tone(k);
        sy += longint'(widths[k + 2] - PERIOD / 2) * (1 << S);
      end
      d = sx - sy;
      if (d < 0) d = -d;
      if (d > worst) worst = d;
      check(d < (1 << S), $sformatf("block %0d: error %0d", b / BLOCK, d));
    end
    $display("samples=%0d worst block error=%0d (one 7-bit step = %0d)", NSAMP, worst, 1 << S);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
