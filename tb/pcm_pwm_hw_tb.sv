// pcm_pwm_hw_tb: end-to-end test of the converter hardware at its default
// sizes (16-bit samples, 7-bit widths, 128-clock PWM period, 8-word FIFO).
//
// A DSP model writes samples over the valid/ready handshake at rates that
// change along the run: slow enough that the FIFO runs dry (underrun), fast
// enough that it fills and the DSP is stalled. The samples are a sine tone,
// random values, and full-scale stretches that make the noise shaper clip.
// Half-way through, en is dropped for a while and raised again.
//
// The testbench keeps its own model of the whole chain: which edges end a
// PWM period (every 128 clocks after en rises), whether the FIFO holds a
// sample at that edge, the noise-shaper equations and the PWM register. It
// then checks, on every clock, pwm_out against the pulse the model predicts,
// plus fifo_level, s_ready, clip and underrun. It counts each mechanism
// (stall, underrun, clip, en pause) and fails if one never happened.
module pcm_pwm_hw_tb;

  localparam int IN_W   = 16;
  localparam int OUT_W  = 7;
  localparam int DEPTH  = 8;
  localparam int S      = IN_W - OUT_W;
  localparam int PERIOD = 1 << OUT_W;
  localparam int YMAX   = (1 << (OUT_W - 1)) - 1;
  localparam int NSAMP  = 3000;

  logic                   clk = 1'b0;
  logic                   rst_n;
  logic                   en;
  logic                   s_valid;
  logic                   s_ready;
  logic signed [IN_W-1:0] s_data;
  logic                   pwm_out;
  logic                   underrun;
  logic                   clip;
  logic [$clog2(DEPTH):0] fifo_level;

  int checks = 0, failures = 0;
  int n_stall = 0, n_under = 0, n_clip = 0, n_pause = 0, n_steps = 0;

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
    repeat (NSAMP * PERIOD * 2 + 100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample n of the stimulus
  function automatic int stim(int n);
    if (n < 1000)
      return int'($rtoi(20000.0 * $sin(2.0 * 3.14159265358979 * n / 64.0)));
    else if (n < 1100)
      return 32767 - (n % 3);          // full scale: clips
    else if (n < 1200)
      return -32768;                   // negative full scale
    else
      return int'($signed(16'($urandom)));
  endfunction

  // writer offer probability (per mille per clock) along the run; the PWM
  // takes one sample per 128 clocks, about 8 per mille
  function automatic int wr_pm(int n);
    if (n < 300)       return 50;      // faster than the PWM: FIFO fills
    else if (n < 600)  return 4;       // slower: FIFO runs dry
    else               return 12;
  endfunction

  function automatic int floor_div(int a, int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  int acc[$];          // accepted samples in order
  int consumed;        // samples the model noise shaper has taken
  int e_m, ns_m, dq_m; // model error, noise-shaper output, PWM register
  bit exp_clip, exp_under;

  initial begin
    int j;             // clock edges since en last rose
    int nsent;
    bit push_pending, stepped;
    bit pausing;
    int pause_left;

    rst_n = 1'b0; en = 1'b0; s_valid = 1'b0; s_data = '0;
    e_m = 0; ns_m = PERIOD / 2; dq_m = PERIOD / 2;
    consumed = 0; nsent = 0; push_pending = 0; pausing = 0; pause_left = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // some samples arrive before the PWM runs
    for (int k = 0; k < 4; k++) begin
      s_valid = 1'b1; s_data = IN_W'(stim(nsent));
      @(negedge clk);
      acc.push_back(stim(nsent)); nsent++;
    end
    s_valid = 1'b0;
    #1 check(fifo_level == 4, "level after preload");
    en = 1'b1;
    j  = 0;

    while (consumed < NSAMP) begin
      @(negedge clk);
      // (1) the edge just gone: pwm_out and flags
      stepped = 0;
      if (en && !pausing) begin
        int i;
        j++;
        i = ((j - 1) % PERIOD) + 1;
        check(pwm_out == ((i - 1) < dq_m), $sformatf("pwm_out at clock %0d of period, width %0d", i, dq_m));
        // (2) was it the edge that ends a period?
        if (j % PERIOD == 0) begin
          int x, v, y;
          bit avail;
          avail     = (acc.size() > consumed);
          x         = avail ? acc[consumed] : 0;
          if (avail) consumed++;
          v         = x + e_m;
          y         = floor_div(v, 1 << S);
          exp_clip  = (y > YMAX);
          if (exp_clip) begin y = YMAX; e_m = (1 << S) - 1; end
          else          e_m = v - y * (1 << S);
          exp_under = !avail;
          dq_m      = ns_m;
          ns_m      = y + PERIOD / 2;
          stepped   = 1;
          n_steps++;
          if (exp_clip) n_clip++;
          if (exp_under) n_under++;
        end
      end else begin
        check(!pwm_out, "pwm_out low while disabled");
      end
      check(clip == (stepped && exp_clip), "clip flag");
      check(underrun == (stepped && exp_under), "underrun flag");
      // (3) a word taken on the edge just gone
      if (push_pending) begin
        acc.push_back(int'(s_data));
        nsent++;
        s_valid = 1'b0;
      end
      // (4) FIFO occupancy
      check(int'(fifo_level) == acc.size() - consumed, "fifo_level");
      check(s_ready == (acc.size() - consumed < DEPTH), "s_ready");

      // pause the PWM once, mid-run
      if (!pausing && n_pause == 0 && consumed == 1500 && (j % PERIOD) == 40) begin
        pausing = 1; pause_left = 700; en = 1'b0; n_pause++;
      end else if (pausing) begin
        pause_left--;
        if (pause_left == 0) begin
          pausing = 0; en = 1'b1; j = 0;
        end
      end

      // (5) the DSP offers the next word; an offered word stays until taken
      if (!s_valid && nsent < NSAMP + 8 && $urandom_range(0, 999) < wr_pm(nsent)) begin
        s_valid = 1'b1;
        s_data  = IN_W'(stim(nsent));
      end
      #1;
      if (s_valid && !s_ready) n_stall++;
      push_pending = s_valid && s_ready;
    end

    check(n_stall > 0, "DSP stalled by a full FIFO");
    check(n_under > 0, "FIFO underrun");
    check(n_clip  > 0, "noise shaper clipped");
    check(n_pause > 0, "PWM paused and restarted");
    check(n_steps == consumed + n_under, "one sample or underrun per period");
    $display("periods=%0d samples=%0d stalls=%0d underruns=%0d clips=%0d pauses=%0d",
             n_steps, consumed, n_stall, n_under, n_clip, n_pause);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
