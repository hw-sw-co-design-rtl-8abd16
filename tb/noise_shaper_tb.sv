// noise_shaper_tb: self-checking test of the error-feedback requantizer.
//
// Feeds noise_shaper (default 16-bit in, 7-bit out) with steps at random
// spacing and a mix of random samples, full-scale values that force clipping,
// slow ramps and periods with no sample (underrun). Every output is compared
// with an integer model written here from the equations
//   v = x + e,  y = floor(v / 2^S) clipped to the top code,  e = v - y*2^S
// and the flags and the pop strobe are checked too. A second check works
// from the noise-shaping property alone: over any run without clipping, the
// sum of outputs times 2^S stays within one quantization step of the sum of
// inputs, because the fed-back error telescopes.
module noise_shaper_tb;

  localparam int unsigned IN_W  = 16;
  localparam int unsigned OUT_W = 7;
  localparam int          S     = IN_W - OUT_W;
  localparam int          YMAX  = (1 << (OUT_W - 1)) - 1;

  logic                   clk = 1'b0;
  logic                   rst_n;
  logic                   step;
  logic                   in_avail;
  logic signed [IN_W-1:0] in_data;
  logic                   in_pop;
  logic [OUT_W-1:0]       duty;
  logic                   clip;
  logic                   underrun;

  int checks = 0, failures = 0;
  int n_clip = 0, n_under = 0;

  noise_shaper #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  int e_m;
  longint sum_x, sum_y;
  bit     run_clipped;

  function automatic int floor_div(int a, int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  task automatic do_step(input bit avail, input int x);
    int v, y, exp_duty;
    bit sat;
    @(negedge clk);
    step     = 1'b1;
    in_avail = avail;
    in_data  = IN_W'(x);
    #1 check(in_pop == avail, "in_pop follows step and in_avail");
    if (!avail) x = 0;
    v   = x + e_m;
    y   = floor_div(v, 1 << S);
    sat = (y > YMAX);
    if (sat) begin
      y   = YMAX;
      e_m = (1 << S) - 1;
    end else begin
      e_m = v - y * (1 << S);
    end
    exp_duty = y + (1 << (OUT_W - 1));
    @(negedge clk);
    step     = 1'b0;
    in_avail = $urandom_range(0, 1);
    in_data  = IN_W'($urandom);
    check(duty == OUT_W'(exp_duty), $sformatf("duty got %0d want %0d", duty, exp_duty));
    check(clip == sat, "clip flag");
    check(underrun == !avail, "underrun flag");
    #1 check(in_pop == 1'b0, "no pop without step");
    if (sat) n_clip++;
    if (!avail) n_under++;
    sum_x += x;
    sum_y += longint'(y) * (1 << S);
    if (sat) run_clipped = 1;
    // idle clocks between steps: outputs hold, flags drop
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk);
      check(duty == OUT_W'(exp_duty) && !clip && !underrun, "hold between steps");
    end
  endtask

  task automatic start_run();
    sum_x = 0; sum_y = 0; run_clipped = 0;
  endtask

  task automatic end_run(input string name);
    longint d;
    d = (sum_x - sum_y);
    if (!run_clipped)
      check(d > -(1 << S) && d < (1 << S), $sformatf("%s: error sum %0d out of bounds", name, d));
  endtask

  initial begin
    rst_n = 1'b0; step = 0; in_avail = 0; in_data = '0;
    e_m = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check(duty == OUT_W'(1 << (OUT_W - 1)) && !clip && !underrun, "reset value");
    rst_n = 1'b1;

    // random samples, some underruns
    start_run();
    for (int i = 0; i < 4000; i++)
      do_step($urandom_range(0, 9) != 0, int'($signed(IN_W'($urandom))));
    end_run("random");

    // small DC input: the mean output must reproduce it
    start_run();
    for (int i = 0; i < 2000; i++) do_step(1, 1234);
    end_run("dc");

    // full-scale positive: clipping
    for (int i = 0; i < 50; i++) do_step(1, (1 << (IN_W - 1)) - 1);
    // full-scale negative
    for (int i = 0; i < 50; i++) do_step(1, -(1 << (IN_W - 1)));

    // ramp
    start_run();
    for (int i = 0; i < 3000; i++) do_step(1, -30000 + 20 * i);
    end_run("ramp");

    check(n_clip > 0, "clipping exercised");
    check(n_under > 0, "underrun exercised");
    $display("steps with clip=%0d underrun=%0d", n_clip, n_under);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
