// pwm_gen_tb: self-checking test of the PWM wave generator.
//
// Drives random pulse widths (0 and full scale included) into pwm_gen at its
// default 7-bit size and checks, for every period:
//   * load comes exactly every 2^CNT_W clocks (the PWM rate);
//   * the number of high clocks on pwm_out equals the width given on the
//     load before, and the pulse is one contiguous run starting on the first
//     clock of the period;
//   * while en is low the output stays low and no load is issued.
// Expected widths come from the values the testbench itself offered.
module pwm_gen_tb;

  localparam int unsigned CNT_W  = 7;
  localparam int unsigned PERIOD = 1 << CNT_W;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             en;
  logic [CNT_W-1:0] duty_in;
  logic             load;
  logic             pwm_out;

  int checks = 0, failures = 0;

  pwm_gen #(.CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A load seen at negedge L makes the register take duty_in on the next
  // edge; because pwm_out is registered, that width shows on the negedges
  // L+2 .. L+PERIOD (since_load counts negedges after the last load).
  int unsigned w_prev;
  int unsigned highs, since_load, periods, first_high, last_high;
  bit          seen_load;

  initial begin
    rst_n   = 1'b0;
    en      = 1'b0;
    duty_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // en low: nothing moves
    repeat (300) begin
      @(negedge clk);
      check(!pwm_out && !load, "idle while en low");
    end

    en = 1'b1;
    highs = 0; since_load = 0; periods = 0; seen_load = 0;
    first_high = 0; last_high = 0; w_prev = 0;
    for (int n = 0; n < 400 * PERIOD; n++) begin
      @(negedge clk);
      since_load++;
      // offer a new width a few clocks into each period
      if (since_load == 3) begin
        case (periods % 7)
          0: duty_in = '0;
          1: duty_in = '1;
          default: duty_in = CNT_W'($urandom);
        endcase
      end
      if (seen_load && since_load == 1)
        check(!pwm_out, "low on the clock after a load");
      if (since_load >= 2 && since_load <= PERIOD && pwm_out) begin
        if (highs == 0) first_high = since_load;
        last_high = since_load;
        highs++;
      end
      if (load) begin
        if (seen_load) begin
          check(since_load == PERIOD, "load period");
          check(highs == w_prev, $sformatf("width got %0d want %0d", highs, w_prev));
          if (highs != 0)
            check(first_high == 2 && last_high == highs + 1,
                  "pulse contiguous from period start");
        end
        w_prev     = duty_in;
        seen_load  = 1;
        periods++;
        highs      = 0;
        since_load = 0;
      end
    end
    check(periods >= 390, "enough periods");

    // drop en: output must go and stay low
    en = 1'b0;
    @(negedge clk);
    repeat (200) begin
      @(negedge clk);
      check(!pwm_out && !load, "idle after en low");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
