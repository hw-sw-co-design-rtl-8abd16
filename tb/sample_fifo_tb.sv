// sample_fifo_tb: self-checking test of the DSP-side sample buffer.
//
// A writer that obeys the valid/ready rule (a word offered while wr_ready is
// low stays on the bus until taken) and a reader that pops at random are run
// against a queue kept by the testbench. Each clock checks the read data,
// rd_valid, wr_ready and level against the queue. The write and read rates
// are varied so that the FIFO is driven both full (writer stalled) and empty.
module sample_fifo_tb;

  localparam int unsigned W     = 16;
  localparam int unsigned DEPTH = 8;

  logic                   clk = 1'b0;
  logic                   rst_n;
  logic                   wr_valid;
  logic                   wr_ready;
  logic [W-1:0]           wr_data;
  logic                   rd_valid;
  logic [W-1:0]           rd_data;
  logic                   rd_pop;
  logic [$clog2(DEPTH):0] level;

  int checks = 0, failures = 0;
  int n_full = 0, n_empty = 0, n_stall = 0, n_words = 0;

  sample_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] q[$];

  initial begin
    int wr_pct, rd_pct;
    rst_n = 1'b0; wr_valid = 0; wr_data = '0; rd_pop = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    #1 check(!rd_valid && wr_ready && level == 0, "empty after reset");

    for (int phase = 0; phase < 6; phase++) begin
      // alternate a fast writer / slow reader and the reverse
      wr_pct = (phase % 2 == 0) ? 90 : 20;
      rd_pct = (phase % 2 == 0) ? 20 : 90;
      for (int n = 0; n < 3000; n++) begin
        bit push, pop;
        // inputs for this cycle (keep an unaccepted word on the bus)
        if (!wr_valid) begin
          if ($urandom_range(0, 99) < wr_pct) begin
            wr_valid = 1'b1;
            wr_data  = W'($urandom);
          end
        end
        #1;
        // compare with the model before the edge
        check(level == ($clog2(DEPTH)+1)'(q.size()), "level");
        check(wr_ready == (q.size() < DEPTH), "wr_ready");
        check(rd_valid == (q.size() > 0), "rd_valid");
        if (q.size() > 0) check(rd_data == q[0], "rd_data");
        rd_pop = rd_valid && ($urandom_range(0, 99) < rd_pct);
        push = wr_valid && wr_ready;
        pop  = rd_pop;
        if (q.size() == DEPTH) n_full++;
        if (q.size() == 0) n_empty++;
        if (wr_valid && !wr_ready) n_stall++;
        @(posedge clk);
        if (pop) void'(q.pop_front());
        if (push) begin
          q.push_back(wr_data);
          n_words++;
        end
        @(negedge clk);
        if (push) begin
          wr_valid = 1'b0;
          // sometimes offer the next word straight away
          if ($urandom_range(0, 99) < wr_pct) begin
            wr_valid = 1'b1;
            wr_data  = W'($urandom);
          end
        end
        rd_pop = 1'b0;
      end
    end
    check(n_full > 0, "FIFO ran full");
    check(n_empty > 0, "FIFO ran empty");
    check(n_stall > 0, "writer was stalled");
    $display("words=%0d full=%0d empty=%0d stalls=%0d", n_words, n_full, n_empty, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
