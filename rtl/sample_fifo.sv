// sample_fifo: communication buffer between the DSP bus and the noise shaper.
//
// In the chosen hardware/software split the DSP computes the upsampled,
// linearized samples in software and hands them to the hardware, where the
// noise shaper consumes one sample per PWM period. This FIFO decouples the
// two: the DSP writes in bursts whenever it has samples, the hardware reads
// at its fixed rate. The paper names shared communication buffers and a
// handshake protocol inserted between the processing elements but gives no
// details; the valid/ready handshake, the depth and the first-word-fall-
// through read side are this design's choices.
//
// Interface
//   wr_valid/wr_ready/wr_data  write side. A word is taken on a clock edge
//                              where wr_valid and wr_ready are both high.
//                              wr_ready is low while the FIFO is full; the
//                              writer must then hold wr_valid and wr_data.
//   rd_valid/rd_data/rd_pop    read side, first word fall-through: rd_data is
//                              the oldest word whenever rd_valid is high;
//                              rd_pop for one cycle removes it.
//   level                      number of words held.
// Timing: a written word is visible on the read side the cycle after it is
// written. Reset (rst_n low, synchronous) empties the FIFO.
module sample_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 8     // must be a power of two
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_valid,
  output logic                   wr_ready,
  input  logic [W-1:0]           wr_data,
  output logic                   rd_valid,
  output logic [W-1:0]           rd_data,
  input  logic                   rd_pop,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;       // one extra bit tells full from empty
  logic          push, pop;

  assign level    = wptr - rptr;
  assign wr_ready = (level != (AW+1)'(DEPTH));
  assign rd_valid = (wptr != rptr);
  assign rd_data  = mem[rptr[AW-1:0]];
  assign push     = wr_valid && wr_ready;
  assign pop      = rd_pop && rd_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= wr_data;
  end

  // Handshake rules. The reader may not pop an empty FIFO; a writer that is
  // held off by wr_ready low keeps its word on the bus until it is taken.
  a_no_pop_empty : assert property (@(posedge clk) disable iff (!rst_n)
                                    rd_pop |-> rd_valid);
  a_hold_valid   : assert property (@(posedge clk) disable iff (!rst_n)
                                    (wr_valid && !wr_ready) |=> wr_valid);
  a_hold_data    : assert property (@(posedge clk) disable iff (!rst_n)
                                    (wr_valid && !wr_ready) |=> $stable(wr_data));

endmodule
