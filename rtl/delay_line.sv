// delay_line: programmable delay of one output channel's sample stream, used
// to compensate the different pipeline latencies of the output components.
//
// The converters and DDS chips have pipelines of the order of 100 ns, and
// they differ from chip to chip. The paper states that these latencies can be
// compensated in the FPGA to about +-5 ns, i.e. to within one 10 ns clock, so
// that outputs driven at the same time change at the same time. It does not
// say how. Here each output channel gets a delay of `delay` clocks
// (0 .. DEPTH), set over the configuration bus. The master chooses it per
// channel so that every channel's total latency is the same.
//
// How it works: every clock the input {valid, data} is written into a
// circular buffer of DEPTH words at the write pointer. For a delay d >= 2 the
// word written d-1 clocks earlier is read synchronously, so it leaves d clocks
// after it entered. d = 1 uses a plain register and d = 0 passes the input
// straight through (no added latency). Because the buffer is a RAM without
// reset, the output valid is held low until d words have been written since
// reset, or since the delay was last changed, so no stale word is emitted.
// The data field keeps the value of the last word read; consumers only act on
// valid.
//
// Interface: x in, y out (stream_t), delay (7 bits, 0..DEPTH).
// Timing: y(t) = x(t - delay). Changing delay drops the words in flight.
// The block is this design's choice of how to do the compensation.
module delay_line
  import hq_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [6:0]     delay,
  input  stream_t        x,
  output stream_t        y
);
  localparam int AW = $clog2(DEPTH);

  logic [SW:0]   mem [DEPTH];
  logic [AW-1:0] wp;
  logic [SW:0]   rd_q;
  stream_t       x_q;
  logic [6:0]    fill;       // words written since reset or a delay change
  logic [6:0]    delay_q;

  always_ff @(posedge clk) begin
    mem[wp] <= {x.valid, x.data};
    rd_q    <= mem[wp - AW'(delay - 7'd1)];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp      <= '0;
      x_q     <= '0;
      fill    <= '0;
      delay_q <= '0;
    end else begin
      wp      <= wp + 1'b1;
      x_q     <= x;
      delay_q <= delay;
      if (delay != delay_q)   fill <= '0;
      else if (fill != 7'h7F) fill <= fill + 7'd1;
    end
  end

  always_comb begin
    if (delay == 7'd0)      y = x;
    else if (delay == 7'd1) y = x_q;
    else begin
      y.valid = rd_q[SW] && (fill >= delay) && (delay == delay_q);
      y.data  = rd_q[SW-1:0];
    end
  end

  // the RAM holds DEPTH words, so DEPTH clocks is the longest delay
  a_delay_range: assert property (@(posedge clk) disable iff (rst) delay <= 7'(DEPTH));
endmodule
