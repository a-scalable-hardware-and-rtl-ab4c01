// delay_line_tb: self-checking test of the per-channel latency-compensation
// delay.
//
// A random stream (about 70 % of clocks valid, random data) is fed through
// the delay while the delay is stepped through 0, 1, 2, 3, the largest value
// (64) and random values. Every input is kept in a history array indexed by
// clock cycle. For a delay d set in cycle c the expected output in cycle k is
// history[k-d]. For d >= 2 the valid bit must stay low from cycle c to c+d,
// and the output is compared exactly from cycle c+d+1 on. For d = 0 and
// d = 1 it is compared exactly from cycle c on. This checks the latency to
// the clock, the data, and that no stale word from the uninitialised RAM
// ever comes out marked valid.
// Stimulus changes at the falling edge and the output is sampled just after,
// so the comparison sees the output of the cycle that input belongs to.
module delay_line_tb;
  import hq_pkg::*;

  localparam int DEPTH = 64;
  localparam int NCYC  = 6000;

  logic       clk = 1'b0;
  logic       rst = 1'b1;
  logic [6:0] delay = '0;
  stream_t    x = '0;
  stream_t    y;

  int checks = 0, failures = 0;
  stream_t hist [NCYC];

  delay_line #(.DEPTH(DEPTH)) dut (.clk, .rst, .delay, .x, .y);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int k, c, d;
    int schedule [10];
    schedule = '{0, 1, 2, 3, 64, 5, 1, 0, 33, 64};
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    c = 0; d = 0;
    for (k = 0; k < NCYC; k++) begin
      @(negedge clk);
      // change the delay every 500 cycles: the schedule first, then random
      if (k % 500 == 0) begin
        if (k / 500 < 10) d = schedule[k / 500];
        else              d = 2 + int'($urandom_range(62));
        delay = 7'(d);
        c = k;
      end
      x.valid = ($urandom_range(9) < 7);
      x.data  = SW'($urandom);
      hist[k] = x;
      #1;
      if (d >= 2 && k <= c + d) begin
        checks++;
        if (y.valid) begin
          failures++;
          $display("cycle %0d delay %0d: valid output %0d cycles after the change", k, d, k - c);
        end
      end else if (k >= d) begin
        checks++;
        if (y.valid !== hist[k-d].valid || (y.valid && y.data !== hist[k-d].data)) begin
          failures++;
          if (failures < 10)
            $display("cycle %0d delay %0d: got %b/%h expected %b/%h", k, d,
                     y.valid, y.data, hist[k-d].valid, hist[k-d].data);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
