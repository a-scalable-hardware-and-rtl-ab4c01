// fdac_driver_tb: sends random and edge-case samples, some without valid,
// and checks the 16-bit DAC word: round half up, saturation at +full scale,
// one cycle latency and hold of the last value between valid samples.
module fdac_driver_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  stream_t x;
  logic [15:0] q;
  int checks = 0, failures = 0;
  int held;
  always #5 clk = ~clk;

  fdac_driver dut (.clk, .rst, .x, .dac_d(q));

  function automatic int ref_of(int v);
    int r;
    r = (v + 2) >>> 2;
    if (r > 32767) r = 32767;
    return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    x = '0; held = 0;
    repeat (3) @(negedge clk); rst = 1'b0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      case (n % 50)
        0: v = 131071;     // rounds past +full scale: saturate
        1: v = -131072;
        2: v = 6;          // 1.5 LSB -> 2
        3: v = -6;         // -1.5 LSB -> -1 (half up)
        4: v = 5;
        default: v = $urandom_range(0, 262143) - 131072;
      endcase
      x.valid = (n % 7 != 3);
      x.data  = SW'(v);
      if (x.valid) held = ref_of(v);
      @(negedge clk);
      x.valid = 1'b0;
      checks++;
      if (int'($signed(q)) != held) begin
        failures++; $display("FAIL n=%0d in %0d got %0d expected %0d", n, v, $signed(q), held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
