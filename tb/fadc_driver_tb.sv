// fadc_driver_tb: applies offset-binary codes (random, zero-scale, both full
// scales) to both channels and checks the 18-bit two's-complement samples,
// the 2-cycle latency and that both streams are valid every cycle.
module fadc_driver_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] d [2];
  stream_t y [2];
  int checks = 0, failures = 0;
  logic [15:0] hist0 [$], hist1 [$];
  always #5 clk = ~clk;

  fadc_driver dut (.clk, .rst, .adc_d(d), .y);

  function automatic int expect_of(logic [15:0] code);
    return (int'(code) - 32768) * 4;   // offset binary, scaled by 4 (2 more bits)
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d[0] = '0; d[1] = '0;
    repeat (3) @(negedge clk); rst = 1'b0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      case (n)
        10: begin d[0] = 16'h0000; d[1] = 16'hFFFF; end
        11: begin d[0] = 16'h8000; d[1] = 16'h7FFF; end
        default: begin d[0] = 16'($urandom); d[1] = 16'($urandom); end
      endcase
      hist0.push_back(d[0]); hist1.push_back(d[1]);
      if (n >= 2) begin
        checks++;
        if (!y[0].valid || !y[1].valid ||
            int'(sample_t'(y[0].data)) != expect_of(hist0[n-2]) ||
            int'(sample_t'(y[1].data)) != expect_of(hist1[n-2])) begin
          failures++;
          $display("FAIL n=%0d got %0d %0d expected %0d %0d", n, sample_t'(y[0].data),
                   sample_t'(y[1].data), expect_of(hist0[n-2]), expect_of(hist1[n-2]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
