// dds_driver_tb: checks the DDS parallel-port word for the amplitude
// destination (negative clamped to 0, 16 bits below the sign), for the other
// destinations (offset by half scale), hold between samples, and that
// disabling the channel forces amplitude destination with word 0.
module dds_driver_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic en;
  logic [1:0] dest, f;
  stream_t x;
  logic [15:0] pdata;
  logic txen;
  int checks = 0, failures = 0;
  int exp_w;
  always #5 clk = ~clk;

  dds_driver dut (.clk, .rst, .enable(en), .dest, .x, .pdata, .f, .txenable(txen));

  task automatic chk(string what, int got, int e);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s got %0d expected %0d", what, got, e); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    x = '0; en = 1'b0; dest = 2'b00; exp_w = 0;
    repeat (3) @(negedge clk); rst = 1'b0;
    en = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      dest = 2'(n / 75);
      v = $urandom_range(0, 262143) - 131072;
      x.valid = (n % 5 != 2);
      x.data = SW'(v);
      if (x.valid) begin
        if (dest == 2'b00) exp_w = (v < 0) ? 0 : (v & 32'h1FFFF) >> 1;
        else               exp_w = ((v + 131072) >> 2) & 16'hFFFF;
      end
      @(negedge clk);
      x.valid = 1'b0;
      chk("word", int'(pdata), exp_w);
      chk("dest", int'(f), int'(dest));
      chk("txenable", int'(txen), 1);
    end
    // switch off: zero amplitude
    x.valid = 1'b1; x.data = SW'(50000); dest = 2'b10;
    en = 1'b0;
    @(negedge clk); @(negedge clk);
    chk("off word", int'(pdata), 0);
    chk("off dest", int'(f), 0);
    chk("off txenable", int'(txen), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
