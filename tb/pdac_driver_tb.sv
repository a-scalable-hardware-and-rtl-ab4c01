// pdac_driver_tb: runs the precise-DAC driver against a model of the
// converter's SPI interface. Checks the start-up control frame (clamp
// released, two's complement), that every sample sent at ~100 kSa/s reaches
// the output, that a burst of samples arriving during a frame ends with the
// latest value, and that no frame has the wrong length.
module pdac_driver_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  stream_t x;
  logic sync_n, sclk, sdin, ldac_n, busy;
  logic [17:0] out_code;
  logic [23:0] ctrl;
  logic clamped;
  int frames, bad_frames, updates;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pdac_driver dut (.clk, .rst, .x, .sync_n, .sclk, .sdin, .ldac_n, .busy);
  ad5780_model dac (.sync_n, .sclk, .sdin, .ldac_n, .out_code, .ctrl, .clamped,
                    .frames, .bad_frames, .updates);

  task automatic chk(string what, int got, int e);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s got %0h expected %0h", what, got, e); end
  endtask

  task automatic send(logic [17:0] v);
    @(negedge clk); x.valid = 1'b1; x.data = v;
    @(negedge clk); x.valid = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [17:0] v;
    x = '0;
    repeat (3) @(negedge clk); rst = 1'b0;
    repeat (400) @(negedge clk);
    chk("ctrl frame", int'(ctrl), 24'h200002);
    chk("clamp released", int'(clamped), 0);
    // 100 kSa/s: one sample per 1000 cycles
    for (int n = 0; n < 20; n++) begin
      v = 18'($urandom);
      send(v);
      repeat (998) @(negedge clk);
      chk("output code", int'(out_code), int'(v));
    end
    chk("updates", updates, 20);
    // burst: latest wins
    for (int n = 0; n < 10; n++) begin
      v = 18'($urandom);
      send(v);
    end
    repeat (600) @(negedge clk);
    chk("burst latest", int'(out_code), int'(v));
    chk("idle after burst", int'(busy), 0);
    chk("bad frames", bad_frames, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
