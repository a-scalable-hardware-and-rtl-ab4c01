// transfer_function_tb: checks the three modes of the transfer function
// against a reference model written with 64-bit integers: direct copy with a
// 3-cycle latency, PID on random samples with random gains (including
// integrator saturation and output clipping), and no output when off.
module transfer_function_tb;
  import hq_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  tf_mode_e mode;
  sample_t kp, ki, kd, sp;
  logic [5:0] shift;
  stream_t x, y;
  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  transfer_function dut (.clk, .rst, .mode, .kp, .ki, .kd, .setpoint(sp), .shift, .x, .y);

  // reference
  longint integ, eprev;
  longint exp_q[$];
  int     exp_t[$];
  localparam longint AMAX = (64'sd1 <<< 47) - 1;
  localparam longint AMIN = -(64'sd1 <<< 47);

  function automatic longint sat(longint v, longint lo, longint hi);
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction

  task automatic send(int v);
    longint e, out;
    @(negedge clk);
    x.valid = 1'b1; x.data = sample_t'(v);
    if (mode == TF_DIRECT) out = v;
    else if (mode == TF_PID) begin
      e = longint'(sp) - v;
      integ = sat(integ + longint'(ki) * e, AMIN, AMAX);
      out = sat(longint'(kp) * e + integ, AMIN, AMAX);
      out = sat(out + longint'(kd) * (e - eprev), AMIN, AMAX);
      eprev = e;
      out = out >>> shift;
      out = sat(out, -131072, 131071);
    end
    if (mode != TF_OFF) begin
      exp_q.push_back(out);
      exp_t.push_back(cycle + 3);  // sampled at the next edge, out 3 edges later
    end
    @(posedge clk); #1;
    x.valid = 1'b0;
  endtask

  int nout = 0;
  always @(negedge clk) if (!rst && y.valid) begin
    longint e; int t;
    nout++;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected output %0d at %0d", y.data, cycle);
    end else begin
      e = exp_q.pop_front(); t = exp_t.pop_front();
      if (longint'(sample_t'(y.data)) != e || cycle != t) begin
        failures++;
        $display("FAIL out %0d cycle %0d, expected %0d cycle %0d", sample_t'(y.data), cycle, e, t);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = TF_DIRECT; kp = 0; ki = 0; kd = 0; sp = 0; shift = 0; x = '0;
    integ = 0; eprev = 0;
    repeat (3) @(posedge clk); #1 rst = 1'b0;
    // direct mode, back to back and sparse
    for (int i = 0; i < 50; i++) send($urandom_range(0, 262143) - 131072);
    for (int i = 0; i < 20; i++) begin send(i * 1000 - 7); repeat (i % 4) @(posedge clk); end
    repeat (6) @(posedge clk);
    // PID: a few gain sets
    for (int g = 0; g < 6; g++) begin
      mode = TF_OFF; @(posedge clk); #1;          // clears integrator
      integ = 0; eprev = 0;
      kp = sample_t'($urandom_range(0, 4000) - 2000);
      ki = sample_t'($urandom_range(0, 400) - 200);
      kd = sample_t'($urandom_range(0, 4000) - 2000);
      sp = sample_t'($urandom_range(0, 20000) - 10000);
      shift = 6'($urandom_range(0, 12));
      if (g == 5) begin ki = 18'sd131071; shift = 6'd0; end  // drive saturation
      mode = TF_PID; @(posedge clk); #1;
      for (int i = 0; i < 200; i++) begin
        send($urandom_range(0, 262143) - 131072);
        if (i % 7 == 0) @(posedge clk);
      end
      repeat (6) @(posedge clk);
    end
    // off: nothing comes out
    mode = TF_OFF;
    for (int i = 0; i < 10; i++) send(i);
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    checks++;
    if (nout != 70 + 6 * 200) begin failures++; $display("FAIL output count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
