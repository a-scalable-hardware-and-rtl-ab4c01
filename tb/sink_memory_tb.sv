// sink_memory_tb: exercises the sink memory at its full default depth.
// Loads sequences through the master write port, then checks: playback
// values, the rate set by the divider, the loop count and the stop of a
// finite sequence; an endless loop on another channel running at the same
// time and stopped by command; the digital-output sequence; recording of an
// input stream with gaps, done flag and read-back with its 2-cycle latency.
module sink_memory_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  stream_t adc [N_IN];
  logic [N_IN-1:0] rec_arm = '0, rec_done;
  logic [N_IN-1:0][15:0] rec_len = '0;
  logic [N_PB-1:0] pb_start = '0, pb_stop = '0, pb_running;
  pb_cfg_t [N_PB-1:0] pb_cfg;
  stream_t pb [N_OUT];
  logic dig_valid;
  logic [N_DOUT-1:0] dig_out;
  logic ptr_set = 0, wr_en = 0, rd_en = 0, rd_valid;
  logic [3:0] ptr_ch = 0, wr_ch = 0, rd_ch = 0;
  logic [15:0] ptr_addr = 0, rd_addr = 0;
  logic [SW-1:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  sink_memory dut (.clk, .rst, .adc_in(adc), .rec_arm, .rec_len, .rec_done,
    .pb_start, .pb_stop, .pb_cfg, .pb_running, .pb_out(pb), .dig_valid, .dig_out,
    .ptr_set, .ptr_ch, .ptr_addr, .wr_en, .wr_ch, .wr_data, .rd_en, .rd_ch, .rd_addr,
    .rd_valid, .rd_data);

  task automatic chk(string what, longint got, longint e);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s got %0d expected %0d", what, got, e); end
  endtask

  task automatic load(int ch, int base, int n, int seed);
    @(negedge clk); ptr_set = 1; ptr_ch = 4'(ch); ptr_addr = 16'(base);
    @(negedge clk); ptr_set = 0;
    for (int i = 0; i < n; i++) begin
      wr_en = 1; wr_ch = 4'(ch); wr_data = SW'(seed * 1000 + i * 7);
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  // playback monitors
  int n4 = 0, last4 = -1, n2 = 0, ndig = 0;
  int start4;
  always @(negedge clk) begin
    if (pb[4].valid) begin
      if (n4 == 0) chk("first word latency", cyc - start4, 2);
      chk("pb4 value", pb[4].data, 4000 + (n4 % 10) * 7);
      if (last4 >= 0) chk("pb4 period", cyc - last4, 3);
      last4 = cyc; n4++;
    end
    if (pb[2].valid) begin
      chk("pb2 value", pb[2].data, 2000 + (n2 % 5) * 7);
      n2++;
    end
    if (dig_valid) begin
      chk("dig value", dig_out, (6000 + (ndig % 4) * 7) % 64);
      ndig++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_IN; i++) adc[i] = '0;
    pb_cfg = '0;
    repeat (3) @(negedge clk); rst = 1'b0;
    load(4, 0, 10, 4);
    load(2, 0, 5, 2);
    load(N_OUT, 0, 4, 6);
    pb_cfg[4] = '{length: 16'd10, divider: 16'd2, loops: 16'd3};
    pb_cfg[2] = '{length: 16'd5,  divider: 16'd0, loops: 16'd0};
    pb_cfg[N_OUT] = '{length: 16'd4, divider: 16'd1, loops: 16'd2};
    @(negedge clk);
    pb_start = 7'b1010100; start4 = cyc + 1;   // channels 2, 4 and digital together
    @(negedge clk); pb_start = '0;
    repeat (150) @(negedge clk);
    chk("pb4 words", n4, 30);
    chk("pb4 stopped", pb_running[4], 0);
    chk("pb2 still running", pb_running[2], 1);
    chk("dig words", ndig, 8);
    chk("pb4 holds last", pb[4].data, 4000 + 9 * 7);
    pb_stop = 7'b0000100;
    @(negedge clk); pb_stop = '0;
    @(negedge clk);
    chk("pb2 stopped", pb_running[2], 0);
    begin
      int n2s;
      n2s = n2;
      repeat (20) @(negedge clk);
      chk("pb2 silent after stop", n2, n2s);
      chk("pb2 words", longint'(n2 > 140), 1);
    end
    // recording
    rec_len[1] = 16'd8;
    rec_arm = 4'b0010;
    @(negedge clk); rec_arm = '0;
    for (int i = 0; i < 20; i++) begin
      adc[1] = '{valid: 1'(i % 2), data: SW'(100 + i)};
      @(negedge clk);
    end
    adc[1] = '0;
    chk("rec done", rec_done[1], 1);
    chk("rec other not done", rec_done[0], 0);
    for (int i = 0; i < 8; i++) begin
      rd_en = 1; rd_ch = 4'd1; rd_addr = 16'(i);
      @(negedge clk); rd_en = 0;
      chk("rd not yet", rd_valid, 0);
      @(negedge clk);
      chk("rd valid", rd_valid, 1);
      chk("rd data", rd_data, 100 + 2 * i + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
