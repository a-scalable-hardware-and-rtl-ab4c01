// config_bus_tb: self-checking test of the configuration bus.
// Sends serial write frames (SPI mode 0, sclk = clk/8) and checks the decoded
// register fields and the one-cycle start/arm pulses; then reads registers
// back over cfg_miso, including the identifier and live status words, and
// checks that a frame cut short by cs_n has no effect.
module config_bus_tb;
  import hq_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic sclk = 1'b0, cs_n = 1'b1, mosi = 1'b0, miso;
  cfg_t cfg;
  status_t status;
  int checks = 0, failures = 0;
  int start_pulses = 0, start_mask_seen = 0;

  always #5 clk = ~clk;

  config_bus dut (.clk, .rst, .cfg_sclk(sclk), .cfg_cs_n(cs_n), .cfg_mosi(mosi),
                  .cfg_miso(miso), .cfg, .status);

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic half();
    repeat (4) @(posedge clk);
  endtask

  // one frame; returns the 32 bits read on miso during the data phase
  task automatic frame(input logic rw, input logic [6:0] a, input logic [31:0] d,
                       output logic [31:0] rd, input int nbits = 40);
    logic [39:0] f;
    f = {rw, a, d};
    rd = '0;
    cs_n = 1'b0; half();
    for (int i = 39; i >= 40 - nbits; i--) begin
      mosi = f[i]; half();
      sclk = 1'b1;
      if (i <= 31) rd = {rd[30:0], miso};
      half();
      sclk = 1'b0;
    end
    half(); cs_n = 1'b1; half(); half();
  endtask

  task automatic wr(input logic [6:0] a, input logic [31:0] d);
    logic [31:0] dummy;
    frame(1'b0, a, d, dummy);
  endtask

  task automatic rd(input logic [6:0] a, output logic [31:0] d);
    frame(1'b1, a, 32'h0, d);
  endtask

  always @(negedge clk) if (cfg.pb_start != '0) begin
    start_pulses++;
    start_mask_seen = int'(cfg.pb_start);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    status = '0;
    status.counts[0] = 32'hDEAD_BEEF;
    status.counts[1] = 32'h0000_1234;
    status.drops     = 32'd77;
    status.pb_running = 7'h55;
    status.rec_done   = 4'hA;
    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (5) @(posedge clk);
    // reset values
    for (int o = 0; o < N_OUT; o++) check("reset mux", cfg.out[o].mux, SRC_NONE);
    check("reset mode", cfg.out[0].mode, TF_OFF);

    // per-output registers
    wr(A_OUT_BASE + 7'd0, 32'd2);                 // out0 mux = PADC1
    wr(A_OUT_BASE + 7'd1, 32'd2);                 // out0 mode = PID
    wr(A_OUT_BASE + 7'd2, 32'h0001_2345);         // out0 kp
    wr(A_OUT_BASE + 8*5 + 7'd0, 32'd5);           // out5 mux = master
    wr(A_OUT_BASE + 8*5 + 7'd3, 32'h0003_FFFF);   // out5 ki = -1
    wr(A_OUT_BASE + 8*3 + 7'd5, 32'h0002_0000);   // out3 setpoint = min
    wr(A_OUT_BASE + 8*3 + 7'd6, 32'd12);          // out3 shift
    wr(A_OUT_BASE + 8*4 + 7'd7, 32'd37);          // out4 delay
    check("out0 mux", cfg.out[0].mux, SRC_IN2);
    check("out0 mode", cfg.out[0].mode, TF_PID);
    check("out0 kp", $unsigned(cfg.out[0].kp), 18'h1_2345);
    check("out5 mux", cfg.out[5].mux, SRC_MASTER);
    check("out5 ki", $unsigned(cfg.out[5].ki), 18'h3_FFFF);
    check("out3 setpoint", $unsigned(cfg.out[3].setpoint), 18'h2_0000);
    check("out3 shift", cfg.out[3].shift, 6'd12);
    check("out4 delay", cfg.out[4].delay, 7'd37);
    check("out1 untouched", cfg.out[1].mux, SRC_NONE);
    // playback and record
    wr(A_PB_BASE + 4*6 + 7'd0, 32'd300);
    wr(A_PB_BASE + 4*6 + 7'd1, 32'd999);
    wr(A_PB_BASE + 4*2 + 7'd2, 32'd7);
    wr(A_REC_BASE + 7'd3, 32'd4096);
    check("pb6 length", cfg.pb[6].length, 16'd300);
    check("pb6 divider", cfg.pb[6].divider, 16'd999);
    check("pb2 loops", cfg.pb[2].loops, 16'd7);
    check("rec3 len", cfg.rec_len[3], 16'd4096);
    // globals
    wr(A_DOUT, 32'h0000_012A);
    check("dout static", cfg.dout_static, 6'h2A);
    check("dout from pb", cfg.dout_from_pb, 1'b1);
    wr(A_GATE, 32'h0001_0000);
    check("gate", cfg.gate_len, 32'h0001_0000);
    wr(A_PHOT_CTRL, 32'hE);
    check("count_en", cfg.count_en, 2'b10);
    check("tag_en", cfg.tag_en, 2'b11);
    wr(A_DDS, 32'b10_01_11);
    check("dds en", cfg.dds_en, 2'b11);
    check("dds dest0", cfg.dds_dest[0], 2'b01);
    check("dds dest1", cfg.dds_dest[1], 2'b10);
    // pulses
    wr(A_PB_START, 32'h45);
    check("start pulse count", start_pulses, 1);
    check("start mask", start_mask_seen, 32'h45);
    check("start not held", cfg.pb_start, 7'h0);
    // read-back
    rd(A_ID, r);                      check("read id", r, ID_WORD);
    rd(A_OUT_BASE + 7'd2, r);         check("read kp", r, 32'h0001_2345);
    rd(A_OUT_BASE + 8*5 + 7'd3, r);   check("read ki sign", r, 32'hFFFF_FFFF);
    rd(A_OUT_BASE + 8*4 + 7'd7, r);   check("read delay", r, 32'd37);
    rd(A_PB_BASE + 4*6 + 7'd1, r);    check("read divider", r, 32'd999);
    rd(A_COUNT0, r);                  check("read count0", r, 32'hDEAD_BEEF);
    rd(A_COUNT1, r);                  check("read count1", r, 32'h1234);
    rd(A_DROPS, r);                   check("read drops", r, 32'd77);
    rd(A_PB_STAT, r);                 check("read stat", r, 32'h0000_0A55);
    rd(A_DOUT, r);                    check("read dout", r, 32'h12A);
    // a read does not write
    check("read no write", $unsigned(cfg.out[0].kp), 18'h1_2345);
    // truncated frame is discarded
    begin
      logic [31:0] dummy;
      frame(1'b0, A_GATE, 32'h5, dummy, 30);
    end
    check("truncated frame ignored", cfg.gate_len, 32'h0001_0000);
    wr(A_GATE, 32'h5);
    check("frame after truncated", cfg.gate_len, 32'h5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
