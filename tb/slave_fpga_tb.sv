// slave_fpga_tb: end-to-end test of the slave FPGA at its default sizes.
// The converters are modelled at their pins (fast ADC words, serial models of
// the precise ADC and DAC), the master is modelled by the configuration-bus
// serial port and the link words. Every mechanism of the design is made to
// happen and counted; a mechanism that never happens is a failure:
//   direct FADC -> FDAC stream (values and 7-cycle latency)
//   latency compensation: the same stream with FDAC1 delayed by 12 clocks
//   PID regulation of a simulated plant (FDAC2 -> FADC2) to a set point
//   sequence loaded over the link and played from the sink memory to a
//     precise DAC at 100 kSa/s, looping
//   a real-time value sent by the master to a DDS while that loop runs
//   a second, endless playback loop on DDS1, then the DDS switched off
//   precise-ADC samples recorded in the sink memory and read back over the link
//   input streams to the master, with overload drops counted
//   photon counting on a digital input (gate count and time tags)
//   digital outputs from a stored sequence and from the static register
module slave_fpga_tb;
  import hq_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] fadc_d [2];
  logic [1:0] padc_cnv, padc_sck, padc_sdo;
  logic [15:0] dds_pdata [2];
  logic [1:0] dds_f [2];
  logic [1:0] dds_txenable;
  logic [1:0] pdac_sync_n, pdac_sclk, pdac_sdin, pdac_ldac_n;
  logic [15:0] fdac_d [2];
  logic [1:0] din = 2'b00;
  logic [5:0] dout;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic rx_valid = 0;
  logic [31:0] rx_word = 0;
  logic tx_valid;
  logic [31:0] tx_word;

  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  slave_fpga dut (
    .clk, .rst, .fadc_d, .padc_cnv, .padc_sck, .padc_sdo,
    .dds_pdata, .dds_f, .dds_txenable,
    .pdac_sync_n, .pdac_sclk, .pdac_sdin, .pdac_ldac_n, .fdac_d,
    .din, .dout, .cfg_sclk(sclk), .cfg_cs_n(cs_n), .cfg_mosi(mosi), .cfg_miso(miso),
    .link_rx_valid(rx_valid), .link_rx_word(rx_word),
    .link_tx_valid(tx_valid), .link_tx_word(tx_word));

  // ------------------------------------------------------------- models
  logic [17:0] padc_val [2];
  int pconv [2], perr [2];
  for (genvar c = 0; c < 2; c++) begin : g_padc
    ad7982_model adc (.cnv(padc_cnv[c]), .sck(padc_sck[c]), .sdo(padc_sdo[c]),
                      .value(padc_val[c]), .conversions(pconv[c]), .conv_errors(perr[c]));
  end
  logic [17:0] pdac_code [2];
  logic [23:0] pdac_ctrl [2];
  logic [1:0]  pdac_clamped;
  int pframes [2], pbad [2], pupd [2];
  for (genvar c = 0; c < 2; c++) begin : g_pdac
    ad5780_model dac (.sync_n(pdac_sync_n[c]), .sclk(pdac_sclk[c]), .sdin(pdac_sdin[c]),
                      .ldac_n(pdac_ldac_n[c]), .out_code(pdac_code[c]), .ctrl(pdac_ctrl[c]),
                      .clamped(pdac_clamped[c]), .frames(pframes[c]), .bad_frames(pbad[c]),
                      .updates(pupd[c]));
  end

  // precise ADC 1 sees a slow ramp; record what it sampled
  int padc_samples [$];
  always @(posedge clk) begin
    padc_val[0] <= 18'(cyc * 3);
    padc_val[1] <= 18'(-cyc);
  end
  always @(posedge padc_cnv[0]) padc_samples.push_back(int'(padc_val[0]));

  // fast ADC 1: random input; fast ADC 2: the plant, half of FDAC 2 one cycle late
  logic pid_plant = 0;
  always @(posedge clk) begin
    fadc_d[0] <= 16'($urandom);
    fadc_d[1] <= pid_plant ? 16'(($signed(fdac_d[1]) >>> 1) + 32768) : 16'h8000;
  end

  // ------------------------------------------------- mechanism counters
  int n_comp = 0, n_direct = 0, n_pid = 0, n_playback = 0, n_realtime = 0, n_parallel = 0;
  int n_dds_off = 0, n_record = 0, n_stream = 0, n_drop = 0, n_photon = 0, n_tag = 0;
  int n_dig_seq = 0, n_dig_static = 0;

  task automatic chk(string what, longint got, longint e);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s got %0d expected %0d", what, got, e); end
  endtask

  // ----------------------------------------------------- master models
  task automatic half();
    repeat (4) @(posedge clk);
  endtask
  task automatic cfg_frame(input logic rw, input logic [6:0] a, input logic [31:0] d,
                           output logic [31:0] rd);
    logic [39:0] f;
    f = {rw, a, d}; rd = '0;
    cs_n = 0; half();
    for (int i = 39; i >= 0; i--) begin
      mosi = f[i]; half(); sclk = 1;
      if (i <= 31) rd = {rd[30:0], miso};
      half(); sclk = 0;
    end
    half(); cs_n = 1; half();
  endtask
  task automatic cfg_wr(input logic [6:0] a, input logic [31:0] d);
    logic [31:0] r;
    cfg_frame(1'b0, a, d, r);
  endtask
  task automatic cfg_rd(input logic [6:0] a, output logic [31:0] d);
    cfg_frame(1'b1, a, 32'h0, d);
  endtask
  task automatic link_send(link_type_e t, int ch, int payload);
    @(negedge clk); rx_valid = 1; rx_word = link_word(t, 4'(ch), 24'(payload));
    @(negedge clk); rx_valid = 0;
  endtask
  task automatic out_cfg(int o, src_e src, tf_mode_e mode);
    cfg_wr(A_OUT_BASE + 7'(8 * o), 32'(src));
    cfg_wr(A_OUT_BASE + 7'(8 * o + 1), 32'(mode));
  endtask

  // link receive side of the master
  int rd_words [$];
  int tags [$];
  int stream_words [N_IN];
  always @(negedge clk) if (tx_valid) begin
    case (link_type_e'(tx_word[31:28]))
      LK_MEM_RD: rd_words.push_back(int'(tx_word[17:0]));
      LK_TAG:    if (!tx_word[27]) tags.push_back(int'(tx_word[26:0]));
      LK_STREAM: stream_words[tx_word[25:24]]++;
      default: begin failures++; $display("FAIL unexpected link word %h", tx_word); end
    endcase
  end

  // ------------------------------------------------------- direct path
  logic [15:0] fadc_hist [32];
  always @(posedge clk) begin
    for (int i = 31; i > 0; i--) fadc_hist[i] <= fadc_hist[i-1];
    fadc_hist[0] <= fadc_d[0];
  end
  logic direct_on = 0;
  always @(negedge clk) if (direct_on) begin
    // fdac word = fadc code in two's complement, 7 cycles later
    chk("direct FADC1->FDAC1 (7 cycles)", fdac_d[0], fadc_hist[6] ^ 16'h8000);
    n_direct++;
  end
  logic comp_on = 0;
  always @(negedge clk) if (comp_on) begin
    // with 12 clocks of compensation delay the same path takes 19 cycles
    chk("delayed FADC1->FDAC1 (7+12 cycles)", fdac_d[0], fadc_hist[18] ^ 16'h8000);
    n_comp++;
  end

  // digital output monitor: a walking one, one step per 10 cycles
  logic dig_mon = 0;
  logic [5:0] dig_prev = '0;
  always @(negedge clk) begin
    if (dig_mon && dout != dig_prev) begin
      chk("digital sequence step", dout, (dig_prev == 0) ? 1 : 6'(dig_prev << 1));
      n_dig_seq++;
    end
    dig_prev = dout;
  end

  // ------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    for (int i = 0; i < 32; i++) fadc_hist[i] = '0;
    for (int i = 0; i < N_IN; i++) stream_words[i] = 0;
    fadc_d[0] = 16'h8000; fadc_d[1] = 16'h8000;
    repeat (5) @(negedge clk); rst = 0;
    repeat (400) @(negedge clk);
    chk("PDAC1 released by its control frame", pdac_clamped[0], 0);
    cfg_rd(A_ID, r);
    chk("identifier", r, ID_WORD);

    // 1. direct stream FADC1 -> FDAC1
    out_cfg(OUT_FDAC1, SRC_IN0, TF_DIRECT);
    repeat (10) @(negedge clk);
    direct_on = 1;
    repeat (200) @(negedge clk);
    direct_on = 0;
    // 1b. output latency compensation on FDAC1
    cfg_wr(A_OUT_BASE + 8 * OUT_FDAC1 + 7, 32'd12);
    repeat (30) @(negedge clk);
    comp_on = 1;
    repeat (100) @(negedge clk);
    comp_on = 0;
    cfg_wr(A_OUT_BASE + 8 * OUT_FDAC1 + 7, 32'd0);

    // 2. PID: FADC2 -> PID -> FDAC2 -> plant -> FADC2
    cfg_wr(A_OUT_BASE + 8 * OUT_FDAC2 + 2, 32'd2);       // kp
    cfg_wr(A_OUT_BASE + 8 * OUT_FDAC2 + 3, 32'd1);       // ki
    cfg_wr(A_OUT_BASE + 8 * OUT_FDAC2 + 5, 32'd20000);   // set point
    cfg_wr(A_OUT_BASE + 8 * OUT_FDAC2 + 6, 32'd6);       // shift
    pid_plant = 1;
    out_cfg(OUT_FDAC2, SRC_IN1, TF_PID);
    repeat (6000) @(negedge clk);
    begin
      int meas;
      meas = (int'(fadc_d[1]) - 32768) * 4;
      checks++;
      if (meas < 19990 || meas > 20010) begin
        failures++; $display("FAIL PID did not settle: %0d", meas);
      end else n_pid++;
    end

    // 3. sequence through the link into playback buffer 2 (PDAC1), 100 kSa/s, 2 loops
    link_send(LK_MEM_PTR, OUT_PDAC1, 0);
    for (int i = 0; i < 8; i++) link_send(LK_MEM_WR, OUT_PDAC1, 1000 * i + 5);
    cfg_wr(A_PB_BASE + 4 * OUT_PDAC1 + 0, 32'd8);
    cfg_wr(A_PB_BASE + 4 * OUT_PDAC1 + 1, 32'd999);
    cfg_wr(A_PB_BASE + 4 * OUT_PDAC1 + 2, 32'd2);
    out_cfg(OUT_PDAC1, SRC_MEM, TF_DIRECT);
    // DDS1: endless loop of 4 amplitudes at full rate
    link_send(LK_MEM_PTR, OUT_DDS1, 0);
    for (int i = 0; i < 4; i++) link_send(LK_MEM_WR, OUT_DDS1, 2000 * (i + 1));
    cfg_wr(A_PB_BASE + 4 * OUT_DDS1 + 0, 32'd4);
    out_cfg(OUT_DDS1, SRC_MEM, TF_DIRECT);
    out_cfg(OUT_DDS2, SRC_MASTER, TF_DIRECT);
    cfg_wr(A_DDS, 32'b00_00_11);                        // both on, amplitude
    cfg_wr(A_PB_START, 32'h05);                         // start buffers 0 and 2 together
    begin
      int seen [$];
      int last_upd, t0;
      last_upd = pupd[0];
      t0 = cyc;
      // while the PDAC loop runs, the master changes DDS2 in real time
      repeat (3000) @(negedge clk);
      cfg_rd(A_PB_STAT, r);
      chk("both loops running", r[OUT_PDAC1] & r[OUT_DDS1], 1);
      if (r[OUT_PDAC1] && r[OUT_DDS1]) n_parallel++;
      link_send(LK_STREAM, OUT_DDS2, 30000);
      repeat (6) @(negedge clk);
      chk("DDS2 word from master", dds_pdata[1], 15000);
      if (dds_pdata[1] == 15000 && dut.status.pb_running[OUT_PDAC1]) n_realtime++;
      // DDS1 cycles through the 4 stored amplitudes
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        seen.push_back(int'(dds_pdata[0]));
      end
      for (int k = 1; k < 8; k++)
        chk("DDS1 loop step", (seen[k] - seen[k-1] + 4000) % 4000, 1000);
      // PDAC1 receives 16 values, one per 10 us
      while (pupd[0] < last_upd + 16 && cyc - t0 < 40000) begin
        int u;
        u = pupd[0];
        @(negedge clk);
        if (pupd[0] != u) begin
          chk("PDAC1 playback value", pdac_code[0], 1000 * ((u - last_upd) % 8) + 5);
          n_playback++;
        end
      end
      chk("PDAC1 updates", pupd[0] - last_upd, 16);
      cfg_rd(A_PB_STAT, r);
      chk("PDAC loop ended, DDS loop still on", r[6:0], 7'b0000001);
    end
    // DDS off: zero amplitude
    cfg_wr(A_DDS, 32'b00_00_10);
    repeat (3) @(negedge clk);
    chk("DDS1 off word", dds_pdata[0], 0);
    chk("DDS1 off txenable", dds_txenable[0], 0);
    if (dds_pdata[0] == 0 && !dds_txenable[0]) n_dds_off++;
    cfg_wr(A_PB_STOP, 32'h01);

    // 4. record 4 precise-ADC samples, read them over the link
    padc_samples.delete();
    cfg_wr(A_REC_BASE + IN_PADC1, 32'd4);
    cfg_wr(A_REC_ARM, 32'(1 << IN_PADC1));
    repeat (4500) @(negedge clk);
    cfg_rd(A_PB_STAT, r);
    chk("record done", r[8 + IN_PADC1], 1);
    rd_words.delete();
    for (int i = 0; i < 4; i++) link_send(LK_MEM_RD, IN_PADC1, i);
    repeat (10) @(negedge clk);
    chk("read words", rd_words.size(), 4);
    begin
      // the recording holds 4 consecutive samples taken after the arm
      int k0;
      k0 = -1;
      foreach (padc_samples[k]) if (padc_samples[k] == rd_words[0]) k0 = k;
      chk("first recorded sample found", longint'(k0 >= 0), 1);
      for (int i = 0; i < 4 && i < rd_words.size() && k0 >= 0; i++) begin
        chk("recorded PADC1 sample", rd_words[i], padc_samples[k0 + i]);
        n_record++;
      end
    end
    chk("PADC conversion timing", perr[0] + perr[1], 0);

    // 5. stream both fast ADCs to the master: more than the link carries
    cfg_wr(A_STREAM_DEC, 32'd0);
    cfg_wr(A_STREAM_EN, 32'b0011);
    repeat (500) @(negedge clk);
    cfg_wr(A_STREAM_EN, 32'b0000);
    cfg_rd(A_DROPS, r);
    n_stream = stream_words[0] + stream_words[1];
    n_drop = int'(r);
    chk("link carries streams", longint'(n_stream > 400), 1);
    chk("link overload drops", longint'(n_drop > 0), 1);

    // 6. photons on din0: 40 pulses in the first gate of 3000 cycles
    cfg_wr(A_GATE, 32'd3000);
    tags.delete();
    cfg_wr(A_PHOT_CTRL, 32'b0101);
    begin
      int edges [$];
      for (int i = 0; i < 40; i++) begin
        @(negedge clk); din[0] = 1; edges.push_back(cyc);
        @(negedge clk);
        @(negedge clk); din[0] = 0;
        repeat (10 + i % 7) @(negedge clk);
      end
      repeat (3500) @(negedge clk);
      cfg_rd(A_COUNT0, r);
      chk("photon count in first gate", r, 40);
      if (r == 40) n_photon++;
      chk("time tags", tags.size(), 40);
      for (int i = 1; i < tags.size() && i < 40; i++) begin
        chk("tag spacing", tags[i] - tags[i-1], edges[i] - edges[i-1]);
        n_tag++;
      end
    end

    // 7. digital outputs: stored sequence then static value
    link_send(LK_MEM_PTR, N_OUT, 0);
    for (int i = 0; i < 4; i++) link_send(LK_MEM_WR, N_OUT, 6'b000001 << i);
    cfg_wr(A_PB_BASE + 4 * N_OUT + 0, 32'd4);
    cfg_wr(A_PB_BASE + 4 * N_OUT + 1, 32'd9);
    cfg_wr(A_PB_BASE + 4 * N_OUT + 2, 32'd1);
    cfg_wr(A_DOUT, 32'h100);
    dig_mon = 1;
    cfg_wr(A_PB_START, 32'(1 << N_OUT));
    repeat (80) @(negedge clk);
    dig_mon = 0;
    chk("digital sequence changes", n_dig_seq, 4);
    cfg_wr(A_DOUT, 32'h2A);
    repeat (2) @(negedge clk);
    chk("digital static", dout, 6'h2A);
    if (dout == 6'h2A) n_dig_static++;

    // ------------------------------------------------------ coverage
    $display("mechanisms: compensation=%0d", n_comp);
    $display("mechanisms: direct=%0d pid=%0d playback=%0d parallel=%0d realtime=%0d dds_off=%0d",
             n_direct, n_pid, n_playback, n_parallel, n_realtime, n_dds_off);
    $display("mechanisms: record=%0d stream=%0d drop=%0d photon=%0d tag=%0d dig_seq=%0d dig_static=%0d",
             n_record, n_stream, n_drop, n_photon, n_tag, n_dig_seq, n_dig_static);
    chk("mechanism direct", longint'(n_direct > 0), 1);
    chk("mechanism latency compensation", longint'(n_comp > 0), 1);
    chk("mechanism pid", longint'(n_pid > 0), 1);
    chk("mechanism playback", longint'(n_playback > 0), 1);
    chk("mechanism parallel loops", longint'(n_parallel > 0), 1);
    chk("mechanism real-time change", longint'(n_realtime > 0), 1);
    chk("mechanism dds off", longint'(n_dds_off > 0), 1);
    chk("mechanism record", longint'(n_record > 0), 1);
    chk("mechanism stream to master", longint'(n_stream > 0), 1);
    chk("mechanism link overload", longint'(n_drop > 0), 1);
    chk("mechanism photon count", longint'(n_photon > 0), 1);
    chk("mechanism time tags", longint'(n_tag > 0), 1);
    chk("mechanism digital sequence", longint'(n_dig_seq > 0), 1);
    chk("mechanism digital static", longint'(n_dig_static > 0), 1);
    $display("cycles simulated: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
