// link_controller_tb: checks the link controller's receive decoding (stream
// words to each output channel, memory pointer/write/read strobes) and its
// transmit side: memory read data is sent ahead of anything else and tagged
// with the requesting channel, photon tags are sent with their input index,
// input streams are decimated, and when the inputs offer more samples than the
// link carries, every kept sample is either sent (in order) or counted as a
// drop.
module link_controller_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic rx_valid = 0;
  logic [31:0] rx_word = 0;
  logic tx_valid;
  logic [31:0] tx_word;
  stream_t mo [N_OUT];
  logic ptr_set, wr_en, rd_en;
  logic [3:0] mem_ch;
  logic [15:0] mem_addr;
  logic [SW-1:0] mem_wdata;
  logic rd_valid;
  logic [SW-1:0] rd_data;
  stream_t adc [N_IN];
  logic [N_IN-1:0] stream_en = 0;
  logic [15:0] stream_dec = 0;
  logic [31:0] drops;
  logic [N_DIN-1:0] tag_valid = 0, tag_ready;
  logic [26:0] tag [N_DIN];
  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  link_controller dut (.clk, .rst, .rx_valid, .rx_word, .tx_valid, .tx_word,
    .master_out(mo), .ptr_set, .wr_en, .rd_en, .mem_ch, .mem_addr, .mem_wdata,
    .rd_valid, .rd_data, .adc_in(adc), .stream_en, .stream_dec, .drops,
    .tag_valid, .tag, .tag_ready);

  task automatic chk(string what, longint got, longint e);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s got %0h expected %0h", what, got, e); end
  endtask

  // memory model: answers a read 2 cycles after rd_en with 0x1000 + addr
  logic [1:0] rdp = 0; logic [15:0] ra0 = 0, ra1 = 0;
  always @(posedge clk) begin
    rdp <= {rdp[0], rd_en};
    ra0 <= mem_addr; ra1 <= ra0;
  end
  assign rd_valid = rdp[1];
  assign rd_data  = SW'(16'h1000 + ra1);

  // transmit monitor
  int kept [N_IN][$];
  int got_stream [N_IN], got_rd = 0, got_tag = 0;
  int rd_expect [$];
  int skipped = 0;
  logic tag_taken = 0;
  always @(posedge clk) tag_taken <= tag_valid[1] && tag_ready[1];
  always @(negedge clk) if (tx_valid) begin
    case (link_type_e'(tx_word[31:28]))
      LK_STREAM: begin
        int ch; int v; int e;
        ch = int'(tx_word[27:24]); v = int'(tx_word[17:0]);
        got_stream[ch]++;
        // must be the next kept sample not yet dropped: search forward
        while (kept[ch].size() > 0 && kept[ch][0] != v) begin
          void'(kept[ch].pop_front());
          skipped++;
        end
        if (kept[ch].size() == 0) begin
          failures++; $display("FAIL stream ch%0d sample %0h not offered in order", ch, v);
        end else void'(kept[ch].pop_front());
        checks++;
      end
      LK_MEM_RD: begin
        chk("rd word", tx_word, rd_expect.pop_front());
        got_rd++;
      end
      LK_TAG: begin
        chk("tag word", tx_word, {4'h5, 1'b1, 27'h123_4567});
        got_tag++;
      end
      default: begin failures++; $display("FAIL bad tx word %h", tx_word); end
    endcase
  end

  // stream sources: record what the decimator keeps
  int seen [N_IN];
  always @(negedge clk) if (!rst) begin
    for (int i = 0; i < N_IN; i++) begin
      adc[i].valid = (i < 2) ? 1'b1 : 1'($urandom_range(0, 3) == 0);
      adc[i].data  = SW'($urandom);
      if (adc[i].valid && stream_en[i]) begin
        if (seen[i] % (int'(stream_dec) + 1) == 0) kept[i].push_back(int'(adc[i].data));
        seen[i]++;
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_IN; i++) begin adc[i] = '0; seen[i] = 0; got_stream[i] = 0; end
    tag[0] = '0; tag[1] = 27'h123_4567;
    repeat (3) @(negedge clk); rst = 1'b0;
    // ---- receive decoding
    for (int o = 0; o < N_OUT; o++) begin
      rx_valid = 1; rx_word = link_word(LK_STREAM, 4'(o), 24'(1000 + o));
      @(negedge clk); rx_valid = 0;
      for (int k = 0; k < N_OUT; k++) chk("stream valid", mo[k].valid, k == o);
      chk("stream data", mo[o].data, 1000 + o);
    end
    rx_valid = 1; rx_word = link_word(LK_MEM_PTR, 4'd3, 24'h00_0123);
    @(negedge clk); rx_valid = 0;
    chk("ptr_set", ptr_set, 1); chk("ptr ch", mem_ch, 3); chk("ptr addr", mem_addr, 16'h123);
    rx_valid = 1; rx_word = link_word(LK_MEM_WR, 4'd6, 24'h03_1234);
    @(negedge clk); rx_valid = 0;
    chk("wr_en", wr_en, 1); chk("wr ch", mem_ch, 6); chk("wr data", mem_wdata, 18'h3_1234);
    chk("no ptr", ptr_set, 0);
    @(negedge clk);
    chk("strobes cleared", {wr_en, ptr_set, rd_en}, 0);
    // ---- streams at overload with reads and tags mixed in
    stream_dec = 16'd0;
    stream_en = 4'b1111;
    for (int n = 0; n < 400; n++) begin
      if (n % 9 == 0) begin
        rx_valid = 1; rx_word = link_word(LK_MEM_RD, 4'(n % 4), 24'(n));
        rd_expect.push_back({4'h4, 4'(n % 4), 6'd0, 18'(16'h1000 + n)});
      end
      if (n % 50 == 25) tag_valid[1] = 1'b1;
      @(negedge clk); rx_valid = 0;
      if (tag_taken) tag_valid[1] = 1'b0;
    end
    stream_en = '0;
    repeat (20) @(negedge clk);
    chk("all reads answered", got_rd, (400 + 8) / 9);
    chk("tags sent", got_tag, 8);
    begin
      int total_kept, total_sent, left;
      total_kept = 0; total_sent = 0; left = 0;
      for (int i = 0; i < N_IN; i++) begin
        total_sent += got_stream[i];
        left += kept[i].size();
      end
      // kept samples that were never sent must all be counted as drops
      chk("sent + drops accounted", longint'(drops), longint'(left + skipped));
      chk("drops happened", longint'(drops > 0), 1);
      chk("link busy", longint'(total_sent > 300), 1);
    end
    // ---- decimation, no overload: every 10th FADC1 sample, nothing lost
    for (int i = 0; i < N_IN; i++) begin kept[i].delete(); seen[i] = 0; got_stream[i] = 0; end
    begin
      int d0;
      d0 = int'(drops);
      stream_dec = 16'd9;
      stream_en = 4'b0001;
      repeat (500) @(negedge clk);
      stream_en = '0;
      repeat (5) @(negedge clk);
      chk("decimated count", got_stream[0], 50);
      chk("no new drops", drops, d0);
      chk("nothing left", kept[0].size(), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
