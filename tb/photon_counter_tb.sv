// photon_counter_tb: feeds random pulse trains (pulses and gaps of 1-6 clock
// cycles) to the photon counter. Checks that the gate totals add up to the
// number of pulses sent, that gates end every gate_len cycles, that time tags
// are spaced exactly like the pulse leading edges, and that with the link
// not taking tags a burst fills the FIFO and the excess is counted as drops.
module photon_counter_tb;
  logic clk = 1'b0, rst = 1'b1;
  logic din = 1'b0, count_en = 1'b0, tag_en = 1'b0, tag_ready = 1'b0;
  logic [31:0] gate_len = 32'd100;
  logic [31:0] count, drops;
  logic count_valid, tag_valid;
  logic [26:0] tag;
  int checks = 0, failures = 0;
  int cyc = 0;
  int edges [$];
  int tags [$];
  longint gate_sum = 0;
  int last_gate = -1, n_gates = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  photon_counter #(.TAG_W(27), .FIFO_DEPTH(16)) dut (
    .clk, .rst, .din, .count_en, .gate_len, .count, .count_valid,
    .tag_en, .tag_valid, .tag, .tag_ready, .tag_drops(drops));

  task automatic chk(string what, longint got, longint e);
    checks++;
    if (got != e) begin failures++; $display("FAIL %s got %0d expected %0d", what, got, e); end
  endtask

  always @(negedge clk) begin
    if (count_valid) begin
      gate_sum += count;
      if (last_gate >= 0) chk("gate period", cyc - last_gate, 100);
      last_gate = cyc;
      n_gates++;
    end
    if (tag_valid && tag_ready) tags.push_back(int'(tag));
  end

  task automatic pulses(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); din = 1'b1; edges.push_back(cyc);
      repeat ($urandom_range(0, 5)) @(negedge clk);
      @(negedge clk); din = 1'b0;
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst = 1'b0;
    count_en = 1'b1; tag_en = 1'b1; tag_ready = 1'b1;
    pulses(300);
    repeat (300) @(negedge clk);
    count_en = 1'b0;
    chk("gate total", gate_sum, 300);
    chk("tags", tags.size(), 300);
    for (int i = 1; i < tags.size() && i < edges.size(); i++)
      chk("tag spacing", tags[i] - tags[i-1], edges[i] - edges[i-1]);
    chk("gates seen", longint'(n_gates > 10), 1);
    // overflow: link not taking tags
    tag_ready = 1'b0;
    tags.delete(); edges.delete();
    pulses(20);
    repeat (10) @(negedge clk);
    chk("drops", drops, 4);
    tag_ready = 1'b1;
    repeat (40) @(negedge clk);
    chk("tags kept", tags.size(), 16);
    for (int i = 1; i < tags.size(); i++)
      chk("kept tag spacing", tags[i] - tags[i-1], edges[i] - edges[i-1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
