// stream_mux_tb: drives distinct random streams on all six MUX inputs and
// checks, for every address, that the output is the selected stream one
// cycle later (data and valid), and that unused addresses give no data.
module stream_mux_tb;
  import hq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  src_e sel;
  stream_t adc [N_IN];
  stream_t mem_s, mst, y;
  stream_t exp_s;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  stream_mux dut (.clk, .rst, .sel, .adc_in(adc), .mem_in(mem_s), .master_in(mst), .y);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sel = SRC_NONE;
    for (int i = 0; i < N_IN; i++) adc[i] = '0;
    mem_s = '0; mst = '0;
    repeat (3) @(negedge clk); rst = 1'b0;
    for (int s = 0; s < 8; s++) begin
      if (s == 6) continue;
      sel = src_e'(s);
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        for (int i = 0; i < N_IN; i++) adc[i] = '{valid: 1'($urandom), data: SW'($urandom)};
        mem_s = '{valid: 1'($urandom), data: SW'($urandom)};
        mst   = '{valid: 1'($urandom), data: SW'($urandom)};
        case (s)
          0, 1, 2, 3: exp_s = adc[s];
          4: exp_s = mem_s;
          5: exp_s = mst;
          default: exp_s = '0;
        endcase
        @(negedge clk);
        checks++;
        if (y !== exp_s) begin
          failures++; $display("FAIL sel %0d: got %h expected %h", s, y, exp_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
