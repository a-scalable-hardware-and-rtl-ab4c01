// fadc_driver: capture of the dual 16-bit, 100 MSa/s fast ADC (LTC2184).
//
// The converter is clocked by the board's common 100 MHz clock and presents
// one 16-bit word per channel per cycle. This driver registers both words on
// the FPGA clock, converts the converter's offset-binary code to two's
// complement (MSB inverted) and left-aligns it into the common signed 18-bit
// sample (two zero LSBs), so a full-scale fast input has the same numeric
// range as a full-scale precise input. Both output streams are valid on every
// cycle after reset; latency is 2 cycles from pin to stream.
// The paper gives the converter, its rate and resolution; full-rate CMOS
// output mode and offset-binary coding are this design's assumptions about the
// converter set-up.
module fadc_driver
  import hq_pkg::*;
#(
  parameter int IN_W = 16
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [IN_W-1:0] adc_d [2],
  output stream_t         y [2]
);

  logic [IN_W-1:0] pin_q [2];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < 2; c++) begin
        pin_q[c] <= '0;
        y[c]     <= '0;
      end
    end else begin
      for (int c = 0; c < 2; c++) begin
        pin_q[c]   <= adc_d[c];
        y[c].valid <= 1'b1;
        y[c].data  <= sample_t'({~pin_q[c][IN_W-1], pin_q[c][IN_W-2:0]}) <<< (SW - IN_W);
      end
    end
  end

endmodule
