// dds_driver: parallel data port of one DDS (AD9910).
//
// The DDS takes a 16-bit word per 100 MHz cycle on its parallel port; two
// destination bits (f) say which parameter the word modulates. With
// dest = 00 (amplitude) the signed sample is clamped at zero and its 16 bits
// below the sign are sent, so negative values give no output; for the other
// destinations (phase, frequency, polar) the sample is offset by half scale
// (sign bit inverted) and its 16 MSBs are sent. When enable is low the word is
// forced to amplitude 0: the paper switches a DDS off by writing a zero
// amplitude, which makes the output null by construction. txenable is high
// while the channel is enabled. The port holds the last word between valid
// samples. Latency 1 cycle. The destination coding and sample mapping are this
// design's choices.
module dds_driver
  import hq_pkg::*;
#(
  parameter int OUT_W = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             enable,
  input  logic [1:0]       dest,
  input  stream_t          x,
  output logic [OUT_W-1:0] pdata,
  output logic [1:0]       f,
  output logic             txenable
);

  localparam logic [1:0] DEST_AMPL = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      pdata <= '0; f <= DEST_AMPL; txenable <= 1'b0;
    end else if (!enable) begin
      pdata <= '0; f <= DEST_AMPL; txenable <= 1'b0;
    end else begin
      txenable <= 1'b1;
      f        <= dest;
      if (x.valid) begin
        if (dest == DEST_AMPL)
          pdata <= x.data[SW-1] ? '0 : x.data[SW-2 -: OUT_W];
        else
          pdata <= {~x.data[SW-1], x.data[SW-2 -: OUT_W-1]};
      end
    end
  end

endmodule
