// fdac_driver: data word for one channel of the 16-bit fast DAC (AD9788).
//
// The 18-bit sample stream is rounded to 16 bits (add half an LSB of the
// result, then drop the two low bits) with saturation at full scale, and
// held in the output register until the next valid sample: between samples
// the DAC keeps the last value. The DAC interpolates the 100 MSa/s words to
// 800 MSa/s itself. Latency 1 cycle. The paper gives the converter and its
// resolution; the two's-complement data format and rounding are this design's
// choices.
module fdac_driver
  import hq_pkg::*;
#(
  parameter int OUT_W = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  stream_t          x,
  output logic [OUT_W-1:0] dac_d
);

  localparam int DROP = SW - OUT_W;

  logic signed [SW:0]    sum;
  logic signed [OUT_W:0] q;
  assign sum = $signed({x.data[SW-1], x.data}) + (SW+1)'(2 ** (DROP - 1));
  assign q   = sum[SW:DROP];

  always_ff @(posedge clk) begin
    if (rst) dac_d <= '0;
    else if (x.valid) begin
      if (q > (OUT_W+1)'(2 ** (OUT_W - 1) - 1)) dac_d <= {1'b0, {(OUT_W-1){1'b1}}};
      else                                      dac_d <= q[OUT_W-1:0];
    end
  end

  logic unused;
  assign unused = ^sum[DROP-1:0];

endmodule
