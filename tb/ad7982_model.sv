// ad7982_model: behavioural model of the serial interface of an 18-bit
// precise ADC (AD7982 in 3-wire mode), for testbenches only.
// A rising cnv samples `value`; cnv must stay high for at least T_CONV_NS
// (else conv_errors counts up). When cnv falls the MSB appears on sdo and
// each falling sck edge presents the next bit.
module ad7982_model #(
  parameter int T_CONV_NS = 710
) (
  input  logic        cnv,
  input  logic        sck,
  output logic        sdo,
  input  logic [17:0] value,
  output int          conversions,
  output int          conv_errors
);
  logic [17:0] held, sr;
  realtime t_rise;
  initial begin
    conversions = 0; conv_errors = 0; sr = '0; held = '0; t_rise = 0;
  end
  always @(posedge cnv) begin
    held = value; t_rise = $realtime; conversions++;
  end
  always @(negedge cnv) begin
    if (conversions > 0 && $realtime - t_rise < T_CONV_NS) conv_errors++;
    sr = held;
  end
  always @(negedge sck) if (!cnv) sr = {sr[16:0], 1'b0};
  assign sdo = sr[17];
endmodule
