// padc_driver: conversion control and serial read-out of one 18-bit precise
// ADC (AD7982), giving a sample stream at about 100 kSa/s.
//
// Every RATE_DIV clock cycles the driver raises cnv for T_CONV cycles (the
// conversion time), then lowers it; the converter then presents the MSB on
// sdo. The driver samples sdo, raises sck for SCK_DIV cycles and lowers it
// for SCK_DIV cycles; the falling edge makes the converter present the next
// bit. After 18 bits the word (two's complement, MSB first) leaves as one
// valid stream sample. With the defaults (100 MHz clock) a sample is issued
// every 10 us, the precise-ADC rate the paper gives; the read-out takes
// T_CONV + 36*SCK_DIV cycles, well inside the period.
// The rate follows the paper; the converter's 3-wire mode without busy
// indicator, its timing and coding are this design's reading of the
// converter, not the paper's.
module padc_driver
  import hq_pkg::*;
#(
  parameter int RATE_DIV = 1000,
  parameter int T_CONV   = 72,
  parameter int SCK_DIV  = 2
) (
  input  logic    clk,
  input  logic    rst,
  output logic    cnv,
  output logic    sck,
  input  logic    sdo,
  output stream_t y
);

  typedef enum logic [1:0] {S_WAIT, S_CONV, S_HIGH, S_LOW} state_e;
  state_e state;
  logic [$clog2(RATE_DIV)-1:0] period;
  logic [$clog2(T_CONV+SCK_DIV+1)-1:0] t;
  logic [4:0]  nbit;
  logic [SW-1:0] sr;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_WAIT; period <= '0; t <= '0; nbit <= '0; sr <= '0;
      cnv <= 1'b0; sck <= 1'b0; y <= '0;
    end else begin
      y.valid <= 1'b0;
      period  <= (period == $bits(period)'(RATE_DIV - 1)) ? '0 : period + 1'b1;
      unique case (state)
        S_WAIT: if (period == '0) begin
          cnv <= 1'b1; t <= '0; state <= S_CONV;
        end
        S_CONV: begin
          t <= t + 1'b1;
          if (t == $bits(t)'(T_CONV - 1)) begin
            cnv <= 1'b0; t <= '0; nbit <= '0; state <= S_LOW;
          end
        end
        S_LOW: begin   // sck low: wait, then sample the presented bit and rise
          t <= t + 1'b1;
          if (t == $bits(t)'(SCK_DIV - 1)) begin
            sr  <= {sr[SW-2:0], sdo};
            sck <= 1'b1; t <= '0; state <= S_HIGH;
          end
        end
        S_HIGH: begin  // sck high: wait, then fall (converter shifts)
          t <= t + 1'b1;
          if (t == $bits(t)'(SCK_DIV - 1)) begin
            sck <= 1'b0; t <= '0;
            if (nbit == 5'(SW - 1)) begin
              y.valid <= 1'b1;
              y.data  <= sr;
              state   <= S_WAIT;
            end else begin
              nbit  <= nbit + 1'b1;
              state <= S_LOW;
            end
          end
        end
        default: state <= S_WAIT;
      endcase
    end
  end

endmodule
