// padc_driver_tb: runs the precise-ADC driver against a model of the
// converter's serial interface with a short sample period. Checks each
// read word against the analog value applied at the conversion start, the
// sample period (RATE_DIV cycles between valid samples), that cnv is held
// for the conversion time, and the read-out latency.
module padc_driver_tb;
  import hq_pkg::*;
  localparam int RATE = 200, TC = 72, SD = 2;
  logic clk = 1'b0, rst = 1'b1;
  logic cnv, sck, sdo;
  logic [17:0] value;
  stream_t y;
  int conversions, conv_errors;
  int checks = 0, failures = 0;
  int cyc = 0, last_valid = -1, n_samples = 0, cnv_rise = 0;
  logic [17:0] sampled [$];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  padc_driver #(.RATE_DIV(RATE), .T_CONV(TC), .SCK_DIV(SD)) dut (.clk, .rst, .cnv, .sck, .sdo, .y);
  ad7982_model #(.T_CONV_NS(710)) adc (.cnv, .sck, .sdo, .value, .conversions, .conv_errors);

  always @(posedge cnv) begin
    sampled.push_back(value);
    cnv_rise = cyc;
  end

  always @(negedge clk) if (y.valid) begin
    logic [17:0] e;
    n_samples++;
    checks++;
    e = sampled.pop_front();
    if (y.data !== e) begin
      failures++; $display("FAIL sample %0d got %h expected %h", n_samples, y.data, e);
    end
    checks++;  // latency: conversion plus 18 bits of 2*SD cycles
    if (cyc - cnv_rise != TC + 36 * SD) begin
      failures++; $display("FAIL latency %0d", cyc - cnv_rise);
    end
    if (last_valid >= 0) begin
      checks++;
      if (cyc - last_valid != RATE) begin
        failures++; $display("FAIL period %0d", cyc - last_valid);
      end
    end
    last_valid = cyc;
  end

  // the applied value changes all the time
  always @(posedge clk) value <= 18'($urandom);

  initial begin
    repeat (RATE * 40) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst = 1'b0;
    wait (n_samples == 25);
    checks++;
    if (conv_errors != 0) begin failures++; $display("FAIL cnv too short %0d", conv_errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
