// ad5780_model: behavioural model of the SPI interface of an 18-bit precise
// DAC (AD5780), for testbenches only. sdin is taken on falling sclk while
// sync_n is low; when sync_n rises a 24-bit frame is decoded: register 001
// is the DAC input register, 010 the control register. A low pulse on
// ldac_n copies the input register to the output code. Frames of the wrong
// length count as bad_frames. The output stays clamped (code 0 reported as
// clamped = 1) until a control write clears OPGND (bit 2).
module ad5780_model (
  input  logic        sync_n,
  input  logic        sclk,
  input  logic        sdin,
  input  logic        ldac_n,
  output logic [17:0] out_code,
  output logic [23:0] ctrl,
  output logic        clamped,
  output int          frames,
  output int          bad_frames,
  output int          updates
);
  logic [23:0] sr;
  logic [17:0] in_reg;
  int nbits;
  initial begin
    sr = '0; in_reg = '0; out_code = '0; ctrl = 24'h000004 ; clamped = 1'b1;
    frames = 0; bad_frames = 0; updates = 0; nbits = 0;
  end
  always @(negedge sync_n) nbits = 0;
  always @(negedge sclk) if (!sync_n) begin
    sr = {sr[22:0], sdin}; nbits++;
  end
  always @(posedge sync_n) begin
    if (nbits != 24) bad_frames++;
    else begin
      frames++;
      if (sr[23] == 1'b0 && sr[22:20] == 3'b001) in_reg = sr[19:2];
      if (sr[23] == 1'b0 && sr[22:20] == 3'b010) begin
        ctrl = sr; clamped = sr[2];
      end
    end
  end
  always @(negedge ldac_n) begin
    out_code = in_reg; updates++;
  end
endmodule
