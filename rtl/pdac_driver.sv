// pdac_driver: SPI writer for one 18-bit precise DAC (AD5780).
//
// After reset the driver sends one control-register frame (0x200002: output
// buffer on, output clamp released, two's-complement coding), then waits for
// samples. Each valid sample is written as a 24-bit DAC-register frame
// {R/W=0, addr=001, data[17:0], 00}: sync_n goes low, each bit is put on sdin
// while sclk is high and taken by the DAC on the falling sclk edge (SCLK_DIV
// clock cycles per half period), sync_n returns high, and one cycle later
// ldac_n pulses low for LDAC_W cycles to update the output. A sample that arrives while a frame
// is in flight is kept as pending; a newer one replaces it (the output always
// converges to the latest value). With SCLK_DIV = 4 a frame takes about 2 us,
// so ~100 kSa/s, the paper's precise-DAC rate, is sustained. busy is high
// from the start of a frame to the end of the ldac pulse.
// Frame layout and control word come from the converter's data sheet, not the
// paper; the pending-sample rule is this design's choice.
module pdac_driver
  import hq_pkg::*;
#(
  parameter int SCLK_DIV = 4,
  parameter int LDAC_W   = 4
) (
  input  logic    clk,
  input  logic    rst,
  input  stream_t x,
  output logic    sync_n,
  output logic    sclk,
  output logic    sdin,
  output logic    ldac_n,
  output logic    busy
);

  localparam logic [23:0] CTRL_FRAME = 24'h20_0002;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_HIGH, S_LOW, S_GAP, S_LDAC} state_e;
  state_e state;

  logic [23:0] sr;
  logic [4:0]  nbit;
  logic [$clog2(SCLK_DIV + LDAC_W + 1)-1:0] t;
  logic        pend;
  sample_t     pend_d;
  logic        is_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_INIT; sr <= '0; nbit <= '0; t <= '0; pend <= 1'b0; pend_d <= '0;
      sync_n <= 1'b1; sclk <= 1'b1; sdin <= 1'b0; ldac_n <= 1'b1; is_data <= 1'b0;
    end else begin
      if (x.valid) begin
        pend   <= 1'b1;
        pend_d <= x.data;
      end
      unique case (state)
        S_INIT: begin
          sr <= CTRL_FRAME; is_data <= 1'b0; nbit <= '0; t <= '0;
          sync_n <= 1'b0; sdin <= CTRL_FRAME[23]; sclk <= 1'b1; state <= S_HIGH;
        end
        S_IDLE: if (pend) begin
          sr      <= {1'b0, 3'b001, pend_d, 2'b00};
          sdin    <= 1'b0;
          is_data <= 1'b1;
          if (!x.valid) pend <= 1'b0;
          nbit <= '0; t <= '0; sync_n <= 1'b0; sclk <= 1'b1; state <= S_HIGH;
        end
        S_HIGH: begin
          t <= t + 1'b1;
          if (t == $bits(t)'(SCLK_DIV - 1)) begin
            sclk <= 1'b0; t <= '0; state <= S_LOW;   // DAC takes sdin here
          end
        end
        S_LOW: begin
          t <= t + 1'b1;
          if (t == $bits(t)'(SCLK_DIV - 1)) begin
            t <= '0;
            sclk <= 1'b1;
            if (nbit == 5'd23) begin
              state <= S_GAP;
            end else begin
              nbit <= nbit + 1'b1;
              sr   <= {sr[22:0], 1'b0};
              sdin <= sr[22];
              state <= S_HIGH;
            end
          end
        end
        S_GAP: begin   // sync_n rises one cycle before ldac_n falls
          sync_n <= 1'b1;
          t <= '0;
          state <= is_data ? S_LDAC : S_IDLE;
        end
        S_LDAC: begin
          t <= t + 1'b1;
          if (t == '0) ldac_n <= 1'b0;
          if (t == $bits(t)'(LDAC_W)) begin
            ldac_n <= 1'b1; state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
