// transfer_function: the per-output "transfer function" block.
//
// Three modes, chosen over the configuration bus:
//   TF_OFF     output 0 (no new samples are issued after the pipeline drains)
//   TF_DIRECT  output = input (the direct ADC-to-DAC stream)
//   TF_PID     proportional-integral-derivative regulator
//                e[n] = setpoint - x[n]
//                I[n] = sat(I[n-1] + ki*e[n])
//                y[n] = sat18((kp*e[n] + I[n] + kd*(e[n]-e[n-1])) >>> shift)
// The PID updates once per valid input sample, so the same block regulates a
// 100 MSa/s fast channel or a 100 kSa/s precise one. Gains and set point are
// signed 18-bit, the integrator is ACC_W bits and saturates; it is cleared
// whenever the mode is not PID. The latency is 3 cycles in every mode (valid
// in at cycle n, valid out at n+3), one sample per cycle.
// The paper names the PID regulator and its gains as set by the master; the
// PID form, widths, saturation and latency are this design's choices.
module transfer_function
  import hq_pkg::*;
#(
  parameter int ACC_W = 48
) (
  input  logic       clk,
  input  logic       rst,
  input  tf_mode_e   mode,
  input  sample_t    kp,
  input  sample_t    ki,
  input  sample_t    kd,
  input  sample_t    setpoint,
  input  logic [5:0] shift,
  input  stream_t    x,
  output stream_t    y
);

  localparam logic signed [ACC_W-1:0] ACC_MAX = {1'b0, {(ACC_W-1){1'b1}}};
  localparam logic signed [ACC_W-1:0] ACC_MIN = {1'b1, {(ACC_W-1){1'b0}}};
  localparam logic signed [ACC_W-1:0] Y_MAX = ACC_W'(2**(SW-1) - 1);
  localparam logic signed [ACC_W-1:0] Y_MIN = -ACC_W'(2**(SW-1));

  function automatic logic signed [ACC_W-1:0] sat_add(logic signed [ACC_W-1:0] a,
                                                      logic signed [ACC_W-1:0] b);
    logic signed [ACC_W:0] s;
    s = {a[ACC_W-1], a} + {b[ACC_W-1], b};
    if (s[ACC_W] != s[ACC_W-1]) return s[ACC_W] ? ACC_MIN : ACC_MAX;
    return s[ACC_W-1:0];
  endfunction

  // sign extension to the accumulator width, so products are full width
  function automatic logic signed [ACC_W-1:0] wide(logic signed [SW:0] v);
    return ACC_W'(v);
  endfunction

  // stage 1: error and its difference
  logic signed [SW:0]   e1, de1, e_prev;
  logic                 v1;
  sample_t              x1;
  // stage 2: products and integrator
  logic signed [ACC_W-1:0] p2, d2, integ;
  logic                    v2;
  sample_t                 x2;

  always_ff @(posedge clk) begin
    if (rst || mode != TF_PID) begin
      e_prev <= '0;
      integ  <= '0;
    end else if (v1) begin
      integ  <= sat_add(integ, wide(ki) * wide(e1));
    end
    if (!rst && mode == TF_PID && x.valid) e_prev <= (SW+1)'(setpoint) - (SW+1)'(sample_t'(x.data));

    if (rst) begin
      v1 <= 1'b0; v2 <= 1'b0; y <= '0;
      e1 <= '0; de1 <= '0; x1 <= '0; p2 <= '0; d2 <= '0; x2 <= '0;
    end else begin
      // stage 1
      v1  <= x.valid;
      x1  <= x.data;
      if (x.valid) begin
        e1  <= (SW+1)'(setpoint) - (SW+1)'(sample_t'(x.data));
        de1 <= ((SW+1)'(setpoint) - (SW+1)'(sample_t'(x.data))) - e_prev;
      end
      // stage 2
      v2 <= v1;
      x2 <= x1;
      p2 <= wide(kp) * wide(e1);
      d2 <= wide(kd) * wide(de1);
      // stage 3
      y.valid <= v2 && mode != TF_OFF;
      unique case (mode)
        TF_DIRECT: y.data <= x2;
        TF_PID:    y.data <= sat18(sat_add(sat_add(p2, integ), d2) >>> shift);
        default:   y.data <= '0;
      endcase
    end
  end

  function automatic sample_t sat18(logic signed [ACC_W-1:0] v);
    if (v > Y_MAX) return sample_t'(Y_MAX);
    if (v < Y_MIN) return sample_t'(Y_MIN);
    return v[SW-1:0];
  endfunction

endmodule
