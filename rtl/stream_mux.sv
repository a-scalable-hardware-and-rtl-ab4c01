// stream_mux: the MUX in front of each output channel.
//
// It selects which stream drives the channel's transfer function: one of the
// four input converters, the sink-memory playback stream of this channel, or
// the stream the master sends over the serial link (the three bundles drawn
// into every MUX of the FPGA block diagram). The address comes from the
// configuration bus (src_e encoding, 0-3 inputs, 4 memory, 5 master; any other
// value selects nothing). The output is registered: one cycle of latency,
// and valid follows the selected source's valid. Encoding and the register
// stage are this design's choices.
module stream_mux
  import hq_pkg::*;
#(
  parameter int N_SRC_IN = N_IN
) (
  input  logic    clk,
  input  logic    rst,
  input  src_e    sel,
  input  stream_t adc_in [N_SRC_IN],
  input  stream_t mem_in,
  input  stream_t master_in,
  output stream_t y
);

  stream_t pick;
  always_comb begin
    pick = '0;
    if (sel == SRC_MEM)                pick = mem_in;
    else if (sel == SRC_MASTER)        pick = master_in;
    else if (int'(sel) < N_SRC_IN)     pick = adc_in[int'(sel)];
  end

  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else     y <= pick;
  end

endmodule
