// sink_memory: the on-chip memory of the slave FPGA.
//
// The board has 4 analog inputs and 6 analog outputs and gives each of those
// 10 channels up to a tenth of the FPGA block RAM, which is how the memory is
// organised here: four record buffers (one per input) and six playback
// buffers (one per output), each DEPTH x 18 bit (24576 x 18 = 442 kbit, just
// under a tenth of the 4.5 Mb of the device). A seventh, narrow playback
// buffer (DIG_DEPTH x 6 bit) holds digital-output sequences.
//
// Master side (from the link controller):
//   ptr_set/ptr_ch/ptr_addr  set the write pointer of playback buffer ptr_ch
//   wr_en/wr_ch/wr_data      write at that pointer, pointer advances by one
//   rd_en/rd_ch/rd_addr      read record buffer rd_ch; rd_valid/rd_data two
//                            cycles later
// Control (from the configuration bus): start/stop per playback buffer,
// length/divider/loops per playback buffer, arm/length per record buffer.
// Playback streams leave as stream_t on pb_out (to the output MUXes) and the
// digital sequence on dig_valid/dig_out. Playback timing is that of
// playback_buffer; recording takes one sample per valid input sample.
// The split into per-channel buffers follows the paper's "a tenth of the
// memory" remark; buffer control and the master access scheme are this
// design's own.
module sink_memory
  import hq_pkg::*;
#(
  parameter int DEPTH     = 24576,
  parameter int DIG_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst,
  // record side
  input  stream_t     adc_in [N_IN],
  input  logic [N_IN-1:0]       rec_arm,
  input  logic [N_IN-1:0][15:0] rec_len,
  output logic [N_IN-1:0]       rec_done,
  // playback control
  input  logic [N_PB-1:0] pb_start,
  input  logic [N_PB-1:0] pb_stop,
  input  pb_cfg_t [N_PB-1:0] pb_cfg,
  output logic [N_PB-1:0] pb_running,
  output stream_t     pb_out [N_OUT],
  output logic        dig_valid,
  output logic [N_DOUT-1:0] dig_out,
  // master access
  input  logic        ptr_set,
  input  logic [3:0]  ptr_ch,
  input  logic [15:0] ptr_addr,
  input  logic        wr_en,
  input  logic [3:0]  wr_ch,
  input  logic [SW-1:0] wr_data,
  input  logic        rd_en,
  input  logic [3:0]  rd_ch,
  input  logic [15:0] rd_addr,
  output logic        rd_valid,
  output logic [SW-1:0] rd_data
);

  // ------------------------------------------------------ write pointers
  logic [N_PB-1:0][15:0] wptr;
  always_ff @(posedge clk) begin
    if (rst) wptr <= '0;
    else begin
      for (int p = 0; p < N_PB; p++) begin
        if (ptr_set && int'(ptr_ch) == p)     wptr[p] <= ptr_addr;
        else if (wr_en && int'(wr_ch) == p)   wptr[p] <= wptr[p] + 16'd1;
      end
    end
  end

  // ------------------------------------------------------ playback buffers
  for (genvar p = 0; p < N_OUT; p++) begin : g_pb
    logic [SW-1:0] d;
    logic          v;
    playback_buffer #(.W(SW), .DEPTH(DEPTH)) u_pb (
      .clk, .rst,
      .wr_en   (wr_en && int'(wr_ch) == p),
      .wr_addr (wptr[p]),
      .wr_data (wr_data),
      .start   (pb_start[p]),
      .stop    (pb_stop[p]),
      .length  (pb_cfg[p].length),
      .divider (pb_cfg[p].divider),
      .loops   (pb_cfg[p].loops),
      .running (pb_running[p]),
      .out_valid (v),
      .out_data  (d)
    );
    assign pb_out[p] = '{valid: v, data: d};
  end

  playback_buffer #(.W(N_DOUT), .DEPTH(DIG_DEPTH)) u_pb_dig (
    .clk, .rst,
    .wr_en   (wr_en && int'(wr_ch) == N_OUT),
    .wr_addr (wptr[N_OUT]),
    .wr_data (wr_data[N_DOUT-1:0]),
    .start   (pb_start[N_OUT]),
    .stop    (pb_stop[N_OUT]),
    .length  (pb_cfg[N_OUT].length),
    .divider (pb_cfg[N_OUT].divider),
    .loops   (pb_cfg[N_OUT].loops),
    .running (pb_running[N_OUT]),
    .out_valid (dig_valid),
    .out_data  (dig_out)
  );

  // ------------------------------------------------------ record buffers
  logic [N_IN-1:0]         r_valid;
  logic [SW-1:0]           r_data [N_IN];
  logic [3:0]              rd_ch_q;
  for (genvar r = 0; r < N_IN; r++) begin : g_rec
    logic recording;
    record_buffer #(.W(SW), .DEPTH(DEPTH)) u_rec (
      .clk, .rst,
      .arm      (rec_arm[r]),
      .length   (rec_len[r]),
      .in_valid (adc_in[r].valid),
      .in_data  (adc_in[r].data),
      .recording(recording),
      .done     (rec_done[r]),
      .rd_en    (rd_en && int'(rd_ch) == r),
      .rd_addr  (rd_addr),
      .rd_valid (r_valid[r]),
      .rd_data  (r_data[r])
    );
  end

  // read-data return, registered; a read of a channel that does not exist
  // returns 0 so that every request gets an answer
  logic rd_en_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ch_q <= '0; rd_en_q <= 1'b0; rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      rd_ch_q  <= rd_ch;
      rd_en_q  <= rd_en;
      rd_valid <= rd_en_q;
      rd_data  <= (int'(rd_ch_q) < N_IN) ? r_data[rd_ch_q[1:0]] : '0;
    end
  end

  logic unused;
  assign unused = ^r_valid;

endmodule
