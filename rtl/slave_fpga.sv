// slave_fpga: the FPGA design of one slave board of the control tree.
//
// A slave board carries two fast ADCs (FADC, 16 bit, 100 MSa/s), two precise
// ADCs (PADC, 18 bit, ~100 kSa/s), two DDS RF synthesisers, two precise DACs
// (PDAC, 18 bit, ~100 kSa/s), two fast DACs (FDAC, 16 bit, 100 MSa/s), two
// digital inputs and six digital outputs, all run from one 100 MHz clock
// shared by the whole tree. Its FPGA lets any output be fed, sample by sample,
// from any local input, from a sequence stored on chip, or from the master,
// through a per-output transfer function (direct or PID):
//
//   inputs  FADC1 FADC2 PADC1 PADC2 --+--> sink memory (record) --> link
//   (drivers, 18-bit streams)         +--> link (to the master)
//                                     +--> every output MUX
//   sink memory (playback) ----------------> every output MUX
//   link (from the master) ----------------> every output MUX
//   MUX[o] -> transfer function[o] -> delay[o] -> driver
//            -> DDS1 DDS2 PDAC1 PDAC2 FDAC1 FDAC2
//   configuration bus -> MUX addresses, gains, buffer control of every block
//   digital inputs -> photon counters -> counts (config bus), time tags (link)
//   digital outputs <- static register or digital playback buffer
//
// Interfaces: converter pins (see each driver), the configuration bus serial
// port (config_bus), and the transceiver's parallel side (link_controller).
// Timing: a FADC sample reaches its FDAC pins 7 clock cycles (70 ns) after it
// is on the FADC pins in direct mode: 2 (FADC driver) + 1 (MUX) + 3
// (transfer function) + 1 (FDAC driver); the PID mode has the same latency.
// Each output's delay register adds 0..64 clocks on top of this, to align
// outputs whose converters have different pipeline latencies.
// The block structure follows the paper's FPGA diagram; register map, link
// words, sample format and all timing details are this design's choices.
module slave_fpga
  import hq_pkg::*;
#(
  parameter int MEM_DEPTH = 24576,
  parameter int DIG_DEPTH = 4096,
  parameter int PADC_DIV  = 1000
) (
  input  logic clk,
  input  logic rst,
  // fast ADC (both channels)
  input  logic [15:0] fadc_d [2],
  // precise ADCs
  output logic [1:0]  padc_cnv,
  output logic [1:0]  padc_sck,
  input  logic [1:0]  padc_sdo,
  // DDS parallel ports
  output logic [15:0] dds_pdata [2],
  output logic [1:0]  dds_f [2],
  output logic [1:0]  dds_txenable,
  // precise DACs
  output logic [1:0]  pdac_sync_n,
  output logic [1:0]  pdac_sclk,
  output logic [1:0]  pdac_sdin,
  output logic [1:0]  pdac_ldac_n,
  // fast DAC (both channels)
  output logic [15:0] fdac_d [2],
  // digital I/O
  input  logic [N_DIN-1:0]  din,
  output logic [N_DOUT-1:0] dout,
  // configuration bus
  input  logic cfg_sclk,
  input  logic cfg_cs_n,
  input  logic cfg_mosi,
  output logic cfg_miso,
  // transceiver parallel side
  input  logic              link_rx_valid,
  input  logic [LINK_W-1:0] link_rx_word,
  output logic              link_tx_valid,
  output logic [LINK_W-1:0] link_tx_word
);

  cfg_t    cfg;
  status_t status;

  config_bus u_cfg (
    .clk, .rst, .cfg_sclk, .cfg_cs_n, .cfg_mosi, .cfg_miso, .cfg, .status
  );

  // ---------------------------------------------------------------- inputs
  stream_t adc [N_IN];
  stream_t fadc_s [2];
  fadc_driver u_fadc (.clk, .rst, .adc_d(fadc_d), .y(fadc_s));
  assign adc[IN_FADC1] = fadc_s[0];
  assign adc[IN_FADC2] = fadc_s[1];

  for (genvar c = 0; c < 2; c++) begin : g_padc
    padc_driver #(.RATE_DIV(PADC_DIV)) u_padc (
      .clk, .rst, .cnv(padc_cnv[c]), .sck(padc_sck[c]), .sdo(padc_sdo[c]),
      .y(adc[IN_PADC1 + c])
    );
  end

  // ----------------------------------------------------------- sink memory
  stream_t pb [N_OUT];
  logic    dig_valid;
  logic [N_DOUT-1:0] dig_seq;
  logic        ptr_set, mem_wr, mem_rd, rd_valid;
  logic [3:0]  mem_ch;
  logic [15:0] mem_addr;
  logic [SW-1:0] mem_wdata, rd_data;

  sink_memory #(.DEPTH(MEM_DEPTH), .DIG_DEPTH(DIG_DEPTH)) u_mem (
    .clk, .rst,
    .adc_in   (adc),
    .rec_arm  (cfg.rec_arm),
    .rec_len  (cfg.rec_len),
    .rec_done (status.rec_done),
    .pb_start (cfg.pb_start),
    .pb_stop  (cfg.pb_stop),
    .pb_cfg   (cfg.pb),
    .pb_running (status.pb_running),
    .pb_out   (pb),
    .dig_valid(dig_valid),
    .dig_out  (dig_seq),
    .ptr_set  (ptr_set),
    .ptr_ch   (mem_ch),
    .ptr_addr (mem_addr),
    .wr_en    (mem_wr),
    .wr_ch    (mem_ch),
    .wr_data  (mem_wdata),
    .rd_en    (mem_rd),
    .rd_ch    (mem_ch),
    .rd_addr  (mem_addr),
    .rd_valid (rd_valid),
    .rd_data  (rd_data)
  );

  // ------------------------------------------------------ photon counters
  logic [N_DIN-1:0]  tag_valid, tag_ready;
  logic [26:0]       tag [N_DIN];
  logic [N_DIN-1:0][31:0] tag_drops;
  for (genvar d = 0; d < N_DIN; d++) begin : g_phot
    logic cv;
    photon_counter #(.TAG_W(27)) u_pc (
      .clk, .rst, .din(din[d]),
      .count_en (cfg.count_en[d]),
      .gate_len (cfg.gate_len),
      .count    (status.counts[d]),
      .count_valid (cv),
      .tag_en   (cfg.tag_en[d]),
      .tag_valid(tag_valid[d]),
      .tag      (tag[d]),
      .tag_ready(tag_ready[d]),
      .tag_drops(tag_drops[d])
    );
  end

  // ------------------------------------------------------------------ link
  stream_t master_s [N_OUT];
  logic [31:0] stream_drops;
  link_controller #(.TAG_W(27), .RD_LAT(2)) u_link (
    .clk, .rst,
    .rx_valid (link_rx_valid),
    .rx_word  (link_rx_word),
    .tx_valid (link_tx_valid),
    .tx_word  (link_tx_word),
    .master_out (master_s),
    .ptr_set  (ptr_set),
    .wr_en    (mem_wr),
    .rd_en    (mem_rd),
    .mem_ch   (mem_ch),
    .mem_addr (mem_addr),
    .mem_wdata(mem_wdata),
    .rd_valid (rd_valid),
    .rd_data  (rd_data),
    .adc_in   (adc),
    .stream_en(cfg.stream_en),
    .stream_dec(cfg.stream_dec),
    .drops    (stream_drops),
    .tag_valid(tag_valid),
    .tag      (tag),
    .tag_ready(tag_ready)
  );
  // all samples and tags lost on the way to the master
  assign status.drops = stream_drops + tag_drops[0] + tag_drops[1];

  // -------------------------------------------- output channels (MUX + TF)
  stream_t tf_out [N_OUT];
  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    stream_t m, t;
    stream_mux u_mux (
      .clk, .rst, .sel(cfg.out[o].mux), .adc_in(adc), .mem_in(pb[o]),
      .master_in(master_s[o]), .y(m)
    );
    transfer_function u_tf (
      .clk, .rst,
      .mode (cfg.out[o].mode),
      .kp   (cfg.out[o].kp),
      .ki   (cfg.out[o].ki),
      .kd   (cfg.out[o].kd),
      .setpoint (cfg.out[o].setpoint),
      .shift(cfg.out[o].shift),
      .x    (m),
      .y    (t)
    );
    // per-channel latency compensation, 0 clocks after reset
    delay_line u_dly (.clk, .rst, .delay(cfg.out[o].delay), .x(t), .y(tf_out[o]));
  end

  // ------------------------------------------------------- output drivers
  for (genvar c = 0; c < 2; c++) begin : g_drv
    dds_driver u_dds (
      .clk, .rst, .enable(cfg.dds_en[c]), .dest(cfg.dds_dest[c]),
      .x(tf_out[OUT_DDS1 + c]), .pdata(dds_pdata[c]), .f(dds_f[c]),
      .txenable(dds_txenable[c])
    );
    logic pbusy;
    pdac_driver u_pdac (
      .clk, .rst, .x(tf_out[OUT_PDAC1 + c]),
      .sync_n(pdac_sync_n[c]), .sclk(pdac_sclk[c]), .sdin(pdac_sdin[c]),
      .ldac_n(pdac_ldac_n[c]), .busy(pbusy)
    );
    fdac_driver u_fdac (.clk, .rst, .x(tf_out[OUT_FDAC1 + c]), .dac_d(fdac_d[c]));
  end

  // ------------------------------------------------------ digital outputs
  logic [N_DOUT-1:0] dig_hold;
  always_ff @(posedge clk) begin
    if (rst) begin
      dig_hold <= '0;
      dout     <= '0;
    end else begin
      if (dig_valid) dig_hold <= dig_seq;
      dout <= cfg.dout_from_pb ? (dig_valid ? dig_seq : dig_hold) : cfg.dout_static;
    end
  end

endmodule
