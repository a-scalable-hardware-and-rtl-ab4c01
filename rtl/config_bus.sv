// config_bus: the slow "configuration bus" through which the master sets the
// parameters of the FPGA logic blocks (MUX addresses, transfer-function gains,
// buffer lengths and rates) and reads status back.
//
// The paper names this bus and its role; the physical layer and the register
// map are this design's own. It is a 4-wire serial slave, SPI mode 0: the
// master drives cfg_sclk (at most clk/8), holds cfg_cs_n low for a 40-bit
// frame and shifts MSB first {rw, addr[6:0], data[31:0]} on cfg_mosi, sampled
// on rising cfg_sclk. rw = 1 is a read: after the 8 header bits the slave
// shifts the addressed register out on cfg_miso, changing on falling cfg_sclk,
// and ignores the 32 incoming data bits. All three inputs are synchronised to
// clk with two flip-flops, so the bus is asynchronous to the system clock.
// A write takes effect 3 cycles after the 40th rising cfg_sclk edge arrives.
// Start/stop/arm registers do not store: a write to them gives one-cycle
// pulses in cfg. A frame cut short by cs_n rising is discarded. Reset clears
// all registers, which leaves every output channel with no source and off.
module config_bus
  import hq_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    cfg_sclk,
  input  logic    cfg_cs_n,
  input  logic    cfg_mosi,
  output logic    cfg_miso,
  output cfg_t    cfg,
  input  status_t status
);

  // ---------------------------------------------------------- synchronisers
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  always_ff @(posedge clk) begin
    if (rst) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], cfg_sclk};
      cs_s   <= {cs_s[1:0], cfg_cs_n};
      mosi_s <= {mosi_s[0], cfg_mosi};
    end
  end
  wire sclk_rise = sclk_s[1] & ~sclk_s[2];
  wire sclk_fall = ~sclk_s[1] & sclk_s[2];
  wire selected  = ~cs_s[1];

  // ------------------------------------------------------------ shifting
  logic [39:0] sh_in;
  logic [5:0]  nbits;
  logic [31:0] sh_out;
  logic        wr_stb;
  logic [6:0]  wr_addr;
  logic [31:0] wr_data;
  logic [31:0] rdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      sh_in <= '0; nbits <= '0; sh_out <= '0; cfg_miso <= 1'b0;
      wr_stb <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_stb <= 1'b0;
      if (!selected) begin
        nbits <= '0;
      end else begin
        if (sclk_rise && nbits < 6'd40) begin
          sh_in <= {sh_in[38:0], mosi_s[1]};
          nbits <= nbits + 6'd1;
          if (nbits == 6'd39 && !sh_in[38]) begin
            // 40th bit: sh_in[38] is the rw bit shifted 39 places
            wr_stb  <= 1'b1;
            wr_addr <= sh_in[37:31];
            wr_data <= {sh_in[30:0], mosi_s[1]};
          end
          if (nbits == 6'd7) sh_out <= rdata;  // header complete: load read data
        end
        if (sclk_fall && nbits >= 6'd8 && nbits <= 6'd39) begin
          cfg_miso <= sh_out[31];
          sh_out   <= {sh_out[30:0], 1'b0};
        end
      end
    end
  end

  // read address is the 7 bits after the rw bit; at nbits == 7 the last
  // address bit is on mosi_s[1]
  logic [6:0] rd_addr;
  assign rd_addr = {sh_in[5:0], mosi_s[1]};

  // -------------------------------------------------------- register file
  always_ff @(posedge clk) begin
    if (rst) begin
      cfg <= '0;
      for (int o = 0; o < N_OUT; o++) cfg.out[o].mux <= SRC_NONE;
    end else begin
      cfg.pb_start <= '0;
      cfg.pb_stop  <= '0;
      cfg.rec_arm  <= '0;
      if (wr_stb) begin
        unique case (wr_addr)
          A_PB_START:   cfg.pb_start    <= wr_data[N_PB-1:0];
          A_PB_STOP:    cfg.pb_stop     <= wr_data[N_PB-1:0];
          A_REC_ARM:    cfg.rec_arm     <= wr_data[N_IN-1:0];
          A_DOUT: begin
            cfg.dout_static  <= wr_data[N_DOUT-1:0];
            cfg.dout_from_pb <= wr_data[8];
          end
          A_STREAM_EN:  cfg.stream_en   <= wr_data[N_IN-1:0];
          A_STREAM_DEC: cfg.stream_dec  <= wr_data[15:0];
          A_GATE:       cfg.gate_len    <= wr_data;
          A_PHOT_CTRL: begin
            cfg.count_en <= wr_data[1:0];
            cfg.tag_en   <= wr_data[3:2];
          end
          A_DDS: begin
            cfg.dds_en      <= wr_data[1:0];
            cfg.dds_dest[0] <= wr_data[3:2];
            cfg.dds_dest[1] <= wr_data[5:4];
          end
          default: begin
            if (wr_addr >= A_OUT_BASE && wr_addr < A_OUT_BASE + 7'(8 * N_OUT)) begin
              automatic int o = int'(7'(wr_addr - A_OUT_BASE)) / 8;
              unique case (wr_addr[2:0])
                3'd0: cfg.out[o].mux      <= src_e'(wr_data[2:0]);
                3'd1: cfg.out[o].mode     <= tf_mode_e'(wr_data[1:0]);
                3'd2: cfg.out[o].kp       <= wr_data[SW-1:0];
                3'd3: cfg.out[o].ki       <= wr_data[SW-1:0];
                3'd4: cfg.out[o].kd       <= wr_data[SW-1:0];
                3'd5: cfg.out[o].setpoint <= wr_data[SW-1:0];
                3'd6: cfg.out[o].shift    <= wr_data[5:0];
                3'd7: cfg.out[o].delay    <= wr_data[6:0];
              endcase
            end else if (wr_addr >= A_PB_BASE && wr_addr < A_PB_BASE + 7'(4 * N_PB)) begin
              automatic int p = int'(7'(wr_addr - A_PB_BASE)) / 4;
              unique case (wr_addr[1:0])
                2'd0: cfg.pb[p].length  <= wr_data[15:0];
                2'd1: cfg.pb[p].divider <= wr_data[15:0];
                2'd2: cfg.pb[p].loops   <= wr_data[15:0];
                default: ;
              endcase
            end else if (wr_addr >= A_REC_BASE && wr_addr < A_REC_BASE + 7'(N_IN)) begin
              cfg.rec_len[int'(7'(wr_addr - A_REC_BASE))] <= wr_data[15:0];
            end
          end
        endcase
      end
    end
  end

  // ------------------------------------------------------------ read-back
  always_comb begin
    rdata = '0;
    unique case (rd_addr)
      A_ID:         rdata = ID_WORD;
      A_DOUT:       rdata = {23'd0, cfg.dout_from_pb, 2'd0, cfg.dout_static};
      A_STREAM_EN:  rdata = {28'd0, cfg.stream_en};
      A_STREAM_DEC: rdata = {16'd0, cfg.stream_dec};
      A_GATE:       rdata = cfg.gate_len;
      A_PHOT_CTRL:  rdata = {28'd0, cfg.tag_en, cfg.count_en};
      A_COUNT0:     rdata = status.counts[0];
      A_COUNT1:     rdata = status.counts[1];
      A_DROPS:      rdata = status.drops;
      A_DDS:        rdata = {26'd0, cfg.dds_dest[1], cfg.dds_dest[0], cfg.dds_en};
      A_PB_STAT:    rdata = {20'd0, status.rec_done, 1'b0, status.pb_running};
      default: begin
        if (rd_addr >= A_OUT_BASE && rd_addr < A_OUT_BASE + 7'(8 * N_OUT)) begin
          automatic int o = int'(7'(rd_addr - A_OUT_BASE)) / 8;
          unique case (rd_addr[2:0])
            3'd0: rdata = {29'd0, cfg.out[o].mux};
            3'd1: rdata = {30'd0, cfg.out[o].mode};
            3'd2: rdata = 32'(cfg.out[o].kp);
            3'd3: rdata = 32'(cfg.out[o].ki);
            3'd4: rdata = 32'(cfg.out[o].kd);
            3'd5: rdata = 32'(cfg.out[o].setpoint);
            3'd6: rdata = {26'd0, cfg.out[o].shift};
            3'd7: rdata = {25'd0, cfg.out[o].delay};
          endcase
        end else if (rd_addr >= A_PB_BASE && rd_addr < A_PB_BASE + 7'(4 * N_PB)) begin
          automatic int p = int'(7'(rd_addr - A_PB_BASE)) / 4;
          unique case (rd_addr[1:0])
            2'd0: rdata = {16'd0, cfg.pb[p].length};
            2'd1: rdata = {16'd0, cfg.pb[p].divider};
            2'd2: rdata = {16'd0, cfg.pb[p].loops};
            default: ;
          endcase
        end else if (rd_addr >= A_REC_BASE && rd_addr < A_REC_BASE + 7'(N_IN)) begin
          rdata = {16'd0, cfg.rec_len[int'(7'(rd_addr - A_REC_BASE))]};
        end
      end
    endcase
  end

endmodule
