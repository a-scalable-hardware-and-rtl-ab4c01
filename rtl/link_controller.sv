// link_controller: user side of the fast serial link between a slave FPGA and
// its master.
//
// The link is the FPGA transceiver; this block sees its parallel side, one
// 32-bit word per 100 MHz clock in each direction (3.2 Gb/s, the highest rate
// at which the link was tested). A word is {type[3:0], ch[3:0], payload[23:0]}
// (link_type_e in hq_pkg); rx_valid/tx_valid low means no word.
//
// Receive (master -> slave), decoded into one-cycle strobes, 1 cycle latency:
//   LK_STREAM  ch < 6: sample payload[17:0] to output channel ch, the "master"
//              input of that channel's MUX (master_out[ch])
//   LK_MEM_PTR set the write pointer of playback buffer ch
//   LK_MEM_WR  write payload[17:0] into playback buffer ch
//   LK_MEM_RD  read address payload[15:0] of record buffer ch
// Other types are ignored.
// Transmit (slave -> master), one word per cycle, fixed priority:
//   1. memory read data (LK_MEM_RD, ch of the request, data in payload);
//      reads arrive at most once per cycle, so these are never held back
//   2. photon time tags: {LK_TAG, input index, tag[26:0]}, taken by
//      ready/valid
//   3. input-channel samples (LK_STREAM, ch = input), for every input with
//      stream_en set, keeping one in every stream_dec+1 valid samples; each
//      input has a one-word holding register, served round robin. A kept
//      sample that finds its register full is dropped and counted in drops.
// A tx word leaves 1 cycle after its source is granted. The word format,
// priorities and decimation are this design's own; the paper gives only the
// link, its rate and what travels on it.
// tx_word bits 31 and 29 (type bits 3 and 1) are constant 0 because no type
// the slave sends (1, 4, 5) sets them; they stay in the word for a fixed format.
module link_controller
  import hq_pkg::*;
#(
  parameter int TAG_W  = 27,
  parameter int RD_LAT = 2
) (
  input  logic clk,
  input  logic rst,
  // transceiver parallel side
  input  logic              rx_valid,
  input  logic [LINK_W-1:0] rx_word,
  output logic              tx_valid,
  output logic [LINK_W-1:0] tx_word,
  // decoded receive
  output stream_t     master_out [N_OUT],
  output logic        ptr_set,
  output logic        wr_en,
  output logic        rd_en,
  output logic [3:0]  mem_ch,
  output logic [15:0] mem_addr,
  output logic [SW-1:0] mem_wdata,
  // memory read data
  input  logic        rd_valid,
  input  logic [SW-1:0] rd_data,
  // input streams to the master
  input  stream_t     adc_in [N_IN],
  input  logic [N_IN-1:0] stream_en,
  input  logic [15:0] stream_dec,
  output logic [31:0] drops,
  // photon time tags
  input  logic [N_DIN-1:0]   tag_valid,
  input  logic [TAG_W-1:0]   tag [N_DIN],
  output logic [N_DIN-1:0]   tag_ready
);

  // ------------------------------------------------------------ receive
  link_type_e rx_type;
  logic [3:0] rx_ch;
  assign rx_type = link_type_e'(rx_word[31:28]);
  assign rx_ch   = rx_word[27:24];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int o = 0; o < N_OUT; o++) master_out[o] <= '0;
      ptr_set <= 1'b0; wr_en <= 1'b0; rd_en <= 1'b0;
      mem_ch <= '0; mem_addr <= '0; mem_wdata <= '0;
    end else begin
      for (int o = 0; o < N_OUT; o++) begin
        master_out[o].valid <= rx_valid && rx_type == LK_STREAM && int'(rx_ch) == o;
        if (rx_valid && rx_type == LK_STREAM && int'(rx_ch) == o)
          master_out[o].data <= rx_word[SW-1:0];
      end
      ptr_set   <= rx_valid && rx_type == LK_MEM_PTR;
      wr_en     <= rx_valid && rx_type == LK_MEM_WR;
      rd_en     <= rx_valid && rx_type == LK_MEM_RD;
      if (rx_valid) begin
        mem_ch    <= rx_ch;
        mem_addr  <= rx_word[15:0];
        mem_wdata <= rx_word[SW-1:0];
      end
    end
  end

  // read requests return in order; remember their channels
  // (the sink memory answers RD_LAT cycles after rd_en)
  logic [3:0] rd_ch_pipe [RD_LAT];
  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i < RD_LAT; i++) rd_ch_pipe[i] <= '0;
    else begin
      rd_ch_pipe[0] <= mem_ch;
      for (int i = 1; i < RD_LAT; i++) rd_ch_pipe[i] <= rd_ch_pipe[i-1];
    end
  end

  // ------------------------------------------------- stream holding regs
  logic [N_IN-1:0]        hold_v;
  sample_t                hold_d [N_IN];
  logic [N_IN-1:0][15:0]  dec_cnt;
  logic [N_IN-1:0]        keep;
  logic [N_IN-1:0]        grant_s;
  logic [$clog2(N_IN)-1:0] rr;
  logic unused;
  assign unused = ^rx_word[23:SW];

  always_comb begin
    for (int i = 0; i < N_IN; i++)
      keep[i] = adc_in[i].valid && stream_en[i] && dec_cnt[i] == 16'd0;
  end

  // samples lost this cycle: kept, but their holding register stays full
  logic [$clog2(N_IN+1)-1:0] n_drop;
  always_comb begin
    n_drop = '0;
    for (int i = 0; i < N_IN; i++)
      n_drop += $bits(n_drop)'(keep[i] && hold_v[i] && !grant_s[i]);
  end

  // ------------------------------------------------------------ arbiter
  logic                 sel_rd, sel_tag;
  logic [N_DIN-1:0]     grant_t;
  always_comb begin
    sel_rd  = rd_valid;
    sel_tag = !rd_valid && |tag_valid;
    grant_t = '0;
    grant_s = '0;
    if (sel_tag) begin
      if (tag_valid[0]) grant_t[0] = 1'b1;
      else              grant_t[1] = 1'b1;
    end else if (!sel_rd) begin
      for (int k = 0; k < N_IN; k++) begin
        automatic int i = (int'(rr) + k) % N_IN;
        if (hold_v[i] && grant_s == '0) grant_s[i] = 1'b1;
      end
    end
  end
  assign tag_ready = grant_t;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold_v <= '0; dec_cnt <= '0; drops <= '0; rr <= '0;
      for (int i = 0; i < N_IN; i++) hold_d[i] <= '0;
      tx_valid <= 1'b0; tx_word <= '0;
    end else begin
      // decimation and holding registers
      for (int i = 0; i < N_IN; i++) begin
        if (!stream_en[i]) dec_cnt[i] <= '0;
        else if (adc_in[i].valid)
          dec_cnt[i] <= (dec_cnt[i] == 16'd0) ? stream_dec : dec_cnt[i] - 16'd1;
        if (keep[i]) begin
          if (!(hold_v[i] && !grant_s[i])) begin
            hold_v[i] <= 1'b1;
            hold_d[i] <= adc_in[i].data;
          end
        end else if (grant_s[i]) begin
          hold_v[i] <= 1'b0;
        end
      end
      drops <= drops + 32'(n_drop);
      // transmit word
      tx_valid <= 1'b0;
      if (sel_rd) begin
        tx_valid <= 1'b1;
        tx_word  <= link_word(LK_MEM_RD, rd_ch_pipe[RD_LAT-1], 24'(rd_data));
      end else if (sel_tag) begin
        tx_valid <= 1'b1;
        tx_word  <= {LK_TAG, ~grant_t[0], 27'(tag[grant_t[0] ? 0 : 1])};
      end else begin
        for (int i = 0; i < N_IN; i++) begin
          if (grant_s[i]) begin
            tx_valid <= 1'b1;
            tx_word  <= link_word(LK_STREAM, 4'(i), 24'(hold_d[i]));
            rr       <= $bits(rr)'((i + 1) % N_IN);
          end
        end
      end
    end
  end

endmodule
