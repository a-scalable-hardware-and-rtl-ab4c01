// hq_pkg: types and constants shared by the slave-board FPGA design.
//
// Every data path inside the FPGA carries one sample format, a signed 18-bit
// word plus a valid strobe (stream_t). 18 bits is the resolution of the
// precise converters; the 16-bit fast converters are left-aligned into it.
// A stream that has no new sample in a cycle keeps valid low; consumers hold
// the last value. Channel order follows the labels of the FPGA block diagram:
// inputs FADC1, FADC2, PADC1, PADC2; outputs DDS1, DDS2, PDAC1, PDAC2, FDAC1,
// FDAC2. The register map of the configuration bus and the word format of the
// serial link are this design's own choices.
package hq_pkg;

  localparam int SW    = 18;   // sample width
  localparam int N_IN  = 4;    // analog input channels
  localparam int N_OUT = 6;    // analog/RF output channels
  localparam int N_DIN = 2;    // digital inputs
  localparam int N_DOUT = 6;   // digital outputs
  localparam int N_PB  = N_OUT + 1; // playback buffers: 6 analog + 1 digital

  // input channel indices
  localparam int IN_FADC1 = 0, IN_FADC2 = 1, IN_PADC1 = 2, IN_PADC2 = 3;
  // output channel indices
  localparam int OUT_DDS1 = 0, OUT_DDS2 = 1, OUT_PDAC1 = 2, OUT_PDAC2 = 3,
                 OUT_FDAC1 = 4, OUT_FDAC2 = 5;

  typedef logic signed [SW-1:0] sample_t;

  // data is kept as a plain vector (sign is applied by the consumer with
  // $signed or a sample_t cast) so every tool extends it the same way
  typedef struct packed {
    logic          valid;
    logic [SW-1:0] data;
  } stream_t;

  // MUX address of an output channel
  typedef enum logic [2:0] {
    SRC_IN0 = 3'd0, SRC_IN1 = 3'd1, SRC_IN2 = 3'd2, SRC_IN3 = 3'd3,
    SRC_MEM = 3'd4, SRC_MASTER = 3'd5, SRC_NONE = 3'd7
  } src_e;

  // transfer function mode
  typedef enum logic [1:0] {
    TF_OFF = 2'd0, TF_DIRECT = 2'd1, TF_PID = 2'd2
  } tf_mode_e;

  // ---------------------------------------------------------------- link
  // 32-bit link word: [31:28] type, [27:24] channel, [23:0] payload.
  localparam int LINK_W = 32;
  typedef enum logic [3:0] {
    LK_IDLE    = 4'h0,
    LK_STREAM  = 4'h1, // rx: sample for output ch; tx: sample of input ch
    LK_MEM_WR  = 4'h2, // rx: write payload[17:0] to playback buffer ch, auto-increment
    LK_MEM_PTR = 4'h3, // rx: set write pointer of playback buffer ch to payload[15:0]
    LK_MEM_RD  = 4'h4, // rx: read record buffer ch at payload[15:0]; tx: read data
    LK_TAG     = 4'h5  // tx: photon time tag, [27] digital input, [26:0] tag
  } link_type_e;

  function automatic logic [LINK_W-1:0] link_word(link_type_e t, logic [3:0] ch,
                                                  logic [23:0] payload);
    return {t, ch, payload};
  endfunction

  // ---------------------------------------------------- configuration bus
  localparam logic [31:0] ID_WORD = 32'h5C_0001_00;

  // register addresses
  localparam logic [6:0] A_ID        = 7'h00; // read-only identifier
  localparam logic [6:0] A_PB_START  = 7'h01; // write: start playback buffers (mask [6:0])
  localparam logic [6:0] A_PB_STOP   = 7'h02; // write: stop playback buffers (mask [6:0])
  localparam logic [6:0] A_REC_ARM   = 7'h03; // write: arm record buffers (mask [3:0])
  localparam logic [6:0] A_DOUT      = 7'h04; // [5:0] static value, [8] 1 = from playback
  localparam logic [6:0] A_STREAM_EN = 7'h05; // [3:0] send input stream to master
  localparam logic [6:0] A_STREAM_DEC= 7'h06; // [15:0] decimation of master streams
  localparam logic [6:0] A_GATE      = 7'h07; // photon gate length in cycles
  localparam logic [6:0] A_PHOT_CTRL = 7'h08; // [1:0] counter enable, [3:2] tag enable
  localparam logic [6:0] A_COUNT0    = 7'h09; // read-only: counts of last gate, din0
  localparam logic [6:0] A_COUNT1    = 7'h0A; // read-only: counts of last gate, din1
  localparam logic [6:0] A_DROPS     = 7'h0B; // read-only: link tx samples dropped
  localparam logic [6:0] A_DDS       = 7'h0C; // [1:0] DDS enable, [3:2] DDS1 dest, [5:4] DDS2 dest
  localparam logic [6:0] A_PB_STAT   = 7'h0D; // read-only: [6:0] playback running, [11:8] record done
  // per output o: 0x10 + 8*o + {0 mux, 1 mode, 2 kp, 3 ki, 4 kd, 5 setpoint, 6 shift,
  //   7 delay}
  localparam logic [6:0] A_OUT_BASE  = 7'h10;
  // per playback p: 0x40 + 4*p + {0 length, 1 divider, 2 loops}
  localparam logic [6:0] A_PB_BASE   = 7'h40;
  // per record r: 0x60 + r: length
  localparam logic [6:0] A_REC_BASE  = 7'h60;

  typedef struct packed {
    src_e        mux;
    tf_mode_e    mode;
    sample_t     kp, ki, kd;
    sample_t     setpoint;
    logic [5:0]  shift;
    logic [6:0]  delay;    // latency compensation, clocks
  } out_cfg_t;

  typedef struct packed {
    logic [15:0] length;   // samples in the sequence (0 = 65536 is not used)
    logic [15:0] divider;  // clock cycles per sample minus one
    logic [15:0] loops;    // repetitions, 0 = forever
  } pb_cfg_t;

  typedef struct packed {
    out_cfg_t [N_OUT-1:0] out;
    pb_cfg_t  [N_PB-1:0]  pb;
    logic [N_IN-1:0][15:0] rec_len;
    logic [N_PB-1:0]      pb_start;   // one-cycle pulses
    logic [N_PB-1:0]      pb_stop;    // one-cycle pulses
    logic [N_IN-1:0]      rec_arm;    // one-cycle pulses
    logic [N_DOUT-1:0]    dout_static;
    logic                 dout_from_pb;
    logic [N_IN-1:0]      stream_en;
    logic [15:0]          stream_dec;
    logic [31:0]          gate_len;
    logic [N_DIN-1:0]     count_en;
    logic [N_DIN-1:0]     tag_en;
    logic [1:0]           dds_en;
    logic [1:0][1:0]      dds_dest;
  } cfg_t;

  typedef struct packed {
    logic [N_DIN-1:0][31:0] counts;
    logic [31:0]            drops;
    logic [N_PB-1:0]        pb_running;
    logic [N_IN-1:0]        rec_done;
  } status_t;

endpackage
