// playback_buffer: one channel of the sink memory that stores a sequence and
// plays it back to an output.
//
// The master fills the buffer through a simple write port (wr_en, wr_addr,
// wr_data). A start pulse begins playback at address 0: one word is read
// every divider+1 clock cycles and issued as one valid output word, so the
// same buffer serves a 100 MSa/s fast DAC (divider 0) or a ~100 kSa/s
// precise DAC (divider 999). After `length` words the sequence repeats;
// `loops` repetitions (0 = forever) end it, as does a stop pulse. Between
// words and after the end the output holds the last value, as a channel
// keeps its last value across gaps in a sequence. Each buffer runs on its own,
// so groups of channels can run different loops at the same time.
// Timing: the first word is valid 2 cycles after the start pulse. Read and
// write ports are separate (simple dual-port block RAM). Lengths above DEPTH
// wrap at DEPTH; length 0 makes a start pulse do nothing.
module playback_buffer #(
  parameter int W     = 18,
  parameter int DEPTH = 24576
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [15:0]  wr_addr,
  input  logic [W-1:0] wr_data,
  input  logic         start,
  input  logic         stop,
  input  logic [15:0]  length,
  input  logic [15:0]  divider,
  input  logic [15:0]  loops,
  output logic         running,
  output logic         out_valid,
  output logic [W-1:0] out_data
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rd_addr;
  logic [15:0]   div_cnt, loop_cnt;
  logic          rd_stb;
  logic [AW-1:0] rd_addr_q;   // address of the word read on rd_stb

  always_ff @(posedge clk) if (running && div_cnt == 16'd0) rd_addr_q <= rd_addr;

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < 16'(DEPTH)) mem[wr_addr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0; rd_addr <= '0; div_cnt <= '0; loop_cnt <= '0; rd_stb <= 1'b0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      rd_stb    <= 1'b0;
      out_valid <= rd_stb;
      if (rd_stb) out_data <= mem[rd_addr_q];
      if (start && length != 16'd0) begin
        running <= 1'b1; rd_addr <= '0; div_cnt <= '0; loop_cnt <= '0;
      end else if (stop) begin
        running <= 1'b0;
      end else if (running) begin
        if (div_cnt == 16'd0) begin
          rd_stb  <= 1'b1;
          div_cnt <= divider;
          if (16'(rd_addr) == length - 16'd1 || rd_addr == AW'(DEPTH - 1)) begin
            rd_addr <= '0;
            if (loops != 16'd0 && loop_cnt == loops - 16'd1) running <= 1'b0;
            loop_cnt <= loop_cnt + 16'd1;
          end else begin
            rd_addr <= rd_addr + 1'b1;
          end
        end else begin
          div_cnt <= div_cnt - 16'd1;
        end
      end
    end
  end

endmodule
