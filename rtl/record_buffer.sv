// record_buffer: one channel of the sink memory that records an input stream
// for the master to read.
//
// An arm pulse restarts recording at address 0; every valid input sample is
// written at the next address until `length` samples are stored (capped at
// DEPTH), then done rises and stays high until the next arm. The master reads
// any address through rd_en/rd_addr; rd_data is valid one cycle later
// (rd_valid). Separate write and read ports (simple dual-port block RAM).
// length 0 makes an arm pulse only clear done.
module record_buffer #(
  parameter int W     = 18,
  parameter int DEPTH = 24576
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         arm,
  input  logic [15:0]  length,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         recording,
  output logic         done,
  input  logic         rd_en,
  input  logic [15:0]  rd_addr,
  output logic         rd_valid,
  output logic [W-1:0] rd_data
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr;

  always_ff @(posedge clk) begin
    if (recording && in_valid) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      recording <= 1'b0; done <= 1'b0; wr_ptr <= '0;
    end else if (arm) begin
      recording <= (length != 16'd0); done <= 1'b0; wr_ptr <= '0;
    end else if (recording && in_valid) begin
      if (16'(wr_ptr) == length - 16'd1 || wr_ptr == AW'(DEPTH - 1)) begin
        recording <= 1'b0; done <= 1'b1;
      end else begin
        wr_ptr <= wr_ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) rd_data <= mem[rd_addr[AW-1:0]];
    end
  end

  logic unused;
  assign unused = ^rd_addr;

endmodule
