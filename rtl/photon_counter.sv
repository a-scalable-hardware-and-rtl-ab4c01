// photon_counter: counts and time-tags pulses on one digital input.
//
// A photon detector's output pulses (a few ns to tens of ns wide) are fed to
// a digital input. The input passes a two-flip-flop synchroniser and a
// rising-edge detector clocked at 100 MHz, which gives a time resolution of
// one clock (10 ns); a pulse must stay high for at least one clock to be
// seen, and two pulses need one low clock between them.
// Counting: while count_en is high, edges are counted in back-to-back gates
// of gate_len cycles; at the end of each gate the total appears on `count`
// with a one-cycle count_valid strobe and a new gate starts at once. Clearing
// count_en resets the gate.
// Time tagging: while tag_en is high, each edge pushes the value of a free-
// running TAG_W-bit cycle counter (its time of arrival at the edge detector)
// into a FIFO_DEPTH-deep FIFO, from which tag_valid/tag_ready hand tags to
// the serial link (ready/valid handshake, a tag moves when both are high).
// An edge that finds the FIFO full is dropped and counted in tag_drops.
// Counting on a digital input and shipping tags to the master follow the
// paper; widths, depth and the gate scheme are this design's choices.
module photon_counter #(
  parameter int TAG_W      = 27,
  parameter int FIFO_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             din,
  input  logic             count_en,
  input  logic [31:0]      gate_len,
  output logic [31:0]      count,
  output logic             count_valid,
  input  logic             tag_en,
  output logic             tag_valid,
  output logic [TAG_W-1:0] tag,
  input  logic             tag_ready,
  output logic [31:0]      tag_drops
);

  localparam int PW = $clog2(FIFO_DEPTH);

  logic [2:0] s;
  always_ff @(posedge clk) begin
    if (rst) s <= '0;
    else     s <= {s[1:0], din};
  end
  wire edge_det = s[1] & ~s[2];

  logic [TAG_W-1:0] now;
  always_ff @(posedge clk) begin
    if (rst) now <= '0;
    else     now <= now + 1'b1;
  end

  // ------------------------------------------------------------- gates
  logic [31:0] gate_cnt, acc;
  always_ff @(posedge clk) begin
    if (rst || !count_en) begin
      gate_cnt <= '0; acc <= '0; count_valid <= 1'b0;
      if (rst) count <= '0;
    end else begin
      count_valid <= 1'b0;
      if (gate_cnt >= gate_len - 32'd1) begin
        count       <= acc + 32'(edge_det);
        count_valid <= 1'b1;
        acc         <= '0;
        gate_cnt    <= '0;
      end else begin
        acc      <= acc + 32'(edge_det);
        gate_cnt <= gate_cnt + 32'd1;
      end
    end
  end

  // -------------------------------------------------------------- tags
  logic [TAG_W-1:0] fifo [FIFO_DEPTH];
  logic [PW:0]      wp, rp;
  wire full  = (wp[PW] != rp[PW]) && (wp[PW-1:0] == rp[PW-1:0]);
  wire empty = (wp == rp);
  wire push  = tag_en && edge_det;
  wire pop   = tag_valid && tag_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; tag_drops <= '0;
    end else begin
      if (push && !full) begin
        fifo[wp[PW-1:0]] <= now;
        wp <= wp + 1'b1;
      end else if (push) begin
        tag_drops <= tag_drops + 32'd1;
      end
      if (pop) rp <= rp + 1'b1;
    end
  end

  assign tag_valid = !empty;
  assign tag       = fifo[rp[PW-1:0]];

endmodule
