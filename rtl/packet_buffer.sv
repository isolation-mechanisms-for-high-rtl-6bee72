// packet_buffer: whole-packet store beside the match-action pipeline.
//
// While a packet's header travels through the stages as a PHV, the complete
// packet (header and payload) waits here; the deparser later reads it back and
// patches the header. The design has one buffer per deparser (four).
// It is a plain first-in first-out queue of bus beats with
// first-word-fall-through reads: rd_data shows the oldest beat whenever
// empty is low, and rd_en pops it. wr_en is ignored when full, rd_en when empty.
// The depth (64 beats = 4 KiB, two maximum-size Ethernet frames) is this
// design's choice; the paper gives no size.
module packet_buffer
  import menshen_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  beat_t wr_data,
  input  logic  rd_en,
  output beat_t rd_data,
  output logic  full,
  output logic  empty,
  output logic [AW:0] count
);
  beat_t mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  assign rd_data = mem[rp];
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
endmodule
