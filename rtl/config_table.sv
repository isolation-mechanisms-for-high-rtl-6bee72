// config_table: one overlay configuration table.
//
// The isolation primitives of the pipeline (parser, deparser, key extractor,
// key mask, segment and VLIW action tables) are all small arrays with one
// configuration word per module (or per CAM address). This module is that array:
// DEPTH words of WIDTH bits, one synchronous read per clock and one write port
// fed by the reconfiguration daisy chain, so the data path only ever reads.
//
// Timing: rd_en with rd_addr in cycle t gives rd_data in cycle t+1; rd_data
// holds its value until the next rd_en, as a block RAM output register would.
// A write and a read of the same word in one cycle return the old word.
// After reset every word reads as zero, which every user of the table treats
// as "no action" (the paper does not describe reset; this is the design's
// choice). Only a per-word written flag is reset; the word array itself has no
// reset so that it maps onto a RAM, and a word that has not been written since
// reset reads as zero.
module config_table #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [DEPTH-1:0] written;

  wire do_wr = wr_en && (32'(wr_addr) < DEPTH);
  wire rd_ok = (32'(rd_addr) < DEPTH) && written[rd_addr];

  always_ff @(posedge clk) if (do_wr) mem[wr_addr] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written <= '0;
      rd_data <= '0;
    end else begin
      if (rd_en) rd_data <= rd_ok ? mem[rd_addr] : '0;
      if (do_wr) written[wr_addr] <= 1'b1;
    end
  end
endmodule
