// exact_match_cam: the stage's exact-match table, shared by all modules.
//
// CAM_DEPTH entries, each {module ID (12 bits), key (193 bits)} = 205 bits plus
// a valid flag. A lookup compares the packet's module ID and masked key with
// every valid entry at once; because the module ID is part of every entry, a
// packet can only ever hit entries that belong to its own module, which is how
// the table is partitioned between modules. The lowest-numbered matching entry
// wins and its address indexes the VLIW action table.
// Entries are written by the daisy chain (word = {vid[11:0], key[192:0]}) and
// become valid when written; reset invalidates all of them. The paper uses a
// vendor CAM block here; this is a register-and-comparator version of it.
//
// Timing: lookup in cycle t, hit/hit_addr/out_valid registered in cycle t+1.
module exact_match_cam
  import menshen_pkg::*;
#(
  parameter int unsigned DEPTH = CAM_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lookup_valid,
  input  logic [VID_W-1:0] lookup_vid,
  input  logic [KEY_W-1:0] lookup_key,
  output logic             out_valid,
  output logic             hit,
  output logic [AW-1:0]    hit_addr,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [CAM_W-1:0] wr_data
);
  logic [CAM_W-1:0] entry [DEPTH];
  logic [DEPTH-1:0] valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int i = 0; i < int'(DEPTH); i++) entry[i] <= '0;
    end else if (wr_en) begin
      entry[wr_addr] <= wr_data;
      valid[wr_addr] <= 1'b1;
    end
  end

  logic          hit_c;
  logic [AW-1:0] addr_c;
  always_comb begin
    hit_c  = 1'b0;
    addr_c = '0;
    for (int i = int'(DEPTH) - 1; i >= 0; i--) begin
      if (valid[i] && entry[i] == {lookup_vid, lookup_key}) begin
        hit_c  = 1'b1;
        addr_c = AW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; hit <= 1'b0; hit_addr <= '0;
    end else begin
      out_valid <= lookup_valid;
      hit       <= lookup_valid && hit_c;
      hit_addr  <= addr_c;
    end
  end
endmodule
