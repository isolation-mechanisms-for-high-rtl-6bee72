// stateful_alu: segment table and stateful memory of one stage.
//
// Stateful memory is shared by all modules by giving each module a slice of it.
// A module's actions use module-local addresses; the segment table, indexed by
// the module ID, holds the module's slice as a 16-bit entry whose first
// (upper) byte is the base offset and whose second (lower) byte is the range.
// A local address a is legal when a < range and then maps to physical word
// offset + a; an illegal access neither reads nor writes and returns 0, so a
// module can never reach another module's words.
// Operations: load returns the word; store writes wdata; loadd reads the word,
// adds one, writes it back and returns the new value. One access per cycle.
// The memory size (256 x 32 bits) and the out-of-range behaviour are this
// design's choices; the paper gives the segment-entry format only.
//
// Timing: vid_early in cycle t-1 reads the segment entry; the access in cycle t
// returns result/ok combinationally in cycle t and writes at the end of cycle t,
// so an access in cycle t+1 sees the new value. The memory array has no reset
// (it maps onto a RAM); a reset per-word written flag makes every word read as
// zero until it is first written.
module stateful_alu
  import menshen_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 vid_early_valid,
  input  logic [VID_W-1:0]     vid_early,
  input  logic                 req,
  input  logic [3:0]           op,
  input  logic [OPW-1:0]       local_addr,
  input  logic [OPW-1:0]       wdata,
  output logic [MEM_W-1:0]     result,
  output logic                 ok,
  // segment table write (daisy chain)
  input  logic                 cfg_we,
  input  logic [MOD_IDX_W-1:0] cfg_addr,
  input  logic [SEG_W-1:0]     cfg_data
);
  logic [SEG_W-1:0] seg;
  logic [MEM_W-1:0] mem [MEM_DEPTH];
  logic [MEM_DEPTH-1:0] written;   // word written since reset (unwritten words read 0)

  config_table #(.DEPTH(NUM_MODULES), .WIDTH(SEG_W)) u_seg_tbl (
    .clk, .rst_n, .rd_en(vid_early_valid), .rd_addr(vid_early[MOD_IDX_W-1:0]), .rd_data(seg),
    .wr_en(cfg_we), .wr_addr(cfg_addr), .wr_data(cfg_data));

  logic [MEM_AW:0]  phys;
  logic [MEM_W-1:0] rd;
  always_comb begin
    phys   = (MEM_AW+1)'(seg[15:8]) + (MEM_AW+1)'(local_addr[7:0]);
    ok     = req && (local_addr < OPW'(seg[7:0])) && (32'(phys) < MEM_DEPTH);
    rd     = (ok && written[phys[MEM_AW-1:0]]) ? mem[phys[MEM_AW-1:0]] : '0;
    result = '0;
    if (ok) begin
      case (op)
        OP_LOAD:  result = rd;
        OP_LOADD: result = rd + 1'b1;
        default:  result = '0;
      endcase
    end
  end

  wire             m_we = ok && (op == OP_STORE || op == OP_LOADD);
  wire [MEM_W-1:0] m_wd = (op == OP_STORE) ? wdata[MEM_W-1:0] : rd + 1'b1;

  always_ff @(posedge clk) if (m_we) mem[phys[MEM_AW-1:0]] <= m_wd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) written <= '0;
    else if (m_we) written[phys[MEM_AW-1:0]] <= 1'b1;
  end
endmodule
