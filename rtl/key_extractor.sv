// key_extractor: per-module match key construction for one stage.
//
// The key is built from PHV containers chosen by the module's entry in the key
// extractor table (38 bits, fields most significant first, in the order of the
// paper's format figure):
//   [37:35] 1st 6B index, [34:32] 2nd 6B, [31:29] 1st 4B, [28:26] 2nd 4B,
//   [25:23] 1st 2B, [22:20] 2nd 2B, [19:16] compare opcode,
//   [15:8] operand A, [7:0] operand B.
// key = {6B, 6B, 4B, 4B, 2B, 2B, flag} (193 bits), where flag is the truth of
// "A op B". An operand with bit 7 set names container [4:0]; otherwise it is the
// immediate value [6:0] (encoding chosen by this design, as are the opcode
// numbers: 0 none, 1 ==, 2 !=, 3 >, 4 >=, 5 <, 6 <=). The key is then ANDed with
// the module's 193-bit entry in the key mask table, so a module using a short key
// leaves the unused bits zero. Both tables are indexed by the module ID.
//
// Timing: vid_early in cycle t-1 reads both tables; the PHV in cycle t gives the
// key, the PHV and its module ID in cycle t+1. One PHV per cycle.
module key_extractor
  import menshen_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 vid_early_valid,
  input  logic [VID_W-1:0]     vid_early,
  input  logic                 phv_valid,
  input  phv_t                 phv,
  // table writes (daisy chain)
  input  logic                 cfg_ke_we,
  input  logic                 cfg_mask_we,
  input  logic [MOD_IDX_W-1:0] cfg_addr,
  input  logic [KE_W-1:0]      cfg_ke_data,
  input  logic [KEY_W-1:0]     cfg_mask_data,
  // outputs
  output logic                 key_valid,
  output logic [KEY_W-1:0]     key,
  output phv_t                 phv_out
);
  logic [KE_W-1:0]  ke;
  logic [KEY_W-1:0] mask;

  config_table #(.DEPTH(NUM_MODULES), .WIDTH(KE_W)) u_ke_tbl (
    .clk, .rst_n, .rd_en(vid_early_valid), .rd_addr(vid_early[MOD_IDX_W-1:0]), .rd_data(ke),
    .wr_en(cfg_ke_we), .wr_addr(cfg_addr), .wr_data(cfg_ke_data));

  config_table #(.DEPTH(NUM_MODULES), .WIDTH(KEY_W)) u_mask_tbl (
    .clk, .rst_n, .rd_en(vid_early_valid), .rd_addr(vid_early[MOD_IDX_W-1:0]), .rd_data(mask),
    .wr_en(cfg_mask_we), .wr_addr(cfg_addr), .wr_data(cfg_mask_data));

  function automatic logic [OPW-1:0] operand(input phv_t p, input logic [7:0] o);
    return o[7] ? cont_val(p, o[4:0]) : OPW'(o[6:0]);
  endfunction

  logic [KEY_W-1:0] key_c;
  always_comb begin
    logic [OPW-1:0] a, b;
    logic           flag;
    a = operand(phv, ke[15:8]);
    b = operand(phv, ke[7:0]);
    case (cmp_op_e'(ke[19:16]))
      CMP_EQ:  flag = (a == b);
      CMP_NE:  flag = (a != b);
      CMP_GT:  flag = (a >  b);
      CMP_GE:  flag = (a >= b);
      CMP_LT:  flag = (a <  b);
      CMP_LE:  flag = (a <= b);
      default: flag = 1'b0;
    endcase
    key_c = {phv.c6[ke[37:35]], phv.c6[ke[34:32]],
             phv.c4[ke[31:29]], phv.c4[ke[28:26]],
             phv.c2[ke[25:23]], phv.c2[ke[22:20]], flag} & mask;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_valid <= 1'b0; key <= '0; phv_out <= '0;
    end else begin
      key_valid <= phv_valid;
      if (phv_valid) begin
        key     <= key_c;
        phv_out <= phv;
      end
    end
  end
endmodule
