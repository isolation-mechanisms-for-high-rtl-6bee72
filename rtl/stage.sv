// stage: one match-action stage of the isolating pipeline.
//
// Sub-elements, each one clock long so the stage accepts a PHV every cycle:
//   cycle 1  key extractor   module's key-extractor and key-mask entries
//                            (read the cycle before, from vid_early) build the
//                            193-bit key;
//   cycle 2  CAM lookup      {module ID, key} searched in the 16-entry CAM;
//   cycle 3  action RAM read the hit address reads the 625-bit VLIW word (a miss
//                            gives the all-zero word, i.e. no action); the
//                            segment table is read for the action engine;
//   cycle 4  action engine   25 ALUs and the stateful ALU produce the new PHV.
// The module ID goes on to the next stage one cycle ahead of the PHV
// (vid_early_out), so the next stage's tables are read while the PHV travels.
// The split into CAM-lookup and RAM-read steps is the paper's deep-pipelining
// technique; the cycle counts are this design's.
//
// Configuration arrives on the daisy chain (cfg_in, forwarded on cfg_out one
// cycle later). A command whose resource ID has element STAGE_ID in bits
// [11:4] writes table [3:0] of this stage: 0 key extractor, 1 key mask, 2 CAM,
// 3 VLIW action table, 4 segment table; the entry index is the module ID
// (tables 0, 1, 4) or the CAM address (tables 2, 3), and the entry is the top
// bits of the command data. This numbering is this design's.
//
// Timing: PHV in cycle t -> PHV out in cycle t+4; vid_early leads by one cycle.
module stage
  import menshen_pkg::*;
#(
  parameter logic [7:0] STAGE_ID = 8'd1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             vid_early_valid,
  input  logic [VID_W-1:0] vid_early,
  input  logic             phv_valid,
  input  phv_t             phv,
  output logic             vid_early_out_valid,
  output logic [VID_W-1:0] vid_early_out,
  output logic             phv_out_valid,
  output phv_t             phv_out,
  input  reconf_cmd_t      cfg_in,
  output reconf_cmd_t      cfg_out
);
  // ---------------------------------------------------------------- daisy chain
  logic                  cfg_we;
  logic [3:0]            cfg_res;
  logic [7:0]            cfg_idx;
  logic [CMD_DATA_W-1:0] cfg_data;

  daisy_chain_node #(.ELEMENT(STAGE_ID)) u_node (
    .clk, .rst_n, .cmd_in(cfg_in), .cmd_out(cfg_out),
    .local_we(cfg_we), .local_res(cfg_res), .local_index(cfg_idx), .local_data(cfg_data));

  wire we_ke   = cfg_we && cfg_res == RES_KE;
  wire we_mask = cfg_we && cfg_res == RES_MASK;
  wire we_cam  = cfg_we && cfg_res == RES_CAM;
  wire we_vliw = cfg_we && cfg_res == RES_VLIW;
  wire we_seg  = cfg_we && cfg_res == RES_SEG;

  // ---------------------------------------------------------------- cycle 1
  logic             k_valid;
  logic [KEY_W-1:0] k_key;
  phv_t             k_phv;

  key_extractor u_ke (
    .clk, .rst_n, .vid_early_valid, .vid_early, .phv_valid, .phv,
    .cfg_ke_we(we_ke), .cfg_mask_we(we_mask), .cfg_addr(cfg_idx[MOD_IDX_W-1:0]),
    .cfg_ke_data(cfg_data[CMD_DATA_W-1 -: KE_W]),
    .cfg_mask_data(cfg_data[CMD_DATA_W-1 -: KEY_W]),
    .key_valid(k_valid), .key(k_key), .phv_out(k_phv));

  // ---------------------------------------------------------------- cycle 2
  logic                  m_valid, m_hit;
  logic [CAM_ADDR_W-1:0] m_addr;
  phv_t                  m_phv;

  exact_match_cam #(.DEPTH(CAM_DEPTH)) u_cam (
    .clk, .rst_n, .lookup_valid(k_valid), .lookup_vid(k_phv.md.vid), .lookup_key(k_key),
    .out_valid(m_valid), .hit(m_hit), .hit_addr(m_addr),
    .wr_en(we_cam), .wr_addr(cfg_idx[CAM_ADDR_W-1:0]), .wr_data(cfg_data[CMD_DATA_W-1 -: CAM_W]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_phv <= '0;
    else if (k_valid) m_phv <= k_phv;
  end

  // ---------------------------------------------------------------- cycle 3
  logic              a_valid, a_hit;
  logic [VLIW_W-1:0] a_vliw;
  phv_t              a_phv;

  config_table #(.DEPTH(CAM_DEPTH), .WIDTH(VLIW_W)) u_vliw_tbl (
    .clk, .rst_n, .rd_en(m_valid), .rd_addr(m_addr), .rd_data(a_vliw),
    .wr_en(we_vliw), .wr_addr(cfg_idx[CAM_ADDR_W-1:0]), .wr_data(cfg_data[CMD_DATA_W-1 -: VLIW_W]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0; a_hit <= 1'b0; a_phv <= '0;
    end else begin
      a_valid <= m_valid;
      a_hit   <= m_hit;
      if (m_valid) a_phv <= m_phv;
    end
  end

  // ---------------------------------------------------------------- cycle 4
  action_engine u_ae (
    .clk, .rst_n,
    .vid_early_valid(m_valid), .vid_early(m_phv.md.vid),
    .phv_valid(a_valid), .phv(a_phv), .vliw(a_hit ? a_vliw : '0),
    .phv_out_valid, .phv_out,
    .cfg_seg_we(we_seg), .cfg_addr(cfg_idx[MOD_IDX_W-1:0]),
    .cfg_seg_data(cfg_data[CMD_DATA_W-1 -: SEG_W]));

  assign vid_early_out_valid = a_valid;
  assign vid_early_out       = a_phv.md.vid;
endmodule
