// menshen_top: an RMT-style match-action pipeline that isolates several
// packet-processing modules sharing it.
//
// Data path (512-bit AXI-Stream in and out):
//   packet filter -> 2 parsers (round robin) -> 5 match-action stages
//   -> 4 deparsers, each paired with its own packet buffer -> output merge.
// The filter sends each accepted packet whole into one of the four packet
// buffers (round robin, recorded as a one-hot tag in the PHV metadata) and its
// first 128 bytes to one of the two parsers. The parsers' PHVs enter the stages
// in arrival order; after the last stage each PHV goes to the deparser named by
// its tag, which patches the oldest packet of its buffer. Between elements the
// module ID travels one cycle ahead of the PHV so every per-module table read
// overlaps the PHV transfer.
//
// Isolation: the module ID (VLAN ID) selects a per-module configuration word in
// every shared unit (parser, key extractor, key mask, segment and deparser
// tables: 32 modules), is part of every CAM entry (so match-action entries
// are partitioned), and translates every stateful address through the
// module's segment. The data path only reads these tables.
//
// Reconfiguration: packets to UDP port 0xF1F2 are turned by the filter into
// commands that walk a daisy chain of registers: parser node (element 0),
// stages 1-5, deparser node (element 6). A command leaving the chain increments
// the filter's counter, which software polls through the AXI-Lite port while
// the module being rewritten is blocked by the filter's bitmap register.
//
// Latency of a 1-beat packet with an idle output, from input beat to output
// beat: parser 2 + 5 stages x 4 + deparser queue/table/overlay 3 cycles.
// Throughput: one PHV per cycle through the stages; the input accepts one beat
// per cycle while the tagged buffer has room.
//
// Tool notes: lint reports rst_n as used both asynchronously (flip-flop resets)
// and synchronously; the synchronous use is only the `disable iff` of the two
// assertions below and is intended. The AXI-Lite response codes are constant
// OKAY, since both registers always accept an access.
module menshen_top
  import menshen_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // ingress
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic [KEEP_W-1:0] s_axis_tkeep,
  input  logic              s_axis_tlast,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  // egress
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic [KEEP_W-1:0] m_axis_tkeep,
  output logic              m_axis_tlast,
  output logic [7:0]        m_axis_tdest,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  // packet filter registers (AXI-Lite)
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [7:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready
);
  // ---------------------------------------------------------------- filter
  logic                   f_valid, f_sop;
  beat_t                  f_beat;
  logic [NUM_BUFS-1:0]    f_buf_sel, buf_full;
  logic [NUM_PARSERS-1:0] f_par_sel;
  reconf_cmd_t            cfg_filter, cfg_parser, cfg_deparser;
  logic [31:0]            reconf_count, bitmap;

  packet_filter u_filter (
    .clk, .rst_n,
    .s_axis_tdata, .s_axis_tkeep, .s_axis_tlast, .s_axis_tvalid, .s_axis_tready,
    .m_valid(f_valid), .m_beat(f_beat), .m_sop(f_sop), .m_buf_sel(f_buf_sel),
    .m_parser_sel(f_par_sel), .buf_full,
    .cfg_out(cfg_filter), .cfg_done(cfg_deparser.valid),
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wvalid,
    .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready, .s_axil_araddr,
    .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid,
    .s_axil_rready, .reconf_count, .bitmap);

  // ---------------------------------------------------------------- parsers
  logic                  pn_we;
  logic [3:0]            pn_res;
  logic [7:0]            pn_idx;
  logic [CMD_DATA_W-1:0] pn_data;

  daisy_chain_node #(.ELEMENT(ELEM_PARSER)) u_parser_node (
    .clk, .rst_n, .cmd_in(cfg_filter), .cmd_out(cfg_parser),
    .local_we(pn_we), .local_res(pn_res), .local_index(pn_idx), .local_data(pn_data));

  logic                   p_vev [NUM_PARSERS];
  logic [VID_W-1:0]       p_ve  [NUM_PARSERS];
  logic [NUM_PARSERS-1:0] p_valid;
  phv_t                   p_phv [NUM_PARSERS];

  for (genvar p = 0; p < NUM_PARSERS; p++) begin : g_parser
    parser u_parser (
      .clk, .rst_n,
      .in_valid(f_valid && f_par_sel[p]), .in_beat(f_beat), .in_sop(f_sop), .in_buf_tag(f_buf_sel),
      .cfg_we(pn_we && pn_res == RES_PARSE_TBL), .cfg_addr(pn_idx[MOD_IDX_W-1:0]),
      .cfg_data(pn_data[CMD_DATA_W-1 -: PARSER_W]),
      .vid_early_valid(p_vev[p]), .vid_early(p_ve[p]), .phv_valid(p_valid[p]), .phv(p_phv[p]));
  end

  // merge: at most one parser finishes a header per cycle (see parser timing)
  logic             m_vev, m_valid;
  logic [VID_W-1:0] m_ve;
  phv_t             m_phv;
  always_comb begin
    m_vev = 1'b0; m_ve = '0; m_valid = 1'b0; m_phv = '0;
    for (int p = 0; p < NUM_PARSERS; p++) begin
      if (p_vev[p])   begin m_vev = 1'b1;   m_ve  = p_ve[p];  end
      if (p_valid[p]) begin m_valid = 1'b1; m_phv = p_phv[p]; end
    end
  end

  // ---------------------------------------------------------------- stages
  logic             s_vev   [NUM_STAGES+1];
  logic [VID_W-1:0] s_ve    [NUM_STAGES+1];
  logic             s_valid [NUM_STAGES+1];
  phv_t             s_phv   [NUM_STAGES+1];
  reconf_cmd_t      s_cfg   [NUM_STAGES+1];

  assign s_vev[0]   = m_vev;
  assign s_ve[0]    = m_ve;
  assign s_valid[0] = m_valid;
  assign s_phv[0]   = m_phv;
  assign s_cfg[0]   = cfg_parser;

  for (genvar s = 0; s < NUM_STAGES; s++) begin : g_stage
    stage #(.STAGE_ID(8'(s + 1))) u_stage (
      .clk, .rst_n,
      .vid_early_valid(s_vev[s]), .vid_early(s_ve[s]), .phv_valid(s_valid[s]), .phv(s_phv[s]),
      .vid_early_out_valid(s_vev[s+1]), .vid_early_out(s_ve[s+1]),
      .phv_out_valid(s_valid[s+1]), .phv_out(s_phv[s+1]),
      .cfg_in(s_cfg[s]), .cfg_out(s_cfg[s+1]));
  end

  // ---------------------------------------------------------------- buffers and deparsers
  logic                  dn_we;
  logic [3:0]            dn_res;
  logic [7:0]            dn_idx;
  logic [CMD_DATA_W-1:0] dn_data;

  daisy_chain_node #(.ELEMENT(ELEM_DEPARSER)) u_deparser_node (
    .clk, .rst_n, .cmd_in(s_cfg[NUM_STAGES]), .cmd_out(cfg_deparser),
    .local_we(dn_we), .local_res(dn_res), .local_index(dn_idx), .local_data(dn_data));

  logic [DATA_W-1:0] d_tdata  [NUM_BUFS];
  logic [KEEP_W-1:0] d_tkeep  [NUM_BUFS];
  logic              d_tlast  [NUM_BUFS];
  logic [7:0]        d_tdest  [NUM_BUFS];
  logic              d_tvalid [NUM_BUFS];
  logic              d_tready [NUM_BUFS];
  logic [NUM_BUFS-1:0] d_sent, d_dropped, d_ovf;

  for (genvar b = 0; b < NUM_BUFS; b++) begin : g_buf
    beat_t rd_data;
    logic  rd_en, empty;
    logic [$clog2(64):0] count;

    packet_buffer #(.DEPTH(64)) u_buf (
      .clk, .rst_n, .wr_en(f_valid && f_buf_sel[b]), .wr_data(f_beat),
      .rd_en, .rd_data, .full(buf_full[b]), .empty, .count);

    deparser #(.PHV_FIFO_DEPTH(64)) u_deparser (
      .clk, .rst_n,
      .phv_valid(s_valid[NUM_STAGES] && s_phv[NUM_STAGES].md.buf_tag[b]), .phv(s_phv[NUM_STAGES]),
      .pkt_empty(empty), .pkt_data(rd_data), .pkt_rd(rd_en),
      .m_axis_tdata(d_tdata[b]), .m_axis_tkeep(d_tkeep[b]), .m_axis_tlast(d_tlast[b]),
      .m_axis_tdest(d_tdest[b]), .m_axis_tvalid(d_tvalid[b]), .m_axis_tready(d_tready[b]),
      .cfg_we(dn_we && dn_res == RES_PARSE_TBL), .cfg_addr(dn_idx[MOD_IDX_W-1:0]),
      .cfg_data(dn_data[CMD_DATA_W-1 -: PARSER_W]),
      .pkt_sent(d_sent[b]), .pkt_dropped(d_dropped[b]), .phv_overflow(d_ovf[b]));
  end

  output_arbiter #(.N(NUM_BUFS)) u_arb (
    .clk, .rst_n,
    .s_tdata(d_tdata), .s_tkeep(d_tkeep), .s_tlast(d_tlast), .s_tdest(d_tdest),
    .s_tvalid(d_tvalid), .s_tready(d_tready),
    .m_tdata(m_axis_tdata), .m_tkeep(m_axis_tkeep), .m_tlast(m_axis_tlast),
    .m_tdest(m_axis_tdest), .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready));

  // ---------------------------------------------------------------- rules
  // two parsers never hand a PHV to the first stage in the same cycle
  a_parser_merge: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(p_valid))
    else $error("two parsers produced a PHV in the same cycle");
  // a PHV queue never overflows (it is as deep as its packet buffer)
  a_no_phv_overflow: assert property (@(posedge clk) disable iff (!rst_n) d_ovf == '0)
    else $error("deparser PHV queue overflow");
endmodule
