// packet_filter: ingress gate of the pipeline.
//
// Every packet entering the pipeline passes this filter first. On the first bus
// beat (which holds the whole 64-byte Ethernet/VLAN/IPv4/UDP header) it puts the
// packet in one of three classes and keeps that class for the rest of the packet:
//   * drop   - no VLAN tag (TPID 0x8100 missing), a VLAN ID that has no table
//              entry (>= NUM_MODULES), or a module whose bit is set in the
//              bitmap register because it is being reconfigured;
//   * reconf - IPv4/UDP with destination port 0xF1F2: the packet is not passed
//              on; its first three beats are captured and turned into one
//              daisy-chain command (resource ID, index, entry data);
//   * data   - passed on to the packet buffers and parsers. The first beat
//              picks the next packet buffer (one-hot tag, round robin over 4)
//              and the next parser (round robin over 2); all beats of the packet
//              go to that buffer and parser.
// Two registers sit behind an AXI-Lite slave: 0x0, a 32-bit count of commands
// that have reached the end of the daisy chain (read only), and 0x4, the 32-bit
// module bitmap (read/write, bit i blocks module i).
//
// Reconfiguration packet layout (follows the paper's format figure): bytes 0-45
// common header, 46-47 resource ID (12 bits) + 4 reserved bits, 48 index,
// 49-63 padding, 64.. payload. The entry is the first W bits of the payload,
// most significant bit first; the command carries the first 625 payload bits,
// left-aligned. This design's choices: drop of out-of-range VLAN IDs,
// backpressure through the tagged buffer's full flag, the AXI-Lite map, and a
// command issued two cycles after the packet's last beat.
//
// Timing: the data path is combinational (s_axis beat -> m_* beat in the same
// cycle); s_axis_tready is low only while the selected packet buffer is full.
module packet_filter
  import menshen_pkg::*;
#(
  parameter int unsigned NUM_BUFS_P    = NUM_BUFS,
  parameter int unsigned NUM_PARSERS_P = NUM_PARSERS,
  parameter int unsigned NUM_MODULES_P = NUM_MODULES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // ingress AXI-Stream
  input  logic [DATA_W-1:0]        s_axis_tdata,
  input  logic [KEEP_W-1:0]        s_axis_tkeep,
  input  logic                     s_axis_tlast,
  input  logic                     s_axis_tvalid,
  output logic                     s_axis_tready,
  // data beats to packet buffers and parsers
  output logic                     m_valid,
  output beat_t                    m_beat,
  output logic                     m_sop,
  output logic [NUM_BUFS_P-1:0]    m_buf_sel,
  output logic [NUM_PARSERS_P-1:0] m_parser_sel,
  input  logic [NUM_BUFS_P-1:0]    buf_full,
  // daisy chain
  output reconf_cmd_t              cfg_out,
  input  logic                     cfg_done,
  // AXI-Lite register port
  input  logic [7:0]               s_axil_awaddr,
  input  logic                     s_axil_awvalid,
  output logic                     s_axil_awready,
  input  logic [31:0]              s_axil_wdata,
  input  logic                     s_axil_wvalid,
  output logic                     s_axil_wready,
  output logic [1:0]               s_axil_bresp,
  output logic                     s_axil_bvalid,
  input  logic                     s_axil_bready,
  input  logic [7:0]               s_axil_araddr,
  input  logic                     s_axil_arvalid,
  output logic                     s_axil_arready,
  output logic [31:0]              s_axil_rdata,
  output logic [1:0]               s_axil_rresp,
  output logic                     s_axil_rvalid,
  input  logic                     s_axil_rready,
  // observation
  output logic [31:0]              reconf_count,
  output logic [31:0]              bitmap
);
  typedef enum logic [1:0] {CL_DATA = 2'd0, CL_DROP = 2'd1, CL_RECONF = 2'd2} class_e;

  localparam int BW = (NUM_BUFS_P > 1) ? $clog2(NUM_BUFS_P) : 1;
  localparam int PW = (NUM_PARSERS_P > 1) ? $clog2(NUM_PARSERS_P) : 1;

  logic           in_pkt;          // inside a packet (after its first beat)
  class_e         cls_q;
  logic [BW-1:0]  buf_q, buf_rr;
  logic [PW-1:0]  par_q, par_rr;
  logic [1:0]     rbeat;           // beats captured of a reconf packet
  logic [3*DATA_W-1:0] rbuf;
  logic           emit_q;

  // ---------------------------------------------------------------- first-beat decode
  function automatic logic [7:0] b(input logic [DATA_W-1:0] d, input int i);
    return d[i*8 +: 8];
  endfunction

  logic [15:0]      tpid, ethertype, udp_dport;
  logic [7:0]       ip_proto;
  logic [VID_W-1:0] vid;
  logic             is_vlan, is_reconf;
  class_e           cls_new, cls;
  logic [BW-1:0]    buf_sel;
  logic [PW-1:0]    par_sel;

  always_comb begin
    tpid      = {b(s_axis_tdata, 12), b(s_axis_tdata, 13)};
    vid       = {s_axis_tdata[14*8 +: 4], b(s_axis_tdata, 15)};
    ethertype = {b(s_axis_tdata, 16), b(s_axis_tdata, 17)};
    ip_proto  = b(s_axis_tdata, 27);
    udp_dport = {b(s_axis_tdata, 40), b(s_axis_tdata, 41)};
    is_vlan   = (tpid == 16'h8100);
    is_reconf = is_vlan && (ethertype == 16'h0800) && (ip_proto == 8'd17) &&
                (udp_dport == RECONF_UDP_PORT);
    if (!is_vlan)                              cls_new = CL_DROP;
    else if (is_reconf)                        cls_new = CL_RECONF;
    else if (32'(vid) >= NUM_MODULES_P)        cls_new = CL_DROP;
    else if (bitmap[vid[4:0]])                 cls_new = CL_DROP;
    else                                       cls_new = CL_DATA;

    cls     = in_pkt ? cls_q : cls_new;
    buf_sel = in_pkt ? buf_q : buf_rr;
    par_sel = in_pkt ? par_q : par_rr;

    s_axis_tready = (cls == CL_DATA) ? !buf_full[buf_sel] : 1'b1;

    m_valid      = s_axis_tvalid && s_axis_tready && (cls == CL_DATA);
    m_beat       = '{tdata: s_axis_tdata, tkeep: s_axis_tkeep, tlast: s_axis_tlast};
    m_sop        = !in_pkt;
    m_buf_sel    = NUM_BUFS_P'(1) << buf_sel;
    m_parser_sel = NUM_PARSERS_P'(1) << par_sel;
  end

  wire beat_fire = s_axis_tvalid && s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0; cls_q <= CL_DATA; buf_q <= '0; par_q <= '0;
      buf_rr <= '0; par_rr <= '0; rbeat <= '0; emit_q <= 1'b0;
    end else begin
      emit_q <= 1'b0;
      if (beat_fire) begin
        in_pkt <= !s_axis_tlast;
        if (!in_pkt) begin
          cls_q <= cls_new; buf_q <= buf_rr; par_q <= par_rr;
          if (cls_new == CL_DATA) begin
            buf_rr <= (32'(buf_rr) == NUM_BUFS_P - 1) ? '0 : buf_rr + 1'b1;
            par_rr <= (32'(par_rr) == NUM_PARSERS_P - 1) ? '0 : par_rr + 1'b1;
          end
        end
        if (cls == CL_RECONF) begin
          if (rbeat != 2'd3) rbeat <= rbeat + 2'd1;
          if (s_axis_tlast) begin
            emit_q <= 1'b1;
            rbeat  <= '0;
          end
        end
      end
    end
  end

  // capture of reconfiguration packets (bytes 0..191)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rbuf <= '0;
    else if (beat_fire && cls == CL_RECONF) begin
      if (!in_pkt) begin
        rbuf <= '0;
        rbuf[0 +: DATA_W] <= s_axis_tdata;
      end else if (rbeat == 2'd1) rbuf[DATA_W +: DATA_W]   <= s_axis_tdata;
      else if (rbeat == 2'd2)     rbuf[2*DATA_W +: DATA_W] <= s_axis_tdata;
    end
  end

  // command built from the captured bytes, one cycle after emit_q
  localparam int PAY_BYTES = (CMD_DATA_W + 7) / 8;   // 79
  logic [PAY_BYTES*8-1:0] pay;
  always_comb begin
    for (int i = 0; i < PAY_BYTES; i++)
      pay[(PAY_BYTES-1-i)*8 +: 8] = rbuf[(64+i)*8 +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_out <= '0;
    else if (emit_q) begin
      cfg_out.valid       <= 1'b1;
      cfg_out.resource_id <= {rbuf[46*8 +: 8], rbuf[47*8+4 +: 4]};
      cfg_out.index       <= rbuf[48*8 +: 8];
      cfg_out.data        <= pay[PAY_BYTES*8-1 -: CMD_DATA_W];
    end else cfg_out <= '0;
  end

  // ---------------------------------------------------------------- registers
  always_comb begin
    s_axil_awready = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
    s_axil_wready  = s_axil_awready;
    s_axil_arready = !s_axil_rvalid;
    s_axil_bresp   = 2'b00;
    s_axil_rresp   = 2'b00;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitmap <= '0; reconf_count <= '0;
      s_axil_bvalid <= 1'b0; s_axil_rvalid <= 1'b0; s_axil_rdata <= '0;
    end else begin
      if (cfg_done) reconf_count <= reconf_count + 32'd1;
      if (s_axil_awready) begin
        if (s_axil_awaddr[3:2] == 2'd1) bitmap <= s_axil_wdata;
        s_axil_bvalid <= 1'b1;
      end else if (s_axil_bready) s_axil_bvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        case (s_axil_araddr[3:2])
          2'd0:    s_axil_rdata <= reconf_count;
          2'd1:    s_axil_rdata <= bitmap;
          default: s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rready) s_axil_rvalid <= 1'b0;
    end
  end
endmodule
