// parser: per-module programmable header parser.
//
// A packet's first 128 bytes (two 512-bit beats) are collected. On the first
// beat the module ID (VLAN ID, bytes 14-15) is read out and used as the address
// of the parser action table, so the module's parse program is fetched while
// the second beat is still arriving. The program is 10 parser actions of 16 bits
// (action k in bits [16k+15:16k]); each action is
//   [15:13] reserved, [12:6] byte offset from the packet head, [5:4] container
//   type (1 = 2-byte, 2 = 4-byte, 3 = 6-byte), [3:1] container number, [0] valid,
// and copies that many bytes, big-endian, from the offset into the container.
// The PHV starts all zero for every packet so nothing of an earlier packet (or
// module) survives; the metadata container receives the module ID, the one-hot
// packet buffer tag and the number of bytes in the window.
//
// Technique 1 of the paper (module ID sent ahead): vid_early_valid/vid_early
// appear one cycle before phv_valid/phv, so the next element can read its own
// per-module table while the PHV is on its way.
//
// Timing: with r the cycle of the beat that completes the window (beat 1, or
// beat 0 of a one-beat packet), vid_early is valid at r+1 and the PHV at r+2.
// At most one window completes per cycle, so the outputs of several parsers fed
// from one stream never collide. Field layout inside the action word comes from
// the paper's text; the type code and action order are this design's choices.
module parser
  import menshen_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  beat_t                 in_beat,
  input  logic                  in_sop,
  input  logic [NUM_BUFS-1:0]   in_buf_tag,
  // parser table write (daisy chain)
  input  logic                  cfg_we,
  input  logic [MOD_IDX_W-1:0]  cfg_addr,
  input  logic [PARSER_W-1:0]   cfg_data,
  // outputs
  output logic                  vid_early_valid,
  output logic [VID_W-1:0]      vid_early,
  output logic                  phv_valid,
  output phv_t                  phv
);
  logic [HDR_BYTES*8-1:0] hdr;
  logic [VID_W-1:0]       vid_q;
  logic [NUM_BUFS-1:0]    tag_q;
  logic [15:0]            len_q;
  logic                   ready_q;
  logic                   got1;     // first beat taken, waiting for the second
  logic [PARSER_W-1:0]    entry;

  wire [VID_W-1:0] in_vid = {in_beat.tdata[14*8 +: 4], in_beat.tdata[15*8 +: 8]};
  wire first  = in_valid && in_sop;

  config_table #(.DEPTH(NUM_MODULES), .WIDTH(PARSER_W)) u_tbl (
    .clk, .rst_n,
    .rd_en(first), .rd_addr(in_vid[MOD_IDX_W-1:0]), .rd_data(entry),
    .wr_en(cfg_we), .wr_addr(cfg_addr), .wr_data(cfg_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr <= '0; vid_q <= '0; tag_q <= '0; len_q <= '0; ready_q <= 1'b0; got1 <= 1'b0;
    end else begin
      ready_q <= 1'b0;
      if (first) begin
        hdr      <= '0;
        hdr[0 +: DATA_W] <= in_beat.tdata;
        vid_q    <= in_vid;
        tag_q    <= in_buf_tag;
        len_q    <= 16'($countones(in_beat.tkeep));
        ready_q  <= in_beat.tlast;
        got1     <= !in_beat.tlast;
      end else if (in_valid && got1) begin
        hdr[DATA_W +: DATA_W] <= in_beat.tdata;
        len_q   <= len_q + 16'($countones(in_beat.tkeep));
        ready_q <= 1'b1;
        got1    <= 1'b0;
      end
    end
  end

  // field extraction
  phv_t phv_c;
  always_comb begin
    logic [15:0] a;
    logic [6:0]  off;
    logic [47:0] w;
    phv_c = '0;
    for (int k = 0; k < PARSE_ACTIONS; k++) begin
      a   = entry[k*PA_W +: PA_W];
      off = a[12:6];
      for (int j = 0; j < 6; j++) w[47-8*j -: 8] = get_byte(hdr, int'(off) + j);
      if (a[0]) begin
        case (a[5:4])
          2'd1: phv_c.c2[a[3:1]] = w[47:32];
          2'd2: phv_c.c4[a[3:1]] = w[47:16];
          2'd3: phv_c.c6[a[3:1]] = w;
          default: ;
        endcase
      end
    end
    phv_c.md.vid     = vid_q;
    phv_c.md.buf_tag = tag_q;
    phv_c.md.pkt_len = len_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phv_valid <= 1'b0; phv <= '0;
    end else begin
      phv_valid <= ready_q;
      if (ready_q) phv <= phv_c;
    end
  end

  assign vid_early_valid = ready_q;
  assign vid_early       = vid_q;
endmodule
