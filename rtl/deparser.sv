// deparser: writes a module's modified header fields back into its packet.
//
// Each of the four packet buffers has its own deparser. PHVs leaving the last
// stage whose one-hot buffer tag names this buffer are queued here in arrival
// order; since the buffer holds the same packets in the same order, the oldest
// PHV always belongs to the oldest buffered packet. For each packet the
// deparser reads its module's deparser table entry (same 10 x 16-bit format as
// the parser table: [12:6] byte offset, [5:4] type 1/2/3 = 2/4/6 bytes, [3:1]
// container, [0] valid), builds a 128-byte overlay of the containers it names
// (big-endian, later actions win) and streams the packet out of the buffer
// with only those bytes replaced; the rest of the header and the payload pass
// untouched. A packet whose PHV has the discard flag set is read out of the
// buffer and not sent. The output carries the PHV's destination port on tdest.
//
// Timing: per packet, one cycle to read the table, one to build the overlay,
// then one beat per cycle while m_axis_tready is high (discarded packets are
// drained at one beat per cycle). The PHV queue is as deep as the packet
// buffer, so it cannot overflow; both sizes are this design's choice.
module deparser
  import menshen_pkg::*;
#(
  parameter int unsigned PHV_FIFO_DEPTH = 64,
  localparam int unsigned PAW = $clog2(PHV_FIFO_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 phv_valid,
  input  phv_t                 phv,
  // packet buffer read side (first-word-fall-through)
  input  logic                 pkt_empty,
  input  beat_t                pkt_data,
  output logic                 pkt_rd,
  // egress stream
  output logic [DATA_W-1:0]    m_axis_tdata,
  output logic [KEEP_W-1:0]    m_axis_tkeep,
  output logic                 m_axis_tlast,
  output logic [7:0]           m_axis_tdest,
  output logic                 m_axis_tvalid,
  input  logic                 m_axis_tready,
  // deparser table write (daisy chain)
  input  logic                 cfg_we,
  input  logic [MOD_IDX_W-1:0] cfg_addr,
  input  logic [PARSER_W-1:0]  cfg_data,
  // events
  output logic                 pkt_sent,
  output logic                 pkt_dropped,
  output logic                 phv_overflow
);
  // ---------------------------------------------------------------- PHV queue
  phv_t            pq [PHV_FIFO_DEPTH];
  logic [PAW-1:0]  pwp, prp;
  logic [PAW:0]    pcnt;
  logic            p_pop;
  wire             p_empty = (pcnt == '0);
  wire             p_full  = (pcnt == (PAW+1)'(PHV_FIFO_DEPTH));
  phv_t            head;
  assign head = pq[prp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pwp <= '0; prp <= '0; pcnt <= '0;
    end else begin
      if (phv_valid && !p_full) pwp <= pwp + 1'b1;
      if (p_pop) prp <= prp + 1'b1;
      pcnt <= pcnt + (PAW+1)'(phv_valid && !p_full) - (PAW+1)'(p_pop);
    end
  end
  always_ff @(posedge clk) if (phv_valid && !p_full) pq[pwp] <= phv;
  assign phv_overflow = phv_valid && p_full;

  // ---------------------------------------------------------------- table
  logic [PARSER_W-1:0] entry;
  logic                tbl_rd;
  config_table #(.DEPTH(NUM_MODULES), .WIDTH(PARSER_W)) u_tbl (
    .clk, .rst_n, .rd_en(tbl_rd), .rd_addr(head.md.vid[MOD_IDX_W-1:0]), .rd_data(entry),
    .wr_en(cfg_we), .wr_addr(cfg_addr), .wr_data(cfg_data));

  // ---------------------------------------------------------------- overlay
  logic [HDR_BYTES*8-1:0] ov_c, ov_q;
  logic [HDR_BYTES-1:0]   ovm_c, ovm_q;
  always_comb begin
    logic [15:0] a;
    logic [47:0] v;
    logic [2:0]  n;
    logic [7:0]  pos;
    ov_c  = '0;
    ovm_c = '0;
    a     = '0;
    v     = '0;
    n     = 0;
    pos   = 0;
    for (int k = 0; k < PARSE_ACTIONS; k++) begin
      a = entry[k*PA_W +: PA_W];
      case (a[5:4])
        2'd1:    begin n = 2; v = {head.c2[a[3:1]], 32'h0}; end
        2'd2:    begin n = 4; v = {head.c4[a[3:1]], 16'h0}; end
        2'd3:    begin n = 6; v = head.c6[a[3:1]]; end
        default: begin n = 0; v = '0; end
      endcase
      for (int j = 0; j < 6; j++) begin
        pos = {1'b0, a[12:6]} + 8'(j);
        if (a[0] && 3'(j) < n && pos < 8'(HDR_BYTES)) begin
          ov_c[pos*8 +: 8] = v[47-8*j -: 8];
          ovm_c[pos]       = 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_STREAM} state_e;
  state_e      st;
  logic [1:0]  bidx;       // beat number within the packet, saturating at 2
  logic        disc_q;
  logic [7:0]  port_q;

  assign tbl_rd = (st == S_IDLE) && !p_empty && !pkt_empty;

  always_comb begin
    for (int j = 0; j < KEEP_W; j++) begin
      if (bidx == 2'd0 && ovm_q[j])
        m_axis_tdata[j*8 +: 8] = ov_q[j*8 +: 8];
      else if (bidx == 2'd1 && ovm_q[KEEP_W + j])
        m_axis_tdata[j*8 +: 8] = ov_q[(KEEP_W + j)*8 +: 8];
      else
        m_axis_tdata[j*8 +: 8] = pkt_data.tdata[j*8 +: 8];
    end
    m_axis_tkeep  = pkt_data.tkeep;
    m_axis_tlast  = pkt_data.tlast;
    m_axis_tdest  = port_q;
    m_axis_tvalid = (st == S_STREAM) && !pkt_empty && !disc_q;
    pkt_rd        = (st == S_STREAM) && !pkt_empty && (disc_q || m_axis_tready);
    p_pop         = pkt_rd && pkt_data.tlast;
    pkt_sent      = p_pop && !disc_q;
    pkt_dropped   = p_pop && disc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bidx <= '0; disc_q <= 1'b0; port_q <= '0; ov_q <= '0; ovm_q <= '0;
    end else begin
      case (st)
        S_IDLE: if (tbl_rd) st <= S_LOOK;
        S_LOOK: begin
          ov_q   <= ov_c;
          ovm_q  <= ovm_c;
          disc_q <= head.md.discard;
          port_q <= head.md.dst_port;
          bidx   <= '0;
          st     <= S_STREAM;
        end
        S_STREAM: if (pkt_rd) begin
          if (bidx != 2'd2) bidx <= bidx + 2'd1;
          if (pkt_data.tlast) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
