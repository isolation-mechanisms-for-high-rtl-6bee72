// output_arbiter: merges the deparser outputs into the single egress stream.
//
// N AXI-Stream inputs (with tdest) share one output. The arbiter grants whole
// packets: when idle it picks the first input with a valid beat, searching
// round robin from the input after the one served last, and keeps that input
// until its tlast beat has been accepted. The paper only draws this merge;
// round robin per packet is this design's choice.
//
// Timing: combinational from the selected input to the output; the grant is
// taken in the cycle of the packet's first beat (no bubble between packets).
module output_arbiter
  import menshen_pkg::*;
#(
  parameter int unsigned N = NUM_BUFS,
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DATA_W-1:0]   s_tdata  [N],
  input  logic [KEEP_W-1:0]   s_tkeep  [N],
  input  logic                s_tlast  [N],
  input  logic [7:0]          s_tdest  [N],
  input  logic                s_tvalid [N],
  output logic                s_tready [N],
  output logic [DATA_W-1:0]   m_tdata,
  output logic [KEEP_W-1:0]   m_tkeep,
  output logic                m_tlast,
  output logic [7:0]          m_tdest,
  output logic                m_tvalid,
  input  logic                m_tready
);
  logic          busy;
  logic [SW-1:0] cur, last, pick, sel;
  logic          any;

  always_comb begin
    logic [SW-1:0] c;
    any  = 1'b0;
    pick = last;
    c    = '0;
    for (int i = int'(N); i >= 1; i--) begin
      c = SW'((int'(last) + i) % int'(N));
      if (s_tvalid[c]) begin
        any  = 1'b1;
        pick = SW'(c);
      end
    end
    sel = busy ? cur : pick;
    m_tdata  = s_tdata[sel];
    m_tkeep  = s_tkeep[sel];
    m_tlast  = s_tlast[sel];
    m_tdest  = s_tdest[sel];
    m_tvalid = (busy || any) && s_tvalid[sel];
    for (int i = 0; i < int'(N); i++) s_tready[i] = m_tready && (busy || any) && (SW'(i) == sel);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; last <= SW'(N - 1);
    end else if (m_tvalid && m_tready) begin
      if (m_tlast) begin
        busy <= 1'b0;
        last <= sel;
      end else begin
        busy <= 1'b1;
        cur  <= sel;
      end
    end
  end
endmodule
