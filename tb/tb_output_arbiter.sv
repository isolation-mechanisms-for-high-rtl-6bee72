// tb_output_arbiter: self-checking test of the packet merge.
// Four sources send numbered multi-beat packets with random gaps while the sink
// applies random backpressure. Checks that packets are never interleaved, that
// each source's packets arrive complete and in order, and that a source with
// traffic is served within four packets (round robin).
module tb_output_arbiter;
  import menshen_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [DATA_W-1:0] s_tdata [N];
  logic [KEEP_W-1:0] s_tkeep [N];
  logic s_tlast [N], s_tvalid [N], s_tready [N];
  logic [7:0] s_tdest [N];
  logic [DATA_W-1:0] m_tdata;
  logic [KEEP_W-1:0] m_tkeep;
  logic m_tlast, m_tvalid, m_tready;
  logic [7:0] m_tdest;
  int checks = 0, failures = 0;
  int pkt_no [N], beat_no [N], len [N], rx_pkt [N], rx_beat [N];
  int cur_src = -1, wait_pk [N];
  localparam int PKTS = 40;

  output_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: beat data = {src, packet number, beat number}
  for (genvar i = 0; i < N; i++) begin : g_src
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pkt_no[i] <= 0; beat_no[i] <= 0; len[i] <= 1 + (i % 3);
        s_tvalid[i] <= 0;
      end else begin
        if (s_tvalid[i] && s_tready[i]) begin
          if (s_tlast[i]) begin
            pkt_no[i] <= pkt_no[i] + 1; beat_no[i] <= 0; len[i] <= $urandom_range(1, 3);
          end else beat_no[i] <= beat_no[i] + 1;
        end
        if (!(s_tvalid[i] && !s_tready[i])) s_tvalid[i] <= (pkt_no[i] < PKTS) && ($urandom_range(0, 3) != 0);
      end
    end
    always_comb begin
      s_tdata[i] = {DATA_W{1'b0}};
      s_tdata[i][31:0] = {8'(i), 12'(pkt_no[i]), 12'(beat_no[i])};
      s_tkeep[i] = '1;
      s_tlast[i] = (beat_no[i] == len[i] - 1);
      s_tdest[i] = 8'(i);
    end
  end

  always @(posedge clk) m_tready <= ($urandom_range(0, 4) != 0);

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int s, p, b;
    s = int'(m_tdata[31:24]); p = int'(m_tdata[23:12]); b = int'(m_tdata[11:0]);
    check(s < N && m_tdest == 8'(s), "bad source");
    if (cur_src >= 0) check(s == cur_src, "packets interleaved");
    check(p == rx_pkt[s] && b == rx_beat[s], $sformatf("src %0d got pkt %0d beat %0d exp %0d/%0d", s, p, b, rx_pkt[s], rx_beat[s]));
    if (m_tlast) begin
      cur_src = -1; rx_pkt[s]++; rx_beat[s] = 0;
      for (int j = 0; j < N; j++) begin
        if (j == s) wait_pk[j] = 0;
        else if (s_tvalid[j]) begin
          wait_pk[j]++;
          check(wait_pk[j] <= N, $sformatf("source %0d starved", j));
        end
      end
    end else begin
      cur_src = s; rx_beat[s]++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin rx_pkt[i] = 0; rx_beat[i] = 0; wait_pk[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (rx_pkt[0] == PKTS && rx_pkt[1] == PKTS && rx_pkt[2] == PKTS && rx_pkt[3] == PKTS);
    repeat (2) @(posedge clk);
    for (int i = 0; i < N; i++) check(rx_pkt[i] == PKTS, "packets missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
