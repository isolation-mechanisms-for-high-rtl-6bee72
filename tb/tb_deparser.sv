// tb_deparser: self-checking test of header write-back.
// A packet buffer and a deparser are connected as in the pipeline. Three
// modules get random deparser programs. Random packets (one to four beats) are
// written into the buffer and, a random number of cycles later, their PHVs
// (random containers, random discard flag and port) arrive. The testbench
// builds each expected output packet by applying the module's program to the
// raw bytes and checks every output beat, tdest, that discarded packets never
// appear, and packet order; the sink applies random backpressure.
module tb_deparser;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic phv_valid = 0;
  phv_t phv;
  logic pkt_empty, pkt_rd, full, wr_en = 0;
  beat_t pkt_data, wr_data;
  logic [6:0] count;
  logic [DATA_W-1:0] m_axis_tdata;
  logic [KEEP_W-1:0] m_axis_tkeep;
  logic m_axis_tlast, m_axis_tvalid, m_axis_tready;
  logic [7:0] m_axis_tdest;
  logic cfg_we = 0;
  logic [MOD_IDX_W-1:0] cfg_addr = 0;
  logic [PARSER_W-1:0] cfg_data = 0;
  logic pkt_sent, pkt_dropped, phv_overflow;
  logic [PARSER_W-1:0] prog [3];
  beat_t exp_q [$];
  logic [7:0] exp_port_q [$];
  phv_t phv_q [$];
  int checks = 0, failures = 0, sent = 0, dropped = 0, exp_sent = 0, exp_dropped = 0;

  packet_buffer #(.DEPTH(64)) u_buf (
    .clk, .rst_n, .wr_en, .wr_data, .rd_en(pkt_rd), .rd_data(pkt_data),
    .full, .empty(pkt_empty), .count);
  deparser dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) m_axis_tready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    check(!phv_overflow, "PHV queue overflow");
    if (pkt_sent) sent++;
    if (pkt_dropped) dropped++;
    if (m_axis_tvalid && m_axis_tready) begin
      check(exp_q.size() > 0, "unexpected beat");
      if (exp_q.size() > 0) begin
        beat_t e;
        logic [7:0] ep;
        e = exp_q.pop_front();
        ep = exp_port_q.pop_front();
        check(m_axis_tdata == e.tdata && m_axis_tkeep == e.tkeep && m_axis_tlast == e.tlast,
              "output beat differs");
        check(m_axis_tdest == ep, "wrong tdest");
      end
    end
  end

  // PHV sender: PHVs in packet order, random delays
  initial begin
    phv = '0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      phv_valid = 0;
      if (phv_q.size() > 0 && $urandom_range(0, 2) == 0) begin
        phv_valid = 1;
        phv = phv_q.pop_front();
      end
    end
  end

  initial begin
    wr_data = '0;
    for (int m = 0; m < 3; m++)
      for (int k = 0; k < PARSE_ACTIONS; k++)
        prog[m][k*16 +: 16] = {3'd0, 7'($urandom_range(0, 127)), 2'($urandom_range(0, 3)),
                               3'($urandom), 1'($urandom_range(0, 3) != 0)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < 3; m++) begin
      cfg_we = 1; cfg_addr = 5'(m); cfg_data = prog[m];
      @(negedge clk);
    end
    cfg_we = 0;
    for (int n = 0; n < 200; n++) begin
      int m, beats, lastb;
      logic [7:0] bytes [];
      phv_t p;
      m = $urandom_range(0, 2);
      beats = $urandom_range(1, 4);
      lastb = $urandom_range(1, 64);
      bytes = new[beats * 64];
      foreach (bytes[i]) bytes[i] = 8'($urandom);
      p = '0;
      for (int i = 0; i < 8; i++) begin
        p.c2[i] = 16'($urandom); p.c4[i] = $urandom; p.c6[i] = {16'($urandom), $urandom};
      end
      p.md.vid = 12'(m);
      p.md.dst_port = 8'($urandom);
      p.md.discard = ($urandom_range(0, 4) == 0);
      // expected output bytes
      if (!p.md.discard) begin
        logic [7:0] ob [];
        ob = bytes;
        for (int k = 0; k < PARSE_ACTIONS; k++) begin
          logic [15:0] a;
          logic [47:0] v;
          int nb;
          a = prog[m][k*16 +: 16];
          nb = 0;
          v = 0;
          if (a[5:4] == 1) begin nb = 2; v = {p.c2[a[3:1]], 32'd0}; end
          if (a[5:4] == 2) begin nb = 4; v = {p.c4[a[3:1]], 16'd0}; end
          if (a[5:4] == 3) begin nb = 6; v = p.c6[a[3:1]]; end
          if (a[0])
            for (int j = 0; j < nb; j++) begin
              int pos;
              pos = int'(a[12:6]) + j;
              if (pos < 128 && pos < beats * 64) ob[pos] = v[47-8*j -: 8];
            end
        end
        for (int b = 0; b < beats; b++) begin
          beat_t e;
          for (int i = 0; i < 64; i++) e.tdata[i*8 +: 8] = ob[b*64 + i];
          e.tlast = (b == beats - 1);
          e.tkeep = e.tlast ? KEEP_W'((65'(1) << lastb) - 1) : '1;
          exp_q.push_back(e);
          exp_port_q.push_back(p.md.dst_port);
        end
        exp_sent++;
      end else exp_dropped++;
      phv_q.push_back(p);
      for (int b = 0; b < beats; b++) begin
        while (full) @(negedge clk);
        wr_en = 1;
        for (int i = 0; i < 64; i++) wr_data.tdata[i*8 +: 8] = bytes[b*64 + i];
        wr_data.tlast = (b == beats - 1);
        wr_data.tkeep = wr_data.tlast ? KEEP_W'((65'(1) << lastb) - 1) : '1;
        @(negedge clk);
        wr_en = 0;
      end
    end
    wait (sent + dropped == 200);
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "beats missing");
    check(sent == exp_sent && dropped == exp_dropped, "sent/dropped counts");
    $display("sent=%0d dropped=%0d", sent, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
