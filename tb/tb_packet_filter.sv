// tb_packet_filter: self-checking test of the ingress filter.
// Random packets are sent: data packets of modules 0-31, packets with VLAN IDs
// 32 and above, untagged packets, packets of modules blocked through the
// AXI-Lite bitmap register, and reconfiguration packets with random resource
// IDs, indexes and payloads. The buffer-full inputs are random. Checks: only
// data packets of unblocked modules come out, beat for beat; each accepted
// packet keeps one buffer and one parser and these advance round robin; tready
// follows the selected buffer's full flag; every reconfiguration packet gives
// exactly one command with the expected resource ID, index and left-aligned
// payload; the counter register counts cfg_done pulses; bitmap reads back.
module tb_packet_filter;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [DATA_W-1:0] s_axis_tdata = '0;
  logic [KEEP_W-1:0] s_axis_tkeep = '0;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  logic m_valid, m_sop;
  beat_t m_beat;
  logic [3:0] m_buf_sel, buf_full = 0;
  logic [1:0] m_parser_sel;
  reconf_cmd_t cfg_out;
  logic cfg_done = 0;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata, reconf_count, bitmap;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1;

  packet_filter dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_data = 0, n_drop = 0, n_cmd = 0, n_done = 0, n_full = 0;
  beat_t exp_beats [$];
  reconf_cmd_t exp_cmd [$];
  int exp_buf = 0, exp_par = 0, cur_buf = -1, cur_par = -1;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) buf_full <= 4'($urandom) & 4'($urandom);

  // output checks
  always @(posedge clk) if (rst_n) begin
    if (m_valid) begin
      check(exp_beats.size() > 0, "unexpected beat");
      if (exp_beats.size() > 0) check(m_beat == exp_beats.pop_front(), "beat differs");
      check(!buf_full[cur_buf < 0 ? exp_buf : cur_buf], "beat accepted into a full buffer");
      if (m_sop) begin
        check(m_buf_sel == 4'(1) << exp_buf, "buffer not round robin");
        check(m_parser_sel == 2'(1) << exp_par, "parser not round robin");
        cur_buf = exp_buf; cur_par = exp_par;
        exp_buf = (exp_buf + 1) % 4; exp_par = (exp_par + 1) % 2;
      end else begin
        check(m_buf_sel == 4'(1) << cur_buf && m_parser_sel == 2'(1) << cur_par, "packet changed buffer");
      end
      if (m_beat.tlast) cur_buf = -1;
    end
    if (s_axis_tvalid && !s_axis_tready) n_full++;
    if (cfg_out.valid) begin
      check(exp_cmd.size() > 0, "unexpected command");
      if (exp_cmd.size() > 0) check(cfg_out == exp_cmd.pop_front(), "command differs");
      n_cmd++;
    end
    if (cfg_done) n_done++;
  end

  always @(negedge clk) cfg_done <= ($urandom_range(0, 9) == 0);

  task automatic send(input logic [7:0] b [], input bit expect_out);
    int beats;
    beats = (b.size() + 63) / 64;
    for (int k = 0; k < beats; k++) begin
      beat_t bt;
      logic rdy;
      bt.tdata = '0;
      for (int i = 0; i < 64; i++) if (k*64 + i < b.size()) bt.tdata[i*8 +: 8] = b[k*64 + i];
      bt.tlast = (k == beats - 1);
      bt.tkeep = bt.tlast ? KEEP_W'((65'(1) << (b.size() - 64*k)) - 1) : '1;
      if (expect_out) exp_beats.push_back(bt);
      @(negedge clk);
      s_axis_tvalid = 1; s_axis_tdata = bt.tdata; s_axis_tkeep = bt.tkeep; s_axis_tlast = bt.tlast;
      #1 rdy = s_axis_tready;
      while (!rdy) begin @(negedge clk); #1 rdy = s_axis_tready; end
      @(posedge clk);
    end
    @(negedge clk);
    s_axis_tvalid = 0;
  endtask

  task automatic axil_write(input logic [7:0] addr, input logic [31:0] data);
    @(negedge clk);
    s_axil_awaddr = addr; s_axil_awvalid = 1; s_axil_wdata = data; s_axil_wvalid = 1;
    #1 while (!s_axil_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axil_read(input logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    s_axil_araddr = addr; s_axil_arvalid = 1;
    #1 while (!s_axil_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    data = s_axil_rdata;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] bm, r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bm = $urandom;
    axil_write(8'h04, bm);
    axil_read(8'h04, r);
    check(r == bm && bitmap == bm, "bitmap read-back");
    for (int n = 0; n < 400; n++) begin
      logic [7:0] b [];
      int kind, vid;
      bit out;
      b = new[$urandom_range(60, 300)];
      foreach (b[i]) b[i] = 8'($urandom);
      kind = $urandom_range(0, 5);
      vid = (kind == 1) ? $urandom_range(32, 4095) : $urandom_range(0, 31);
      b[12] = (kind == 2) ? 8'h08 : 8'h81; b[13] = 8'h00;
      b[14] = {4'($urandom), 4'(vid >> 8)}; b[15] = 8'(vid);
      b[16] = 8'h08; b[17] = 8'h00; b[27] = 8'd17;
      if (kind == 3) begin
        // reconfiguration packet
        reconf_cmd_t c;
        logic [CMD_DATA_W+6:0] pay;
        b = new[64 + 79 + $urandom_range(0, 40)](b);
        foreach (b[i]) if (i >= 46) b[i] = 8'($urandom);
        b[40] = 8'hF1; b[41] = 8'hF2;
        for (int i = 0; i < 79; i++) pay[$bits(pay)-1-8*i -: 8] = b[64 + i];
        c.valid = 1;
        c.resource_id = {b[46], b[47][7:4]};
        c.index = b[48];
        c.data = pay[$bits(pay)-1 -: CMD_DATA_W];
        exp_cmd.push_back(c);
        out = 0;
      end else begin
        if (b[40] == 8'hF1 && b[41] == 8'hF2) b[41] = 8'h00;
        out = (kind != 1) && (kind != 2) && !bm[vid];
      end
      if (out) n_data++; else if (kind != 3) n_drop++;
      send(b, out);
      if ($urandom_range(0, 2) == 0) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    check(exp_beats.size() == 0, "data beats missing");
    check(exp_cmd.size() == 0, "commands missing");
    axil_read(8'h00, r);
    check(reconf_count == 32'(n_done) && r + 32'd3 >= reconf_count && r <= reconf_count, "reconfiguration counter");
    check(n_data > 0 && n_drop > 0 && n_cmd > 0 && n_full > 0, "coverage");
    $display("data=%0d dropped=%0d commands=%0d stalls=%0d", n_data, n_drop, n_cmd, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
