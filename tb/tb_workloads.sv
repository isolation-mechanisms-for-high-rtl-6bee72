// tb_workloads: end-to-end runs of three more of the evaluated use cases on the
// full-size pipeline, loaded side by side as separate modules and programmed
// only through reconfiguration packets:
//   module 5, load balancing: stage 1 matches the 4-tuple (source and
//     destination IPv4 address, UDP source and destination port, 12 bytes of
//     key) and the port action steers each known flow to its own output port;
//     unknown flows miss and leave on port 0;
//   module 6, QoS: stage 1 matches the traffic type (UDP destination port) and
//     sets the IPv4 version/TOS halfword; the deparser writes it back;
//   module 7, key-value cache (simplified NetCache): stage 1 maps a cached
//     32-bit key to a slot number (1-4, uncached keys use slot 0), stage 2
//     matches the operation (1 = get, 2 = put) and loads the slot's value into
//     the packet or stores the packet's value into the slot, inside the
//     module's segment of stateful memory; the deparser writes value and slot
//     back.
// A reference model predicts every output packet (matched by a sequence number
// in bytes 62-63); each use case must have been exercised, including cache
// gets that return a value stored by an earlier put.
module tb_workloads;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [DATA_W-1:0] s_axis_tdata = '0;
  logic [KEEP_W-1:0] s_axis_tkeep = '0;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  logic [DATA_W-1:0] m_axis_tdata;
  logic [KEEP_W-1:0] m_axis_tkeep;
  logic m_axis_tlast, m_axis_tvalid, m_axis_tready = 1;
  logic [7:0] m_axis_tdest;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1;

  menshen_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  int n_reconf = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- stream driver
  longint t_in [int];
  task automatic send_bytes(input logic [7:0] bytes [], input int seq);
    int len, beats;
    len = bytes.size();
    beats = (len + 63) / 64;
    for (int b = 0; b < beats; b++) begin
      logic ready;
      @(negedge clk);
      s_axis_tvalid = 1;
      for (int i = 0; i < 64; i++)
        s_axis_tdata[i*8 +: 8] = (b*64 + i < len) ? bytes[b*64 + i] : 8'h00;
      s_axis_tlast = (b == beats - 1);
      s_axis_tkeep = (b == beats - 1) ? KEEP_W'((65'(1) << (len - 64*b)) - 1) : '1;
      #1 ready = s_axis_tready;
      while (!ready) begin
        @(negedge clk);
        #1 ready = s_axis_tready;
      end
      if (b == 0 && seq >= 0) t_in[seq] = cycle;
      @(posedge clk);
    end
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  // ---------------------------------------------------------------- AXI-Lite
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

  // ---------------------------------------------------------------- packets
  function automatic void set16(ref logic [7:0] b [], input int off, input logic [15:0] v);
    b[off] = v[15:8]; b[off+1] = v[7:0];
  endfunction
  function automatic void set32(ref logic [7:0] b [], input int off, input logic [31:0] v);
    for (int i = 0; i < 4; i++) b[off+i] = v[31-8*i -: 8];
  endfunction

  // Ethernet / VLAN / IPv4 / UDP header
  function automatic void base_hdr(ref logic [7:0] b [], input logic [11:0] vid,
                                   input logic [15:0] dport, input bit vlan);
    for (int i = 0; i < 12; i++) b[i] = 8'($urandom);
    if (vlan) set16(b, 12, 16'h8100); else set16(b, 12, 16'h0800);
    set16(b, 14, {4'h0, vid});
    set16(b, 16, 16'h0800);
    b[18] = 8'h45;
    b[27] = 8'd17;
    set16(b, 40, dport);
  endfunction

  int n_cfg_sent = 0;
  task automatic send_reconf(input logic [7:0] elem, input logic [3:0] tbl, input int index,
                             input logic [CMD_DATA_W-1:0] entry, input int w);
    logic [7:0] b [];
    logic [CMD_DATA_W+6:0] v;   // entry left-aligned in 79 bytes
    b = new[64 + 79];
    foreach (b[i]) b[i] = 8'h00;
    base_hdr(b, 12'hFFF, RECONF_UDP_PORT, 1);
    b[46] = elem;
    b[47] = {tbl, 4'h0};
    b[48] = 8'(index);
    v = {entry << (CMD_DATA_W - w), 7'd0};
    for (int i = 0; i < 79; i++) b[64 + i] = v[$bits(v)-1-8*i -: 8];
    send_bytes(b, -1);
    n_cfg_sent++;
  endtask

  task automatic wait_reconf_done();
    logic [31:0] r;
    int tries;
    tries = 0;
    do begin
      axil_read(8'h00, r);
      tries++;
    end while (r != 32'(n_cfg_sent) && tries < 1000);
    check(r == 32'(n_cfg_sent), $sformatf("reconfiguration counter %0d, expected %0d", r, n_cfg_sent));
    if (r == 32'(n_cfg_sent)) n_reconf++;
  endtask

  function automatic logic [15:0] pact(input int off, input int typ, input int num);
    return {3'd0, 7'(off), 2'(typ), 3'(num), 1'b1};
  endfunction
  function automatic logic [24:0] act2(input int op, input int a, input int b);
    return {4'(op), 5'(a), 5'(b), 11'd0};
  endfunction
  function automatic logic [24:0] act1(input int op, input int a, input int imm);
    return {4'(op), 5'(a), 16'(imm)};
  endfunction


  // key layout {c6a, c6b, c4a, c4b, c2a, c2b, flag}: c4a at [96:65], c4b at [64:33]
  localparam logic [KEY_W-1:0] M_C4A = KEY_W'(32'hFFFF_FFFF) << 65;
  localparam logic [KEY_W-1:0] M_C4B = KEY_W'(32'hFFFF_FFFF) << 33;
  localparam logic [KEY_W-1:0] M_C2A = KEY_W'(16'hFFFF) << 17;
  localparam logic [KEY_W-1:0] M_C2B = KEY_W'(16'hFFFF) << 1;

  function automatic logic [KEY_W-1:0] k4(input logic [31:0] a, input logic [31:0] b,
                                          input logic [15:0] c, input logic [15:0] d);
    return (KEY_W'(a) << 65) | (KEY_W'(b) << 33) | (KEY_W'(c) << 17) | (KEY_W'(d) << 1);
  endfunction

  logic [31:0] lb_sip [4], lb_dip [4], nc_key [4];
  logic [15:0] lb_sp [4], lb_dp [4];
  logic [31:0] nc_mem [5];
  int n_lb_hit = 0, n_lb_miss = 0, n_qos = 0, n_get = 0, n_get_val = 0, n_put = 0, n_nc_miss = 0;

  task automatic program_pipeline();
    logic [CMD_DATA_W-1:0] e;
    // parsers
    e = '0;
    e[0 +: 16] = pact(30, 2, 0); e[16 +: 16] = pact(34, 2, 1);
    e[32 +: 16] = pact(38, 1, 0); e[48 +: 16] = pact(40, 1, 1);
    send_reconf(ELEM_PARSER, RES_PARSE_TBL, 5, e, PARSER_W);
    e = '0; e[0 +: 16] = pact(18, 1, 0); e[16 +: 16] = pact(40, 1, 1);
    send_reconf(ELEM_PARSER, RES_PARSE_TBL, 6, e, PARSER_W);
    e = '0; e[0 +: 16] = pact(46, 2, 0); e[16 +: 16] = pact(50, 1, 0); e[32 +: 16] = pact(52, 2, 1);
    send_reconf(ELEM_PARSER, RES_PARSE_TBL, 7, e, PARSER_W);
    // deparsers
    e = '0; e[0 +: 16] = pact(18, 1, 0);
    send_reconf(ELEM_DEPARSER, RES_PARSE_TBL, 6, e, PARSER_W);
    e = '0; e[0 +: 16] = pact(52, 2, 1); e[16 +: 16] = pact(56, 1, 2);
    send_reconf(ELEM_DEPARSER, RES_PARSE_TBL, 7, e, PARSER_W);
    // stage 1, load balancing: key {c4[0], c4[1], c2[0], c2[1]}
    e = '0; e[31:29] = 3'd0; e[28:26] = 3'd1; e[25:23] = 3'd0; e[22:20] = 3'd1;
    send_reconf(8'd1, RES_KE, 5, e, KE_W);
    send_reconf(8'd1, RES_MASK, 5, CMD_DATA_W'(M_C4A | M_C4B | M_C2A | M_C2B), KEY_W);
    for (int f = 0; f < 4; f++) begin
      send_reconf(8'd1, RES_CAM, f, CMD_DATA_W'({12'd5, k4(lb_sip[f], lb_dip[f], lb_sp[f], lb_dp[f])}), CAM_W);
      e = '0; e[24*25 +: 25] = act1(OP_PORT, 0, f + 1);
      send_reconf(8'd1, RES_VLIW, f, e, VLIW_W);
    end
    // stage 1, QoS: key c2a = c2[1] (UDP destination port)
    e = '0; e[25:23] = 3'd1;
    send_reconf(8'd1, RES_KE, 6, e, KE_W);
    send_reconf(8'd1, RES_MASK, 6, CMD_DATA_W'(M_C2A), KEY_W);
    send_reconf(8'd1, RES_CAM, 4, CMD_DATA_W'({12'd6, KEY_W'(5060) << 17}), CAM_W);
    e = '0; e[0*25 +: 25] = act1(OP_SET, 0, 16'h45B8);
    send_reconf(8'd1, RES_VLIW, 4, e, VLIW_W);
    send_reconf(8'd1, RES_CAM, 5, CMD_DATA_W'({12'd6, KEY_W'(5004) << 17}), CAM_W);
    e = '0; e[0*25 +: 25] = act1(OP_SET, 0, 16'h4528);
    send_reconf(8'd1, RES_VLIW, 5, e, VLIW_W);
    // stage 1, cache: key c4a = c4[0] -> slot number in c2[2]
    e = '0; e[31:29] = 3'd0;
    send_reconf(8'd1, RES_KE, 7, e, KE_W);
    send_reconf(8'd1, RES_MASK, 7, CMD_DATA_W'(M_C4A), KEY_W);
    for (int s = 0; s < 4; s++) begin
      send_reconf(8'd1, RES_CAM, 6 + s, CMD_DATA_W'({12'd7, KEY_W'(nc_key[s]) << 65}), CAM_W);
      e = '0; e[2*25 +: 25] = act1(OP_SET, 0, s + 1);
      send_reconf(8'd1, RES_VLIW, 6 + s, e, VLIW_W);
    end
    // stage 2, cache: key c2a = c2[0] (operation); get = load, put = store
    e = '0; e[25:23] = 3'd0;
    send_reconf(8'd2, RES_KE, 7, e, KE_W);
    send_reconf(8'd2, RES_MASK, 7, CMD_DATA_W'(M_C2A), KEY_W);
    send_reconf(8'd2, RES_CAM, 0, CMD_DATA_W'({12'd7, KEY_W'(1) << 17}), CAM_W);
    e = '0; e[9*25 +: 25] = act2(OP_LOAD, 2, 0);
    send_reconf(8'd2, RES_VLIW, 0, e, VLIW_W);
    send_reconf(8'd2, RES_CAM, 1, CMD_DATA_W'({12'd7, KEY_W'(2) << 17}), CAM_W);
    e = '0; e[9*25 +: 25] = act2(OP_STORE, 2, 9);
    send_reconf(8'd2, RES_VLIW, 1, e, VLIW_W);
    send_reconf(8'd2, RES_SEG, 7, CMD_DATA_W'(16'h3005), SEG_W);
  endtask

  // ---------------------------------------------------------------- reference model
  typedef struct {
    logic [7:0] bytes [];
    logic [7:0] dest;
  } exp_t;
  exp_t exp_pkts [int];
  int n_expected_out = 0, n_received = 0, n_ok = 0;

  task automatic send_pkt(input int mod, input int seq);
    logic [7:0] b [];
    exp_t e;
    int len;
    len = $urandom_range(64, 300);
    b = new[len];
    foreach (b[i]) b[i] = 8'($urandom);
    base_hdr(b, 12'(mod), 16'd1000, 1);
    e.dest = 0;
    if (mod == 5) begin
      int f;
      f = $urandom_range(0, 5);
      if (f < 4) begin
        set32(b, 30, lb_sip[f]); set32(b, 34, lb_dip[f]); set16(b, 38, lb_sp[f]); set16(b, 40, lb_dp[f]);
        e.dest = 8'(f + 1); n_lb_hit++;
      end else begin
        set32(b, 30, lb_sip[0]); set32(b, 34, lb_dip[0]); set16(b, 38, lb_sp[0] + 16'd1); set16(b, 40, lb_dp[0]);
        n_lb_miss++;
      end
    end
    if (mod == 6) set16(b, 40, ($urandom_range(0, 2) == 0) ? 16'd5060 : (($urandom_range(0, 1) == 0) ? 16'd5004 : 16'd53));
    if (mod == 7) begin
      int s;
      s = $urandom_range(0, 4);
      set32(b, 46, (s < 4) ? nc_key[s] : 32'hBAD0_0000 | 32'($urandom_range(0, 255)));
      set16(b, 50, 16'($urandom_range(1, 2)));
      set32(b, 52, $urandom);
    end
    set16(b, 62, 16'(seq));
    e.bytes = new[len](b);
    if (mod == 6) begin
      logic [15:0] dp;
      dp = {b[40], b[41]};
      if (dp == 5060) begin set16(e.bytes, 18, 16'h45B8); n_qos++; end
      else if (dp == 5004) begin set16(e.bytes, 18, 16'h4528); n_qos++; end
    end
    if (mod == 7) begin
      int slot;
      logic [31:0] key, val;
      logic [15:0] op;
      key = {b[46], b[47], b[48], b[49]};
      op = {b[50], b[51]};
      val = {b[52], b[53], b[54], b[55]};
      slot = 0;
      for (int s = 0; s < 4; s++) if (key == nc_key[s]) slot = s + 1;
      if (slot == 0) n_nc_miss++;
      if (op == 1) begin
        val = nc_mem[slot]; n_get++;
        if (val != 0) n_get_val++;
      end else begin
        nc_mem[slot] = val; n_put++;
      end
      set32(e.bytes, 52, val);
      set16(e.bytes, 56, 16'(slot));
    end
    exp_pkts[seq] = e;
    n_expected_out++;
    send_bytes(b, seq);
  endtask

  logic [7:0] rx [$];
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    for (int i = 0; i < 64; i++) if (m_axis_tkeep[i]) rx.push_back(m_axis_tdata[i*8 +: 8]);
    if (m_axis_tlast) begin
      int seq;
      seq = (rx.size() >= 64) ? int'({rx[62], rx[63]}) : -1;
      check(exp_pkts.exists(seq), $sformatf("unknown packet (seq %0d) at output", seq));
      if (exp_pkts.exists(seq)) begin
        exp_t e;
        bit same;
        e = exp_pkts[seq];
        same = (rx.size() == e.bytes.size());
        if (same) foreach (e.bytes[i]) if (rx[i] != e.bytes[i] && same) begin
          same = 0;
          $display("packet %0d of module %0d: byte %0d is %h, expected %h", seq, e.bytes[15], i, rx[i], e.bytes[i]);
        end
        check(same, $sformatf("packet %0d content differs", seq));
        check(m_axis_tdest == e.dest, $sformatf("packet %0d tdest %0d exp %0d", seq, m_axis_tdest, e.dest));
        if (same && m_axis_tdest == e.dest) n_ok++;
        exp_pkts.delete(seq);
      end
      n_received++;
      rx.delete();
    end
  end

  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 3) != 0);

  initial begin
    int seq;
    seq = 0;
    for (int f = 0; f < 4; f++) begin
      lb_sip[f] = 32'h0A00_0000 | 32'(f); lb_dip[f] = 32'hC0A8_0100 | 32'($urandom_range(0, 255));
      lb_sp[f] = 16'(1024 + f); lb_dp[f] = 16'(80 + f);
      nc_key[f] = $urandom;
    end
    foreach (nc_mem[i]) nc_mem[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    program_pipeline();
    wait_reconf_done();
    for (int n = 0; n < 300; n++) begin
      send_pkt($urandom_range(5, 7), seq++);
      if ($urandom_range(0, 3) == 0) @(posedge clk);
    end
    begin
      int guard;
      guard = 0;
      while (n_received < n_expected_out && guard < 100000) begin @(posedge clk); guard++; end
    end
    repeat (20) @(posedge clk);
    check(exp_pkts.size() == 0, "packets missing");
    $display("load_balance hit=%0d miss=%0d qos=%0d cache get=%0d (with value %0d) put=%0d uncached=%0d ok=%0d",
             n_lb_hit, n_lb_miss, n_qos, n_get, n_get_val, n_put, n_nc_miss, n_ok);
    check(n_lb_hit > 0 && n_lb_miss > 0, "load balancing not exercised");
    check(n_qos > 0, "QoS not exercised");
    check(n_get_val > 0 && n_put > 0 && n_nc_miss > 0, "cache not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
