// tb_menshen_top: end-to-end, self-checking test of the whole pipeline at its
// full size (no parameter overrides).
//
// The pipeline is programmed only through reconfiguration packets (UDP port
// 0xF1F2), and software-style AXI-Lite accesses poll the reconfiguration
// counter and set the module bitmap. Three modules share the pipeline:
//   module 1 (calculator): parses an opcode and two 32-bit operands; stage 1
//     matches the opcode (1 = add, 2 = subtract) and writes the result into a
//     4-byte container that the deparser writes back at bytes 56-59; other
//     opcodes miss the table;
//   module 2 (firewall, port choice and counter): stage 2 matches the UDP
//     destination port (80 -> output port 5, 23 -> discard); stage 3 counts the
//     module's packets in its stateful segment (loadd) and the deparser writes
//     the count at bytes 60-61;
//   module 3 (counter): same stage-3 counter program in its own segment.
// Module 4 has no configuration and must pass unchanged. A reference model
// computes every expected output packet (matched by a sequence number carried
// in bytes 62-63) and the test also sends untagged packets, packets with
// VLAN IDs outside the tables and packets of a module blocked by the bitmap,
// all of which must be dropped. Midway, module 1's action table is rewritten
// while it is blocked (add becomes multiply-free "subtract"), and the new
// program must apply afterwards while the other modules keep their state.
// Random input gaps and output backpressure are applied.
//
// Every mechanism is counted and the test fails if one never happened: packet
// forwarded, header rewrite, CAM hit and miss, stateful loadd, port action,
// discard action, three kinds of filter drop, reconfiguration counter, both
// parsers used, all four packet buffers used, input and output backpressure,
// and in-service reconfiguration.
module tb_menshen_top;
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

  // ---------------------------------------------------------------- mechanism counters
  int n_fwd = 0, n_rewrite = 0, n_hit = 0, n_miss = 0, n_loadd = 0, n_port = 0;
  int n_discard = 0, n_untagged = 0, n_badvid = 0, n_bitmap = 0, n_reconf = 0;
  int n_par [2] = '{0, 0};
  int n_buf [4] = '{0, 0, 0, 0};
  int n_in_bp = 0, n_out_bp = 0, n_newprog = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2; p++) if (dut.p_valid[p]) n_par[p]++;
    if (dut.f_valid && dut.f_sop)
      for (int b = 0; b < 4; b++) if (dut.f_buf_sel[b]) n_buf[b]++;
    if (s_axis_tvalid && !s_axis_tready) n_in_bp++;
    if (m_axis_tvalid && !m_axis_tready) n_out_bp++;
  end

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

  // key layout {c6a, c6b, c4a, c4b, c2a, c2b, flag}: c2a is key[32:17]
  localparam logic [KEY_W-1:0] C2A_MASK = KEY_W'(16'hFFFF) << 17;

  task automatic program_pipeline();
    logic [CMD_DATA_W-1:0] e;
    // parsers (element 0) and deparsers (element 6)
    e = '0;
    e[0 +: 16] = pact(46, 1, 0); e[16 +: 16] = pact(48, 2, 0); e[32 +: 16] = pact(52, 2, 1);
    send_reconf(ELEM_PARSER, RES_PARSE_TBL, 1, e, PARSER_W);
    e = '0; e[0 +: 16] = pact(40, 1, 1);
    send_reconf(ELEM_PARSER, RES_PARSE_TBL, 2, e, PARSER_W);
    e = '0; e[0 +: 16] = pact(56, 2, 2);
    send_reconf(ELEM_DEPARSER, RES_PARSE_TBL, 1, e, PARSER_W);
    e = '0; e[0 +: 16] = pact(60, 1, 2);
    send_reconf(ELEM_DEPARSER, RES_PARSE_TBL, 2, e, PARSER_W);
    send_reconf(ELEM_DEPARSER, RES_PARSE_TBL, 3, e, PARSER_W);
    // stage 1: module 1 opcode match
    e = '0; e[25:23] = 3'd0;
    send_reconf(8'd1, RES_KE, 1, e, KE_W);
    send_reconf(8'd1, RES_MASK, 1, CMD_DATA_W'(C2A_MASK), KEY_W);
    send_reconf(8'd1, RES_CAM, 0, CMD_DATA_W'({12'd1, KEY_W'(1) << 17}), CAM_W);
    send_reconf(8'd1, RES_CAM, 1, CMD_DATA_W'({12'd1, KEY_W'(2) << 17}), CAM_W);
    e = '0; e[10*25 +: 25] = act2(OP_ADD, 8, 9);
    send_reconf(8'd1, RES_VLIW, 0, e, VLIW_W);
    e = '0; e[10*25 +: 25] = act2(OP_SUB, 8, 9);
    send_reconf(8'd1, RES_VLIW, 1, e, VLIW_W);
    // stage 2: module 2 firewall on UDP destination port
    e = '0; e[25:23] = 3'd1;
    send_reconf(8'd2, RES_KE, 2, e, KE_W);
    send_reconf(8'd2, RES_MASK, 2, CMD_DATA_W'(C2A_MASK), KEY_W);
    send_reconf(8'd2, RES_CAM, 0, CMD_DATA_W'({12'd2, KEY_W'(80) << 17}), CAM_W);
    send_reconf(8'd2, RES_CAM, 1, CMD_DATA_W'({12'd2, KEY_W'(23) << 17}), CAM_W);
    e = '0; e[24*25 +: 25] = act1(OP_PORT, 0, 5);
    send_reconf(8'd2, RES_VLIW, 0, e, VLIW_W);
    e = '0; e[24*25 +: 25] = act1(OP_DISCARD, 0, 0);
    send_reconf(8'd2, RES_VLIW, 1, e, VLIW_W);
    // stage 3: packet counters of modules 2 and 3 (all-zero key, own segments)
    send_reconf(8'd3, RES_CAM, 0, CMD_DATA_W'({12'd2, KEY_W'(0)}), CAM_W);
    send_reconf(8'd3, RES_CAM, 1, CMD_DATA_W'({12'd3, KEY_W'(0)}), CAM_W);
    e = '0; e[2*25 +: 25] = act2(OP_LOADD, 3, 0);
    send_reconf(8'd3, RES_VLIW, 0, e, VLIW_W);
    send_reconf(8'd3, RES_VLIW, 1, e, VLIW_W);
    send_reconf(8'd3, RES_SEG, 2, CMD_DATA_W'(16'h0804), SEG_W);
    send_reconf(8'd3, RES_SEG, 3, CMD_DATA_W'(16'h1404), SEG_W);
  endtask

  // ---------------------------------------------------------------- reference model
  typedef struct {
    logic [7:0] bytes [];
    logic [7:0] dest;
    bit         drop;
    int         kind;     // 1 calc hit, 2 calc miss, 3 counter
  } exp_t;
  exp_t exp_pkts [int];
  int   counter [4] = '{0, 0, 0, 0};
  bit   calc_sub_for_add = 0;   // after in-service rewrite, opcode 1 subtracts
  int   n_expected_out = 0, n_received = 0;

  task automatic send_data(input int mod, input int seq, input int len, input logic [15:0] dport);
    logic [7:0] b [];
    exp_t e;
    b = new[len];
    foreach (b[i]) b[i] = 8'($urandom);
    base_hdr(b, 12'(mod), dport, 1);
    set16(b, 62, 16'(seq));
    e.bytes = new[len](b);
    e.dest = 0; e.drop = 0; e.kind = 0;
    if (mod == 1) begin
      logic [15:0] op;
      logic [31:0] a, c, r;
      op = $urandom_range(1, 3);
      set16(b, 46, op);
      a = $urandom; c = $urandom;
      set32(b, 48, a); set32(b, 52, c);
      e.bytes = new[len](b);
      if (op == 1) r = calc_sub_for_add ? a - c : a + c;
      else if (op == 2) r = a - c;
      else r = 0;
      e.kind = (op == 3) ? 2 : 1;
      set32(e.bytes, 56, r);
    end
    if (mod == 2 || mod == 3) begin
      counter[mod]++;
      set16(e.bytes, 60, 16'(counter[mod]));
      e.kind = 3;
    end
    if (mod == 2 && dport == 80) e.dest = 5;
    if (mod == 2 && dport == 23) e.drop = 1;
    exp_pkts[seq] = e;
    if (!e.drop) n_expected_out++;
    send_bytes(b, seq);
  endtask

  task automatic send_dropped(input int kind, input int seq);
    logic [7:0] b [];
    b = new[$urandom_range(64, 200)];
    foreach (b[i]) b[i] = 8'($urandom);
    case (kind)
      0: base_hdr(b, 12'd1, 16'd1000, 0);                       // untagged
      1: base_hdr(b, 12'($urandom_range(32, 4094)), 16'd1000, 1); // no table entry
      default: base_hdr(b, 12'd4, 16'd1000, 1);                  // blocked by bitmap
    endcase
    set16(b, 62, 16'(seq));
    send_bytes(b, -1);
    case (kind) 0: n_untagged++; 1: n_badvid++; default: n_bitmap++; endcase
  endtask

  // ---------------------------------------------------------------- output monitor
  logic [7:0] rx [$];
  longint lat_64 = -1, lat_1500 = -1;
  int seq_64 = -1, seq_1500 = -1;
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
        check(!e.drop, $sformatf("discarded packet %0d was sent", seq));
        same = (rx.size() == e.bytes.size());
        if (same) foreach (e.bytes[i]) if (rx[i] != e.bytes[i]) same = 0;
        check(same, $sformatf("packet %0d content differs", seq));
        check(m_axis_tdest == e.dest, $sformatf("packet %0d tdest %0d exp %0d", seq, m_axis_tdest, e.dest));
        if (same) begin
          n_fwd++;
          if (e.kind == 1) begin n_rewrite++; n_hit++; end
          if (e.kind == 2) n_miss++;
          if (e.kind == 3) begin n_rewrite++; n_loadd++; end
          if (e.dest == 5) n_port++;
          if (calc_sub_for_add && e.kind == 1) n_newprog++;
        end
        if (seq == seq_64) lat_64 = cycle - t_in[seq];
        if (seq == seq_1500) lat_1500 = cycle - t_in[seq];
        exp_pkts.delete(seq);
      end
      n_received++;
      rx.delete();
    end
  end

  task automatic wait_drain();
    int guard;
    guard = 0;
    while (n_received < n_expected_out && guard < 200000) begin @(posedge clk); guard++; end
    repeat (50) @(posedge clk);
  endtask

  // output backpressure pattern
  bit bp_on = 0;
  always @(negedge clk) m_axis_tready <= bp_on ? ($urandom_range(0, 2) == 0) : 1'b1;

  // ---------------------------------------------------------------- scenario
  int seq = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    program_pipeline();
    wait_reconf_done();

    // idle-pipeline latency of a 64-byte and a 1500-byte packet (module 4)
    seq_64 = seq; send_data(4, seq++, 64, 16'd1000); wait_drain();
    seq_1500 = seq; send_data(4, seq++, 1500, 16'd1000); wait_drain();

    // mixed traffic with filter drops, bursts and backpressure
    axil_write(8'h04, 32'h0000_0010);       // block module 4
    bp_on = 1;
    for (int n = 0; n < 300; n++) begin
      int r;
      r = $urandom_range(0, 19);
      if (r == 0) send_dropped(0, seq++);
      else if (r == 1) send_dropped(1, seq++);
      else if (r == 2) send_dropped(2, seq++);
      else begin
        int mod, len;
        logic [15:0] dport;
        mod = $urandom_range(1, 3);
        len = ($urandom_range(0, 9) == 0) ? $urandom_range(400, 1500) : $urandom_range(64, 200);
        r = $urandom_range(0, 2);
        dport = (r == 0) ? 16'd80 : (r == 1 ? 16'd23 : 16'd443);
        send_data(mod, seq++, len, dport);
      end
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 5)) @(posedge clk);
    end
    wait_drain();
    bp_on = 0;

    // in-service rewrite of module 1: block it, change opcode 1 to subtract,
    // unblock, while module 2 and 3 state stays as it is
    begin
      logic [CMD_DATA_W-1:0] e;
      logic [31:0] r;
      axil_write(8'h04, 32'h0000_0012);
      axil_read(8'h04, r);
      check(r == 32'h12, "bitmap read-back");
      send_dropped(2, seq++);
      e = '0; e[10*25 +: 25] = act2(OP_SUB, 8, 9);
      send_reconf(8'd1, RES_VLIW, 0, e, VLIW_W);
      wait_reconf_done();
      calc_sub_for_add = 1;
      axil_write(8'h04, 32'h0000_0000);
    end
    for (int n = 0; n < 60; n++) send_data($urandom_range(1, 3), seq++, $urandom_range(64, 256), 16'd443);
    wait_drain();

    // results
    n_discard = 0;
    foreach (exp_pkts[s]) begin
      if (exp_pkts[s].drop) n_discard++;
      else check(0, $sformatf("packet %0d never came out", s));
    end
    $display("forwarded=%0d rewrite=%0d cam_hit=%0d cam_miss=%0d loadd=%0d port=%0d discard=%0d",
             n_fwd, n_rewrite, n_hit, n_miss, n_loadd, n_port, n_discard);
    $display("drop_untagged=%0d drop_vid=%0d drop_bitmap=%0d reconf_checks=%0d new_program=%0d",
             n_untagged, n_badvid, n_bitmap, n_reconf, n_newprog);
    $display("parser0=%0d parser1=%0d buffers=%0d/%0d/%0d/%0d in_backpressure=%0d out_backpressure=%0d",
             n_par[0], n_par[1], n_buf[0], n_buf[1], n_buf[2], n_buf[3], n_in_bp, n_out_bp);
    $display("latency (first beat in -> last beat out): 64B=%0d cycles, 1500B=%0d cycles", lat_64, lat_1500);
    check(n_fwd > 0, "no packet forwarded");
    check(n_rewrite > 0, "no header rewrite");
    check(n_hit > 0, "no CAM hit");
    check(n_miss > 0, "no CAM miss");
    check(n_loadd > 0, "no stateful loadd");
    check(n_port > 0, "no port action");
    check(n_discard > 0, "no discard action");
    check(n_untagged > 0, "no untagged drop");
    check(n_badvid > 0, "no out-of-range module drop");
    check(n_bitmap > 0, "no bitmap drop");
    check(n_reconf == 2, "reconfiguration counter not confirmed");
    check(n_par[0] > 0 && n_par[1] > 0, "a parser was never used");
    check(n_buf[0] > 0 && n_buf[1] > 0 && n_buf[2] > 0 && n_buf[3] > 0, "a packet buffer was never used");
    check(n_in_bp > 0, "no input backpressure");
    check(n_out_bp > 0, "no output backpressure");
    check(n_newprog > 0, "in-service reconfiguration not exercised");
    check(lat_64 > 0 && lat_1500 > 0, "latency not measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
