// tb_action_engine: self-checking test of one stage's VLIW action unit.
// Two modules get stateful-memory segments (module 1: offset 10, range 6;
// module 2: offset 100, range 20). Random PHVs of modules 1-3 (3 has no segment)
// are sent back to back with random VLIW words: every container gets a random
// stateless action, and sometimes one or two containers get stateful actions
// with small random addresses (some out of the module's range), and the
// metadata slot gets port or discard. A reference model in the testbench applies
// the same rules (lowest container wins the memory port, out-of-range gives 0
// and no write, container widths kept, module ID and buffer tag never change)
// and keeps its own copy of the stateful memory.
module tb_action_engine;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic vid_early_valid = 0, phv_valid = 0, phv_out_valid;
  logic [VID_W-1:0] vid_early = 0;
  phv_t phv, phv_out;
  logic [VLIW_W-1:0] vliw = 0;
  logic cfg_seg_we = 0;
  logic [MOD_IDX_W-1:0] cfg_addr = 0;
  logic [SEG_W-1:0] cfg_seg_data = 0;
  logic [31:0] mem [256];
  logic [15:0] seg [4];
  phv_t exp_q [$];
  int checks = 0, failures = 0, n_stateful = 0, n_oob = 0, n_port = 0, n_disc = 0;

  action_engine dut (.*);

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

  function automatic logic [47:0] cv(input phv_t p, input int i);
    if (i < 8) return {32'd0, p.c2[i]};
    if (i < 16) return {16'd0, p.c4[i-8]};
    if (i < 24) return p.c6[i-16];
    return 48'd0;
  endfunction

  function automatic phv_t ref_step(input phv_t p, input logic [VLIW_W-1:0] w);
    phv_t n;
    logic [47:0] r, a, b, imm;
    logic [24:0] act;
    int granted;
    logic [31:0] sres;
    n = p;
    granted = -1;
    sres = 0;
    for (int k = 0; k < 25; k++) begin
      act = w[k*25 +: 25];
      if (granted < 0 && (act[24:21] == 6 || act[24:21] == 7 || act[24:21] == 8)) begin
        logic [47:0] la;
        int ph;
        logic [15:0] sg;
        granted = k;
        la = cv(p, int'(act[20:16]));
        sg = seg[p.md.vid];
        ph = int'(sg[15:8]) + int'(la[7:0]);
        if (la < 48'(sg[7:0]) && ph < 256) begin
          n_stateful++;
          if (act[24:21] == 6) sres = mem[ph];
          if (act[24:21] == 8) begin sres = mem[ph] + 1; mem[ph] = sres; end
          if (act[24:21] == 7) mem[ph] = cv(p, int'(act[15:11]));
        end else n_oob++;
      end
    end
    for (int k = 0; k < 25; k++) begin
      act = w[k*25 +: 25];
      a = cv(p, int'(act[20:16]));
      b = cv(p, int'(act[15:11]));
      imm = {32'd0, act[15:0]};
      r = cv(p, k);
      case (int'(act[24:21]))
        1: r = a + b;
        2: r = a - b;
        3: r = a + imm;
        4: r = a - imm;
        5: r = imm;
        6, 8: if (granted == k) r = {16'd0, sres};
        default: ;
      endcase
      if (k < 8) n.c2[k] = r[15:0];
      else if (k < 16) n.c4[k-8] = r[31:0];
      else if (k < 24) n.c6[k-16] = r;
      else begin
        if (act[24:21] == 9) begin n.md.dst_port = act[7:0]; n_port++; end
        if (act[24:21] == 10) begin n.md.discard = 1'b1; n_disc++; end
      end
    end
    return n;
  endfunction

  always @(negedge clk) if (rst_n && phv_out_valid) begin
    check(exp_q.size() > 0, "unexpected PHV");
    if (exp_q.size() > 0) begin
      phv_t e;
      e = exp_q.pop_front();
      check(phv_out == e, "PHV mismatch");
      check(phv_out.md.vid == e.md.vid && phv_out.md.buf_tag == e.md.buf_tag, "metadata id changed");
    end
  end

  initial begin
    phv = '0;
    foreach (mem[i]) mem[i] = 0;
    seg[0] = 0; seg[1] = {8'd10, 8'd6}; seg[2] = {8'd100, 8'd20}; seg[3] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 1; m <= 2; m++) begin
      cfg_seg_we = 1; cfg_addr = 5'(m); cfg_seg_data = seg[m];
      @(negedge clk);
    end
    cfg_seg_we = 0;
    begin
      int m_next;
      m_next = $urandom_range(1, 3);
      vid_early_valid = 1; vid_early = 12'(m_next);
      @(negedge clk);
      for (int n = 0; n < 800; n++) begin
        phv_t p;
        logic [VLIW_W-1:0] w;
        p = '0;
        for (int i = 0; i < 8; i++) begin
          p.c2[i] = 16'($urandom_range(0, 24));
          p.c4[i] = $urandom;
          p.c6[i] = {16'($urandom), $urandom};
        end
        p.md.vid = 12'(m_next);
        p.md.buf_tag = 4'(1) << $urandom_range(0, 3);
        for (int k = 0; k < 24; k++) begin
          int op;
          op = $urandom_range(0, 5);
          w[k*25 +: 25] = {4'(op), 5'($urandom_range(0, 24)), 16'($urandom)};
        end
        w[24*25 +: 25] = {4'($urandom_range(0, 10) > 8 ? $urandom_range(9, 10) : 0), 21'($urandom)};
        for (int s = 0; s < 2; s++) if ($urandom_range(0, 1) == 1) begin
          int k;
          k = $urandom_range(0, 23);
          // address from a 2-byte container (values 0..24), data from any
          w[k*25 +: 25] = {4'($urandom_range(6, 8)), 5'($urandom_range(0, 7)), 5'($urandom_range(0, 23)), 11'd0};
        end
        if ($urandom_range(0, 7) == 0) w = '0;
        phv_valid = 1; phv = p; vliw = w;
        exp_q.push_back(ref_step(p, w));
        m_next = $urandom_range(1, 3);
        vid_early = 12'(m_next);
        @(negedge clk);
        if ($urandom_range(0, 5) == 0) begin
          phv_valid = 0; vliw = $urandom; @(negedge clk);
        end
      end
      phv_valid = 0; vid_early_valid = 0;
    end
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "PHVs missing");
    check(n_stateful > 50 && n_oob > 20 && n_port > 0 && n_disc > 0, "coverage too low");
    $display("stateful=%0d out_of_range=%0d port=%0d discard=%0d", n_stateful, n_oob, n_port, n_disc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
