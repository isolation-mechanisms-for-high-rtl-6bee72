// tb_stage: self-checking test of one match-action stage (element 1).
// The stage is programmed through its daisy-chain input: modules 1 and 2 both
// match 2-byte container 0 against the value 7, but with their own CAM entries
// and actions (module 1 sets container 1 to 0x1234, module 2 sets it to 0x5678
// and counts its hits with loadd into 4-byte container 0 inside its own
// memory segment). A command for element 2 that would give module 3 the same
// match must pass through unapplied, and an entry of module 3 at CAM address
// 0 must never act on a table miss. Random PHVs of modules 1-3 are then sent
// back to back (with vid_early one cycle ahead); each output PHV is compared
// with a reference model and must come out exactly four cycles after it went
// in. Commands must reappear on cfg_out one cycle later.
module tb_stage;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic vid_early_valid = 0, phv_valid = 0;
  logic [VID_W-1:0] vid_early = 0;
  phv_t phv, phv_out;
  logic vid_early_out_valid, phv_out_valid;
  logic [VID_W-1:0] vid_early_out;
  reconf_cmd_t cfg_in, cfg_out, cfg_prev;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;
  phv_t exp_q [$];
  longint t_q [$];
  longint cycle = 0;
  int count [4] = '{0, 0, 0, 0};

  stage #(.STAGE_ID(8'd1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

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

  // daisy-chain forwarding and PHV checks
  always @(posedge clk) if (rst_n) begin
    check(cfg_out == cfg_prev, "command not forwarded after one cycle");
    cfg_prev <= cfg_in.valid ? cfg_in : '0;
    if (phv_out_valid) begin
      check(exp_q.size() > 0, "unexpected PHV");
      if (exp_q.size() > 0) begin
        phv_t e;
        longint t;
        e = exp_q.pop_front();
        t = t_q.pop_front();
        check(phv_out == e, $sformatf("PHV mismatch for module %0d", e.md.vid));
        // t is taken half a cycle before the input edge: 4 stage cycles read as 5
        check(cycle - t == 5, $sformatf("latency %0d", cycle - t));
      end
    end
  end

  task automatic cmd(input logic [7:0] elem, input logic [3:0] tbl, input int idx,
                     input logic [CMD_DATA_W-1:0] entry, input int w);
    @(negedge clk);
    cfg_in.valid = 1;
    cfg_in.resource_id = {elem, tbl};
    cfg_in.index = 8'(idx);
    cfg_in.data = entry << (CMD_DATA_W - w);
    @(negedge clk);
    cfg_in = '0;
  endtask

  localparam logic [KEY_W-1:0] C2A_MASK = KEY_W'(16'hFFFF) << 17;

  initial begin
    logic [CMD_DATA_W-1:0] e;
    cfg_in = '0; cfg_prev = '0; phv = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 1; m <= 3; m++) begin
      cmd(8'd1, RES_KE, m, '0, KE_W);               // c2a = container 0
      cmd(8'd1, RES_MASK, m, CMD_DATA_W'(C2A_MASK), KEY_W);
    end
    cmd(8'd1, RES_CAM, 3, CMD_DATA_W'({12'd1, KEY_W'(7) << 17}), CAM_W);
    cmd(8'd1, RES_CAM, 5, CMD_DATA_W'({12'd2, KEY_W'(7) << 17}), CAM_W);
    cmd(8'd2, RES_CAM, 0, CMD_DATA_W'({12'd3, KEY_W'(7) << 17}), CAM_W);   // other element
    // module 3 owns CAM/VLIW address 0 with a key its packets never carry
    cmd(8'd1, RES_CAM, 0, CMD_DATA_W'({12'd3, KEY_W'(99) << 17}), CAM_W);
    e = '0; e[1*25 +: 25] = {4'(OP_SET), 5'd0, 16'hDEAD};
    cmd(8'd1, RES_VLIW, 0, e, VLIW_W);
    e = '0; e[1*25 +: 25] = {4'(OP_SET), 5'd0, 16'h1234};
    cmd(8'd1, RES_VLIW, 3, e, VLIW_W);
    e = '0; e[1*25 +: 25] = {4'(OP_SET), 5'd0, 16'h5678};
    e[8*25 +: 25] = {4'(OP_LOADD), 5'd2, 5'd0, 11'd0};   // address from container 2
    cmd(8'd1, RES_VLIW, 5, e, VLIW_W);
    cmd(8'd1, RES_SEG, 2, CMD_DATA_W'(16'h4002), SEG_W);
    repeat (3) @(negedge clk);
    begin
      int m_next;
      m_next = $urandom_range(1, 3);
      vid_early_valid = 1; vid_early = 12'(m_next);
      @(negedge clk);
      for (int n = 0; n < 500; n++) begin
        phv_t p, x;
        p = '0;
        for (int i = 0; i < 8; i++) begin
          p.c2[i] = 16'($urandom); p.c4[i] = $urandom; p.c6[i] = {16'($urandom), $urandom};
        end
        p.c2[0] = ($urandom_range(0, 1) == 1) ? 16'd7 : 16'($urandom_range(0, 6));
        p.c2[2] = 0;
        p.md.vid = 12'(m_next);
        x = p;
        if (p.c2[0] == 7 && m_next == 1) begin x.c2[1] = 16'h1234; n_hit++; end
        else if (p.c2[0] == 7 && m_next == 2) begin
          x.c2[1] = 16'h5678; count[2]++; x.c4[0] = 32'(count[2]); n_hit++;
        end else n_miss++;
        phv_valid = 1; phv = p;
        exp_q.push_back(x); t_q.push_back(cycle);
        m_next = $urandom_range(1, 3);
        vid_early = 12'(m_next);
        @(negedge clk);
        if ($urandom_range(0, 4) == 0) begin phv_valid = 0; @(negedge clk); end
      end
      phv_valid = 0; vid_early_valid = 0;
    end
    repeat (8) @(negedge clk);
    check(exp_q.size() == 0, "PHVs missing");
    check(n_hit > 0 && n_miss > 0, "coverage");
    $display("hits=%0d misses=%0d", n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
