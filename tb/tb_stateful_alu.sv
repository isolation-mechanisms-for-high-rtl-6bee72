// tb_stateful_alu: self-checking test of the segment table and stateful memory.
// Two modules get segments (module 3: offset 16, range 8; module 5: offset 40,
// range 4). Random load/store/loadd accesses with local addresses in and out of
// range are checked against a reference memory; out-of-range accesses must
// neither read nor write, so module 5 can never touch module 3's words.
module tb_stateful_alu;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic vid_early_valid = 0, req = 0, cfg_we = 0, ok;
  logic [VID_W-1:0] vid_early = 0;
  logic [3:0] op = 0;
  logic [OPW-1:0] local_addr = 0, wdata = 0;
  logic [MEM_W-1:0] result;
  logic [MOD_IDX_W-1:0] cfg_addr = 0;
  logic [SEG_W-1:0] cfg_data = 0;
  logic [MEM_W-1:0] ref_mem [MEM_DEPTH];
  int checks = 0, failures = 0, oob = 0, inb = 0;

  stateful_alu dut (.*);

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

  initial begin
    for (int i = 0; i < MEM_DEPTH; i++) ref_mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_addr = 3; cfg_data = {8'd16, 8'd8}; @(negedge clk);
    cfg_addr = 5; cfg_data = {8'd40, 8'd4}; @(negedge clk);
    cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      int m, off, rng, la, pa;
      logic [3:0] o;
      logic [MEM_W-1:0] exp;
      m = ($urandom_range(0, 1) == 0) ? 3 : 5;
      off = (m == 3) ? 16 : 40;
      rng = (m == 3) ? 8 : 4;
      // module ID one cycle ahead
      vid_early_valid = 1; vid_early = 12'(m); req = 0;
      @(negedge clk);
      vid_early_valid = 0;
      o = (n % 3 == 0) ? OP_STORE : ((n % 3 == 1) ? OP_LOAD : OP_LOADD);
      la = $urandom_range(0, 11);
      req = 1; op = o; local_addr = OPW'(la); wdata = OPW'($urandom);
      #1;
      pa = off + la;
      if (la < rng) begin
        inb++;
        check(ok, "in-range access refused");
        exp = (o == OP_LOAD) ? ref_mem[pa] : (o == OP_LOADD) ? ref_mem[pa] + 1 : '0;
        check(result == exp, $sformatf("module %0d op %0d addr %0d got %h exp %h", m, o, la, result, exp));
        if (o == OP_STORE) ref_mem[pa] = wdata[31:0];
        if (o == OP_LOADD) ref_mem[pa] = ref_mem[pa] + 1;
      end else begin
        oob++;
        check(!ok && result == '0, "out-of-range access allowed");
      end
      @(negedge clk);
      req = 0;
    end
    // full memory compare through loads
    for (int m = 3; m <= 5; m += 2) begin
      for (int la = 0; la < ((m == 3) ? 8 : 4); la++) begin
        vid_early_valid = 1; vid_early = 12'(m); @(negedge clk); vid_early_valid = 0;
        req = 1; op = OP_LOAD; local_addr = OPW'(la); #1;
        check(result == ref_mem[((m == 3) ? 16 : 40) + la], "final memory contents differ");
        @(negedge clk); req = 0;
      end
    end
    check(oob > 0 && inb > 0, "both in- and out-of-range accesses must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
