// tb_exact_match_cam: self-checking test of the module-partitioned CAM.
// Entries of two modules share some keys. Lookups must hit only entries of the
// packet's own module, return the lowest matching address, miss on unknown
// keys, and answer one cycle after the lookup. A reference model in the
// testbench searches the same entries.
module tb_exact_match_cam;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lookup_valid = 0, out_valid, hit, wr_en = 0;
  logic [VID_W-1:0] lookup_vid = 0;
  logic [KEY_W-1:0] lookup_key = 0;
  logic [3:0] hit_addr, wr_addr = 0;
  logic [CAM_W-1:0] wr_data = 0;
  logic [CAM_W-1:0] ref_e [16];
  bit ref_v [16];
  logic [KEY_W-1:0] keys [4];
  int checks = 0, failures = 0, hits = 0, misses = 0;

  exact_match_cam dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [KEY_W-1:0] rkey();
    logic [KEY_W-1:0] k;
    for (int w = 0; w < 7; w++) k[w*32 +: 32] = $urandom;
    return k;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) keys[i] = rkey();
    for (int i = 0; i < 16; i++) ref_v[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // entries: modules 1 and 2, keys drawn from a small set so they collide
    for (int i = 0; i < 12; i++) begin
      logic [VID_W-1:0] v;
      v = (i % 2 == 0) ? 12'd1 : 12'd2;
      wr_en = 1; wr_addr = 4'(i); wr_data = {v, keys[(i / 2) % 4]};
      ref_e[i] = wr_data; ref_v[i] = 1;
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      bit eh; int ea;
      lookup_valid = 1;
      lookup_vid = 12'($urandom_range(1, 3));
      lookup_key = ($urandom_range(0, 4) == 4) ? rkey() : keys[$urandom_range(0, 3)];
      eh = 0; ea = 0;
      for (int i = 15; i >= 0; i--)
        if (ref_v[i] && ref_e[i] == {lookup_vid, lookup_key}) begin eh = 1; ea = i; end
      @(negedge clk);
      lookup_valid = 0;
      check(out_valid, "no result one cycle after lookup");
      check(hit == eh, $sformatf("hit %0d exp %0d (vid %0d)", hit, eh, lookup_vid));
      if (eh) begin
        hits++;
        check(hit_addr == 4'(ea), $sformatf("addr %0d exp %0d", hit_addr, ea));
        check(ref_e[hit_addr][CAM_W-1 -: VID_W] == lookup_vid, "hit on another module's entry");
      end else misses++;
    end
    @(negedge clk);
    check(!out_valid && !hit, "result without lookup");
    check(hits > 0 && misses > 0, "both hits and misses must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
