// tb_key_extractor: self-checking test of per-module key extraction.
// Three modules get different key-extractor entries (container choices,
// predicates with container or immediate operands) and masks. Random PHVs of
// random modules are sent back to back, with the module ID one cycle ahead;
// each key is compared with one built independently in the testbench from the
// entry layout, and must appear one cycle after its PHV.
module tb_key_extractor;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic vid_early_valid = 0, phv_valid = 0, key_valid;
  logic [VID_W-1:0] vid_early = 0;
  phv_t phv, phv_out;
  logic cfg_ke_we = 0, cfg_mask_we = 0;
  logic [MOD_IDX_W-1:0] cfg_addr = 0;
  logic [KE_W-1:0] cfg_ke_data = 0;
  logic [KEY_W-1:0] cfg_mask_data = 0, key;
  logic [KE_W-1:0] ke_e [3];
  logic [KEY_W-1:0] mask_e [3];
  logic [KEY_W-1:0] exp_q [$];
  phv_t exp_phv_q [$];
  int checks = 0, failures = 0, flags1 = 0;

  key_extractor dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [47:0] cv(input phv_t p, input int i);
    if (i < 8) return {32'd0, p.c2[i]};
    if (i < 16) return {16'd0, p.c4[i-8]};
    if (i < 24) return p.c6[i-16];
    return 48'd0;
  endfunction

  function automatic logic [KEY_W-1:0] ref_key(input phv_t p, input logic [KE_W-1:0] e, input logic [KEY_W-1:0] m);
    logic [47:0] a, b;
    logic f;
    a = e[15] ? cv(p, int'(e[12:8])) : {41'd0, e[14:8]};
    b = e[7]  ? cv(p, int'(e[4:0]))  : {41'd0, e[6:0]};
    case (int'(e[19:16]))
      1: f = a == b;  2: f = a != b;  3: f = a > b;
      4: f = a >= b;  5: f = a < b;   6: f = a <= b;
      default: f = 0;
    endcase
    return {p.c6[e[37:35]], p.c6[e[34:32]], p.c4[e[31:29]], p.c4[e[28:26]],
            p.c2[e[25:23]], p.c2[e[22:20]], f} & m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n) begin
    if (key_valid) begin
      check(exp_q.size() > 0, "unexpected key");
      if (exp_q.size() > 0) begin
        logic [KEY_W-1:0] e;
        phv_t ep;
        e = exp_q.pop_front();
        ep = exp_phv_q.pop_front();
        check(key == e, $sformatf("key %h exp %h", key, e));
        check(phv_out == ep, "PHV not passed with its key");
        if (key[0]) flags1++;
      end
    end
  end

  initial begin
    // module 0: predicate c2[1] == 7 (immediate); full mask
    ke_e[0] = {3'd0, 3'd1, 3'd2, 3'd3, 3'd4, 3'd5, 4'd1, 8'h81, 8'h07};
    mask_e[0] = '1;
    // module 1: predicate c4[0] > c4[1]; mask keeps only the 4-byte part and flag
    ke_e[1] = {3'd7, 3'd6, 3'd0, 3'd1, 3'd2, 3'd2, 4'd3, 8'h88, 8'h89};
    mask_e[1] = {96'd0, {64{1'b1}}, 32'd0, 1'b1};
    // module 2: no predicate; only the first 6-byte container
    ke_e[2] = {3'd5, 3'd5, 3'd5, 3'd5, 3'd5, 3'd5, 4'd0, 8'h00, 8'h00};
    mask_e[2] = {{48{1'b1}}, 145'd0};
    phv = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < 3; m++) begin
      cfg_ke_we = 1; cfg_mask_we = 1; cfg_addr = 5'(m);
      cfg_ke_data = ke_e[m]; cfg_mask_data = mask_e[m];
      @(negedge clk);
    end
    cfg_ke_we = 0; cfg_mask_we = 0;
    begin
      int m_next;
      m_next = $urandom_range(0, 2);
      vid_early_valid = 1; vid_early = 12'(m_next);
      @(negedge clk);
      for (int n = 0; n < 600; n++) begin
        int m;
        phv_t p;
        m = m_next;
        p = '0;
        for (int i = 0; i < 8; i++) begin
          p.c2[i] = ($urandom_range(0, 3) == 0) ? 16'd7 : 16'($urandom);
          p.c4[i] = $urandom_range(0, 3);
          p.c6[i] = {16'($urandom), $urandom};
        end
        p.md.vid = 12'(m);
        phv_valid = 1; phv = p;
        exp_q.push_back(ref_key(p, ke_e[m], mask_e[m]));
        exp_phv_q.push_back(p);
        m_next = $urandom_range(0, 2);
        vid_early_valid = (n != 599); vid_early = 12'(m_next);
        @(negedge clk);
      end
      phv_valid = 0; vid_early_valid = 0;
    end
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "keys missing");
    check(flags1 > 0, "predicate never true");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
