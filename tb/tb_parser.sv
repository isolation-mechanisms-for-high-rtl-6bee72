// tb_parser: self-checking test of the per-module header parser.
// Four modules get random parse programs (random offsets, container types and
// numbers, some actions invalid). Random packets of one to four beats, of random
// modules and with random gaps, are fed in; for every packet the testbench
// builds the expected PHV from the raw bytes (big-endian copy from the offset,
// later actions overwrite earlier ones, everything else zero, metadata holding
// module ID, buffer tag and byte count) and checks it, and checks that the
// early module ID comes exactly one cycle before the PHV.
module tb_parser;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sop = 0;
  beat_t in_beat;
  logic [NUM_BUFS-1:0] in_buf_tag = 0;
  logic cfg_we = 0;
  logic [MOD_IDX_W-1:0] cfg_addr = 0;
  logic [PARSER_W-1:0] cfg_data = 0;
  logic vid_early_valid, phv_valid;
  logic [VID_W-1:0] vid_early;
  phv_t phv;
  logic [PARSER_W-1:0] prog [4];
  phv_t exp_q [$];
  logic [VID_W-1:0] early_q [$];
  int checks = 0, failures = 0;

  parser dut (.*);

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

  function automatic phv_t ref_phv(input logic [7:0] bytes [], input int nb, input int m,
                                   input logic [3:0] tag);
    phv_t p;
    logic [15:0] a;
    logic [47:0] w;
    p = '0;
    for (int k = 0; k < PARSE_ACTIONS; k++) begin
      a = prog[m][k*16 +: 16];
      for (int j = 0; j < 6; j++) begin
        int o;
        o = int'(a[12:6]) + j;
        w[47-8*j -: 8] = (o < 128 && o < bytes.size()) ? bytes[o] : 8'h00;
      end
      if (a[0]) begin
        if (a[5:4] == 2'd1) p.c2[a[3:1]] = w[47:32];
        if (a[5:4] == 2'd2) p.c4[a[3:1]] = w[47:16];
        if (a[5:4] == 2'd3) p.c6[a[3:1]] = w;
      end
    end
    p.md.vid = 12'(m);
    p.md.buf_tag = tag;
    p.md.pkt_len = 16'(nb);
    return p;
  endfunction

  // monitors
  int pending_early = -1;
  always @(negedge clk) if (rst_n) begin
    if (phv_valid) begin
      check(exp_q.size() > 0, "unexpected PHV");
      check(pending_early >= 0 && 12'(pending_early) == phv.md.vid, "early module ID not one cycle ahead");
      if (exp_q.size() > 0) begin
        phv_t e;
        e = exp_q.pop_front();
        check(phv == e, $sformatf("PHV mismatch for module %0d", e.md.vid));
      end
    end
    pending_early = vid_early_valid ? int'(vid_early) : -1;
  end

  initial begin
    in_beat = '0;
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < PARSE_ACTIONS; k++)
        prog[m][k*16 +: 16] = {3'd0, 7'($urandom_range(0, 127)), 2'($urandom_range(1, 3)),
                               3'($urandom), 1'($urandom_range(0, 4) != 0)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < 4; m++) begin
      cfg_we = 1; cfg_addr = 5'(m); cfg_data = prog[m];
      @(negedge clk);
    end
    cfg_we = 0;
    for (int n = 0; n < 300; n++) begin
      int m, beats, lastb, nbytes;
      logic [7:0] bytes [];
      logic [3:0] tag;
      m = $urandom_range(0, 3);
      beats = $urandom_range(1, 4);
      lastb = $urandom_range(1, 64);     // valid bytes in last beat
      tag = 4'(1) << $urandom_range(0, 3);
      bytes = new[beats * 64];
      foreach (bytes[i]) bytes[i] = 8'($urandom);
      bytes[14] = {4'($urandom), 4'(m >> 8)};
      bytes[15] = 8'(m);
      if (beats == 1 && lastb < 16) lastb = 16;
      // header window: first two beats, bytes past the packet end read as sent
      // (the parser copies whole beats; tkeep only sets the length)
      nbytes = (beats == 1) ? lastb : (beats == 2 ? 64 + lastb : 128);
      exp_q.push_back(ref_phv(bytes, nbytes, m, tag));
      for (int b = 0; b < beats; b++) begin
        in_valid = 1; in_sop = (b == 0); in_buf_tag = tag;
        for (int i = 0; i < 64; i++) in_beat.tdata[i*8 +: 8] = bytes[b*64 + i];
        in_beat.tlast = (b == beats - 1);
        in_beat.tkeep = in_beat.tlast ? KEEP_W'((65'(1) << lastb) - 1) : '1;
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin
          in_valid = 0; in_sop = 0; @(negedge clk);
        end
      end
      in_valid = 0; in_sop = 0;
    end
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "PHVs missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
