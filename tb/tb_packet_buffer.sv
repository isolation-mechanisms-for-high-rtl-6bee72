// tb_packet_buffer: self-checking test of the packet buffer FIFO.
// Random pushes and pops against a reference queue; checks order, data,
// full and empty flags, and that writes to a full buffer are refused.
module tb_packet_buffer;
  import menshen_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  beat_t wr_data, rd_data;
  logic [$clog2(DEPTH):0] count;
  beat_t q [$];
  int checks = 0, failures = 0, full_seen = 0;

  packet_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "not empty after reset");
    for (int n = 0; n < 2000; n++) begin
      wr_en = ($urandom_range(0, 99) < (n < 1000 ? 70 : 30));
      rd_en = ($urandom_range(0, 99) < (n < 1000 ? 40 : 70));
      wr_data.tdata = {16{$urandom}};
      wr_data.tkeep = {$urandom, $urandom};
      wr_data.tlast = 1'($urandom);
      check(empty == (q.size() == 0), "empty flag wrong");
      check(full == (q.size() == DEPTH), "full flag wrong");
      check(32'(count) == q.size(), "count wrong");
      if (full) full_seen++;
      if (rd_en && q.size() > 0) begin
        check(rd_data == q[0], $sformatf("data mismatch at step %0d", n));
      end
      begin
        bit wr_ok, rd_ok;
        wr_ok = wr_en && q.size() < DEPTH;
        rd_ok = rd_en && q.size() > 0;
        @(posedge clk);
        if (rd_ok) void'(q.pop_front());
        if (wr_ok) q.push_back(wr_data);
      end
      @(negedge clk);
    end
    check(full_seen > 0, "buffer never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
