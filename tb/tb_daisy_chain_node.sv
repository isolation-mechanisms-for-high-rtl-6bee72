// tb_daisy_chain_node: self-checking test of one daisy-chain hop.
// Sends commands addressed to this element, to other elements and idle
// cycles; checks that every command is forwarded one cycle later unchanged
// and that the local write strobe fires only for this element's commands.
module tb_daisy_chain_node;
  import menshen_pkg::*;
  logic clk = 0, rst_n = 0;
  reconf_cmd_t cmd_in, cmd_out;
  logic we;
  logic [3:0] res;
  logic [7:0] idx;
  logic [CMD_DATA_W-1:0] data;
  int checks = 0, failures = 0, hits = 0;

  daisy_chain_node #(.ELEMENT(8'd3)) dut (
    .clk, .rst_n, .cmd_in, .cmd_out, .local_we(we), .local_res(res), .local_index(idx), .local_data(data));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reconf_cmd_t prev;
    cmd_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cmd_out.valid == 1'b0 && !we, "output not idle after reset");
    prev = '0;
    for (int n = 0; n < 300; n++) begin
      reconf_cmd_t c;
      c = '0;
      c.valid = ($urandom_range(0, 3) != 0);
      c.resource_id = {8'($urandom_range(0, 7)), 4'($urandom)};
      c.index = 8'($urandom);
      for (int w = 0; w < (CMD_DATA_W + 31) / 32; w++) c.data[w*32 +: 32] = $urandom;
      cmd_in = c;
      @(negedge clk);
      check(cmd_out == (c.valid ? c : '0), $sformatf("cmd %0d not forwarded", n));
      check(we == (c.valid && c.resource_id[11:4] == 8'd3), $sformatf("cmd %0d wrong local strobe", n));
      if (we) begin
        hits++;
        check(res == c.resource_id[3:0] && idx == c.index && data == c.data, "local fields wrong");
      end
    end
    check(hits > 0, "no command addressed this element");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
