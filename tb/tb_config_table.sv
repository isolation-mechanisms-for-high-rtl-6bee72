// tb_config_table: self-checking test of the overlay configuration table.
// Checks reset-to-zero, write then registered read one cycle later, that the
// read data holds without rd_en, and read-before-write on a same-cycle access,
// against a reference array kept by the testbench.
module tb_config_table;
  localparam int DEPTH = 32, WIDTH = 38;
  logic clk = 0, rst_n = 0;
  logic rd_en = 0, wr_en = 0;
  logic [4:0] rd_addr = 0, wr_addr = 0;
  logic [WIDTH-1:0] wr_data = 0, rd_data;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  config_table #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

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
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset contents
    for (int i = 0; i < DEPTH; i++) begin
      rd_en = 1; rd_addr = 5'(i);
      @(negedge clk);
      check(rd_data == '0, $sformatf("entry %0d not zero after reset", i));
    end
    rd_en = 0;
    // random writes
    for (int n = 0; n < 200; n++) begin
      wr_en = 1; wr_addr = 5'($urandom_range(0, DEPTH-1));
      wr_data = {$urandom, $urandom};
      ref_mem[wr_addr] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    // read back, each read lands one cycle later and then holds
    for (int i = 0; i < DEPTH; i++) begin
      rd_en = 1; rd_addr = 5'(i);
      @(negedge clk);
      rd_en = 0; rd_addr = 5'(i + 7);
      check(rd_data == ref_mem[i], $sformatf("entry %0d read %h exp %h", i, rd_data, ref_mem[i]));
      @(negedge clk);
      check(rd_data == ref_mem[i], $sformatf("entry %0d did not hold", i));
    end
    // same-cycle read and write of one word returns the old value
    rd_en = 1; rd_addr = 5'd3; wr_en = 1; wr_addr = 5'd3; wr_data = 38'h1234567;
    @(negedge clk);
    check(rd_data == ref_mem[3], "read-during-write did not return old data");
    ref_mem[3] = wr_data;
    wr_en = 0;
    @(negedge clk);
    check(rd_data == ref_mem[3], "new data not visible on the next read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
