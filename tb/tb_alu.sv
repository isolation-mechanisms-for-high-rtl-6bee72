// tb_alu: self-checking test of the per-container ALU.
// Random actions of every opcode with random operands; the expected result is
// computed in the testbench from the opcode table (add, sub, addi, subi, set,
// load/loadd with and without the memory grant, store, port, discard, nop).
module tb_alu;
  import menshen_pkg::*;
  logic [ALU_ACT_W-1:0] action;
  logic [OPW-1:0] op_a, op_b, old_val, result;
  logic mem_grant, port_we, discard_we;
  logic [MEM_W-1:0] mem_result;
  logic [7:0] port_val;
  int checks = 0, failures = 0;
  int seen [16];

  alu dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [3:0] op;
      logic [15:0] imm;
      logic [OPW-1:0] exp;
      op = 4'($urandom_range(0, 11));
      imm = 16'($urandom);
      action = {op, 5'($urandom), imm};
      op_a = {16'($urandom), 32'($urandom)};
      op_b = {16'($urandom), 32'($urandom)};
      old_val = {16'($urandom), 32'($urandom)};
      mem_grant = 1'($urandom);
      mem_result = $urandom;
      #1;
      seen[op]++;
      case (op)
        4'd1: exp = op_a + op_b;
        4'd2: exp = op_a - op_b;
        4'd3: exp = op_a + {32'd0, imm};
        4'd4: exp = op_a - {32'd0, imm};
        4'd5: exp = {32'd0, imm};
        4'd6, 4'd8: exp = mem_grant ? {16'd0, mem_result} : old_val;
        default: exp = old_val;
      endcase
      check(result == exp, $sformatf("op %0d: got %h exp %h", op, result, exp));
      check(port_we == (op == 4'd9), $sformatf("op %0d: port_we wrong", op));
      check(discard_we == (op == 4'd10), $sformatf("op %0d: discard_we wrong", op));
      if (op == 4'd9) check(port_val == imm[7:0], "port value wrong");
    end
    for (int o = 0; o <= 10; o++) check(seen[o] > 0, $sformatf("opcode %0d never tried", o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
