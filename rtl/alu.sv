// alu: the ALU attached to one PHV container.
//
// There is one ALU per container and its result is wired straight back to that
// container, so no output crossbar is needed. The 25-bit action comes from the
// stage's VLIW word and has two formats (fields most significant first, as in
// the paper's format figure):
//   two operands : opcode[24:21] container1[20:16] container2[15:11] reserved[10:0]
//   one operand  : opcode[24:21] container1[20:16] immediate[15:0]
// op_a/op_b are the values of container1/container2 delivered by the input
// crossbar, zero-extended to 48 bits. Operations (opcode numbers are this
// design's choice): nop keeps the value; add/sub combine op_a and op_b;
// addi/subi combine op_a and the zero-extended immediate; set loads the
// immediate; load/loadd take the value returned by the stage's stateful ALU if
// this ALU was granted the memory port (otherwise the container is kept);
// store keeps the container; port and discard leave the container and raise
// port_we (port number = immediate[7:0]) or discard_we for the metadata.
// The result is 48 bits wide; the caller keeps the container's width.
//
// Timing: purely combinational.
module alu
  import menshen_pkg::*;
(
  input  logic [ALU_ACT_W-1:0] action,
  input  logic [OPW-1:0]       op_a,
  input  logic [OPW-1:0]       op_b,
  input  logic [OPW-1:0]       old_val,
  input  logic                 mem_grant,
  input  logic [MEM_W-1:0]     mem_result,
  output logic [OPW-1:0]       result,
  output logic                 port_we,
  output logic [7:0]           port_val,
  output logic                 discard_we
);
  alu_op_e        op;
  logic [OPW-1:0] imm;

  always_comb begin
    op         = alu_op_e'(action[24:21]);
    imm        = OPW'(action[15:0]);
    result     = old_val;
    port_we    = 1'b0;
    port_val   = action[7:0];
    discard_we = 1'b0;
    case (op)
      OP_ADD:     result = op_a + op_b;
      OP_SUB:     result = op_a - op_b;
      OP_ADDI:    result = op_a + imm;
      OP_SUBI:    result = op_a - imm;
      OP_SET:     result = imm;
      OP_LOAD,
      OP_LOADD:   if (mem_grant) result = OPW'(mem_result);
      OP_PORT:    port_we = 1'b1;
      OP_DISCARD: discard_we = 1'b1;
      default:    result = old_val;
    endcase
  end
endmodule
