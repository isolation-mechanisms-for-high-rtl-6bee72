// daisy_chain_node: one hop of the reconfiguration daisy chain.
//
// Configuration reaches the pipeline only through a separate chain of registers
// that runs beside the data path, past every element: the data path can read
// its tables but never write them. Each element owns one node. The node
// registers the command it receives and passes it on unchanged one cycle later;
// in the same cycle it raises local_we if the element field of the resource ID
// (bits [11:4], this design's split) equals ELEMENT, handing the table number
// (bits [3:0]), the entry index and the entry data to the element's tables.
//
// Timing: cmd_in in cycle t -> cmd_out and local_we in cycle t+1.
module daisy_chain_node
  import menshen_pkg::*;
#(
  parameter logic [7:0] ELEMENT = 8'd0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  reconf_cmd_t           cmd_in,
  output reconf_cmd_t           cmd_out,
  output logic                  local_we,
  output logic [3:0]            local_res,
  output logic [7:0]            local_index,
  output logic [CMD_DATA_W-1:0] local_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd_out <= '0;
    else        cmd_out <= cmd_in.valid ? cmd_in : '0;
  end

  assign local_we    = cmd_out.valid && (cmd_out.resource_id[11:4] == ELEMENT);
  assign local_res   = cmd_out.resource_id[3:0];
  assign local_index = cmd_out.index;
  assign local_data  = cmd_out.data;
endmodule
