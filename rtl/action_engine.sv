// action_engine: VLIW execution of one stage.
//
// The 625-bit VLIW word read from the action table holds one 25-bit action per
// PHV container (container k in bits [25k+24:25k]; containers 0-7 are the
// 2-byte, 8-15 the 4-byte, 16-23 the 6-byte ones and 24 the metadata, a
// numbering chosen by this design). The input crossbar hands each ALU the
// values of the two containers its action names; every ALU writes only its own
// container. Stateful actions (load, store, loadd) share the stage's single
// stateful-memory port: the lowest-numbered container asking for it gets it,
// using container1 as the module-local address and container2 as store data.
// The metadata ALU (container 24) executes port and discard, which set the
// destination port and the discard flag; the module ID and buffer tag in the
// metadata are never written. An all-zero VLIW word (a table miss) leaves the
// PHV unchanged.
//
// Timing: vid_early in cycle t-1 (segment table read), PHV and VLIW word in
// cycle t, new PHV in cycle t+1. One PHV per cycle.
module action_engine
  import menshen_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 vid_early_valid,
  input  logic [VID_W-1:0]     vid_early,
  input  logic                 phv_valid,
  input  phv_t                 phv,
  input  logic [VLIW_W-1:0]    vliw,
  output logic                 phv_out_valid,
  output phv_t                 phv_out,
  // segment table write (daisy chain)
  input  logic                 cfg_seg_we,
  input  logic [MOD_IDX_W-1:0] cfg_addr,
  input  logic [SEG_W-1:0]     cfg_seg_data
);
  logic [ALU_ACT_W-1:0] act     [NUM_CONT];
  logic [OPW-1:0]       op_a    [NUM_CONT];
  logic [OPW-1:0]       op_b    [NUM_CONT];
  logic [OPW-1:0]       old_v   [NUM_CONT];
  logic [OPW-1:0]       res     [NUM_CONT];
  logic [NUM_CONT-1:0]  grant, port_we, discard_we;
  logic [7:0]           port_val [NUM_CONT];

  // input crossbar
  always_comb begin
    for (int k = 0; k < NUM_CONT; k++) begin
      act[k]   = vliw[k*ALU_ACT_W +: ALU_ACT_W];
      op_a[k]  = cont_val(phv, act[k][20:16]);
      op_b[k]  = cont_val(phv, act[k][15:11]);
      old_v[k] = cont_val(phv, CONT_IDX_W'(k));
    end
  end

  // stateful port arbitration: lowest container wins
  logic             s_req;
  logic [3:0]       s_op;
  logic [OPW-1:0]   s_addr, s_wdata;
  logic [MEM_W-1:0] s_result;
  logic             s_ok;
  always_comb begin
    grant   = '0;
    s_req   = 1'b0;
    s_op    = '0;
    s_addr  = '0;
    s_wdata = '0;
    for (int k = NUM_CONT - 1; k >= 0; k--) begin
      if (phv_valid && is_stateful(act[k][24:21])) begin
        grant   = NUM_CONT'(1) << k;
        s_req   = 1'b1;
        s_op    = act[k][24:21];
        s_addr  = op_a[k];
        s_wdata = op_b[k];
      end
    end
  end

  stateful_alu u_salu (
    .clk, .rst_n, .vid_early_valid, .vid_early,
    .req(s_req), .op(s_op), .local_addr(s_addr), .wdata(s_wdata),
    .result(s_result), .ok(s_ok),
    .cfg_we(cfg_seg_we), .cfg_addr, .cfg_data(cfg_seg_data));

  for (genvar k = 0; k < NUM_CONT; k++) begin : g_alu
    alu u_alu (
      .action(act[k]), .op_a(op_a[k]), .op_b(op_b[k]), .old_val(old_v[k]),
      .mem_grant(grant[k]), .mem_result(s_result),
      .result(res[k]), .port_we(port_we[k]), .port_val(port_val[k]),
      .discard_we(discard_we[k]));
  end

  phv_t nxt;
  always_comb begin
    nxt = phv;
    for (int i = 0; i < 8; i++) begin
      nxt.c2[i] = res[C2_BASE + i][15:0];
      nxt.c4[i] = res[C4_BASE + i][31:0];
      nxt.c6[i] = res[C6_BASE + i];
    end
    if (port_we[MD_IDX])    nxt.md.dst_port = port_val[MD_IDX];
    if (discard_we[MD_IDX]) nxt.md.discard  = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phv_out_valid <= 1'b0; phv_out <= '0;
    end else begin
      phv_out_valid <= phv_valid;
      if (phv_valid) phv_out <= nxt;
    end
  end
endmodule
