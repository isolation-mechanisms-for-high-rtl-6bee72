// menshen_pkg: sizes, record layouts and encodings shared by the isolating
// match-action pipeline.
//
// The pipeline runs several independent packet-processing modules side by side.
// Every packet carries its module ID (the 12-bit VLAN ID) and every shared unit
// looks up a per-module configuration word with it ("overlay" tables). Sizes
// follow the paper: a 128-byte PHV made of 8 x 2-byte, 8 x 4-byte and 8 x 6-byte
// containers plus 32 bytes of metadata (25 containers), 16-bit parser actions
// (10 per module), a 38-bit key-extractor entry, a 193-bit key, a 205-bit CAM
// word, 25-bit ALU actions (625-bit VLIW word), 16-bit segment entries,
// 32-deep overlay tables, 16-deep CAM/VLIW tables and 5 stages.
//
// Encodings the paper does not give (opcode numbers, container numbering,
// metadata layout, resource-ID split, field order inside a word) are this
// design's choices and are listed next to each definition.
package menshen_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int DATA_W      = 512;            // bus width (512-bit data path)
  localparam int KEEP_W      = DATA_W / 8;
  localparam int VID_W       = 12;             // module ID = VLAN ID
  localparam int NUM_MODULES = 32;             // overlay table depth
  localparam int MOD_IDX_W   = $clog2(NUM_MODULES);
  localparam int NUM_STAGES  = 5;
  localparam int CAM_DEPTH   = 16;
  localparam int CAM_ADDR_W  = $clog2(CAM_DEPTH);
  localparam int HDR_BYTES   = 128;            // parsed / deparsed header window
  localparam int PARSE_ACTIONS = 10;
  localparam int PA_W        = 16;             // one parser action
  localparam int PARSER_W    = PARSE_ACTIONS * PA_W;   // 160
  localparam int KE_W        = 38;             // key extractor entry
  localparam int KEY_W       = 193;            // 24 bytes + predicate flag
  localparam int CAM_W       = KEY_W + VID_W;  // 205
  localparam int NUM_CONT    = 25;             // 24 containers + metadata
  localparam int CONT_IDX_W  = 5;
  localparam int ALU_ACT_W   = 25;
  localparam int VLIW_W      = NUM_CONT * ALU_ACT_W;   // 625
  localparam int SEG_W       = 16;
  localparam int MEM_DEPTH   = 256;            // stateful words per stage (assumed)
  localparam int MEM_AW      = $clog2(MEM_DEPTH);
  localparam int MEM_W       = 32;             // stateful word (assumed)
  localparam int OPW         = 48;             // ALU operand width (widest container)
  localparam int NUM_BUFS    = 4;              // packet buffers / deparsers
  localparam int NUM_PARSERS = 2;
  localparam logic [15:0] RECONF_UDP_PORT = 16'hF1F2;

  // Container numbering (assumed): 0-7 2-byte, 8-15 4-byte, 16-23 6-byte, 24 metadata.
  localparam int C2_BASE = 0;
  localparam int C4_BASE = 8;
  localparam int C6_BASE = 16;
  localparam int MD_IDX  = 24;

  // ---------------------------------------------------------------- PHV
  // 32-byte metadata container. Field choice follows the paper (discard flag,
  // ports, 4-bit one-hot buffer tag); layout is this design's.
  typedef struct packed {
    logic [211:0]      rsvd;
    logic [15:0]       pkt_len;     // bytes in the first two beats (<=128)
    logic [VID_W-1:0]  vid;         // module ID, read-only for ALUs
    logic [NUM_BUFS-1:0] buf_tag;   // one-hot packet buffer number
    logic [7:0]        dst_port;    // set by the "port" action
    logic [2:0]        rsvd2;
    logic              discard;     // set by the "discard" action
  } meta_t;                          // 256 bits

  typedef struct packed {
    logic [7:0][47:0] c6;           // 384
    logic [7:0][31:0] c4;           // 256
    logic [7:0][15:0] c2;           // 128
    meta_t            md;           // 256
  } phv_t;                           // 1024 bits = 128 bytes

  // ---------------------------------------------------------------- packet beats
  typedef struct packed {
    logic [DATA_W-1:0] tdata;       // byte 0 of the beat in tdata[7:0]
    logic [KEEP_W-1:0] tkeep;
    logic              tlast;
  } beat_t;

  // ---------------------------------------------------------------- daisy chain
  // Reconfiguration command decoded from a reconfiguration packet.
  // resource_id[11:4] = element, resource_id[3:0] = table inside it (assumed).
  localparam int CMD_DATA_W = VLIW_W;   // widest table entry
  typedef struct packed {
    logic                  valid;
    logic [11:0]           resource_id;
    logic [7:0]            index;
    logic [CMD_DATA_W-1:0] data;     // entry, right-aligned
  } reconf_cmd_t;

  localparam logic [7:0] ELEM_PARSER   = 8'd0;
  localparam logic [7:0] ELEM_DEPARSER = 8'd6;   // stages are elements 1..5
  localparam logic [3:0] RES_PARSE_TBL = 4'd0;   // parser / deparser table
  localparam logic [3:0] RES_KE        = 4'd0;   // stage tables
  localparam logic [3:0] RES_MASK      = 4'd1;
  localparam logic [3:0] RES_CAM       = 4'd2;
  localparam logic [3:0] RES_VLIW      = 4'd3;
  localparam logic [3:0] RES_SEG       = 4'd4;

  // ---------------------------------------------------------------- ALU
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_ADD     = 4'd1,
    OP_SUB     = 4'd2,
    OP_ADDI    = 4'd3,
    OP_SUBI    = 4'd4,
    OP_SET     = 4'd5,
    OP_LOAD    = 4'd6,
    OP_STORE   = 4'd7,
    OP_LOADD   = 4'd8,
    OP_PORT    = 4'd9,
    OP_DISCARD = 4'd10
  } alu_op_e;

  // Predicate comparison codes in the key extractor (assumed).
  typedef enum logic [3:0] {
    CMP_NONE = 4'd0, CMP_EQ = 4'd1, CMP_NE = 4'd2, CMP_GT = 4'd3,
    CMP_GE   = 4'd4, CMP_LT = 4'd5, CMP_LE = 4'd6
  } cmp_op_e;

  // ---------------------------------------------------------------- helpers
  function automatic logic is_stateful(input logic [3:0] op);
    return (op == OP_LOAD) || (op == OP_STORE) || (op == OP_LOADD);
  endfunction

  // Value of container idx, zero-extended to OPW bits (metadata reads as 0).
  function automatic logic [OPW-1:0] cont_val(input phv_t p, input logic [CONT_IDX_W-1:0] idx);
    logic [OPW-1:0] v;
    v = '0;
    if (idx < 5'd8)       v = OPW'(p.c2[idx[2:0]]);
    else if (idx < 5'd16) v = OPW'(p.c4[idx[2:0]]);
    else if (idx < 5'd24) v = p.c6[idx[2:0]];
    return v;
  endfunction

  function automatic logic [7:0] get_byte(input logic [HDR_BYTES*8-1:0] hdr, input int unsigned i);
    return (i < HDR_BYTES) ? hdr[i*8 +: 8] : 8'h00;
  endfunction

endpackage
