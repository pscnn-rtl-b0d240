// pscnn_pkg: constants, instruction formats and decode helpers shared by the
// PSCNN processor.
//
// The processor is programmed with 32-bit instructions of four kinds chosen by
// the top three bits: MAC (3'b111), weight replacement (3'b101), pointer
// (3'b100) and halt (3'b000). Field widths and their order follow the
// published instruction format; the leftmost field sits at the MSB end.
// The meaning of the individual 2-bit codes (channel counts, stride,
// dilation, pooling size, layer type) is not published and is this design's
// own choice, documented at each decoder below.
package pscnn_pkg;

  localparam int unsigned INSTR_W  = 32;
  localparam int unsigned WL_N     = 1024;  // CIM wordlines = line buffer bits
  localparam int unsigned PAIR_N   = 512;   // bitline pairs (ternary mapping)
  localparam int unsigned SA_N     = 128;   // sense amplifiers
  localparam int unsigned FM_W     = 32;    // feature-map SRAM word width
  localparam int unsigned FM_DEPTH = 2048;  // words per 64Kb bank
  localparam int unsigned FM_BANKS = 4;
  localparam int unsigned FM_AW    = 13;    // {bank, word} linear address
  localparam int unsigned WS_DEPTH = 512;   // weight SRAM words (one channel each)
  localparam int unsigned WIN_WORDS = WL_N / FM_W;  // 32 words fill the line buffer

  typedef enum logic [2:0] {
    OP_HALT = 3'b000,
    OP_PTR  = 3'b100,
    OP_REPL = 3'b101,
    OP_MAC  = 3'b111
  } opcode_e;

  // Layer type of a MAC instruction (encoding chosen by this design).
  typedef enum logic [1:0] {
    MT_CONV       = 2'b00,  // convolution only
    MT_POOL       = 2'b01,  // max pooling only, CIM bypassed by the shortcut path
    MT_CONV_POOL2 = 2'b10,  // convolution fused with max pooling of 2
    MT_CONV_POOL4 = 2'b11   // convolution fused with max pooling of 4
  } mac_type_e;

  typedef struct packed {
    opcode_e    op;        // 31:29
    mac_type_e  mtype;     // 28:27
    logic [12:0] in_range; // 26:14 IFM length in 32-bit words
    logic [1:0] chn_in;    // 13:12
    logic [3:0] padding;   // 11:8  zero positions on each side
    logic [1:0] stride;    // 7:6
    logic [1:0] bl_out;    // 5:4   group of 128 bitline pairs
    logic [1:0] chn_out;   // 3:2
    logic [1:0] dil_pool;  // 1:0   dilation (conv) or pooling size (pool only)
  } mac_instr_t;

  typedef struct packed {
    opcode_e    op;        // 31:29
    logic       rsv;       // 28
    logic       direction; // 27    0: weight SRAM -> CIM, 1: CIM -> weight SRAM
    logic [8:0] cim_addr;  // 26:18 first bitline pair
    logic [8:0] ws_addr;   // 17:9  first weight SRAM word
    logic [8:0] length;    // 8:0   number of pairs
  } repl_instr_t;

  typedef struct packed {
    opcode_e     op;         // 31:29
    logic        rsv;        // 28
    logic [1:0]  wbbias;     // 27:26
    logic [1:0]  src;        // 25:24 IFM bank
    logic [10:0] read_addr;  // 23:13
    logic [1:0]  dst;        // 12:11 OFM bank
    logic [10:0] write_addr; // 10:0
  } ptr_instr_t;

  // Everything the CIM core needs to run one MAC instruction.
  typedef struct packed {
    mac_type_e   mtype;
    logic [12:0] in_range;
    logic [1:0]  chn_in;
    logic [3:0]  padding;
    logic [1:0]  stride;
    logic [1:0]  bl_out;
    logic [1:0]  chn_out;
    logic [1:0]  dil_pool;
    logic [FM_AW-1:0] rd_base;
    logic [FM_AW-1:0] wr_base;
  } layer_cfg_t;

  typedef struct packed {
    logic       direction;
    logic [8:0] cim_addr;
    logic [8:0] ws_addr;
    logic [8:0] length;
  } repl_cfg_t;

  // Host bus request (I/O interface).
  typedef enum logic [1:0] {
    HS_INSTR = 2'd0,
    HS_FM    = 2'd1,
    HS_WSRAM = 2'd2,
    HS_CIM   = 2'd3
  } host_sel_e;

  typedef struct packed {
    logic        we;
    logic        re;
    host_sel_e   sel;
    logic [15:0] addr;
    logic [31:0] wdata;
  } host_req_t;

  // Channel-count code -> log2(channels): 00=8, 01=32, 10=64, 11=128.
  function automatic logic [2:0] chn_log2(logic [1:0] code);
    case (code)
      2'd0:    return 3'd3;
      2'd1:    return 3'd5;
      2'd2:    return 3'd6;
      default: return 3'd7;
    endcase
  endfunction

  function automatic logic [7:0] chn_count(logic [1:0] code);
    return 8'd1 << chn_log2(code);
  endfunction

  // stride = 1 << code; dilation = code + 1; pooling-only size = 2 << code.
  function automatic logic [1:0] stride_log2(logic [1:0] code);
    return code;
  endfunction

  function automatic logic [2:0] dilation(logic [1:0] code);
    return {1'b0, code} + 3'd1;
  endfunction

  // Pooling window of a MAC instruction (1 = no pooling).
  function automatic logic [4:0] pool_size(mac_type_e t, logic [1:0] dil_pool);
    case (t)
      MT_POOL:       return 5'd2 << dil_pool;
      MT_CONV_POOL2: return 5'd2;
      MT_CONV_POOL4: return 5'd4;
      default:       return 5'd1;
    endcase
  endfunction

endpackage
