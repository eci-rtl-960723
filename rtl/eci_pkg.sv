// eci_pkg: types and constants shared by the ECI memory-controller design.
//
// The design is an FPGA "home node" that answers a CPU's coherent reads of
// 128-byte cache lines with data computed by near-memory operators.  This
// package fixes the message format seen after the virtual-channel layer, the
// operator request/response records, the 512-bit DRAM read port and the
// configuration register map.
//
// Taken from the paper: 128-byte lines, 14 virtual channels of which 10 carry
// coherence traffic split into even and odd line sets, the message kinds of the
// signalled-transition table, the 512-bit DRAM interface, the 62-byte regex
// string field, 32 key-value operators and 48 regex engines.  Chosen here: the
// 40-bit physical address, 8-bit transaction ID, the numbering of the virtual
// channels, the opcode encoding, the register map and the address regions.
package eci_pkg;

  localparam int ADDR_W     = 40;                 // physical address bits
  localparam int LINE_BYTES = 128;
  localparam int LINE_BITS  = LINE_BYTES * 8;     // 1024
  localparam int OFFS_W     = 7;                  // log2(LINE_BYTES)
  localparam int LINE_W     = ADDR_W - OFFS_W;    // cache-line number bits (33)
  localparam int ID_W       = 8;                  // transaction ID bits
  localparam int DRAM_W     = 512;                // DRAM controller data width
  localparam int BEATS      = LINE_BITS / DRAM_W; // beats per line (2)
  localparam int AXI_ID_W   = 8;
  localparam int NUM_VC     = 14;
  localparam int NUM_COH_VC = 10;

  // Message kinds.  The first seven are the signalled transitions of the
  // protocol envelope; RSP_* answer them, IO_* carry non-cacheable accesses.
  typedef enum logic [3:0] {
    OP_READ_SHARED  = 4'd0,  // remote upgrade I->S, response has payload
    OP_READ_EXCL    = 4'd1,  // remote upgrade I->E, response has payload
    OP_UPGRADE_SE   = 4'd2,  // remote upgrade S->E, response without payload
    OP_VDOWN_S      = 4'd3,  // remote (voluntary) downgrade to shared, no reply
    OP_VDOWN_I      = 4'd4,  // remote (voluntary) downgrade to invalid, no reply
    OP_HDOWN_S      = 4'd5,  // home-initiated downgrade to shared
    OP_HDOWN_I      = 4'd6,  // home-initiated downgrade to invalid
    OP_RSP_DATA     = 4'd7,  // response with a cache line
    OP_RSP_NODATA   = 4'd8,  // response without payload
    OP_IO_WR        = 4'd9,  // non-cacheable write (config)
    OP_IO_RD        = 4'd10, // non-cacheable read (config)
    OP_IO_RSP       = 4'd11  // response to an I/O read or write
  } eci_op_e;

  // Virtual-channel numbering: coherence classes come in even/odd pairs,
  // selected by bit 0 of the line number.
  localparam logic [3:0] VC_REQ_E  = 4'd0;  // remote requests (upgrades)
  localparam logic [3:0] VC_REQ_O  = 4'd1;
  localparam logic [3:0] VC_FWD_E  = 4'd2;  // home-initiated requests
  localparam logic [3:0] VC_FWD_O  = 4'd3;
  localparam logic [3:0] VC_RSP_E  = 4'd4;  // responses without data
  localparam logic [3:0] VC_RSP_O  = 4'd5;
  localparam logic [3:0] VC_RSPD_E = 4'd6;  // responses with data
  localparam logic [3:0] VC_RSPD_O = 4'd7;
  localparam logic [3:0] VC_VDN_E  = 4'd8;  // voluntary downgrades / writebacks
  localparam logic [3:0] VC_VDN_O  = 4'd9;
  localparam logic [3:0] VC_IO_REQ = 4'd10; // I/O requests
  localparam logic [3:0] VC_IO_RSP = 4'd11; // I/O responses
  localparam logic [3:0] VC_IPI    = 4'd12; // interprocessor interrupts
  localparam logic [3:0] VC_MISC   = 4'd13; // barriers and others

  typedef struct packed {
    logic [3:0]           vc;
    eci_op_e              op;
    logic [ID_W-1:0]      id;
    logic [LINE_W-1:0]    line;   // line number; register index for I/O
    logic                 dirty;  // payload holds dirty data
    logic [LINE_BITS-1:0] data;   // cache line; bits 63:0 for I/O data
  } eci_msg_t;

  // Operator side: a read of a line and the line returned for it.
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [LINE_W-1:0] line;
  } op_req_t;

  typedef struct packed {
    logic [ID_W-1:0]      id;
    logic [LINE_W-1:0]    line;
    logic [LINE_BITS-1:0] data;
  } op_rsp_t;

  // DRAM read port (AXI4 AR and R channels, read only).
  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [ADDR_W-1:0]   addr;
    logic [7:0]          len;   // beats - 1
  } axi_ar_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [DRAM_W-1:0]   data;
    logic                last;
  } axi_r_t;

  // Address regions: the two top bits of the line number pick the operator.
  localparam logic [1:0] REG_SELECT = 2'd0;
  localparam logic [1:0] REG_REGEX  = 2'd1;
  localparam logic [1:0] REG_KVS    = 2'd2;
  localparam logic [1:0] REG_NONE   = 2'd3;

  function automatic logic [1:0] region_of(logic [LINE_W-1:0] line);
    return line[LINE_W-1 -: 2];
  endfunction

  // Regex program: up to RX_POS positions, each a character range with an
  // optional one-or-more repeat.
  localparam int RX_POS = 16;
  typedef struct packed {
    logic       plus;
    logic [7:0] hi;
    logic [7:0] lo;
  } rx_pos_t;

  typedef struct packed {
    logic [4:0]             len;       // number of positions used (1..16)
    logic                   anchored;  // match must start at the first char
    rx_pos_t [RX_POS-1:0]   pos;
  } rx_prog_t;

  typedef struct packed {
    logic [ADDR_W-1:0] sel_base;   // SELECT table base (byte address)
    logic [31:0]       sel_rows;
    logic [63:0]       sel_x;
    logic [63:0]       sel_y;
    logic [ADDR_W-1:0] rx_base;
    logic [31:0]       rx_rows;
    rx_prog_t          rx_prog;
    logic [ADDR_W-1:0] kvs_base;   // bucket array base
    logic [31:0]       kvs_mask;   // bucket count - 1 (power of two)
  } cfg_t;

  // Register map (register index = I/O line number, 64-bit data).
  localparam int R_SEL_BASE = 0;
  localparam int R_SEL_ROWS = 1;
  localparam int R_SEL_X    = 2;
  localparam int R_SEL_Y    = 3;
  localparam int R_SEL_ARM  = 4;   // write: re-arm the SELECT scan
  localparam int R_RX_BASE  = 8;
  localparam int R_RX_ROWS  = 9;
  localparam int R_RX_CTRL  = 10;  // [4:0] len, [8] anchored
  localparam int R_RX_ARM   = 11;  // write: re-arm the regex scan
  localparam int R_RX_POS0  = 16;  // 16..31: [7:0] lo, [15:8] hi, [16] plus
  localparam int R_KVS_BASE = 32;
  localparam int R_KVS_MASK = 33;

  // Bucket index of a key-value key.
  function automatic logic [31:0] kvs_hash(logic [63:0] key, logic [31:0] mask);
    logic [63:0] h;
    h = key * 64'h9E37_79B9_7F4A_7C15;
    return h[63:32] & mask;
  endfunction

endpackage
