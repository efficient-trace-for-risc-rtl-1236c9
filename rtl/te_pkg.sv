// te_pkg: types and constants shared by the trace encoder, its interface port
// (TIP) and the AXI encapsulator.
//
// A block is a run of retired instructions that ends at a "special" instruction
// (branch, jump, exception return) or at a trap. It is described by the address
// of its first instruction (iaddr), its length in 16-bit half-words (iretire),
// the type of its last instruction (itype) and the size of that instruction
// (ilastsize: 0 = 2 bytes, 1 = 4 bytes), plus privilege and trap details.
// The itype encoding, the packet formats and the 31-bit branch map follow the
// RISC-V Efficient Trace (E-Trace) instruction trace scheme. Widths assume an
// RV64 core (CVA6); they are this design's choice.
//
// Packet payload layouts (bit 0 is the first field; the decoder sign-extends
// the last transmitted bit of formats 1 and 2):
//   F3.0 start  : fmt[1:0] sub[3:2] branch[4] priv[6:5] address[69:7]
//   F3.1 trap   : fmt sub branch[4] priv[6:5] ecause[11:7] interrupt[12]
//                 thaddr[13] address[76:14] tval[140:77]
//   F3.3 support: fmt sub ienable[4] encoder_mode[5] qual_status[7:6]
//   F2 address  : fmt[1:0] address[64:2] notify[65] updiscon[66]
//   F1 branch   : fmt[1:0] branches[6:2] branch_map[37:7] address[100:38]
//                 notify[101] updiscon[102]; branches==0 means a full map of
//                 31 branches and no address (packet ends at bit 37).
// address fields hold the address divided by two (full mode) or the
// difference to the previously reported address divided by two (delta mode).
package te_pkg;

  parameter int unsigned XLEN         = 64;
  parameter int unsigned IADDR_W      = XLEN;
  parameter int unsigned IRETIRE_W    = 8;
  parameter int unsigned ILASTSIZE_W  = 1;
  parameter int unsigned PRIV_W       = 2;
  parameter int unsigned CAUSE_W      = 5;
  parameter int unsigned BRANCH_MAP_W = 31;
  parameter int unsigned BRANCH_CNT_W = 5;
  parameter int unsigned ADDR_FIELD_W = IADDR_W - 1;  // address / 2
  parameter int unsigned PAYLOAD_W    = 144;          // 18 bytes, fits F3.1
  parameter int unsigned LEN_W        = 5;            // packet length in bytes
  parameter int unsigned APB_DATA_W   = 32;

  // Field offsets of the packet layouts above.
  parameter int unsigned F3_ADDR_LSB   = 7;
  parameter int unsigned F31_ADDR_LSB  = 14;
  parameter int unsigned F31_TVAL_LSB  = F31_ADDR_LSB + ADDR_FIELD_W;   // 77
  parameter int unsigned F31_BITS      = F31_TVAL_LSB + XLEN;           // 141
  parameter int unsigned F30_BITS      = F3_ADDR_LSB + ADDR_FIELD_W;    // 70
  parameter int unsigned F33_BITS      = 8;
  parameter int unsigned F2_ADDR_LSB   = 2;
  parameter int unsigned F1_MAP_LSB    = 7;
  parameter int unsigned F1_ADDR_LSB   = F1_MAP_LSB + BRANCH_MAP_W;     // 38

  typedef enum logic [2:0] {
    IT_NONE  = 3'd0,  // no special instruction ends the block
    IT_EXC   = 3'd1,  // exception follows the last instruction
    IT_INT   = 3'd2,  // interrupt follows the last instruction
    IT_ERET  = 3'd3,  // exception return
    IT_NTBR  = 3'd4,  // not-taken branch
    IT_TBR   = 3'd5,  // taken branch
    IT_UJUMP = 3'd6,  // uninferable jump
    IT_RSVD  = 3'd7
  } itype_e;

  typedef enum logic [1:0] {
    F_EXT = 2'd0, F_BRANCH = 2'd1, F_ADDR = 2'd2, F_SYNC = 2'd3
  } format_e;

  typedef enum logic [1:0] {
    SF_START = 2'd0, SF_TRAP = 2'd1, SF_CONTEXT = 2'd2, SF_SUPPORT = 2'd3
  } subformat_e;

  typedef struct packed {
    format_e    fmt;
    subformat_e sub;
  } pkt_type_t;

  // Packet kinds chosen by te_priority.
  typedef enum logic [2:0] {
    SEL_NONE,     // no packet
    SEL_START,    // F3.0 at the first instruction of the current block
    SEL_TRAP,     // F3.1, current block is the trap handler entry
    SEL_ADDR_TC,  // F1/F2 reporting the first address of the current block
    SEL_ADDR_END, // F1/F2 reporting the last address of the current block
    SEL_FULL,     // F1 with a full branch map and no address
    SEL_SUPPORT   // F3.3 after an enable or mode change
  } sel_e;

  typedef struct packed {
    logic [IADDR_W-1:0]     iaddr;
    logic [IRETIRE_W-1:0]   iretire;
    itype_e                 itype;
    logic [ILASTSIZE_W-1:0] ilastsize;
    logic [PRIV_W-1:0]      priv;
    logic [CAUSE_W-1:0]     cause;
    logic [XLEN-1:0]        tval;
  } te_block_t;

  // Configuration held by te_reg.
  typedef struct packed {
    logic                enable;
    logic                full_addr;      // 1: full addresses, 0: differential
    logic                resync_mode;    // 0: count cycles, 1: count packets
    logic [15:0]         resync_max;     // 0 disables resync
    logic                priv_filter_en;
    logic [3:0]          priv_mask;      // bit p set: privilege p is traced
    logic                addr_filter_en;
    logic [IADDR_W-1:0]  addr_lo;        // inclusive range on iaddr
    logic [IADDR_W-1:0]  addr_hi;
    logic                cause_filter_en;
    logic [CAUSE_W-1:0]  cause_val;      // traced trap cause
  } te_cfg_t;

  // One retired instruction as reported by a core commit port.
  typedef struct packed {
    logic              valid;
    logic [XLEN-1:0]   pc;
    logic              compressed;
    itype_e            itype;     // IT_NONE, IT_ERET, IT_NTBR, IT_TBR, IT_UJUMP
  } tip_commit_t;

  // AXI4 write channels of the encapsulator.
  parameter int unsigned AXI_ADDR_W = 64;
  parameter int unsigned AXI_DATA_W = 64;
  parameter int unsigned AXI_ID_W   = 4;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;
    logic [2:0]            size;
    logic [1:0]            burst;
  } axi_aw_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0]   data;
    logic [AXI_DATA_W/8-1:0] strb;
    logic                    last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  function automatic logic is_trap(itype_e t);
    return (t == IT_EXC) || (t == IT_INT);
  endfunction

  function automatic logic is_updiscon(itype_e t);
    return (t == IT_ERET) || (t == IT_UJUMP);
  endfunction

  function automatic logic is_branch(itype_e t);
    return (t == IT_NTBR) || (t == IT_TBR);
  endfunction

  // Address of the last instruction of a block (its first one when empty).
  function automatic logic [IADDR_W-1:0] last_addr(te_block_t b);
    logic [IADDR_W-1:0] hw;
    hw = IADDR_W'(b.iretire) - (b.ilastsize[0] ? IADDR_W'(2) : IADDR_W'(1));
    return (b.iretire == '0) ? b.iaddr : b.iaddr + (hw << 1);
  endfunction

endpackage
