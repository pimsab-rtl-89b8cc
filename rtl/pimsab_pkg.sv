// pimsab_pkg: types and constants shared by the PIMSAB tile, network and DRAM
// blocks. It fixes the field widths of the micro-op sent from the instruction
// controller to every CRAM, of the tile instruction word, of the H-tree link
// and of the NoC flit and packet header. Sizes that the architecture gives
// (256x256 CRAMs, 32x32-bit register file, 1024-bit NoC/DRAM words) are the
// defaults; the encodings themselves are this design's own choice.
package pimsab_pkg;

  // ------------------------------------------------------------------ sizes
  localparam int ROW_W   = 8;     // wordline address (up to 256 rows)
  localparam int CIDX_W  = 8;     // CRAM index inside a tile (up to 256)
  localparam int PREC_W  = 6;     // operand precision in bits (1..63)
  localparam int COORD_W = 4;     // mesh coordinate (up to 16x16)
  localparam int FLIT_W  = 1024;  // NoC flit / DRAM word width
  localparam int RF_N    = 32;    // register file entries
  localparam int RF_W    = 32;    // register file entry width

  // ------------------------------------------------------------ PE micro-op
  // Write-mux selections (W1: port 1, W2: port 2).
  typedef enum logic [1:0] {
    WSEL_S   = 2'd0,   // sum / XOR output S = TR ^ C
    WSEL_DIN = 2'd1,   // external data (memory-mode write)
    WSEL_NB  = 2'd2,   // neighbour PE (W1: from right PE, W2: from left PE)
    WSEL_TR  = 2'd3    // TR mux output
  } wsel_e;

  // Predication mux selections.
  typedef enum logic [1:0] {
    PRED_NONE = 2'd0,  // always write
    PRED_MASK = 2'd1,  // write where mask latch is 1
    PRED_CARRY= 2'd2,  // write where carry latch is 1
    PRED_NMASK= 2'd3   // write where mask latch is 0
  } pred_e;

  // Truth tables for the TR mux, indexed by {A,B}.
  localparam logic [3:0] TR_ZERO = 4'b0000;
  localparam logic [3:0] TR_AND  = 4'b1000;
  localparam logic [3:0] TR_XOR  = 4'b0110;
  localparam logic [3:0] TR_OR   = 4'b1110;
  localparam logic [3:0] TR_A    = 4'b1100;
  localparam logic [3:0] TR_B    = 4'b1010;

  typedef struct packed {
    logic [ROW_W-1:0] row_a;   // port-1 read wordline (operand A)
    logic [ROW_W-1:0] row_b;   // port-2 read wordline (operand B)
    logic [ROW_W-1:0] row_w1;  // port-1 write wordline
    logic [ROW_W-1:0] row_w2;  // port-2 write wordline
    logic [3:0]       tr;      // TR truth table
    wsel_e            sel1;
    wsel_e            sel2;
    logic             wps1;    // port-1 write enable (before predication)
    logic             wps2;    // port-2 write enable (before predication)
    pred_e            pred;
    logic             c_en, c_rst;
    logic             m_en, m_rst;
    logic             bk_en;   // port-2 operand is the constant bit bk on
    logic             bk;      // every bitline instead of row_b (add_const)
  } uop_t;

  // ------------------------------------------------------------ instructions
  typedef enum logic [4:0] {
    OP_NOP      = 5'd0,
    OP_LOGIC    = 5'd1,   // dst = src1 (tr) src2, bitwise over prec bits
    OP_ADD      = 5'd2,   // dst = src1 + src2 (cen / cst bit slicing)
    OP_MUL      = 5'd3,   // dst = src1 * src2 (adaptive result precision)
    OP_MUL_CONST= 5'd4,   // dst = src1 * RF[rf_idx], zero bits skipped
    OP_SET_MASK = 5'd5,   // mask latch = tr(src1, src2)
    OP_SHIFT    = 5'd6,   // dst = src1 shifted one bitline (dir)
    OP_RF_WR    = 5'd7,   // RF[rf_idx] = imm
    OP_XFER     = 5'd8,   // CRAM-to-CRAM copy / broadcast inside the tile
    OP_XFER_LVL = 5'd9,   // parallel H-tree sibling transfer at one level
    OP_SEND     = 5'd10,  // CRAM rows -> another tile or DRAM (store)
    OP_RECV     = 5'd11,  // NoC data -> CRAM rows (blocking), optional forward
    OP_LOAD     = 5'd12,  // DRAM -> CRAM rows (request + receive)
    OP_LOAD_RF  = 5'd13,  // DRAM -> all RF entries in parallel
    OP_SIGNAL   = 5'd14,  // non-blocking message to a tile
    OP_WAIT     = 5'd15,  // block until a message from a tile arrives
    OP_STORE    = 5'd16,  // CRAM rows -> DRAM (SEND with a DRAM destination)
    OP_ADD_CONST= 5'd17,  // dst = src1 + RF[rf_idx] (cen / cst as ADD)
    OP_RED_CRAM = 5'd18,  // sum over the bitlines of each CRAM -> bitline 0
    OP_RED_TILE = 5'd19   // sum over groups of 4^level CRAMs (0: all) -> first CRAM
  } opcode_e;

  typedef enum logic [1:0] {
    SHF_NONE = 2'd0,  // bitline b gets bit b
    SHF_DUP  = 2'd1,  // each bit repeated 2^shf_log times along the tile
    SHF_REP  = 2'd2   // pattern of 2^shf_log bits repeated along the bitlines
  } shf_e;

  typedef struct packed {
    opcode_e           op;
    logic [ROW_W-1:0]  dst;      // destination wordline
    logic [ROW_W-1:0]  src1;     // source-1 wordline
    logic [ROW_W-1:0]  src2;     // source-2 wordline
    logic [PREC_W-1:0] dprec;    // destination precision / row count
    logic [PREC_W-1:0] prec1;    // source-1 precision
    logic [PREC_W-1:0] prec2;    // source-2 (or constant) precision
    logic [3:0]        tr;       // logic truth table
    pred_e             pred;     // predication select
    logic              cen;      // add: use stored carry in first step
    logic              cst;      // add: store the final carry
    logic              dir;      // shift: 0 = toward lower bitline, 1 = higher
    logic [4:0]        rf_idx;
    logic [31:0]       imm;      // RF_WR data / DRAM address
    logic [CIDX_W-1:0] cram_src; // source CRAM (first CRAM of group)
    logic [CIDX_W-1:0] cram_dst; // destination CRAM (first CRAM of group)
    logic              all;      // write to every CRAM (broadcast)
    logic [CIDX_W:0]   grp;      // CRAMs per NoC word group (1..)
    shf_e              shf;      // shuffle pattern
    logic [3:0]        shf_log;  // log2 shuffle factor
    logic [2:0]        level;    // XFER_LVL tree level
    logic [1:0]        sc, dc;   // XFER_LVL source / destination child
    logic [COORD_W-1:0] tx, ty;  // peer tile / DRAM column
    logic              fwd;      // RECV: forward each flit (systolic bcast)
    logic [COORD_W-1:0] fx, fy;  // forward destination tile
    logic [7:0]        nflits;   // NoC body flits
    logic              trp;      // DRAM transfer transposed
  } instr_t;

  // ------------------------------------------------------------ H-tree link
  typedef struct packed {
    logic              valid;
    logic [ROW_W-1:0]  row;      // destination wordline
    logic [CIDX_W-1:0] dst;      // destination CRAM
    logic              all;      // every CRAM writes
  } ht_tag_t;

  // ------------------------------------------------------------ NoC
  typedef enum logic [1:0] {
    PK_DATA = 2'd0,   // data to a tile
    PK_SIG  = 2'd1,   // synchronisation message
    PK_DRD  = 2'd2,   // DRAM read request
    PK_DWR  = 2'd3    // DRAM write (data follows)
  } pkind_e;

  typedef struct packed {
    pkind_e             kind;
    logic               to_dram;  // route to the DRAM controller of column dx
    logic [COORD_W-1:0] dx, dy;   // destination
    logic [COORD_W-1:0] sx, sy;   // source tile
    logic [31:0]        addr;     // DRAM word address
    logic [7:0]         nflits;   // body flits that follow
    logic               trp;      // transpose
    logic [PREC_W-1:0]  prec;     // element precision for the transpose
  } hdr_t;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  localparam int HDR_W = $bits(hdr_t);

endpackage
