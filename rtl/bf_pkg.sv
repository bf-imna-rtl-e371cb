// bf_pkg: shared constants and types of the bit-fluid associative-processor
// accelerator.
//
// The sizes follow the main ("limited resources") configuration: 8x8 clusters,
// each with 8x8 computation APs (CAPs) and one memory AP (MAP); every AP is a
// 4800-row by 16-column CAM (two 8-bit words per row); on-chip transfers carry
// 1024 bits. Everything else here (instruction format, opcode encoding, CAM
// micro-operation encoding, packet format) is this design's own choice.
//
// Lint note: a module that imports this package uses only some of these
// constants, so a lint run of one module reports the others as unused
// parameters; they are used elsewhere in the design.
package bf_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned AP_ROWS      = 4800;  // rows per AP (words = 2 per row)
  localparam int unsigned AP_COLS      = 16;    // columns per AP (2 x 8 bits)
  localparam int unsigned CL_X         = 8;     // CAPs per cluster, x
  localparam int unsigned CL_Y         = 8;     // CAPs per cluster, y
  localparam int unsigned CHIP_X       = 8;     // clusters, x
  localparam int unsigned CHIP_Y       = 8;     // clusters, y
  localparam int unsigned FLIT_W       = 1024;  // bits per on-chip transfer
  localparam int unsigned IMEM_DEPTH   = 64;    // instructions per AP (assumed)
  localparam int unsigned IDX_W        = 13;    // row/column index width (>= clog2(4800))
  localparam int unsigned NODE_W       = 8;     // mesh node id width

  // ------------------------------------------------------------ CAM micro-ops
  // One CAM micro-operation is executed per clock.
  typedef enum logic [2:0] {
    CAM_NOP   = 3'd0,
    CAM_CMP_H = 3'd1,  // rows vs. horizontal key/mask   -> row tags
    CAM_CMP_V = 3'd2,  // columns vs. vertical key/mask  -> column tags
    CAM_WR_H  = 3'd3,  // selected rows, masked columns  <- horizontal key
    CAM_WR_V  = 3'd4,  // selected columns, masked rows  <- vertical key
    CAM_WT_H  = 3'd5,  // masked columns of every row    <- that row's tag
    CAM_WT_V  = 3'd6   // masked rows of every column    <- that column's tag
  } cam_op_e;

  // Which lanes (rows for _H, columns for _V) a write touches.
  typedef enum logic [1:0] {
    SEL_TAG = 2'd0,    // lanes whose tag is set
    SEL_ALL = 2'd1,    // every lane
    SEL_EXT = 2'd2     // lanes given on the external select vector (word write)
  } lane_sel_e;

  // Key/mask load: up to four single positions plus one contiguous range.
  typedef struct packed {
    logic                  load;
    logic                  vert;      // 0: horizontal key/mask, 1: vertical
    logic [3:0]            en;        // which single positions are used
    logic [3:0][IDX_W-1:0] idx;
    logic [3:0]            kbit;      // key bit of each single position
    logic                  rng_en;
    logic [IDX_W-1:0]      rng_lo;
    logic [IDX_W-1:0]      rng_len;
    logic                  rng_key;   // key bit for every position of the range
  } km_cmd_t;

  // ------------------------------------------------------------ instructions
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_HALT = 4'd1,   // end of program
    OP_ADD  = 4'd2,   // in-place add   B += A, carry at c (result MSB)
    OP_MUL  = 4'd3,   // out-of-place   C  = A * B (2m bits), carry scratch at d
    OP_RELU = 4'd4,   // in-place ReLU of the m-bit word at a, flag at c
    OP_MAX  = 4'd5,   // in-place max   B = max(A, B) (unsigned), flags at c, c+1
    OP_COPY = 4'd6,   // B = A, m bits
    OP_MOVE = 4'd7    // word transfer: row a, field at column b -> row c, column d
  } ap_opcode_e;

  // Field meaning: a/b/c/d are the first bit position (LSB) of the operand
  // fields. For dir=0 (horizontal mode) they are column indices and every row
  // is one SIMD lane; for dir=1 (vertical mode) they are row indices and every
  // column is a lane. m is the precision (1..8; 0 is read as 8).
  typedef struct packed {
    ap_opcode_e        op;
    logic              dir;
    logic [3:0]        m;
    logic [IDX_W-1:0]  a;
    logic [IDX_W-1:0]  b;
    logic [IDX_W-1:0]  c;
    logic [IDX_W-1:0]  d;
  } ap_instr_t;


  // ------------------------------------------------------------ mesh packets
  typedef enum logic [1:0] {
    PK_WDATA = 2'd0,  // data for rows [row, row+nwords) of the destination
    PK_RDREQ = 2'd1   // read rows [row, row+nwords), send them as PK_WDATA
                      // to node reply_node at row reply_row
  } pkt_kind_e;

  typedef struct packed {
    pkt_kind_e             kind;
    logic                  bcast;     // deliver to every CAP of the cluster
    logic [NODE_W-1:0]     dst;       // 0 = MAP, 1..64 = CAPs
    logic [IDX_W-1:0]      row;
    logic [6:0]            nwords;    // 1..64 words of 16 bits
    logic [NODE_W-1:0]     reply_node;
    logic [IDX_W-1:0]      reply_row;
    logic [FLIT_W-1:0]     data;
  } pkt_t;

  // ------------------------------------------------------------ host commands
  typedef enum logic [2:0] {
    HC_MAP_WR  = 3'd0,  // write one 16-bit word into a MAP row
    HC_MAP_RD  = 3'd1,  // read one MAP row
    HC_IMEM_WR = 3'd2,  // write one instruction into every CAP of a cluster
    HC_XFER    = 3'd3,  // MAP <-> CAP transfer
    HC_RUN     = 3'd4   // start the CAPs of a cluster at an address
  } host_kind_e;

  typedef struct packed {
    logic              to_cap;   // 1: MAP -> CAP (Read stage), 0: CAP -> MAP (Write stage)
    logic              bcast;    // MAP -> every CAP
    logic [NODE_W-1:0] cap;      // CAP node 1..64
    logic [IDX_W-1:0]  map_row;
    logic [IDX_W-1:0]  cap_row;
    logic [6:0]        nwords;
  } xfer_desc_t;

  typedef struct packed {
    host_kind_e        kind;
    logic              bcast;     // all clusters
    logic [11:0]       cluster;
    logic [IDX_W-1:0]  addr;      // MAP row / instruction address / start pc
    logic [AP_COLS-1:0] wdata;
    ap_instr_t         instr;
    xfer_desc_t        xfer;
  } host_cmd_t;

endpackage
