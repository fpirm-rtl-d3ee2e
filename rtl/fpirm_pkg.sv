// fpirm_pkg -- shared constants, types and the command format of the
// racetrack-memory compute-in-memory (CIM) subarray.
//
// The row width (512 nanowires per tile), the transverse read distance
// (TRD = 7), the 16 DBCs and 16 tiles per subarray, the 32 data domains per
// nanowire and the packing of eight 64-bit words in a row follow the paper.
// The command encoding, the field widths and the names of the operations are
// this design's own: the paper leaves the command interface between the
// memory controller and the subarray unspecified.
package fpirm_pkg;

  // ---- organisation -------------------------------------------------------
  localparam int unsigned ROW_W     = 512;  // nanowires per DBC / bits per row
  localparam int unsigned LANE_W    = 64;   // packed word width
  localparam int unsigned N_LANES   = ROW_W / LANE_W;  // 8 words per row
  localparam int unsigned TRD       = 7;    // transverse read distance
  localparam int unsigned CNT_W     = $clog2(TRD + 1);  // TR level width
  localparam int unsigned D_DOM     = 32;   // data domains per nanowire
  localparam int unsigned N_DBC     = 16;   // DBCs per tile
  localparam int unsigned N_TILES   = 16;   // tiles per subarray (last = CIM)
  localparam int unsigned ROW_AW    = 6;    // row (domain) index width
  localparam int unsigned BIT_AW    = 7;    // bit index within a lane, 0..64

  // Predicate source positions inside a 64-bit word (bit 0, 31 or 47).
  typedef enum logic [1:0] {
    PSRC_B0  = 2'd0,
    PSRC_B31 = 2'd1,
    PSRC_B47 = 2'd2
  } pred_src_e;

  // Inputs of the CIM unit's source multiplexer (one per slice).
  typedef enum logic [3:0] {
    SRC_BYPASS = 4'd0,  // plain read of the addressed access point
    SRC_OR     = 4'd1,  // TR level >= 1
    SRC_AND    = 4'd2,  // TR level == TRD
    SRC_SUM    = 4'd3,  // XOR of the TRD domains
    SRC_C      = 4'd4,  // carry of nanowire i-1
    SRC_CP     = 4'd5,  // super carry of nanowire i-2
    SRC_NP1    = 4'd6,  // bit of nanowire i+1 (logical shift right by 1)
    SRC_NM1    = 4'd7,  // bit of nanowire i-1 (logical shift left by 1)
    SRC_NP8    = 4'd8,  // bit of nanowire i+8 (logical shift right by 8)
    SRC_NM8    = 4'd9   // bit of nanowire i-8 (logical shift left by 8)
  } cim_src_e;

  // Subarray commands.
  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_SHIFT      = 4'd1,   // CIM tile: shift one DBC by one domain
    OP_ROW        = 4'd2,   // CIM tile: RB <- CIM unit output (read / TR op)
    OP_WRITE      = 4'd3,   // CIM tile: row at AP <- RB (optionally predicated)
    OP_ADD_STEP   = 4'd4,   // CIM tile: one bit of the carry chain of Add
    OP_PRED_LOAD  = 4'd5,   // CIM tile: predication bits <- RB bit 0/31/47
    OP_RB_RESET   = 4'd6,   // CIM tile: RB <- 0 (optionally predicated)
    OP_RB_FROM_G  = 4'd7,   // CIM tile: RB <- global rowbuffer
    OP_G_FROM_RB  = 4'd8,   // global rowbuffer <- CIM tile RB
    OP_G_LOAD     = 4'd9,   // global rowbuffer <- command data (host write)
    OP_TILE_READ  = 4'd10,  // global rowbuffer <- plain tile row
    OP_TILE_WRITE = 4'd11,  // plain tile row <- global rowbuffer
    OP_ADD        = 4'd12   // Add(w, l): expanded by the sequencer
  } op_e;

  typedef struct packed {
    op_e                 op;
    logic [3:0]          tile;     // plain tile index for TILE_READ/WRITE
    logic [3:0]          dbc;      // DBC index
    logic [ROW_AW-1:0]   row;      // domain index for TILE_READ/WRITE
    logic                ap;       // access point 0 or 1
    logic                dir;      // OP_SHIFT: 1 = towards AP0 (pos+1)
    cim_src_e            src;      // OP_ROW: CIM source
    logic                pred_en;  // predicated WRITE / RB_RESET
    pred_src_e           psrc;     // OP_PRED_LOAD source bit
    logic                lane_iso; // cut neighbour paths at 64-bit word edges
    logic [BIT_AW-1:0]   bitpos;   // OP_ADD_STEP bit / OP_ADD low bound l
    logic [BIT_AW-1:0]   width;    // OP_ADD_STEP upper bound u / OP_ADD w
    logic [ROW_W-1:0]    data;     // OP_G_LOAD data
  } cmd_t;

endpackage
