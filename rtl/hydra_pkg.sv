// hydra_pkg: constants, opcodes and command/response types shared by the
// HyDra hyperdimensional-computing macro.
//
// The macro stores binary hypervectors (HVs) in 16 content-addressable banks
// of 128 rows x 128 columns, so one row across all banks holds a 2048-bit HV.
// Binding, permutation and similarity search run inside the banks; bundling
// uses an int16 HV cache with an increment-only adder. The sizes below are
// those of the published macro except CACHE_ENTRIES, which is this design's
// choice. The command set (cmd_t / op_e) is also this design's own: the macro
// is driven one command at a time through a valid/ready handshake.
package hydra_pkg;

  localparam int BANKS         = 16;              // CAM banks
  localparam int ROWS          = 128;             // rows per bank
  localparam int COLS          = 128;             // columns per bank
  localparam int DIM           = BANKS * COLS;    // full HV dimension (2048)
  localparam int BATCH_W       = 8;               // bits per read batch
  localparam int NBATCH        = COLS / BATCH_W;  // batches per bank row (16)
  localparam int ELEM_W        = 16;              // int16 cache elements
  localparam int LTA_N         = 8;               // LTA inputs
  localparam int CACHE_ENTRIES = 32;              // int16 HVs in the cache
  localparam int ROW_W         = $clog2(ROWS);    // 7
  localparam int CNT_W         = $clog2(COLS + 1);        // 8: 0..128 mismatches per bank row
  localparam int SUM_W         = $clog2(DIM + 1);         // 12: 0..2048 mismatches per HV
  localparam int ENTRY_W       = $clog2(CACHE_ENTRIES);   // 5

  // Bipolar value to bit: +1 -> 0, -1 -> 1, so binding is XOR.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_CONFIG   = 4'd1,   // active banks = cmd.count (HV dimension = 128 * count)
    OP_WRITE    = 4'd2,   // CAM[dst] <- cmd.hv
    OP_READ     = 4'd3,   // rsp.hv <- CAM[src] (search lines held at 0)
    OP_SL_HOST  = 4'd4,   // search lines <- cmd.hv
    OP_SL_ROW   = 4'd5,   // search lines <- CAM[src]
    OP_BIND     = 4'd6,   // CAM[dst] <- CAM[src] xor SL, in the banks
    OP_PERMUTE  = 4'd7,   // CAM[dst] <- CAM[src] shifted left by cmd.count batches, random fill
    OP_SEARCH   = 4'd8,   // rsp.row/dist <- nearest of rows [src, src+count) to SL
    OP_CLEAR    = 4'd9,   // cache[entry] <- 0
    OP_ADD      = 4'd10,  // cache[entry] <- cache[entry] + CAM[src] (elementwise, +1 where bit is 1)
    OP_BINARIZE = 4'd11   // CAM[dst] <- (cache[entry] > thr)
  } op_e;

  // Source driving the binary data bus.
  typedef enum logic [1:0] {
    BUS_BANKS = 2'd0,   // WRX outputs of the banks
    BUS_SIGN  = 2'd1,   // binarized cache entry
    BUS_HOST  = 2'd2    // host data of the command
  } bus_sel_e;

  typedef struct packed {
    op_e                     op;
    logic [ROW_W-1:0]        src;
    logic [ROW_W-1:0]        dst;
    logic [ROW_W:0]          count;  // candidates, shift in batches, or active banks
    logic [ENTRY_W-1:0]      entry;
    logic signed [ELEM_W-1:0] thr;
    logic [DIM-1:0]          hv;     // element k = bit k (bank k/128, column k%128)
  } cmd_t;

  typedef struct packed {
    op_e               op;
    logic [DIM-1:0]    hv;    // OP_READ data
    logic [ROW_W-1:0]  row;   // OP_SEARCH winner
    logic [SUM_W-1:0]  hd;    // OP_SEARCH winner's Hamming distance
  } rsp_t;

endpackage
