// pim_pkg: sizes, timing constants and record types shared by every block of
// the PIM module (HUB, per-channel controllers, channel datapaths).
//
// One PIM module holds NCH channels of NBANK banks. Data moves in 32-byte
// tiles of sixteen 16-bit elements: WR-INP writes one tile into a Global
// Buffer (GBuf) entry, MAC multiplies a GBuf tile with a 32-byte column slice
// of the open row in every bank and accumulates one 16-bit value per bank into
// an Output Buffer (OBuf) entry, and RD-OUT drains one OBuf entry from all
// banks at once (NBANK x 2 B = 32 B).
//
// Numbers that follow the paper: 32 channels per module (module configuration
// table), 16 banks per channel, 32 B tiles, 2 KB GBuf per channel (64
// entries), 2 B result per bank per RD-OUT, 512 KB GPR, 1 MB allocation
// chunks, and the four command timings read off the paper's DCS timing
// example (tCCDS = 2, tWR-INP = 5, tMAC = 6, tRD-OUT = 4 cycles).
// Own choices: integer 16-bit arithmetic modulo 2^16 in place of FP16, 1 KB
// DRAM rows, 64 OBuf entries per bank, 8-bit command IDs, 16-bit wrapping
// timestamps, and the bit layout of every record below.
package pim_pkg;

  // ---- module geometry ----
  localparam int NCH          = 32;   // channels per module
  localparam int NBANK        = 16;   // banks per channel
  localparam int ELEM_W       = 16;   // element width (bits)
  localparam int TILE_ELEMS   = 16;   // elements per 32 B tile
  localparam int TILE_W       = ELEM_W * TILE_ELEMS;  // 256 bits
  localparam int GBUF_ENTRIES = 64;   // 2 KB / 32 B
  localparam int OBUF_ENTRIES = 64;   // per bank
  localparam int ROW_BYTES    = 1024;
  localparam int NCOL         = ROW_BYTES / (TILE_W / 8);   // 32 tiles per row
  localparam int NROW         = 32768; // 512 MB per channel / 16 banks / 1 KB
  localparam int GPR_ENTRIES  = 16384; // 512 KB / 32 B

  localparam int GBUF_IDX_W = $clog2(GBUF_ENTRIES);
  localparam int OUT_IDX_W  = $clog2(OBUF_ENTRIES);
  localparam int COL_W      = $clog2(NCOL);
  localparam int ROW_W      = $clog2(NROW);
  localparam int GPR_AW     = $clog2(GPR_ENTRIES);
  localparam int OPSZ_W     = 8;

  // ---- DCS bookkeeping ----
  localparam int ID_W = 8;            // command identifier
  localparam int TS_W = 16;           // cycle timestamp, compared modulo 2^16

  // ---- command timing (cycles) ----
  localparam int T_CCDS   = 2;
  localparam int T_WR_INP = 5;
  localparam int T_MAC    = 6;
  localparam int T_RD_OUT = 4;

  // ---- dynamic memory management ----
  localparam int CHUNK_BYTES    = 1 << 20;                               // 1 MB
  localparam int ROWS_PER_CHUNK = CHUNK_BYTES / (NCH * NBANK * ROW_BYTES); // 2
  localparam int NCHUNK         = NROW / ROWS_PER_CHUNK;                  // 16384 (16 GB)
  localparam int PA_W           = $clog2(NCHUNK);

  typedef logic [ELEM_W-1:0] elem_t;
  typedef logic [TILE_W-1:0] tile_t;

  // Instruction opcodes. EPU_RED is the reduction run by the HUB's EPU;
  // the three others are the paper's PIM instructions.
  typedef enum logic [1:0] {
    OP_WR_INP = 2'd0,
    OP_MAC    = 2'd1,
    OP_RD_OUT = 2'd2,
    OP_EPU_RED = 2'd3
  } pim_op_e;

  // A PIM instruction as it leaves the dispatcher.
  typedef struct packed {
    pim_op_e                 op;
    logic [NCH-1:0]          ch_mask;
    logic [OPSZ_W-1:0]       op_size;   // repetitions (>= 1)
    logic [GPR_AW-1:0]       gpr_addr;
    logic [GBUF_IDX_W-1:0]   gbuf_idx;
    logic [ROW_W-1:0]        row;
    logic [COL_W-1:0]        col;
    logic [OUT_IDX_W-1:0]    out_idx;
  } pim_inst_t;

  // A channel command as it enters a PIM controller.
  typedef struct packed {
    pim_op_e                 op;        // OP_WR_INP, OP_MAC or OP_RD_OUT
    logic [GBUF_IDX_W-1:0]   gbuf_idx;
    logic [ROW_W-1:0]        row;
    logic [COL_W-1:0]        col;
    logic [OUT_IDX_W-1:0]    out_idx;
    logic [GPR_AW-1:0]       wb_addr;   // RD-OUT: GPR entry to write back
    tile_t                   data;      // WR-INP: input tile
  } pim_cmd_t;

  // ---- DPA (dynamic PIM access) program encoding ----
  typedef enum logic [1:0] {
    DPA_PIM  = 2'd0,   // a PIM instruction, possibly with a virtual row
    DPA_LOOP = 2'd1,   // Dyn-Loop
    DPA_MODI = 2'd2,   // Dyn-Modi
    DPA_END  = 2'd3    // end of the per-step program
  } dpa_kind_e;

  typedef enum logic [2:0] {
    FLD_ROW  = 3'd0,
    FLD_COL  = 3'd1,
    FLD_GPR  = 3'd2,
    FLD_GBUF = 3'd3,
    FLD_OUT  = 3'd4
  } dpa_field_e;

  typedef struct packed {
    dpa_kind_e         kind;
    logic              xlate;     // DPA_PIM: row holds a virtual row
    logic              kv;        // DPA_PIM: 0 = key table, 1 = value table
    logic [4:0]        lb_shift;  // DPA_LOOP: LB = ceil(T_cur / 2^lb_shift)
    logic [7:0]        le;        // DPA_LOOP: instructions in the loop body
    dpa_field_e        target;    // DPA_MODI: field to adjust
    logic [15:0]       coeff;     // DPA_MODI: field += coeff * t
    pim_inst_t         inst;      // DPA_PIM: the instruction
  } dpa_inst_t;

  // Sixteen-lane modular multiply-accumulate of two tiles.
  function automatic elem_t tile_dot(tile_t a, tile_t b);
    elem_t s = '0;
    for (int i = 0; i < TILE_ELEMS; i++)
      s += elem_t'(a[i*ELEM_W +: ELEM_W] * b[i*ELEM_W +: ELEM_W]);
    return s;
  endfunction

  // Lane-wise modular add of two tiles.
  function automatic tile_t tile_add(tile_t a, tile_t b);
    tile_t r;
    for (int i = 0; i < TILE_ELEMS; i++)
      r[i*ELEM_W +: ELEM_W] = a[i*ELEM_W +: ELEM_W] + b[i*ELEM_W +: ELEM_W];
    return r;
  endfunction

endpackage
