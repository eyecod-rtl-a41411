// eyecod_pkg: sizes, types and the instruction encoding shared by the
// EyeCoD eye-tracking accelerator.
//
// Sizes that follow the published configuration: 128 MAC lanes of 8 MACs
// each, 8-bit activations and weights, two 512 KB activation global buffers
// (Act GB) of four banks with one 16-channel tile per bank address, two
// 64 KB ping-pong weight buffers, a 512 KB weight GB, a 20 KB index SRAM,
// a 4 KB instruction SRAM, M = 16 rows per input-buffer group, and one
// segmentation run per 50 frames.
//
// This design's own choices: a 24-bit accumulator, a 12-entry input Act
// FIFO per lane (8 outputs plus a kernel row of up to 5), 128-bit bank and
// weight-GB words, a 5-bit per-lane crossbar index (one of 2*M rows; 128
// lanes x 5 bits x 256 entries fills exactly 20 KB), and the 64-bit
// instruction set below (512 instructions fill 4 KB).
package eyecod_pkg;

  // ---------------- datapath ----------------
  localparam int unsigned N_LANES  = 128;  // MAC lanes
  localparam int unsigned N_MACS   = 8;    // MACs per lane
  localparam int unsigned ACT_W    = 8;    // activation / weight width
  localparam int unsigned ACC_W    = 24;   // accumulator width
  localparam int unsigned KMAX     = 5;    // widest kernel row
  localparam int unsigned ROW_LEN  = N_MACS + KMAX - 1;  // input Act FIFO entries
  localparam int unsigned M_ROWS   = 16;   // rows per In Act group (= channel tile)
  localparam int unsigned CH_TILE  = 16;   // channels per Act GB address
  localparam int unsigned SEL_W    = $clog2(2 * M_ROWS);  // crossbar select per lane

  // ---------------- activation GB ----------------
  localparam int unsigned N_BANKS   = 4;
  localparam int unsigned BANK_W    = CH_TILE * ACT_W;               // 128 bits
  localparam int unsigned GB_BYTES  = 512 * 1024;
  localparam int unsigned GB_DEPTH  = GB_BYTES / (N_BANKS * BANK_W / 8);  // 8192
  localparam int unsigned GB_AW     = $clog2(GB_DEPTH);
  localparam int unsigned COORD_W   = 10;  // signed row / pixel coordinate
  localparam int unsigned DIM_W     = 9;   // tensor height / width, up to 256
  localparam int unsigned CT_W      = 7;   // channel-tile index, up to 128 tiles

  // ---------------- weights ----------------
  localparam int unsigned WGB_W      = 128;
  localparam int unsigned WGB_DEPTH  = 512 * 1024 * 8 / WGB_W;       // 32768
  localparam int unsigned WGB_AW     = $clog2(WGB_DEPTH);
  localparam int unsigned WBUF_ROWS  = 64 * 1024 * 8 / (N_LANES * ACT_W);  // 512
  localparam int unsigned WBUF_RAW   = $clog2(WBUF_ROWS);
  localparam int unsigned WBUF_COLS  = N_LANES * ACT_W / WGB_W;      // 8 words per row

  // ---------------- index / instruction SRAM ----------------
  localparam int unsigned IDX_W      = N_LANES * SEL_W;              // 640 bits
  localparam int unsigned IDX_DEPTH  = 20 * 1024 * 8 / IDX_W;        // 256
  localparam int unsigned IDX_AW     = $clog2(IDX_DEPTH);
  localparam int unsigned IDX_CHUNKS = (IDX_W + WGB_W - 1) / WGB_W;  // 5
  localparam int unsigned INSTR_W     = 64;
  localparam int unsigned INSTR_DEPTH = 4 * 1024 * 8 / INSTR_W;      // 512
  localparam int unsigned PC_W        = $clog2(INSTR_DEPTH);

  // ---------------- orchestration ----------------
  localparam int unsigned SEG_PERIOD = 50;  // segmentation once per 50 frames

  // ---------------- types ----------------
  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [DIM_W-1:0]          dim_t;
  typedef logic [CT_W-1:0]           ctile_t;
  typedef logic [ROW_LEN-1:0][ACT_W-1:0] row_t;     // element 0 is the leftmost pixel
  typedef logic [N_BANKS-1:0][BANK_W-1:0] gb_data_t;

  // Tensor geometry of one Act GB operand.
  typedef struct packed {
    dim_t h;
    dim_t w;
  } dims_t;

  // One access to an Act GB. In tensor mode the four banks access the four
  // consecutive pixels p0..p0+3 of row h, channel tile ct; out-of-range
  // pixels read as zero and are not written. In raw mode every bank uses
  // raw_addr and only bank raw_bank writes.
  typedef struct packed {
    logic     en;
    logic     we;
    logic     raw;
    coord_t   h;
    coord_t   p0;
    ctile_t   ct;
    dims_t    dims;
    logic [GB_AW-1:0] raw_addr;
    logic [1:0]       raw_bank;
    gb_data_t wdata;
  } gb_req_t;

  // ---------------- instruction set ----------------
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_CFG   = 4'd1,   // write a configuration register
    OP_LDW   = 4'd2,   // weight GB -> idle weight buffer
    OP_WSWAP = 4'd3,   // exchange the two weight buffers
    OP_LDA   = 4'd4,   // input Act GB -> Tmp Buffer -> In Act G0/G1
    OP_COMP  = 4'd5,   // one compute round on all lanes
    OP_STORE = 4'd6,   // lane results -> output Act buffer -> output Act GB
    OP_SYNC  = 4'd7,   // wait until every engine is idle
    OP_BNSEG = 4'd8,   // branch if this frame runs no segmentation
    OP_JMP   = 4'd9,
    OP_EOF   = 4'd10   // end of frame
  } opcode_e;

  typedef enum logic [3:0] {
    CFG_IN_DIMS  = 4'd0,   // value[17:0] = {h, w} of the input tensor
    CFG_OUT_DIMS = 4'd1,   // value[17:0] = {h, w} of the output tensor
    CFG_REQUANT  = 4'd2,   // value[5:0]  = {relu, shift[4:0]}
    CFG_SPLIT    = 4'd3,   // value[7:0]  = first lane of task B (128: task A owns all)
    CFG_GBSEL    = 4'd4    // value[0]    = Act GB read as input (the other is written)
  } cfg_reg_e;

  // Input-row mapping of OP_LDA (upsampling is done while reading).
  typedef enum logic [1:0] {
    LD_NORMAL  = 2'd0,
    LD_UP_DUP  = 2'd1,     // 2x upsampling by duplication
    LD_UP_ZERO = 2'd2      // 2x upsampling by zero insertion
  } ld_mode_e;

  typedef struct packed {
    opcode_e      op;        // [63:60]
    coord_t       h;         // [59:50]
    coord_t       w;         // [49:40]
    ctile_t       ct;        // [39:33]
    logic [1:0]   mode;      // [32:31] LDA: ld_mode_e; STORE: {rowstep, downsample}
    logic [2:0]   gfirst;    // [30:28] STORE: first 16-lane group
    logic [2:0]   gcnt;      // [27:25] STORE: number of groups - 1
    logic [IDX_AW-1:0] idx;  // [24:17] COMP: index SRAM entry
    logic [2:0]   k;         // [16:14] COMP: kernel row length (1..KMAX)
    logic         clr_a;     // [13]    COMP: clear task-A accumulators first
    logic         clr_b;     // [12]    COMP: clear task-B accumulators first
    logic [11:0]  imm;       // [11:0]  COMP: weight row; branch target
  } instr_t;

  // OP_LDW and OP_CFG reuse the low bits differently.
  function automatic logic [WGB_AW-1:0] ldw_addr(instr_t i);
    return i[WGB_AW+13-1:13];
  endfunction
  function automatic logic [12:0] ldw_count(instr_t i);   // words to load
    return i[12:0];
  endfunction
  function automatic cfg_reg_e cfg_sel(instr_t i);
    return cfg_reg_e'(i[59:56]);
  endfunction
  function automatic logic [31:0] cfg_val(instr_t i);
    return i[31:0];
  endfunction

  // Memory selected by the external access port.
  typedef enum logic [2:0] {
    EXT_ACT0  = 3'd0,   // addr = {word, bank[1:0]}
    EXT_ACT1  = 3'd1,
    EXT_WGB   = 3'd2,   // addr = word
    EXT_INSTR = 3'd3,   // addr = instruction, data[63:0]
    EXT_INDEX = 3'd4    // addr = {entry, chunk[2:0]}, chunk 0..4
  } ext_sel_e;

  // Event counters of the controller.
  typedef struct packed {
    logic [31:0] rounds;        // compute rounds
    logic [31:0] split_rounds;  // rounds with the lanes shared by two tasks
    logic [31:0] overlap;       // cycles with an act load under a compute round
    logic [31:0] stalls;        // cycles an instruction waited for an engine
  } perf_t;

  // Requantise an accumulator to 8 bits: arithmetic shift, optional ReLU,
  // saturation.
  function automatic logic [ACT_W-1:0] requant(logic signed [ACC_W-1:0] acc,
                                               logic [4:0] shift, logic relu);
    logic signed [ACC_W-1:0] y;
    y = acc >>> shift;
    if (relu && y < 0) y = '0;
    if (y > 127) return 8'sd127;
    if (y < -128) return 8'h80;
    return y[ACT_W-1:0];
  endfunction

endpackage
