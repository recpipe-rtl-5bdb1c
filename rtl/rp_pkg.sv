// rp_pkg: sizes and types shared by the multi-stage recommendation
// accelerator. The array geometry (128x128 MACs), the 128-byte embedding
// line, the 16 GB DRAM, the 12 MB + 4 MB split of the embedding caches, the
// 8 MB of array SRAM, the 16 top-k bins and the 0.5 CTR threshold follow the
// paper. The 8-bit operands, 32-bit accumulators, 32x32 fission tile and
// 8-bit CTR code are choices of this design, as the paper gives no widths.
package rp_pkg;

  // ---- systolic array ----------------------------------------------------
  parameter int unsigned DATA_W   = 8;    // activation / weight (signed int8)
  parameter int unsigned ACC_W    = 32;   // partial sums
  parameter int unsigned TILE     = 32;   // fission granule (rows = cols)
  parameter int unsigned ARRAY_N  = 128;  // 128x128 MACs
  parameter int unsigned TILES    = ARRAY_N / TILE;  // tiles per side

  // ---- memories -----------------------------------------------------------
  parameter int unsigned LINE_BYTES = 128;            // embedding line / SRAM word
  parameter int unsigned LINE_W     = LINE_BYTES * 8;
  parameter int unsigned EMB_ID_W   = 27;             // 16 GB / 128 B lines
  parameter int unsigned ITEM_W     = 16;             // user-item id

  // ---- CTR / top-k --------------------------------------------------------
  parameter int unsigned CTR_W    = 8;    // CTR in [0,1) as unsigned Q0.8
  parameter int unsigned NBINS    = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [LINE_W-1:0]        line_t;
  typedef logic [EMB_ID_W-1:0]      emb_id_t;
  typedef logic [ITEM_W-1:0]        item_t;
  typedef logic [CTR_W-1:0]         ctr_t;

  // stage that an embedding lookup belongs to
  typedef enum logic {STAGE_FE = 1'b0, STAGE_BE = 1'b1} stage_e;

  // engine commands
  typedef enum logic [1:0] {
    OP_LOAD_W = 2'd0,  // shift a weight matrix into the sub-array
    OP_RUN    = 2'd1   // stream items through the loaded layer
  } op_e;

  // ---- sub-array engine ---------------------------------------------------
  // 16 engines x (256 KB weights + 256 KB activations) = the 8 MB of array SRAM
  parameter int unsigned ENG_WDEPTH    = 2048;   // weight rows per engine
  parameter int unsigned ENG_ADEPTH    = 2048;   // activation words per engine
  parameter int unsigned ENG_ACC_DEPTH = 256;    // int32 partial-sum words per lane
  parameter int unsigned ENG_AW        = $clog2(ENG_ADEPTH);
  parameter int unsigned ENG_WAW       = $clog2(ENG_WDEPTH);
  parameter int unsigned LANE_W        = $clog2(ARRAY_N);

  typedef struct packed {
    op_e               op;
    logic [ENG_WAW-1:0] w_base;      // LOAD: first weight row
    logic [ENG_AW-1:0]  a_base;      // RUN: first input word
    logic [ENG_AW-1:0]  o_base;      // RUN: first output word
    logic [ENG_AW:0]    count;       // RUN: number of items (1..ENG_ADEPTH)
    logic [LANE_W-1:0]  o_lane;      // RUN: lane of output column 0
    logic               final_layer; // RUN: column 0 -> sigmoid -> CTR stream
    logic               acc_in;      // RUN: add stored partial sums (K split)
    logic               acc_out;     // RUN: store partial sums, no activation
    logic [4:0]         shift;       // RUN: requantisation / logit shift
    item_t              item_base;   // RUN: id of the first item (final layer)
  } eng_cmd_t;

  parameter int unsigned ENG_IDX_W = $clog2(TILES*TILES);

  // embedding lookup request to the gather unit
  typedef struct packed {
    emb_id_t               id;
    stage_e                stage;
    logic                  prefetch;  // fill the look-ahead cache only
    logic [ENG_IDX_W-1:0]  dst_eng;   // engine whose activation bank receives it
    logic [ENG_AW-1:0]     dst_addr;  // word in that bank
  } emb_req_t;

endpackage
