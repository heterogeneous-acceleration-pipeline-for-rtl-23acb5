// hotline_pkg: constants and types shared by the accelerator that splits a
// recommendation-model mini-batch into a popular and a non-popular micro-batch.
//
// The sizes that follow the paper: 64 lookup engines, 64 EAL banks, a 512-entry
// EAL request queue, a 4 MB EAL of 2M blocks whose entries are a valid bit, a
// 2-bit access counter (SRRIP re-reference prediction value) and a 14-bit
// identifier, a 2.5 MB input eDRAM for 16K inputs, 16 reducer ALUs and a 0.5 kB
// embedding vector buffer. The input record (13 dense and 26 sparse features of
// the Criteo data) and the table and index widths are this design's choice; the
// record is 160 bytes, so that 16K records fill exactly 2.5 MiB.
package hotline_pkg;

  // ---------------- input record ----------------
  localparam int unsigned DATA_W     = 32;   // fp32 values, 32-bit sparse indices
  localparam int unsigned NUM_DENSE  = 13;   // Criteo dense features
  localparam int unsigned NUM_SPARSE = 26;   // Criteo sparse features = embedding tables
  localparam int unsigned INDEX_W    = 32;   // embedding row index width
  localparam int unsigned TABLE_W    = 8;    // embedding table number width
  localparam int unsigned KEY_W      = INDEX_W + TABLE_W;  // EAL key (shifted index | table)
  localparam int unsigned MB_MAX     = 16384; // largest mini-batch held on chip
  localparam int unsigned IN_ID_W    = $clog2(MB_MAX);

  typedef struct packed {
    logic [DATA_W-1:0]                   label;
    logic [NUM_SPARSE-1:0][INDEX_W-1:0]  sparse;  // one index per embedding table (one-hot)
    logic [NUM_DENSE-1:0][DATA_W-1:0]    dense;
  } input_rec_t;                                  // 40 words = 160 bytes

  localparam int unsigned REC_W = $bits(input_rec_t);

  // ---------------- EAL ----------------
  localparam int unsigned EAL_BANKS   = 64;
  localparam int unsigned EAL_BLOCKS  = 2097152;  // 2M blocks
  localparam int unsigned EAL_WAYS    = 4;        // associativity (own choice)
  localparam int unsigned EAL_QUEUE   = 512;
  localparam int unsigned EAL_ID_W    = 14;
  localparam int unsigned RRPV_W      = 2;
  localparam int unsigned NUM_ENGINES = 64;

  typedef struct packed {
    logic                valid;
    logic [RRPV_W-1:0]   ac;     // access counter = SRRIP RRPV
    logic [EAL_ID_W-1:0] id;
  } eal_entry_t;                 // 17 bits

  // ---------------- reducer / gather ----------------
  localparam int unsigned RED_LANES = 16;        // reducer ALUs
  localparam int unsigned EMB_DIM   = 16;        // sparse dim of RM1, RM2, RM4
  localparam int unsigned EVB_BYTES = 512;       // embedding vector buffer
  localparam int unsigned NUM_GPUS  = 4;
  localparam int unsigned ADDR_W    = 64;

  // Instruction set of the accelerator's driver interface
  typedef enum logic [2:0] {
    OP_DMA_RD = 3'd0,   // dma_rd(mem start idx, #bytes)
    OP_DMA_WR = 3'd1,   // dma_wr(mem start idx, #bytes)
    OP_V_ADD  = 3'd2,   // v_add(input vector, emb vec buff)
    OP_V_MUL  = 3'd3,   // v_mul(input vector, emb vec buff)
    OP_S_WR   = 3'd4,   // s_wr(reg idx, base addr)
    OP_GPU_RD = 3'd5    // gpu_rd(gpu device id, sparse idx)
  } opcode_e;

  // Tag carried by a gather request and echoed by its response
  typedef struct packed {
    logic [IN_ID_W-1:0] input_id;
    logic [TABLE_W-1:0] table_no;
    opcode_e            red_op;  // reducer operation: OP_V_ADD (sum) or OP_V_MUL
    logic               first;   // first row of the pooling bag
    logic               last;    // last row of the pooling bag
  } gtag_t;

  // Gather request leaving the accelerator (to the DMA engine or a GPU)
  typedef struct packed {
    opcode_e             op;       // OP_DMA_RD or OP_GPU_RD
    logic [ADDR_W-1:0]   addr;     // dma_rd: byte address in CPU memory
    logic [15:0]         nbytes;   // dma_rd: bytes to read
    logic [7:0]          gpu_id;   // gpu_rd: device
    logic [INDEX_W-1:0]  sparse_idx; // gpu_rd: row of the hot-embedding table
    gtag_t               tag;
  } mem_req_t;

  // Kinds of beat sent to the GPUs
  typedef enum logic [1:0] {
    GK_POP_INPUT    = 2'd0,  // input of the popular micro-batch
    GK_NONPOP_INPUT = 2'd1,  // input of the non-popular micro-batch
    GK_EMB_VEC      = 2'd2   // pooled embedding vector of a non-popular input
  } gpu_kind_e;

  localparam int unsigned ROW_BEATS = EMB_DIM / RED_LANES;  // beats per embedding row
  localparam int unsigned EVB_DEPTH = EVB_BYTES / (EMB_DIM * DATA_W / 8);
  localparam int unsigned ROW_BYTES = EMB_DIM * DATA_W / 8;

  typedef logic [RED_LANES-1:0][DATA_W-1:0] lanes_t;
  typedef logic [EMB_DIM-1:0][DATA_W-1:0]   emb_vec_t;

  // One beat of an embedding row returning from CPU memory or a GPU
  typedef struct packed {
    gtag_t       tag;
    logic [7:0]  beat;     // which RED_LANES-wide slice of the row
    lanes_t      data;
  } mem_rsp_t;

  // A pooled embedding vector (one table of one input)
  typedef struct packed {
    logic [IN_ID_W-1:0] input_id;
    logic [TABLE_W-1:0] table_no;
    emb_vec_t           vec;
  } pooled_t;

  // One beat towards the GPUs
  typedef struct packed {
    gpu_kind_e          kind;
    logic [IN_ID_W-1:0] input_id;
    logic [TABLE_W-1:0] table_no;
    input_rec_t         rec;
    emb_vec_t           vec;
  } gpu_beat_t;

endpackage
