// hotline_top: the accelerator that sits beside the GPUs of a recommendation-
// model training node and splits every mini-batch into a popular micro-batch
// (inputs whose embedding rows are all hot and so already held by every GPU) and
// a non-popular micro-batch (inputs that need at least one row from CPU memory).
// The GPUs start on the popular part at once; meanwhile the accelerator fetches
// the rows of the non-popular part from CPU memory (dma_rd) and from the GPUs
// (gpu_rd), pools them, and streams them to the GPUs.
//
// Blocks: scheduler (step control), lookup_engine_array with 64 engines feeding
// the Embedding Access Logger (eal: 64 banks, 2M blocks, 512-entry queue),
// data_dispatcher (address registers, input classifier, memory controller and
// the shared streaming-interface paths), input_edram (16K inputs), reducer
// (16 fp32 ALUs) and emb_vector_buffer (0.5 kB).
//
// Ports are the streaming interface split by direction and purpose:
//   cfg_*   s_wr writes of the table base addresses,
//   host_*  training inputs of the mini-batch (valid/ready),
//   req_*   row reads out of the accelerator (dma_rd to the DMA engine, gpu_rd),
//   rsp_*   row data coming back, in request order, with the request's tag,
//   gpu_*   inputs and pooled vectors to the GPUs,
//   start_i/batch_n_i/learn_phase_i/done_o  per-mini-batch control,
// plus counters. Splitting the one PCIe streaming interface of the paper into
// these streams is this design's choice; the PCIe link itself is not part of it.
// Timing: after reset, eal_ready_o rises once the EAL has cleared its valid bits
// (BLOCKS/(BANKS*WAYS) cycles); a mini-batch may be started then.
module hotline_top
  import hotline_pkg::*;
#(
  parameter int unsigned ENGINES      = NUM_ENGINES,
  parameter int unsigned EAL_NBANKS   = EAL_BANKS,
  parameter int unsigned EAL_NBLOCKS  = EAL_BLOCKS,
  parameter int unsigned EAL_NWAYS    = EAL_WAYS,
  parameter int unsigned EAL_NQUEUE   = EAL_QUEUE,
  parameter int unsigned EDRAM_DEPTH  = MB_MAX,
  parameter int unsigned SAMPLE_EVERY = 20
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start_i,
  input  logic [IN_ID_W:0]    batch_n_i,
  input  logic                learn_phase_i,
  output logic                busy_o,
  output logic                done_o,
  output logic                eal_ready_o,
  // s_wr
  input  logic                cfg_valid_i,
  input  logic [7:0]          cfg_idx_i,
  input  logic [ADDR_W-1:0]   cfg_addr_i,
  // training inputs
  input  logic                host_valid_i,
  output logic                host_ready_o,
  input  input_rec_t          host_rec_i,
  // row reads
  output logic                req_valid_o,
  input  logic                req_ready_i,
  output mem_req_t            req_o,
  input  logic                rsp_valid_i,
  output logic                rsp_ready_o,
  input  mem_rsp_t            rsp_i,
  // to the GPUs
  output logic                gpu_valid_o,
  input  logic                gpu_ready_i,
  output gpu_beat_t           gpu_o,
  // counters
  output logic [IN_ID_W:0]    n_popular_o,
  output logic [IN_ID_W:0]    n_nonpop_o,
  output logic [31:0]         n_dma_o,
  output logic [31:0]         n_gpu_o,
  output logic [31:0]         n_learned_o,
  output logic [31:0]         classify_cycles_o,
  output logic [31:0]         gather_cycles_o,
  output logic [15:0]         eal_iters_o
);
  localparam int unsigned SETS   = EAL_NBLOCKS / (EAL_NBANKS * EAL_NWAYS);
  localparam int unsigned BANK_W = $clog2(EAL_NBANKS);
  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = $clog2(EAL_NWAYS);
  localparam int unsigned SLOT_W = $clog2(EAL_NQUEUE);

  // ---------------- scheduler ----------------
  logic mode, classify, clear, learn, disp_host_ready;
  logic ed_re;
  logic [IN_ID_W-1:0] ed_raddr;
  input_rec_t ed_rdata;
  logic sch_valid, sch_ready;
  input_rec_t sch_rec;
  logic [IN_ID_W-1:0] sch_id;
  logic vec_sent;

  scheduler #(.SAMPLE_EVERY(SAMPLE_EVERY)) u_sched (
    .clk              (clk),
    .rst_n            (rst_n),
    .start_i          (start_i),
    .batch_n_i        (batch_n_i),
    .learn_phase_i    (learn_phase_i),
    .busy_o           (busy_o),
    .done_o           (done_o),
    .mode_o           (mode),
    .classify_o       (classify),
    .clear_o          (clear),
    .learn_o          (learn),
    .n_popular_i      (n_popular_o),
    .n_nonpop_i       (n_nonpop_o),
    .ed_re_o          (ed_re),
    .ed_raddr_o       (ed_raddr),
    .ed_rdata_i       (ed_rdata),
    .sch_valid_o      (sch_valid),
    .sch_ready_i      (sch_ready),
    .sch_rec_o        (sch_rec),
    .sch_id_o         (sch_id),
    .vec_sent_i       (vec_sent),
    .n_learned_o      (n_learned_o),
    .classify_cycles_o(classify_cycles_o),
    .gather_cycles_o  (gather_cycles_o)
  );

  // ---------------- lookup engines and EAL ----------------
  logic lk_in_valid, lk_in_ready;
  input_rec_t lk_in_rec;
  logic [IN_ID_W-1:0] lk_in_id;
  logic lk_out_valid, lk_out_ready, lk_out_popular;
  input_rec_t lk_out_rec;
  logic [IN_ID_W-1:0] lk_out_id;
  logic [NUM_SPARSE-1:0] lk_out_hit;
  logic [NUM_SPARSE-1:0][INDEX_W-1:0] lk_out_hot_idx;

  logic [ENGINES-1:0]               ld_valid;
  logic [ENGINES-1:0][SLOT_W-1:0]   ld_slot;
  logic [ENGINES-1:0][BANK_W-1:0]   ld_bank;
  logic [ENGINES-1:0][SET_W-1:0]    ld_set;
  logic [ENGINES-1:0][EAL_ID_W-1:0] ld_id;
  logic eal_go, eal_learn, eal_done, eal_busy;
  logic [EAL_NQUEUE-1:0] eal_hit;
  logic [EAL_NQUEUE-1:0][WAY_W-1:0] eal_way;

  lookup_engine_array #(
    .ENGINES(ENGINES), .QUEUE(EAL_NQUEUE), .BANKS(EAL_NBANKS),
    .BLOCKS(EAL_NBLOCKS), .WAYS(EAL_NWAYS)
  ) u_lk (
    .clk           (clk),
    .rst_n         (rst_n),
    .learn_i       (learn),
    .in_valid_i    (lk_in_valid),
    .in_ready_o    (lk_in_ready),
    .in_rec_i      (lk_in_rec),
    .in_id_i       (lk_in_id),
    .out_valid_o   (lk_out_valid),
    .out_ready_i   (lk_out_ready),
    .out_rec_o     (lk_out_rec),
    .out_id_o      (lk_out_id),
    .out_popular_o (lk_out_popular),
    .out_hit_o     (lk_out_hit),
    .out_hot_idx_o (lk_out_hot_idx),
    .eal_ready_i   (eal_ready_o),
    .eal_ld_valid_o(ld_valid),
    .eal_ld_slot_o (ld_slot),
    .eal_ld_bank_o (ld_bank),
    .eal_ld_set_o  (ld_set),
    .eal_ld_id_o   (ld_id),
    .eal_go_o      (eal_go),
    .eal_learn_o   (eal_learn),
    .eal_done_i    (eal_done),
    .eal_hit_i     (eal_hit),
    .eal_way_i     (eal_way)
  );

  eal #(
    .BANKS(EAL_NBANKS), .BLOCKS(EAL_NBLOCKS), .WAYS(EAL_NWAYS),
    .QUEUE(EAL_NQUEUE), .LOAD_W(ENGINES)
  ) u_eal (
    .clk         (clk),
    .rst_n       (rst_n),
    .ready_o     (eal_ready_o),
    .ld_valid_i  (ld_valid),
    .ld_slot_i   (ld_slot),
    .ld_bank_i   (ld_bank),
    .ld_set_i    (ld_set),
    .ld_id_i     (ld_id),
    .go_i        (eal_go),
    .learn_i     (eal_learn),
    .busy_o      (eal_busy),
    .done_o      (eal_done),
    .res_hit_o   (eal_hit),
    .res_way_o   (eal_way),
    .last_iters_o(eal_iters_o)
  );

  // ---------------- input eDRAM ----------------
  logic ed_we;
  logic [IN_ID_W-1:0] ed_waddr;
  input_rec_t ed_wdata;

  input_edram #(.DEPTH(EDRAM_DEPTH)) u_edram (
    .clk    (clk),
    .we_i   (ed_we),
    .waddr_i(ed_waddr[$clog2(EDRAM_DEPTH)-1:0]),
    .wdata_i(ed_wdata),
    .re_i   (ed_re),
    .raddr_i(ed_raddr[$clog2(EDRAM_DEPTH)-1:0]),
    .rdata_o(ed_rdata)
  );

  // ---------------- reducer and embedding vector buffer ----------------
  logic red_valid, red_ready;
  logic [IN_ID_W-1:0] red_id;
  logic [TABLE_W-1:0] red_table;
  emb_vec_t red_vec;
  logic evb_valid, evb_ready;
  logic [IN_ID_W-1:0] evb_id;
  logic [TABLE_W-1:0] evb_table;
  emb_vec_t evb_vec;
  logic [$clog2(EVB_DEPTH+1)-1:0] evb_count;

  reducer u_red (
    .clk           (clk),
    .rst_n         (rst_n),
    .rsp_valid_i   (rsp_valid_i),
    .rsp_ready_o   (rsp_ready_o),
    .rsp_tag_i     (rsp_i.tag),
    .rsp_beat_i    (rsp_i.beat),
    .rsp_data_i    (rsp_i.data),
    .out_valid_o   (red_valid),
    .out_ready_i   (red_ready),
    .out_input_id_o(red_id),
    .out_table_o   (red_table),
    .out_vec_o     (red_vec)
  );

  emb_vector_buffer u_evb (
    .clk           (clk),
    .rst_n         (rst_n),
    .in_valid_i    (red_valid),
    .in_ready_o    (red_ready),
    .in_input_id_i (red_id),
    .in_table_i    (red_table),
    .in_vec_i      (red_vec),
    .out_valid_o   (evb_valid),
    .out_ready_i   (evb_ready),
    .out_input_id_o(evb_id),
    .out_table_o   (evb_table),
    .out_vec_o     (evb_vec),
    .count_o       (evb_count)
  );

  assign vec_sent = evb_valid && evb_ready;
  assign host_ready_o = disp_host_ready && classify;

  // ---------------- data dispatcher ----------------
  data_dispatcher u_disp (
    .clk             (clk),
    .rst_n           (rst_n),
    .mode_i          (mode),
    .clear_i         (clear),
    .cfg_valid_i     (cfg_valid_i),
    .cfg_idx_i       (cfg_idx_i),
    .cfg_addr_i      (cfg_addr_i),
    .host_valid_i    (host_valid_i && classify),
    .host_ready_o    (disp_host_ready),
    .host_rec_i      (host_rec_i),
    .sch_valid_i     (sch_valid),
    .sch_ready_o     (sch_ready),
    .sch_rec_i       (sch_rec),
    .sch_id_i        (sch_id),
    .lk_in_valid_o   (lk_in_valid),
    .lk_in_ready_i   (lk_in_ready),
    .lk_in_rec_o     (lk_in_rec),
    .lk_in_id_o      (lk_in_id),
    .lk_out_valid_i  (lk_out_valid),
    .lk_out_ready_o  (lk_out_ready),
    .lk_out_rec_i    (lk_out_rec),
    .lk_out_id_i     (lk_out_id),
    .lk_out_popular_i(lk_out_popular),
    .lk_out_hit_i    (lk_out_hit),
    .lk_out_hot_idx_i(lk_out_hot_idx),
    .ed_we_o         (ed_we),
    .ed_waddr_o      (ed_waddr),
    .ed_wdata_o      (ed_wdata),
    .req_valid_o     (req_valid_o),
    .req_ready_i     (req_ready_i),
    .req_o           (req_o),
    .evb_valid_i     (evb_valid),
    .evb_ready_o     (evb_ready),
    .evb_input_id_i  (evb_id),
    .evb_table_i     (evb_table),
    .evb_vec_i       (evb_vec),
    .gpu_valid_o     (gpu_valid_o),
    .gpu_ready_i     (gpu_ready_i),
    .gpu_o           (gpu_o),
    .n_popular_o     (n_popular_o),
    .n_nonpop_o      (n_nonpop_o),
    .n_dma_o         (n_dma_o),
    .n_gpu_o         (n_gpu_o)
  );
endmodule
