// data_dispatcher: the hub between the streaming interface and the rest of the
// accelerator. It holds the paper's three parts -- Address Registers, Memory
// Controller, Input Classifier -- and the two multiplexers that share the
// streaming interface.
//
// How it works, by mode (mode_i from the scheduler):
//  * classify (mode_i = 0): training inputs from the host go to the lookup
//    engines; their answers go to the input classifier, which sends popular
//    inputs to the GPUs and writes non-popular ones into the input eDRAM.
//  * gather (mode_i = 1): non-popular inputs read back from the eDRAM by the
//    scheduler go to the lookup engines again, now only to learn which of their
//    rows are hot and where. Each answered input is sent to the GPUs (its dense
//    features and label) and handed to the memory controller, which requests
//    its embedding rows (gpu_rd or dma_rd).
// Towards the GPUs one stream carries, by priority, pooled embedding vectors from
// the embedding vector buffer, non-popular input records and popular input
// records. From the host side, s_wr writes go to the address registers and row
// responses go to the reducer (outside this block). Input ids: in classify mode
// the position in the mini-batch (counted here from clear_i), in gather mode the
// position in the non-popular micro-batch (given by the scheduler).
// The priority order and the id numbering are this design's choices.
//
// Timing: routing is combinational except for one record register on the
// non-popular path to the GPUs.
module data_dispatcher
  import hotline_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mode_i,
  input  logic                clear_i,
  // s_wr from the driver
  input  logic                cfg_valid_i,
  input  logic [7:0]          cfg_idx_i,
  input  logic [ADDR_W-1:0]   cfg_addr_i,
  // training inputs from the host
  input  logic                host_valid_i,
  output logic                host_ready_o,
  input  input_rec_t          host_rec_i,
  // non-popular inputs read back by the scheduler
  input  logic                sch_valid_i,
  output logic                sch_ready_o,
  input  input_rec_t          sch_rec_i,
  input  logic [IN_ID_W-1:0]  sch_id_i,
  // lookup engine array
  output logic                lk_in_valid_o,
  input  logic                lk_in_ready_i,
  output input_rec_t          lk_in_rec_o,
  output logic [IN_ID_W-1:0]  lk_in_id_o,
  input  logic                lk_out_valid_i,
  output logic                lk_out_ready_o,
  input  input_rec_t          lk_out_rec_i,
  input  logic [IN_ID_W-1:0]  lk_out_id_i,
  input  logic                lk_out_popular_i,
  input  logic [NUM_SPARSE-1:0] lk_out_hit_i,
  input  logic [NUM_SPARSE-1:0][INDEX_W-1:0] lk_out_hot_idx_i,
  // input eDRAM write port
  output logic                ed_we_o,
  output logic [IN_ID_W-1:0]  ed_waddr_o,
  output input_rec_t          ed_wdata_o,
  // gather requests to the streaming interface
  output logic                req_valid_o,
  input  logic                req_ready_i,
  output mem_req_t            req_o,
  // pooled vectors from the embedding vector buffer
  input  logic                evb_valid_i,
  output logic                evb_ready_o,
  input  logic [IN_ID_W-1:0]  evb_input_id_i,
  input  logic [TABLE_W-1:0]  evb_table_i,
  input  emb_vec_t            evb_vec_i,
  // stream to the GPUs
  output logic                gpu_valid_o,
  input  logic                gpu_ready_i,
  output gpu_beat_t           gpu_o,
  // statistics
  output logic [IN_ID_W:0]    n_popular_o,
  output logic [IN_ID_W:0]    n_nonpop_o,
  output logic [31:0]         n_dma_o,
  output logic [31:0]         n_gpu_o
);
  // ---------------- address registers ----------------
  logic [NUM_SPARSE-1:0][ADDR_W-1:0] cpu_base, gpu_base;

  address_registers u_areg (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_valid_i(cfg_valid_i),
    .wr_idx_i  (cfg_idx_i),
    .wr_addr_i (cfg_addr_i),
    .cpu_base_o(cpu_base),
    .gpu_base_o(gpu_base)
  );

  // ---------------- source mux to the lookup engines ----------------
  logic [IN_ID_W-1:0] host_id;

  always_ff @(posedge clk) begin
    if (!rst_n || clear_i) host_id <= '0;
    else if (!mode_i && host_valid_i && lk_in_ready_i) host_id <= host_id + 1'b1;
  end

  assign lk_in_valid_o = mode_i ? sch_valid_i : host_valid_i;
  assign lk_in_rec_o   = mode_i ? sch_rec_i   : host_rec_i;
  assign lk_in_id_o    = mode_i ? sch_id_i    : host_id;
  assign host_ready_o  = !mode_i && lk_in_ready_i;
  assign sch_ready_o   =  mode_i && lk_in_ready_i;

  // ---------------- input classifier (classify mode) ----------------
  logic       cls_ready, pop_valid, pop_ready;
  input_rec_t pop_rec;
  logic [IN_ID_W-1:0] pop_id;
  logic       np_we;

  input_classifier u_cls (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear_i     (clear_i),
    .in_valid_i  (lk_out_valid_i && !mode_i),
    .in_ready_o  (cls_ready),
    .in_rec_i    (lk_out_rec_i),
    .in_id_i     (lk_out_id_i),
    .in_popular_i(lk_out_popular_i),
    .pop_valid_o (pop_valid),
    .pop_ready_i (pop_ready),
    .pop_rec_o   (pop_rec),
    .pop_id_o    (pop_id),
    .np_we_o     (np_we),
    .np_addr_o   (ed_waddr_o),
    .np_rec_o    (ed_wdata_o),
    .n_popular_o (n_popular_o),
    .n_nonpop_o  (n_nonpop_o)
  );
  assign ed_we_o = np_we;

  // ---------------- memory controller (gather mode) ----------------
  logic mc_ready;
  logic np_valid_q;
  input_rec_t np_rec_q;
  logic [IN_ID_W-1:0] np_id_q;
  logic np_ready;

  memory_controller u_mc (
    .clk         (clk),
    .rst_n       (rst_n),
    .cpu_base_i  (cpu_base),
    .gpu_base_i  (gpu_base),
    .in_valid_i  (lk_out_valid_i && mode_i && !np_valid_q),
    .in_ready_o  (mc_ready),
    .in_id_i     (lk_out_id_i),
    .in_hit_i    (lk_out_hit_i),
    .in_hot_idx_i(lk_out_hot_idx_i),
    .req_valid_o (req_valid_o),
    .req_ready_i (req_ready_i),
    .req_o       (req_o),
    .n_dma_o     (n_dma_o),
    .n_gpu_o     (n_gpu_o)
  );

  assign lk_out_ready_o = mode_i ? (mc_ready && !np_valid_q) : cls_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      np_valid_q <= 1'b0;
    end else begin
      if (np_valid_q && np_ready) np_valid_q <= 1'b0;
      if (mode_i && lk_out_valid_i && lk_out_ready_o) begin
        np_valid_q <= 1'b1;
        np_rec_q   <= lk_out_rec_i;
        np_id_q    <= lk_out_id_i;
      end
    end
  end

  // ---------------- output mux to the GPUs ----------------
  always_comb begin
    gpu_o       = '0;
    evb_ready_o = 1'b0;
    np_ready    = 1'b0;
    pop_ready   = 1'b0;
    gpu_valid_o = 1'b0;
    if (evb_valid_i) begin
      gpu_valid_o     = 1'b1;
      gpu_o.kind      = GK_EMB_VEC;
      gpu_o.input_id  = evb_input_id_i;
      gpu_o.table_no  = evb_table_i;
      gpu_o.vec       = evb_vec_i;
      evb_ready_o     = gpu_ready_i;
    end else if (np_valid_q) begin
      gpu_valid_o     = 1'b1;
      gpu_o.kind      = GK_NONPOP_INPUT;
      gpu_o.input_id  = np_id_q;
      gpu_o.rec       = np_rec_q;
      np_ready        = gpu_ready_i;
    end else if (pop_valid) begin
      gpu_valid_o     = 1'b1;
      gpu_o.kind      = GK_POP_INPUT;
      gpu_o.input_id  = pop_id;
      gpu_o.rec       = pop_rec;
      pop_ready       = gpu_ready_i;
    end
  end
endmodule
