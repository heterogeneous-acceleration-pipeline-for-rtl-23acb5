// memory_controller: the Memory Controller of the data dispatcher. For every
// lookup of a non-popular input it issues the read that fetches the embedding
// row: a gpu_rd to a GPU when the row is hot (its copy lives in every GPU's
// memory), a dma_rd to the host's DMA engine when it lives only in CPU memory.
//
// How it works: an accepted input carries, per embedding table t, the lookup
// engines' answer (hit_i[t]) and the row (hot_idx_i[t]: the hot-table position on
// a hit, the original index on a miss). The controller walks t = 0..TABLES-1,
// one request per cycle. A dma_rd addresses cpu_base[t] + index * ROW_BYTES and
// asks for ROW_BYTES bytes. A gpu_rd names the device and the hot-table row; it
// also carries gpu_base[t] + row * ROW_BYTES. GPUs are picked round robin so
// that the hot reads spread over all devices (the paper balances HBM load this
// way). Every request is tagged with the input, the table, the pooling
// operation (v_add) and first/last of the bag; with one index per table every
// bag is one row. Walking the tables in order, one per cycle, is this design's
// choice.
//
// Interface: in_* valid/ready (ready only when idle), req_* valid/ready.
// Timing: TABLES request cycles per input when req_ready_i stays high.
module memory_controller
  import hotline_pkg::*;
#(
  parameter int unsigned TABLES = NUM_SPARSE,
  parameter int unsigned GPUS   = NUM_GPUS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [TABLES-1:0][ADDR_W-1:0] cpu_base_i,
  input  logic [TABLES-1:0][ADDR_W-1:0] gpu_base_i,
  input  logic                          in_valid_i,
  output logic                          in_ready_o,
  input  logic [IN_ID_W-1:0]            in_id_i,
  input  logic [TABLES-1:0]             in_hit_i,
  input  logic [TABLES-1:0][INDEX_W-1:0] in_hot_idx_i,
  output logic                          req_valid_o,
  input  logic                          req_ready_i,
  output mem_req_t                      req_o,
  output logic [31:0]                   n_dma_o,
  output logic [31:0]                   n_gpu_o
);
  localparam int unsigned T_W = $clog2(TABLES);
  localparam int unsigned G_W = (GPUS > 1) ? $clog2(GPUS) : 1;

  logic                          busy;
  logic [T_W-1:0]                t;
  logic [IN_ID_W-1:0]            id_q;
  logic [TABLES-1:0]             hit_q;
  logic [TABLES-1:0][INDEX_W-1:0] idx_q;
  logic [G_W-1:0]                rr;

  assign in_ready_o  = !busy;
  assign req_valid_o = busy;

  always_comb begin
    logic [ADDR_W-1:0] off;
    off = ADDR_W'(idx_q[t]) * ADDR_W'(ROW_BYTES);
    req_o              = '0;
    req_o.nbytes       = 16'(ROW_BYTES);
    req_o.sparse_idx   = idx_q[t];
    req_o.tag.input_id = id_q;
    req_o.tag.table_no = TABLE_W'(t);
    req_o.tag.red_op   = OP_V_ADD;
    req_o.tag.first    = 1'b1;
    req_o.tag.last     = 1'b1;
    if (hit_q[t]) begin
      req_o.op     = OP_GPU_RD;
      req_o.gpu_id = 8'(rr);
      req_o.addr   = gpu_base_i[t] + off;
    end else begin
      req_o.op     = OP_DMA_RD;
      req_o.addr   = cpu_base_i[t] + off;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      t       <= '0;
      rr      <= '0;
      n_dma_o <= '0;
      n_gpu_o <= '0;
    end else if (!busy) begin
      if (in_valid_i) begin
        busy  <= 1'b1;
        t     <= '0;
        id_q  <= in_id_i;
        hit_q <= in_hit_i;
        idx_q <= in_hot_idx_i;
      end
    end else if (req_ready_i) begin
      if (hit_q[t]) begin
        rr      <= (int'(rr) == GPUS - 1) ? '0 : rr + 1'b1;
        n_gpu_o <= n_gpu_o + 1'b1;
      end else begin
        n_dma_o <= n_dma_o + 1'b1;
      end
      if (int'(t) == TABLES - 1) busy <= 1'b0;
      else                       t <= t + 1'b1;
    end
  end
endmodule
