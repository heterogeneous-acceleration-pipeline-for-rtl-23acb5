// tb_hotline_top: end-to-end test of the accelerator at reduced size (8 lookup
// engines, 4 EAL banks of 64 sets x 4 ways, 128-entry queue, 64-input eDRAM,
// one learning mini-batch in 2) so that every mechanism occurs many times in a
// short run. The checks and models are in hotline_tb_body.svh.
module tb_hotline_top;
  import hotline_pkg::*;

  localparam int TB_BANKS = 4, TB_SETS = 64, TB_WAYS = 4, TB_SE = 2;
  localparam int TB_N = 24, TB_NB = 6, TB_WATCHDOG = 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, learn_phase, busy, done, eal_ready, cfg_valid;
  logic [IN_ID_W:0] batch_n, n_popular, n_nonpop;
  logic [7:0] cfg_idx;
  logic [ADDR_W-1:0] cfg_addr;
  logic host_valid, host_ready, req_valid, req_ready, rsp_valid, rsp_ready, gpu_valid, gpu_ready;
  input_rec_t host_rec;
  mem_req_t req;
  mem_rsp_t rsp;
  gpu_beat_t gpu;
  logic [31:0] n_dma, n_gpu, n_learned, classify_cycles, gather_cycles;
  logic [15:0] eal_iters;

  hotline_top #(
    .ENGINES(8), .EAL_NBANKS(TB_BANKS), .EAL_NBLOCKS(TB_BANKS * TB_SETS * TB_WAYS),
    .EAL_NWAYS(TB_WAYS), .EAL_NQUEUE(128), .EDRAM_DEPTH(64), .SAMPLE_EVERY(TB_SE)
  ) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .batch_n_i(batch_n),
    .learn_phase_i(learn_phase), .busy_o(busy), .done_o(done), .eal_ready_o(eal_ready),
    .cfg_valid_i(cfg_valid), .cfg_idx_i(cfg_idx), .cfg_addr_i(cfg_addr),
    .host_valid_i(host_valid), .host_ready_o(host_ready), .host_rec_i(host_rec),
    .req_valid_o(req_valid), .req_ready_i(req_ready), .req_o(req),
    .rsp_valid_i(rsp_valid), .rsp_ready_o(rsp_ready), .rsp_i(rsp),
    .gpu_valid_o(gpu_valid), .gpu_ready_i(gpu_ready), .gpu_o(gpu),
    .n_popular_o(n_popular), .n_nonpop_o(n_nonpop), .n_dma_o(n_dma), .n_gpu_o(n_gpu),
    .n_learned_o(n_learned), .classify_cycles_o(classify_cycles),
    .gather_cycles_o(gather_cycles), .eal_iters_o(eal_iters));

`include "hotline_tb_body.svh"
endmodule
