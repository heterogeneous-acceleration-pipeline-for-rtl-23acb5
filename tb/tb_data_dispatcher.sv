// tb_data_dispatcher: acts as the host, the lookup engines, the eDRAM, the DMA
// engine and the GPUs around the data dispatcher.
//  * s_wr writes set per-table CPU and GPU base addresses.
//  * classify mode: host inputs must reach the lookup engines with ids 0, 1, ...;
//    answered inputs must go to the GPUs (popular) or to successive eDRAM records
//    (non-popular), and the counters must match.
//  * gather mode: scheduler inputs must reach the lookup engines with their ids;
//    every answered input must reach the GPUs as a non-popular record and produce
//    26 row requests: gpu_rd (devices round robin, address gpu_base + row * 64)
//    for hot rows, dma_rd (cpu_base + index * 64, 64 bytes) for the others.
//  * pooled vectors from the embedding vector buffer must pass to the GPUs
//    unchanged and take priority over input records.
// GPU and request back-pressure is random.
module tb_data_dispatcher;
  import hotline_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mode, clear, cfg_valid;
  logic [7:0] cfg_idx;
  logic [ADDR_W-1:0] cfg_addr;
  logic host_valid, host_ready, sch_valid, sch_ready;
  input_rec_t host_rec, sch_rec, lk_in_rec, lk_out_rec, ed_wdata;
  logic [IN_ID_W-1:0] sch_id, lk_in_id, lk_out_id, ed_waddr, evb_id;
  logic lk_in_valid, lk_in_ready, lk_out_valid, lk_out_ready, lk_out_pop;
  logic [NUM_SPARSE-1:0] lk_out_hit;
  logic [NUM_SPARSE-1:0][INDEX_W-1:0] lk_out_hot;
  logic ed_we, req_valid, req_ready, evb_valid, evb_ready, gpu_valid, gpu_ready;
  mem_req_t req;
  logic [TABLE_W-1:0] evb_tbl;
  emb_vec_t evb_vec;
  gpu_beat_t gpu;
  logic [IN_ID_W:0] n_pop, n_np;
  logic [31:0] n_dma, n_gpu;

  data_dispatcher dut (
    .clk(clk), .rst_n(rst_n), .mode_i(mode), .clear_i(clear),
    .cfg_valid_i(cfg_valid), .cfg_idx_i(cfg_idx), .cfg_addr_i(cfg_addr),
    .host_valid_i(host_valid), .host_ready_o(host_ready), .host_rec_i(host_rec),
    .sch_valid_i(sch_valid), .sch_ready_o(sch_ready), .sch_rec_i(sch_rec), .sch_id_i(sch_id),
    .lk_in_valid_o(lk_in_valid), .lk_in_ready_i(lk_in_ready), .lk_in_rec_o(lk_in_rec),
    .lk_in_id_o(lk_in_id), .lk_out_valid_i(lk_out_valid), .lk_out_ready_o(lk_out_ready),
    .lk_out_rec_i(lk_out_rec), .lk_out_id_i(lk_out_id), .lk_out_popular_i(lk_out_pop),
    .lk_out_hit_i(lk_out_hit), .lk_out_hot_idx_i(lk_out_hot),
    .ed_we_o(ed_we), .ed_waddr_o(ed_waddr), .ed_wdata_o(ed_wdata),
    .req_valid_o(req_valid), .req_ready_i(req_ready), .req_o(req),
    .evb_valid_i(evb_valid), .evb_ready_o(evb_ready), .evb_input_id_i(evb_id),
    .evb_table_i(evb_tbl), .evb_vec_i(evb_vec),
    .gpu_valid_o(gpu_valid), .gpu_ready_i(gpu_ready), .gpu_o(gpu),
    .n_popular_o(n_pop), .n_nonpop_o(n_np), .n_dma_o(n_dma), .n_gpu_o(n_gpu));

  int checks = 0, failures = 0;
  logic [ADDR_W-1:0] cpu_base[NUM_SPARSE], gpu_base[NUM_SPARSE];
  input_rec_t exp_pop_rec[$], exp_np_rec[$], exp_ed_rec[$];
  int exp_pop_id[$], exp_np_id[$];
  mem_req_t exp_req[$];
  int rr = 0, n_emb = 0, n_prio = 0, n_hostin = 0;

  function automatic input_rec_t rnd_rec();
    input_rec_t r;
    for (int i = 0; i < $bits(input_rec_t) / 32; i++) r[i*32 +: 32] = $urandom();
    return r;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("%s", msg);
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // back-pressure, changed right after each edge
  always @(posedge clk) begin
    gpu_ready <= ($urandom_range(0, 3) != 0);
    req_ready <= ($urandom_range(0, 3) != 0);
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    // expectations first: a popular input reaches the GPUs in its own cycle
    if (lk_out_valid && lk_out_ready) begin
      if (!mode) begin
        if (lk_out_pop) begin exp_pop_rec.push_back(lk_out_rec); exp_pop_id.push_back(int'(lk_out_id)); end
        else exp_ed_rec.push_back(lk_out_rec);
      end else begin
        exp_np_rec.push_back(lk_out_rec); exp_np_id.push_back(int'(lk_out_id));
        for (int t = 0; t < NUM_SPARSE; t++) begin
          mem_req_t q;
          q = '0;
          q.nbytes = 16'(ROW_BYTES);
          q.sparse_idx = lk_out_hot[t];
          q.tag.input_id = lk_out_id; q.tag.table_no = TABLE_W'(t);
          q.tag.red_op = OP_V_ADD; q.tag.first = 1; q.tag.last = 1;
          if (lk_out_hit[t]) begin
            q.op = OP_GPU_RD; q.gpu_id = 8'(rr % NUM_GPUS); rr++;
            q.addr = gpu_base[t] + ADDR_W'(lk_out_hot[t]) * 64;
          end else begin
            q.op = OP_DMA_RD; q.addr = cpu_base[t] + ADDR_W'(lk_out_hot[t]) * 64;
          end
          exp_req.push_back(q);
        end
      end
    end
    if (gpu_valid && evb_valid) begin
      checks++; n_prio++;
      if (gpu.kind != GK_EMB_VEC || gpu.vec != evb_vec || gpu.input_id != evb_id ||
          gpu.table_no != evb_tbl || evb_ready != gpu_ready)
        fail("pooled vector not passed with priority");
    end
    if (gpu_valid && gpu_ready) begin
      if (gpu.kind == GK_POP_INPUT) begin
        checks++;
        if (exp_pop_rec.size() == 0 || gpu.rec != exp_pop_rec.pop_front() ||
            int'(gpu.input_id) != exp_pop_id.pop_front()) fail("popular record mismatch");
      end else if (gpu.kind == GK_NONPOP_INPUT) begin
        checks++;
        if (exp_np_rec.size() == 0 || gpu.rec != exp_np_rec.pop_front() ||
            int'(gpu.input_id) != exp_np_id.pop_front()) fail("non-popular record mismatch");
      end else n_emb++;
    end
    if (ed_we) begin
      checks++;
      if (exp_ed_rec.size() == 0 || ed_wdata != exp_ed_rec.pop_front() ||
          int'(ed_waddr) != int'(n_np)) fail("eDRAM write mismatch");
    end
    if (req_valid && req_ready) begin
      checks++;
      if (exp_req.size() == 0 || req != exp_req.pop_front()) begin
        fail($sformatf("request mismatch op %0d addr %h gpu %0d", req.op, req.addr, req.gpu_id));
      end
    end
    if (lk_in_valid && lk_in_ready) begin
      checks++;
      if (!mode && (lk_in_rec != host_rec || int'(lk_in_id) != n_hostin)) fail("host input not forwarded");
      if (mode && (lk_in_rec != sch_rec || lk_in_id != sch_id)) fail("scheduler input not forwarded");
      if (!mode) n_hostin++;
    end
  end

  // lookup engine stand-in: answers with random popularity and hits
  task automatic lk_answer(bit pop);
    @(negedge clk);
    lk_out_valid = 1; lk_out_rec = rnd_rec(); lk_out_id = IN_ID_W'($urandom());
    lk_out_pop = pop;
    for (int t = 0; t < NUM_SPARSE; t++) begin
      lk_out_hit[t] = pop ? 1'b1 : 1'($urandom_range(0, 1));
      lk_out_hot[t] = 32'($urandom_range(0, 1 << 20));
    end
    #1;
    while (!lk_out_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    lk_out_valid = 0;
  endtask

  initial begin
    mode = 0; clear = 0; cfg_valid = 0; cfg_idx = 0; cfg_addr = 0;
    host_valid = 0; host_rec = '0; sch_valid = 0; sch_rec = '0; sch_id = '0;
    lk_in_ready = 1; lk_out_valid = 0; lk_out_rec = '0; lk_out_id = '0; lk_out_pop = 0;
    lk_out_hit = '0; lk_out_hot = '0; evb_valid = 0; evb_id = '0; evb_tbl = '0; evb_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // s_wr: CPU and GPU base addresses
    for (int i = 0; i < 2 * NUM_SPARSE; i++) begin
      @(negedge clk);
      cfg_valid = 1; cfg_idx = 8'(i);
      cfg_addr = {$urandom(), $urandom()} & 64'hFFFF_FFFF_FFFF_0000;
      if (i < NUM_SPARSE) cpu_base[i] = cfg_addr; else gpu_base[i - NUM_SPARSE] = cfg_addr;
    end
    @(negedge clk);
    cfg_valid = 0;
    clear = 1;
    @(negedge clk);
    clear = 0;
    // classify mode: host inputs in, answers out
    fork
      for (int i = 0; i < 30; i++) begin
        @(negedge clk);
        host_valid = 1; host_rec = rnd_rec();
        lk_in_ready = $urandom_range(0, 1);
        #1;
        while (!host_ready) begin @(negedge clk); lk_in_ready = $urandom_range(0, 1); #1; end
        @(posedge clk);
      end
      for (int i = 0; i < 40; i++) lk_answer($urandom_range(0, 2) != 0);
    join
    @(negedge clk);
    host_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (int'(n_pop) + int'(n_np) != 40 || exp_pop_rec.size() != 0 || exp_ed_rec.size() != 0)
      fail($sformatf("classify counts %0d + %0d", n_pop, n_np));
    // gather mode
    mode = 1;
    fork
      for (int i = 0; i < 10; i++) begin
        @(negedge clk);
        sch_valid = 1; sch_rec = rnd_rec(); sch_id = IN_ID_W'(i);
        #1;
        while (!sch_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      for (int i = 0; i < 20; i++) lk_answer(0);
      for (int i = 0; i < 60; i++) begin
        @(negedge clk);
        evb_valid = 1; evb_id = IN_ID_W'($urandom()); evb_tbl = TABLE_W'($urandom());
        for (int k = 0; k < EMB_DIM; k++) evb_vec[k] = $urandom();
        #1;
        while (!evb_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        @(negedge clk);
        evb_valid = 0;
        repeat ($urandom_range(0, 20)) @(negedge clk);
      end
    join
    @(negedge clk);
    sch_valid = 0;
    repeat (2000) @(negedge clk);
    checks++;
    if (exp_req.size() != 0 || exp_np_rec.size() != 0) fail("requests or records missing");
    checks++;
    if (n_emb != 60 || n_prio == 0 || int'(n_dma) + int'(n_gpu) != 20 * NUM_SPARSE)
      fail($sformatf("vectors %0d, priority cases %0d, dma %0d gpu %0d", n_emb, n_prio, n_dma, n_gpu));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
