// hotline_tb_body.svh: the end-to-end test of hotline_top, shared by the small
// testbench (tb_hotline_top) and the full-size one (tb_hotline_full). The
// including module declares TB_BANKS, TB_SETS, TB_WAYS, TB_SE, TB_N (inputs per
// mini-batch) and TB_NB (mini-batches), the clock clk, reset rst_n and the DUT
// signals, and instantiates the DUT.
//
// Models around the accelerator:
//  * host: mini-batches of inputs whose sparse indices are drawn mostly from a
//    small hot set per table, with a few one-off indices; start/learn_phase
//    control per mini-batch; s_wr writes of random table base addresses.
//  * reference EAL (hotline_ref_pkg::eal_model), fed with every host input's
//    lookups in input order, learning in the sampled mini-batches; it predicts
//    each input's popularity and, for gpu_rd, which row sits at a hot position.
//  * memory: takes requests with random back-pressure, checks dma_rd / gpu_rd
//    addresses (base + row * 64) and GPU round robin, answers in request order
//    with the row's content row_word(table, index, k).
//  * GPUs: random back-pressure; check popular records, non-popular records and
//    every pooled vector against the host's data.
// Every mechanism is counted and the test fails if one never occurred: learning
// mini-batches, popular and non-popular inputs, dma_rd and gpu_rd, round-robin
// wrap, multi-iteration EAL drains, GPU back-pressure, pooled vectors winning
// over input records, and a mini-batch whose inputs are all popular (gather
// step skipped).

  localparam int BANK_W = $clog2(TB_BANKS);
  localparam int SET_W  = $clog2(TB_SETS);
  localparam int WAY_W  = $clog2(TB_WAYS);
  localparam int HOTN   = 4;

  int checks = 0, failures = 0;
  hotline_ref_pkg::eal_model eal_m;
  logic [ADDR_W-1:0] cpu_base[NUM_SPARSE], gpu_base[NUM_SPARSE];
  input_rec_t host_recs[$];
  bit         exp_pop[$];
  int         np_list[$];
  mem_req_t   pend[$];
  int         rr = 0, cur_learn = 0, learn_batches = 0;
  int         got_pop = 0, got_np = 0, got_vec = 0;
  // mechanism counters
  int m_learn = 0, m_pop = 0, m_np = 0, m_dma = 0, m_gpu = 0, m_wrap = 0, m_iters = 0;
  int m_stall = 0, m_prio = 0, m_skip = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("%0t %s", $time, msg);
  endtask

  function automatic logic [31:0] row_word(int t, logic [31:0] idx, int k);
    return (idx * 32'h9E37_79B1) ^ (32'(t) << 24) ^ (32'(k) * 32'h0101_0101) ^ 32'h5A5A_0000;
  endfunction

  function automatic void ref_pos(int t, logic [31:0] idx, output int b, output int s,
                                  output logic [13:0] id, output logic [39:0] key);
    logic [39:0] h;
    key = hotline_ref_pkg::ref_key(8'(t), idx);
    h   = hotline_ref_pkg::ref_hash(key);
    b   = int'(h[BANK_W-1:0]);
    s   = int'(h[BANK_W +: SET_W]);
    id  = key[13:0];
  endfunction

  initial begin
    repeat (TB_WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // back-pressure, changed right after each edge
  always @(posedge clk) begin
    gpu_ready <= ($urandom_range(0, 3) != 0);
    req_ready <= ($urandom_range(0, 4) != 0);
  end

  // memory: requests in, responses out in order
  always @(posedge clk) if (rst_n) begin
    if (rsp_valid && rsp_ready) begin
      void'(pend.pop_front());
    end
    if (req_valid && req_ready) begin
      int t;
      checks++;
      t = int'(req.tag.table_no);
      if (req.op == OP_DMA_RD) begin
        m_dma++;
        if (req.addr != cpu_base[t] + ADDR_W'(req.sparse_idx) * 64 || req.nbytes != 16'(ROW_BYTES))
          fail("dma_rd address or size wrong");
      end else if (req.op == OP_GPU_RD) begin
        m_gpu++;
        if (int'(req.gpu_id) != rr % NUM_GPUS) fail("gpu_rd not round robin");
        if (rr % NUM_GPUS == NUM_GPUS - 1) m_wrap++;
        rr++;
        if (req.addr != gpu_base[t] + ADDR_W'(req.sparse_idx) * 64) fail("gpu_rd address wrong");
      end else fail("unexpected request opcode");
      pend.push_back(req);
    end
  end

  always_comb begin
    rsp_valid = 1'b0;
    rsp = '0;
    if (pend.size() != 0) begin
      mem_req_t q;
      logic [31:0] idx;
      int tt;
      q = pend[0];
      rsp_valid = 1'b1;
      rsp.tag = q.tag;
      rsp.beat = 8'd0;
      idx = q.sparse_idx;
      tt = int'(q.tag.table_no);
      if (q.op == OP_GPU_RD) begin
        // the hot position names a bank, set and way of the EAL; the row stored
        // there is the one the reference model placed there
        int b, s, w;
        logic [39:0] key;
        w = int'(q.sparse_idx[WAY_W-1:0]);
        s = int'(q.sparse_idx[WAY_W +: SET_W]);
        b = int'(q.sparse_idx[WAY_W + SET_W +: BANK_W]);
        key = eal_m.full[eal_m.pos(b, s, w)];
        tt  = int'(key[7:0]);
        idx = key[39:8];
      end
      for (int k = 0; k < RED_LANES; k++) rsp.data[k] = row_word(tt, idx, k);
    end
  end

  // GPUs and host-side monitors
  always @(posedge clk) if (rst_n) begin
    if (gpu_valid && !gpu_ready) m_stall++;
    if (gpu_valid && gpu.kind == GK_EMB_VEC && (dut.u_disp.np_valid_q || dut.u_disp.pop_valid)) m_prio++;
    if (host_valid && host_ready) begin
      int id;
      bit all_hit;
      id = host_recs.size();
      host_recs.push_back(host_rec);
      all_hit = 1;
      for (int t = 0; t < NUM_SPARSE; t++) begin
        int b, s;
        int unsigned w;
        bit hit;
        logic [13:0] ident;
        logic [39:0] key;
        ref_pos(t, host_rec.sparse[t], b, s, ident, key);
        eal_m.access(b, s, ident, key, cur_learn, hit, w);
        all_hit &= hit;
      end
      exp_pop.push_back(all_hit);
      if (!all_hit) np_list.push_back(id);
    end
    if (gpu_valid && gpu_ready) begin
      checks++;
      case (gpu.kind)
        GK_POP_INPUT: begin
          got_pop++; m_pop++;
          if (int'(gpu.input_id) >= host_recs.size() || gpu.rec != host_recs[gpu.input_id] ||
              !exp_pop[gpu.input_id]) fail($sformatf("popular input %0d wrong", gpu.input_id));
        end
        GK_NONPOP_INPUT: begin
          got_np++; m_np++;
          if (int'(gpu.input_id) >= np_list.size() || gpu.rec != host_recs[np_list[gpu.input_id]])
            fail($sformatf("non-popular input %0d wrong", gpu.input_id));
        end
        GK_EMB_VEC: begin
          got_vec++;
          if (int'(gpu.input_id) >= np_list.size() || int'(gpu.table_no) >= NUM_SPARSE)
            fail("pooled vector with bad id");
          else begin
            input_rec_t r;
            r = host_recs[np_list[gpu.input_id]];
            for (int k = 0; k < EMB_DIM; k++)
              if (gpu.vec[k] != row_word(int'(gpu.table_no), r.sparse[gpu.table_no], k)) begin
                fail($sformatf("pooled vector %0d/%0d element %0d wrong", gpu.input_id, gpu.table_no, k));
                break;
              end
          end
        end
        default: fail("bad GPU beat kind");
      endcase
    end
  end

  function automatic input_rec_t make_input(bit all_hot);
    input_rec_t r;
    for (int i = 0; i < $bits(input_rec_t) / 32; i++) r[i*32 +: 32] = $urandom();
    for (int t = 0; t < NUM_SPARSE; t++) begin
      if ($urandom_range(0, 99) < 97) r.sparse[t] = 32'($urandom_range(0, HOTN - 1));
      else r.sparse[t] = $urandom() | 32'h0001_0000;
      if (all_hot)  // pick a row the reference EAL holds
        for (int c = 0; c < 64; c++) begin
          int b, s;
          int unsigned w;
          bit hit;
          logic [13:0] ident;
          logic [39:0] key;
          ref_pos(t, 32'(c), b, s, ident, key);
          eal_m.access(b, s, ident, key, 0, hit, w);
          if (hit) begin r.sparse[t] = 32'(c); break; end
        end
    end
    return r;
  endfunction

  task automatic run_batch(int n, bit lp, bit all_hot);
    input_rec_t r;
    @(negedge clk);
    while (busy || !eal_ready) @(negedge clk);
    host_recs.delete(); exp_pop.delete(); np_list.delete();
    got_pop = 0; got_np = 0; got_vec = 0;
    cur_learn = lp && (learn_batches % TB_SE == 0);
    if (lp) learn_batches++;
    start = 1; batch_n = (IN_ID_W + 1)'(n); learn_phase = lp;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < n; i++) begin
      host_valid = 1; host_rec = make_input(all_hot);
      #1;
      while (!host_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      @(negedge clk);
      host_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (got_pop != int'(n_popular) || got_np != int'(n_nonpop) ||
        got_vec != int'(n_nonpop) * NUM_SPARSE || np_list.size() != int'(n_nonpop) ||
        int'(n_popular) + int'(n_nonpop) != n)
      fail($sformatf("mini-batch totals: pop %0d/%0d np %0d/%0d vec %0d", got_pop, n_popular,
                     got_np, n_nonpop, got_vec));
    if (cur_learn) m_learn++;
    if (n_nonpop == '0) begin
      m_skip++;
      checks++;
      if (gather_cycles != 0) fail("gather step not skipped");
    end
    if (eal_iters > 1) m_iters++;
    $display("mini-batch: %0d inputs, %0d popular, %0d non-popular, learn %0d, classify %0d cycles, gather %0d cycles",
             n, n_popular, n_nonpop, cur_learn, classify_cycles, gather_cycles);
  endtask

  initial begin
    eal_m = new(TB_BANKS, TB_SETS, TB_WAYS);
    start = 0; batch_n = '0; learn_phase = 0; cfg_valid = 0; cfg_idx = '0; cfg_addr = '0;
    host_valid = 0; host_rec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2 * NUM_SPARSE; i++) begin
      @(negedge clk);
      cfg_valid = 1; cfg_idx = 8'(i);
      cfg_addr = {$urandom(), $urandom()} & 64'h0000_FFFF_FFFF_F000;
      if (i < NUM_SPARSE) cpu_base[i] = cfg_addr; else gpu_base[i - NUM_SPARSE] = cfg_addr;
    end
    @(negedge clk);
    cfg_valid = 0;
    for (int b = 0; b < TB_NB; b++) run_batch(TB_N, b < TB_SE + 1, 0);
    run_batch(4, 0, 1);
    checks++;
    if (n_learned != 32'(m_learn)) fail("learned mini-batch count differs");
    $display("mechanisms: learn %0d popular %0d non-popular %0d dma_rd %0d gpu_rd %0d rr-wrap %0d multi-iteration %0d stall %0d priority %0d no-gather %0d",
             m_learn, m_pop, m_np, m_dma, m_gpu, m_wrap, m_iters, m_stall, m_prio, m_skip);
    checks++;
    if (m_learn == 0 || m_pop == 0 || m_np == 0 || m_dma == 0 || m_gpu == 0 || m_wrap == 0 ||
        m_iters == 0 || m_stall == 0 || m_prio == 0 || m_skip == 0)
      fail("a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
