// tb_scheduler: runs the scheduler through a series of mini-batches with a model
// of the input eDRAM (synchronous read, data held between reads) and stand-ins
// for the classifier counters and the GPU side.
// Checks: clear_o pulses with start_i; host inputs are taken only in the
// classify step; the gather step starts once every input is classified and
// streams eDRAM records 0 .. n_nonpop-1 in order with their ids under random
// back-pressure; done_o comes exactly when TABLES pooled vectors per non-popular
// input have been taken; a mini-batch with no non-popular input skips the
// gather step; in the learning phase one mini-batch in SAMPLE_EVERY is classified
// in learning mode and counted. Run with TABLES = 3 and SAMPLE_EVERY = 4.
module tb_scheduler;
  import hotline_pkg::*;

  localparam int SE = 4, TB_T = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, learn_phase, busy, done, mode, classify, clear, learn;
  logic [IN_ID_W:0] batch_n, n_pop, n_np;
  logic ed_re, sch_valid, sch_ready, vec_sent;
  logic [IN_ID_W-1:0] ed_raddr, sch_id;
  input_rec_t ed_rdata, sch_rec;
  logic [31:0] n_learned, c_cyc, g_cyc;

  scheduler #(.SAMPLE_EVERY(SE), .TABLES(TB_T)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .batch_n_i(batch_n),
    .learn_phase_i(learn_phase), .busy_o(busy), .done_o(done), .mode_o(mode),
    .classify_o(classify), .clear_o(clear), .learn_o(learn),
    .n_popular_i(n_pop), .n_nonpop_i(n_np),
    .ed_re_o(ed_re), .ed_raddr_o(ed_raddr), .ed_rdata_i(ed_rdata),
    .sch_valid_o(sch_valid), .sch_ready_i(sch_ready), .sch_rec_o(sch_rec), .sch_id_o(sch_id),
    .vec_sent_i(vec_sent), .n_learned_o(n_learned), .classify_cycles_o(c_cyc),
    .gather_cycles_o(g_cyc));

  int checks = 0, failures = 0;
  input_rec_t mem[64];
  int streamed = 0, sent = 0, need = 0, n_gather = 0, learn_seen = 0;
  bit in_batch = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("%0t %s", $time, msg);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // eDRAM model
  always @(posedge clk) if (ed_re) ed_rdata <= mem[ed_raddr];

  // GPU side: back-pressure and pooled vectors, changed right after each edge
  always @(posedge clk) begin
    sch_ready <= ($urandom_range(0, 2) != 0);
    vec_sent  <= 1'b0;
    if (mode && sent < need && (sent < need - 1 || streamed == int'(n_np)) && $urandom_range(0, 1)) begin
      vec_sent <= 1'b1;
      sent     <= sent + 1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (sch_valid && sch_ready) begin
      checks++;
      if (sch_rec != mem[streamed] || int'(sch_id) != streamed)
        fail($sformatf("stream item %0d wrong (id %0d)", streamed, sch_id));
      streamed++;
    end
    if (ed_re && int'(ed_raddr) >= int'(n_np)) fail("read past the non-popular inputs");
    if (mode) n_gather++;
    if (learn) learn_seen = 1;
    if (learn && !classify) fail("learning outside the classify step");
    if (done) begin
      checks++;
      if (sent != need || streamed != int'(n_np)) fail($sformatf("done early: %0d/%0d vectors", sent, need));
    end
  end

  task automatic run_batch(int n, int nn, bit lp, bit exp_learn);
    @(negedge clk);
    while (busy) @(negedge clk);
    for (int i = 0; i < 64; i++)
      for (int k = 0; k < $bits(input_rec_t) / 32; k++) mem[i][k*32 +: 32] = $urandom();
    streamed = 0; n_gather = 0; learn_seen = 0;
    start = 1; batch_n = (IN_ID_W + 1)'(n); learn_phase = lp;
    #1;
    checks++;
    if (!clear) fail("clear_o missing with start");
    @(negedge clk);
    start = 0;
    n_pop = '0; n_np = '0;
    sent = 0; need = nn * TB_T;
    // classify: inputs come in one by one
    for (int i = 0; i < n; i++) begin
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks++;
      if (!classify || mode) fail("not in classify step");
      if (i < nn) n_np = n_np + 1'b1; else n_pop = n_pop + 1'b1;
      @(negedge clk);
    end
    while (busy) @(negedge clk);
    checks++;
    if (learn_seen != exp_learn) fail($sformatf("learning mode %0d, expected %0d", learn_seen, exp_learn));
    checks++;
    if ((nn == 0) != (n_gather == 0)) fail("gather step taken or skipped wrongly");
    checks++;
    if (nn != 0 && g_cyc == 0) fail("no gather time recorded");
  endtask

  initial begin
    start = 0; batch_n = '0; learn_phase = 0; n_pop = '0; n_np = '0; ed_rdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 10; b++) run_batch($urandom_range(1, 40), 0, 1, (b % SE) == 0);
    for (int b = 0; b < 10; b++) begin
      int n;
      n = $urandom_range(1, 60);
      run_batch(n, $urandom_range(0, n), (b < 6), (b < 6) && ((b + 10) % SE) == 0);
    end
    run_batch(20, 20, 0, 0);
    run_batch(20, 0, 0, 0);
    checks++;
    if (n_learned != 32'((10 + SE - 1) / SE + 1)) fail($sformatf("learned %0d mini-batches", n_learned));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
