// tb_eal: drives batches of random requests into a small EAL (8 banks, 4 sets of
// 4 ways per bank, 16-slot queue) in learning and lookup modes and compares,
// slot by slot, the reported hit and way with the SRRIP reference model applied
// in queue order. It also checks the cycle count of each drain: with one request
// per bank per cycle, the number of iterations must equal the largest number of
// requests addressed to a single bank.
module tb_eal;
  import hotline_pkg::*;
  import hotline_ref_pkg::*;

  localparam int BANKS = 8, WAYS = 4, SETS = 4, QUEUE = 16, LW = 8;
  localparam int BLOCKS = BANKS * WAYS * SETS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready, go, learn, busy, done;
  logic [LW-1:0] ld_valid;
  logic [LW-1:0][3:0] ld_slot;
  logic [LW-1:0][2:0] ld_bank;
  logic [LW-1:0][1:0] ld_set;
  logic [LW-1:0][13:0] ld_id;
  logic [QUEUE-1:0] res_hit;
  logic [QUEUE-1:0][1:0] res_way;
  logic [15:0] iters;

  eal #(.BANKS(BANKS), .BLOCKS(BLOCKS), .WAYS(WAYS), .QUEUE(QUEUE), .LOAD_W(LW)) dut (
    .clk(clk), .rst_n(rst_n), .ready_o(ready),
    .ld_valid_i(ld_valid), .ld_slot_i(ld_slot), .ld_bank_i(ld_bank), .ld_set_i(ld_set),
    .ld_id_i(ld_id), .go_i(go), .learn_i(learn), .busy_o(busy), .done_o(done),
    .res_hit_o(res_hit), .res_way_o(res_way), .last_iters_o(iters));

  int checks = 0, failures = 0;
  int n_hits = 0, n_evict_batches = 0;
  eal_model m;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  initial begin
    int n, per_bank[BANKS], mx;
    int rb[QUEUE], rs[QUEUE];
    logic [13:0] rid[QUEUE];
    bit lrn, h;
    int unsigned w;
    m = new(BANKS, SETS, WAYS);
    ld_valid = '0; go = 0; learn = 0;
    ld_slot = '0; ld_bank = '0; ld_set = '0; ld_id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (ready) begin failures++; $display("ready during clear"); end
    wait (ready);
    @(posedge clk);
    for (int batch = 0; batch < 200; batch++) begin
      n   = $urandom_range(1, QUEUE);
      lrn = (batch < 20) || ($urandom_range(0, 9) < 6);
      foreach (per_bank[b]) per_bank[b] = 0;
      for (int s = 0; s < n; s++) begin
        rb[s]  = $urandom_range(0, BANKS - 1);
        rs[s]  = $urandom_range(0, SETS - 1);
        rid[s] = 14'($urandom_range(0, 7));
        per_bank[rb[s]]++;
      end
      // load LW slots per cycle
      for (int base = 0; base < n; base += LW) begin
        @(negedge clk);
        ld_valid = '0;
        for (int e = 0; e < LW; e++)
          if (base + e < n) begin
            ld_valid[e] = 1;
            ld_slot[e] = 4'(base + e);
            ld_bank[e] = 3'(rb[base + e]);
            ld_set[e]  = 2'(rs[base + e]);
            ld_id[e]   = rid[base + e];
          end
      end
      @(negedge clk);
      ld_valid = '0;
      go = 1; learn = lrn;
      @(negedge clk);
      go = 0;
      wait (done);
      @(negedge clk);
      mx = 0;
      foreach (per_bank[b]) if (per_bank[b] > mx) mx = per_bank[b];
      checks++;
      if (int'(iters) != mx) begin
        failures++;
        $display("batch %0d: %0d iterations, expected %0d", batch, iters, mx);
      end
      for (int s = 0; s < n; s++) begin
        m.access(rb[s], rs[s], rid[s], 40'(rid[s]), lrn, h, w);
        checks++;
        if (res_hit[s] !== h || ((h || lrn) && res_way[s] !== 2'(w))) begin
          failures++;
          if (failures < 10)
            $display("batch %0d slot %0d: hit %0d way %0d, expected hit %0d way %0d",
                     batch, s, res_hit[s], res_way[s], h, w);
        end
        if (h) n_hits++;
      end
    end
    checks++;
    if (n_hits == 0) begin failures++; $display("no hits exercised"); end
    $display("hits %0d", n_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
