// tb_lookup_engine_array: the lookup engine array (8 engines) with a small EAL
// (4 banks, 64 sets of 4 ways, 128-slot queue, so 4 inputs per batch). A first
// group of inputs is classified in learning mode, so the EAL learns their rows;
// a second group, mixing learned rows and new ones, is classified in lookup
// mode. Every output is compared with the reference: the same key and Feistel
// hash, the SRRIP model applied in input/table order, popular = all rows hit,
// hot index = {bank, set, way} on a hit and the original index on a miss.
// Output order, ids and the valid/ready handshake under back-pressure are
// checked too.
module tb_lookup_engine_array;
  import hotline_pkg::*;
  import hotline_ref_pkg::*;

  localparam int ENG = 8, QUEUE = 128, BANKS = 4, SETS = 64, WAYS = 4;
  localparam int BLOCKS = BANKS * SETS * WAYS;
  localparam int NIN = 60, NLEARN = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic learn;
  logic in_valid, in_ready, out_valid, out_ready, out_pop;
  input_rec_t in_rec, out_rec;
  logic [IN_ID_W-1:0] in_id, out_id;
  logic [NUM_SPARSE-1:0] out_hit;
  logic [NUM_SPARSE-1:0][INDEX_W-1:0] out_hot;
  logic eal_ready, go, eal_learn, eal_done, eal_busy;
  logic [ENG-1:0] ld_valid;
  logic [ENG-1:0][6:0] ld_slot;
  logic [ENG-1:0][1:0] ld_bank;
  logic [ENG-1:0][5:0] ld_set;
  logic [ENG-1:0][13:0] ld_id;
  logic [QUEUE-1:0] hit;
  logic [QUEUE-1:0][1:0] way;
  logic [15:0] iters;

  lookup_engine_array #(.ENGINES(ENG), .QUEUE(QUEUE), .BANKS(BANKS), .BLOCKS(BLOCKS), .WAYS(WAYS)) dut (
    .clk(clk), .rst_n(rst_n), .learn_i(learn),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_rec_i(in_rec), .in_id_i(in_id),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_rec_o(out_rec), .out_id_o(out_id),
    .out_popular_o(out_pop), .out_hit_o(out_hit), .out_hot_idx_o(out_hot),
    .eal_ready_i(eal_ready), .eal_ld_valid_o(ld_valid), .eal_ld_slot_o(ld_slot),
    .eal_ld_bank_o(ld_bank), .eal_ld_set_o(ld_set), .eal_ld_id_o(ld_id),
    .eal_go_o(go), .eal_learn_o(eal_learn), .eal_done_i(eal_done),
    .eal_hit_i(hit), .eal_way_i(way));

  eal #(.BANKS(BANKS), .BLOCKS(BLOCKS), .WAYS(WAYS), .QUEUE(QUEUE), .LOAD_W(ENG)) u_eal (
    .clk(clk), .rst_n(rst_n), .ready_o(eal_ready),
    .ld_valid_i(ld_valid), .ld_slot_i(ld_slot), .ld_bank_i(ld_bank), .ld_set_i(ld_set),
    .ld_id_i(ld_id), .go_i(go), .learn_i(eal_learn), .busy_o(eal_busy), .done_o(eal_done),
    .res_hit_o(hit), .res_way_o(way), .last_iters_o(iters));

  int checks = 0, failures = 0, n_pop = 0, n_np = 0;
  input_rec_t recs[NIN];
  eal_model m;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  function automatic input_rec_t make_rec(int i);
    input_rec_t r;
    r.label = 32'(i);
    for (int d = 0; d < NUM_DENSE; d++) r.dense[d] = $urandom();
    for (int t = 0; t < NUM_SPARSE; t++)
      // learned inputs use rows 0..3; later ones mostly those, sometimes a new row
      if (i < NLEARN || $urandom_range(0, 99) < 99) r.sparse[t] = 32'($urandom_range(0, 3));
      else r.sparse[t] = 32'($urandom_range(1000, 100000));
    return r;
  endfunction

  // drive one group of inputs with random bubbles
  task automatic drive(int first, int last);
    for (int i = first; i <= last; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_rec = recs[i]; in_id = IN_ID_W'(i);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  int got = 0;
  // check outputs in order
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      logic [39:0] key, h;
      bit eh, ep, ok, lrn;
      int unsigned w;
      logic [INDEX_W-1:0] ehot;
      lrn = got < NLEARN;
      ep = 1; ok = 1;
      checks++;
      if (out_id != IN_ID_W'(got) || out_rec != recs[got]) begin
        failures++; $display("output %0d: wrong input (id %0d)", got, out_id);
      end
      for (int t = 0; t < NUM_SPARSE; t++) begin
        key = ref_key(8'(t), recs[got].sparse[t]);
        h = ref_hash(key);
        m.access(h[1:0], h[7:2], key[13:0], key, lrn, eh, w);
        ehot = eh ? INDEX_W'({h[1:0], h[7:2], 2'(w)}) : recs[got].sparse[t];
        ep &= eh;
        if (out_hit[t] !== eh || out_hot[t] !== ehot) ok = 0;
      end
      checks++;
      if (!ok || out_pop !== ep) begin
        failures++;
        if (failures < 8) $display("output %0d: hit %b pop %0d, expected pop %0d", got, out_hit, out_pop, ep);
      end
      if (!lrn) begin if (ep) n_pop++; else n_np++; end
      got++;
    end
  end

  initial begin
    m = new(BANKS, SETS, WAYS);
    in_valid = 0; out_ready = 1; learn = 1; in_rec = '0; in_id = '0;
    for (int i = 0; i < NIN; i++) recs[i] = make_rec(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (eal_ready);
    fork
      forever begin @(negedge clk); out_ready = ($urandom_range(0, 4) != 0); end
    join_none
    drive(0, NLEARN - 1);
    wait (got == NLEARN);
    @(negedge clk);
    learn = 0;
    drive(NLEARN, NIN - 1);
    wait (got == NIN);
    repeat (2) @(posedge clk);
    checks++;
    if (n_pop == 0 || n_np == 0) begin
      failures++; $display("classification not exercised: %0d popular %0d non-popular", n_pop, n_np);
    end
    $display("popular %0d non-popular %0d", n_pop, n_np);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
