// eal: Embedding Access Logger (EAL) -- the on-chip tracker of popular ("hot")
// embedding rows. It is a cache-like structure that stores only identifiers of
// embedding rows, never their contents.
//
// How it works. Three parts, as the paper draws them:
//  * a multi-banked SRAM: BANKS instances of eal_bank, BLOCKS entries in all
//    (default 64 banks, 2M blocks of 17 bits = 4.25 MB, the paper's "4 MB"),
//  * a request queue of QUEUE slots (default 512),
//  * a controller that, in every cycle ("iteration"), picks for each bank the
//    oldest pending queue slot addressed to it and sends it to the bank. Up to
//    BANKS requests are served per cycle and two requests never collide on a bank.
// A batch is loaded into the queue by the lookup engines, up to LOAD_W requests
// per cycle at the queue slots they name, then go_i starts the drain. When every
// slot is served, done_o pulses and res_hit_o / res_way_o hold the answer of
// every slot (hit before any update, and the way that hit or was filled).
// In learning mode (learn_i at go_i) the banks apply SRRIP updates; otherwise
// the lookups only read. Loading a batch and draining it in separate steps, and
// the oldest-first pick, are this design's choices: the paper gives the queue
// size, the bank count and the fact that a controller schedules requests to the
// banks without collisions.
//
// Timing: one cycle per iteration; last_iters_o reports the iterations the last
// batch needed. After reset ready_o stays low for BLOCKS/(BANKS*WAYS) cycles
// while the banks clear their valid bits.
module eal
  import hotline_pkg::*;
#(
  parameter int unsigned BANKS  = EAL_BANKS,
  parameter int unsigned BLOCKS = EAL_BLOCKS,
  parameter int unsigned WAYS   = EAL_WAYS,
  parameter int unsigned QUEUE  = EAL_QUEUE,
  parameter int unsigned LOAD_W = NUM_ENGINES,
  localparam int unsigned SETS   = BLOCKS / (BANKS * WAYS),
  localparam int unsigned BANK_W = $clog2(BANKS),
  localparam int unsigned SET_W  = $clog2(SETS),
  localparam int unsigned WAY_W  = $clog2(WAYS),
  localparam int unsigned SLOT_W = $clog2(QUEUE)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      ready_o,
  // queue load, one lane per lookup engine
  input  logic [LOAD_W-1:0]         ld_valid_i,
  input  logic [LOAD_W-1:0][SLOT_W-1:0]   ld_slot_i,
  input  logic [LOAD_W-1:0][BANK_W-1:0]   ld_bank_i,
  input  logic [LOAD_W-1:0][SET_W-1:0]    ld_set_i,
  input  logic [LOAD_W-1:0][EAL_ID_W-1:0] ld_id_i,
  // drain control
  input  logic                      go_i,
  input  logic                      learn_i,
  output logic                      busy_o,
  output logic                      done_o,
  output logic [QUEUE-1:0]          res_hit_o,
  output logic [QUEUE-1:0][WAY_W-1:0] res_way_o,
  output logic [15:0]               last_iters_o
);
  // ---------------- queue ----------------
  logic [QUEUE-1:0]              q_pend;
  logic [QUEUE-1:0][BANK_W-1:0]  q_bank;
  logic [QUEUE-1:0][SET_W-1:0]   q_set;
  logic [QUEUE-1:0][EAL_ID_W-1:0] q_id;

  logic        draining, learn_q;
  logic [15:0] iters;

  // ---------------- controller: one grant per bank ----------------
  logic [BANKS-1:0][QUEUE-1:0] bank_req, bank_gnt;
  logic [BANKS-1:0][SLOT_W-1:0] gnt_slot;
  logic [BANKS-1:0]             gnt_any;
  logic [QUEUE-1:0]             gnt_all;

  always_comb begin
    for (int unsigned b = 0; b < BANKS; b++)
      for (int unsigned s = 0; s < QUEUE; s++)
        bank_req[b][s] = draining && q_pend[s] && (q_bank[s] == BANK_W'(b));
  end

  always_comb begin
    gnt_all = '0;
    for (int unsigned b = 0; b < BANKS; b++) begin
      // lowest pending slot = oldest request for this bank
      bank_gnt[b] = bank_req[b] & (~bank_req[b] + 1'b1);
      gnt_any[b]  = |bank_req[b];
      gnt_all     = gnt_all | bank_gnt[b];
      gnt_slot[b] = '0;
      for (int unsigned s = 0; s < QUEUE; s++)
        if (bank_gnt[b][s]) gnt_slot[b] = gnt_slot[b] | SLOT_W'(s);
    end
  end

  // ---------------- banks ----------------
  logic [BANKS-1:0]            bank_ready, bank_hit;
  logic [BANKS-1:0][WAY_W-1:0] bank_way;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    eal_bank #(.SETS(SETS), .WAYS(WAYS)) u_bank (
      .clk    (clk),
      .rst_n  (rst_n),
      .ready_o(bank_ready[b]),
      .req_i  (gnt_any[b]),
      .set_i  (q_set[gnt_slot[b]]),
      .id_i   (q_id[gnt_slot[b]]),
      .learn_i(learn_q),
      .hit_o  (bank_hit[b]),
      .way_o  (bank_way[b])
    );
  end

  assign ready_o = &bank_ready;

  // ---------------- queue and result state ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_pend       <= '0;
      draining     <= 1'b0;
      learn_q      <= 1'b0;
      iters        <= '0;
      last_iters_o <= '0;
      done_o       <= 1'b0;
    end else begin
      done_o <= 1'b0;
      for (int unsigned e = 0; e < LOAD_W; e++)
        if (ld_valid_i[e]) q_pend[ld_slot_i[e]] <= 1'b1;
      if (!draining) begin
        if (go_i) begin
          draining <= 1'b1;
          learn_q  <= learn_i;
          iters    <= '0;
        end
      end else begin
        q_pend <= q_pend & ~gnt_all;
        if (|gnt_any) begin
          iters <= iters + 1'b1;
        end else begin
          draining     <= 1'b0;
          done_o       <= 1'b1;
          last_iters_o <= iters;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned e = 0; e < LOAD_W; e++)
      if (ld_valid_i[e]) begin
        q_bank[ld_slot_i[e]] <= ld_bank_i[e];
        q_set[ld_slot_i[e]]  <= ld_set_i[e];
        q_id[ld_slot_i[e]]   <= ld_id_i[e];
      end
    for (int unsigned b = 0; b < BANKS; b++)
      if (gnt_any[b]) begin
        res_hit_o[gnt_slot[b]] <= bank_hit[b];
        res_way_o[gnt_slot[b]] <= bank_way[b];
      end
  end

  assign busy_o = draining;

  // loading while the queue drains, or starting before the banks are clear, is not allowed
  a_no_load_in_drain: assert property (@(posedge clk) disable iff (!rst_n) !(draining && |ld_valid_i))
    else $error("eal: load during drain");
  a_go_when_ready: assert property (@(posedge clk) disable iff (!rst_n) !(go_i && !ready_o))
    else $error("eal: go before the banks are clear");
endmodule
