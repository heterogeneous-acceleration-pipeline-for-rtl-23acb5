// lookup_engine_array: the parallel two-dimensional lookup network. It finds, for
// every training input, which of its embedding rows are tracked as hot by the
// EAL, and so whether the input is popular (all of its rows hot).
//
// How it works. Inputs are staged, up to BATCH of them, where BATCH is the number
// of whole inputs whose lookups fit in the EAL queue (512 / 26 = 19 by default).
// A batch is closed when it is full or when no further input is offered. The
// ENGINES lookup engines (default 64) then take the batch's lookups, one lookup
// per engine per cycle, in the order input 0 table 0, input 0 table 1, ...,
// so the lookups of one input spread over parallel engines (the per-input 26x
// parallelism the paper describes) and several inputs are in flight together
// (the mini-batch dimension). Each engine hashes its lookup and loads it into
// the EAL queue slot equal to its lookup number; when all are loaded the EAL
// drains the queue. Its answer per slot (hit, way) comes back, and the staged
// inputs leave one per cycle with:
//   popular_o   -- every lookup of the input hit,
//   hit_o[t]    -- the lookup into table t hit,
//   hot_idx_o[t] -- on a hit the row's position in the hot-embedding table,
//                   {bank, set, way} of the EAL (the same position on every GPU);
//                   on a miss the original embedding index.
// In learning mode (learn_i when the batch closes) the EAL updates its SRRIP
// state with every lookup, so it learns which rows are hot; hit_o is still the
// answer before the update.
// The batching into whole inputs, the close-on-idle rule and using the EAL
// position as the hot-embedding row are this design's choices.
//
// Interface: in_* and out_* are valid/ready streams; eal_* connect to eal.
// Timing: per batch, 1 + ceil(lookups/ENGINES) load cycles, the EAL drain
// (one cycle per iteration), then one cycle per input read out.
module lookup_engine_array
  import hotline_pkg::*;
#(
  parameter int unsigned ENGINES = NUM_ENGINES,
  parameter int unsigned QUEUE   = EAL_QUEUE,
  parameter int unsigned BANKS   = EAL_BANKS,
  parameter int unsigned BLOCKS  = EAL_BLOCKS,
  parameter int unsigned WAYS    = EAL_WAYS,
  localparam int unsigned LOOKUPS = NUM_SPARSE,
  localparam int unsigned BATCH   = QUEUE / LOOKUPS,
  localparam int unsigned SETS    = BLOCKS / (BANKS * WAYS),
  localparam int unsigned BANK_W  = $clog2(BANKS),
  localparam int unsigned SET_W   = $clog2(SETS),
  localparam int unsigned WAY_W   = $clog2(WAYS),
  localparam int unsigned SLOT_W  = $clog2(QUEUE)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 learn_i,
  // inputs to classify
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  input  input_rec_t           in_rec_i,
  input  logic [IN_ID_W-1:0]   in_id_i,
  // classified inputs
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output input_rec_t           out_rec_o,
  output logic [IN_ID_W-1:0]   out_id_o,
  output logic                 out_popular_o,
  output logic [LOOKUPS-1:0]   out_hit_o,
  output logic [LOOKUPS-1:0][INDEX_W-1:0] out_hot_idx_o,
  // EAL
  input  logic                 eal_ready_i,
  output logic [ENGINES-1:0]   eal_ld_valid_o,
  output logic [ENGINES-1:0][SLOT_W-1:0]   eal_ld_slot_o,
  output logic [ENGINES-1:0][BANK_W-1:0]   eal_ld_bank_o,
  output logic [ENGINES-1:0][SET_W-1:0]    eal_ld_set_o,
  output logic [ENGINES-1:0][EAL_ID_W-1:0] eal_ld_id_o,
  output logic                 eal_go_o,
  output logic                 eal_learn_o,
  input  logic                 eal_done_i,
  input  logic [QUEUE-1:0]     eal_hit_i,
  input  logic [QUEUE-1:0][WAY_W-1:0] eal_way_i
);
  localparam int unsigned BCNT_W = $clog2(BATCH + 1);

  typedef enum logic [2:0] {S_COLLECT, S_LOAD, S_FLUSH, S_WAIT, S_OUT} state_e;
  state_e state;

  input_rec_t                stage_rec [BATCH];
  logic [IN_ID_W-1:0]        stage_id  [BATCH];
  logic [BCNT_W-1:0]         n_in;        // inputs staged
  logic [BCNT_W-1:0]         rd_ptr;      // next input to read out
  logic [SLOT_W:0]           ld_ptr;      // next lookup to hand to the engines
  logic [SLOT_W:0]           n_lookups;
  logic                      learn_q;
  logic [QUEUE-1:0][BANK_W-1:0] slot_bank;
  logic [QUEUE-1:0][SET_W-1:0]  slot_set;

  // ---------------- engines ----------------
  logic [ENGINES-1:0] eng_load;
  logic [ENGINES-1:0][SLOT_W-1:0] eng_slot;
  logic [ENGINES-1:0][TABLE_W-1:0] eng_table;
  logic [ENGINES-1:0][INDEX_W-1:0] eng_index;

  always_comb begin
    for (int unsigned e = 0; e < ENGINES; e++) begin
      logic [SLOT_W:0] l;
      int unsigned     inp, tbl;
      l   = ld_ptr + (SLOT_W + 1)'(e);
      inp = int'(l) / LOOKUPS;
      tbl = int'(l) % LOOKUPS;
      eng_load[e]  = (state == S_LOAD) && (l < n_lookups);
      eng_slot[e]  = SLOT_W'(l);
      eng_table[e] = TABLE_W'(tbl);
      eng_index[e] = (inp < BATCH) ? stage_rec[inp].sparse[tbl] : '0;
    end
  end

  for (genvar e = 0; e < ENGINES; e++) begin : g_eng
    lookup_engine #(.BANK_W(BANK_W), .SET_W(SET_W), .SLOT_W(SLOT_W)) u_eng (
      .clk    (clk),
      .rst_n  (rst_n),
      .load_i (eng_load[e]),
      .table_i(eng_table[e]),
      .index_i(eng_index[e]),
      .slot_i (eng_slot[e]),
      .valid_o(eal_ld_valid_o[e]),
      .slot_o (eal_ld_slot_o[e]),
      .bank_o (eal_ld_bank_o[e]),
      .set_o  (eal_ld_set_o[e]),
      .id_o   (eal_ld_id_o[e])
    );
  end

  // ---------------- control ----------------
  assign in_ready_o  = (state == S_COLLECT) && (n_in < BCNT_W'(BATCH)) && eal_ready_i;
  assign eal_learn_o = learn_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_COLLECT;
      n_in     <= '0;
      rd_ptr   <= '0;
      ld_ptr   <= '0;
      eal_go_o <= 1'b0;
      learn_q  <= 1'b0;
    end else begin
      eal_go_o <= 1'b0;
      unique case (state)
        S_COLLECT: begin
          if (in_valid_i && in_ready_o) begin
            stage_rec[n_in] <= in_rec_i;
            stage_id[n_in]  <= in_id_i;
            n_in            <= n_in + 1'b1;
          end
          // close the batch when full, or when nothing more is offered
          if ((n_in == BCNT_W'(BATCH)) || (n_in != 0 && !in_valid_i)) begin
            state     <= S_LOAD;
            ld_ptr    <= '0;
            n_lookups <= (SLOT_W + 1)'(n_in * LOOKUPS);
            learn_q   <= learn_i;
          end
        end
        S_LOAD: begin
          ld_ptr <= ld_ptr + (SLOT_W + 1)'(ENGINES);
          if (ld_ptr + (SLOT_W + 1)'(ENGINES) >= n_lookups) state <= S_FLUSH;
        end
        S_FLUSH: begin            // last engine outputs enter the queue
          state    <= S_WAIT;
          eal_go_o <= 1'b1;
        end
        S_WAIT: begin
          if (eal_done_i) begin
            state  <= S_OUT;
            rd_ptr <= '0;
          end
        end
        S_OUT: begin
          if (out_ready_i) begin
            rd_ptr <= rd_ptr + 1'b1;
            if (rd_ptr + 1'b1 == n_in) begin
              state <= S_COLLECT;
              n_in  <= '0;
            end
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  // remember where each slot went, to build the hot-embedding index
  always_ff @(posedge clk) begin
    for (int unsigned e = 0; e < ENGINES; e++)
      if (eal_ld_valid_o[e]) begin
        slot_bank[eal_ld_slot_o[e]] <= eal_ld_bank_o[e];
        slot_set[eal_ld_slot_o[e]]  <= eal_ld_set_o[e];
      end
  end

  // ---------------- read-out: hit mux per lookup ----------------
  always_comb begin
    logic [INDEX_W-1:0] row;
    int unsigned rp;
    rp = (int'(rd_ptr) < BATCH) ? int'(rd_ptr) : 0;
    out_valid_o = (state == S_OUT);
    out_rec_o   = stage_rec[rp];
    out_id_o    = stage_id[rp];
    for (int unsigned t = 0; t < LOOKUPS; t++) begin
      int unsigned s;
      s = rp * LOOKUPS + t;
      row = INDEX_W'({slot_bank[s], slot_set[s], eal_way_i[s]});
      out_hit_o[t]     = eal_hit_i[s];
      out_hot_idx_o[t] = eal_hit_i[s] ? row : stage_rec[rp].sparse[t];
    end
    out_popular_o = &out_hit_o;
  end

  initial assert (BATCH >= 1) else $error("lookup_engine_array: queue smaller than one input");
endmodule
