// eal_bank: one bank of the Embedding Access Logger SRAM.
//
// What it does: holds SETS sets of WAYS entries; an entry is a valid bit, a 2-bit
// access counter (AC) and a 14-bit identifier (field widths as the paper gives
// them). A request looks up one set and reports whether the identifier is present
// and in which way. In learning mode the set is updated with the Static
// Re-reference Interval Prediction (SRRIP) policy the paper names: a hit sets the
// counter to 0 (re-reference predicted near); a miss fills the first invalid way,
// otherwise ages every way until one reaches 3 (predicted distant) and replaces
// the lowest such way; new entries are inserted with counter 2 (the maximum minus
// one, as the paper says). Lookups outside learning mode change nothing.
// The set associativity and the hit-promotion rule (counter to 0) are this
// design's choice: the paper names SRRIP with 2-bit counters only.
//
// Timing: the array is read combinationally and written at the next clock edge,
// so a request is answered in the cycle it is presented (hit_o, way_o) and a
// second request to the same set one cycle later sees the update. After reset
// the bank clears one set per cycle; ready_o is low until all SETS are clear.
module eal_bank
  import hotline_pkg::*;
#(
  parameter int unsigned SETS = 8192,
  parameter int unsigned WAYS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     ready_o,
  input  logic                     req_i,
  input  logic [$clog2(SETS)-1:0]  set_i,
  input  logic [EAL_ID_W-1:0]      id_i,
  input  logic                     learn_i,
  output logic                     hit_o,
  output logic [$clog2(WAYS)-1:0]  way_o
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam logic [RRPV_W-1:0] RRPV_MAX = '1;
  localparam logic [RRPV_W-1:0] RRPV_INS = RRPV_MAX - 1'b1;


  // one word per set, the ways side by side, so that the array is a single
  // memory with one read and one write port
  logic [WAYS-1:0][$bits(eal_entry_t)-1:0] mem [SETS];

  logic             clearing;
  logic [SET_W-1:0] clr_idx;

  eal_entry_t line     [WAYS];
  eal_entry_t line_new [WAYS];
  logic [WAYS-1:0][$bits(eal_entry_t)-1:0] line_new_w, rd_word;

  assign rd_word = mem[set_i];
  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) line[w] = eal_entry_t'(rd_word[w]);
  end

  always_comb begin
    logic             found, free_found, vic_found;
    logic [WAY_W-1:0] hit_way, free_way, vic_way;
    logic [RRPV_W-1:0] max_ac;
    found = 1'b0; free_found = 1'b0; vic_found = 1'b0;
    hit_way = '0; free_way = '0; vic_way = '0;
    max_ac = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      line_new[w] = line[w];
      if (!found && line[w].valid && line[w].id == id_i) begin
        found = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!free_found && !line[w].valid) begin
        free_found = 1'b1;
        free_way = WAY_W'(w);
      end
      if (line[w].ac > max_ac) max_ac = line[w].ac;
    end
    if (found) begin
      line_new[hit_way].ac = '0;
    end else if (free_found) begin
      line_new[free_way] = '{valid: 1'b1, ac: RRPV_INS, id: id_i};
    end else begin
      // age all ways so that the oldest reaches RRPV_MAX, evict the first one there
      for (int unsigned w = 0; w < WAYS; w++) begin
        line_new[w].ac = line[w].ac + (RRPV_MAX - max_ac);
        if (!vic_found && line_new[w].ac == RRPV_MAX) begin
          vic_found = 1'b1;
          vic_way = WAY_W'(w);
        end
      end
      line_new[vic_way] = '{valid: 1'b1, ac: RRPV_INS, id: id_i};
    end
    hit_o = found;
    way_o = found ? hit_way : (free_found ? free_way : vic_way);
    for (int unsigned w = 0; w < WAYS; w++) line_new_w[w] = line_new[w];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
    end else if (clearing) begin
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == SET_W'(SETS - 1)) clearing <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clearing)              mem[clr_idx] <= '0;
    else if (req_i && learn_i) mem[set_i]   <= line_new_w;
  end

  assign ready_o = !clearing;

  // a request while the bank is still being cleared is a protocol error
  a_no_req_in_clear: assert property (@(posedge clk) disable iff (!rst_n) !(req_i && clearing))
    else $error("eal_bank: request during clear");
endmodule
