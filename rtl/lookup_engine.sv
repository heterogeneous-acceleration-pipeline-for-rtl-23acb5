// lookup_engine: one engine of the lookup engine array. It turns one sparse
// lookup of a training input, the pair (embedding table, embedding index), into
// an EAL request.
//
// How it works: the engine registers the table number and the index. The index
// is shifted left by TABLE_W bits and the table number fills the freed low bits,
// giving a KEY_W-bit key unique to the (table, row) pair. The randomizer
// (feistel_randomizer) hashes the key; the low bits of the hash pick the EAL
// bank and the next bits the set. The 14-bit identifier stored in the EAL is
// taken from the low bits of the unhashed key, as the paper's figure routes the
// combined key, not the hash, to the identifier. Key layout (shift then combine)
// and the bit slices are this design's choice; the figure names the blocks
// (left shifter, randomizer, index, identifier) without bit positions.
//
// Interface and timing: load_i captures table_i/index_i/slot_i; one cycle later
// valid_o is high with bank_o/set_o/id_o/slot_o for the EAL queue. The selection
// between the hot-embedding index and the original index, made once the EAL has
// answered, is done by the array's read-out stage (lookup_engine_array).
module lookup_engine
  import hotline_pkg::*;
#(
  parameter int unsigned BANK_W = 6,
  parameter int unsigned SET_W  = 13,
  parameter int unsigned SLOT_W = 9
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load_i,
  input  logic [TABLE_W-1:0]  table_i,
  input  logic [INDEX_W-1:0]  index_i,
  input  logic [SLOT_W-1:0]   slot_i,
  output logic                valid_o,
  output logic [SLOT_W-1:0]   slot_o,
  output logic [BANK_W-1:0]   bank_o,
  output logic [SET_W-1:0]    set_o,
  output logic [EAL_ID_W-1:0] id_o
);
  logic [TABLE_W-1:0] table_q;
  logic [INDEX_W-1:0] index_q;
  logic [KEY_W-1:0]   key, hash;

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= load_i;
    if (load_i) begin
      table_q <= table_i;
      index_q <= index_i;
      slot_o  <= slot_i;
    end
  end

  // left shifter and combine
  assign key = (KEY_W'(index_q) << TABLE_W) | KEY_W'(table_q);

  feistel_randomizer #(.W(KEY_W)) u_rand (.key_i(key), .hash_o(hash));

  assign bank_o = hash[BANK_W-1:0];
  assign set_o  = hash[BANK_W +: SET_W];
  assign id_o   = key[EAL_ID_W-1:0];
endmodule
