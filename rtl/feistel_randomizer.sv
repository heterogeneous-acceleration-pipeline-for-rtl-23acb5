// feistel_randomizer: the lookup engine's randomizer. It hashes the EAL key
// (embedding index shifted left, combined with the embedding table number) so
// that the keys of popular rows scatter evenly over the EAL banks and sets
// instead of piling into a few of them.
//
// How it works: a balanced Feistel network. The key is cut into a left and a
// right half; each round replaces (L, R) by (R, L ^ F(R, k_i)). A Feistel
// network is a bijection whatever F is, so two different keys never collide in
// the hash itself. F is a multiply, a shift and an xor with a round constant;
// the round constants and F are this design's choice, the paper only says the
// randomizer is a low-latency Feistel network.
//
// Interface and timing: purely combinational, key_i -> hash_o in the same cycle.
// ROUNDS sets the depth (default 4).
module feistel_randomizer #(
  parameter int unsigned W      = 40,   // key width, must be even
  parameter int unsigned ROUNDS = 4
) (
  input  logic [W-1:0] key_i,
  output logic [W-1:0] hash_o
);
  localparam int unsigned H = W / 2;

  // round constants: fractional digits of the golden ratio, rotated per round
  localparam logic [63:0] RC = 64'h9E37_79B9_7F4A_7C15;

  function automatic logic [H-1:0] round_f(input logic [H-1:0] r, input int unsigned i);
    logic [H-1:0] k;
    logic [H-1:0] m;
    k = H'(RC >> (i * 7));
    m = H'(r * H'(32'h0005_BD1E | 1));   // odd multiplier
    return (m ^ (r >> 3)) + k;
  endfunction

  always_comb begin
    logic [H-1:0] l, r, t;
    l = key_i[W-1:H];
    r = key_i[H-1:0];
    for (int unsigned i = 0; i < ROUNDS; i++) begin
      t = l ^ round_f(r, i);
      l = r;
      r = t;
    end
    hash_o = {l, r};
  end

  initial begin
    assert (W % 2 == 0) else $error("feistel_randomizer: W must be even");
  end
endmodule
