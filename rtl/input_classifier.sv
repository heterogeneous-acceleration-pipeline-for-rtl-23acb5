// input_classifier: the Input Classifier of the data dispatcher. It splits the
// mini-batch into the two micro-batches: an input whose embedding rows are all
// hot (popular, as decided by the lookup engines) goes straight to the GPUs; any
// other input goes to the input eDRAM, whose next free record it takes.
//
// How it works: combinational routing of a valid/ready stream. A popular input
// waits for the GPU side (pop_ready_i); a non-popular one is written to the
// eDRAM at once. The counters restart on clear_i and give the sizes of the two
// micro-batches; n_nonpop_o is also the next free eDRAM record.
//
// Timing: an input is routed in the cycle it is accepted.
module input_classifier
  import hotline_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear_i,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  input_rec_t          in_rec_i,
  input  logic [IN_ID_W-1:0]  in_id_i,
  input  logic                in_popular_i,
  output logic                pop_valid_o,
  input  logic                pop_ready_i,
  output input_rec_t          pop_rec_o,
  output logic [IN_ID_W-1:0]  pop_id_o,
  output logic                np_we_o,
  output logic [IN_ID_W-1:0]  np_addr_o,
  output input_rec_t          np_rec_o,
  output logic [IN_ID_W:0]    n_popular_o,
  output logic [IN_ID_W:0]    n_nonpop_o
);
  assign pop_valid_o = in_valid_i && in_popular_i;
  assign pop_rec_o   = in_rec_i;
  assign pop_id_o    = in_id_i;
  assign np_we_o     = in_valid_i && !in_popular_i;
  assign np_addr_o   = n_nonpop_o[IN_ID_W-1:0];
  assign np_rec_o    = in_rec_i;
  assign in_ready_o  = in_popular_i ? pop_ready_i : 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n || clear_i) begin
      n_popular_o <= '0;
      n_nonpop_o  <= '0;
    end else begin
      if (pop_valid_o && pop_ready_i) n_popular_o <= n_popular_o + 1'b1;
      if (np_we_o)                    n_nonpop_o  <= n_nonpop_o + 1'b1;
    end
  end
endmodule
