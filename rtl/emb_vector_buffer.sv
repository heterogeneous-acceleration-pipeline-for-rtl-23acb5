// emb_vector_buffer: the Embedding Vector Buffer. It holds pooled embedding
// vectors made by the reducer until the data dispatcher sends them to the GPUs,
// so the reducer can keep pooling while the streaming interface is busy.
//
// How it works: a first-in first-out buffer of DEPTH vectors, each tagged with
// the input and the embedding table it belongs to. The paper gives the size,
// 0.5 kB; at the default 16-element fp32 vectors (64 bytes) that is 8 vectors.
// Organising it as a FIFO is this design's choice: the paper only names it.
//
// Interface: in_* and out_* are valid/ready streams; out_* shows the oldest
// vector. Timing: a written vector can be read the next cycle; a write and a
// read may happen in the same cycle.
module emb_vector_buffer
  import hotline_pkg::*;
#(
  parameter int unsigned DIM   = EMB_DIM,
  parameter int unsigned DEPTH = EVB_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  logic [IN_ID_W-1:0]  in_input_id_i,
  input  logic [TABLE_W-1:0]  in_table_i,
  input  logic [DIM-1:0][DATA_W-1:0] in_vec_i,
  output logic                out_valid_o,
  input  logic                out_ready_i,
  output logic [IN_ID_W-1:0]  out_input_id_o,
  output logic [TABLE_W-1:0]  out_table_o,
  output logic [DIM-1:0][DATA_W-1:0] out_vec_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DIM-1:0][DATA_W-1:0] vec_mem [DEPTH];
  logic [IN_ID_W-1:0]         id_mem  [DEPTH];
  logic [TABLE_W-1:0]         tbl_mem [DEPTH];
  logic [PTR_W-1:0]           wr_ptr, rd_ptr;
  logic                       push, pop;

  assign in_ready_o  = (count_o < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid_o = (count_o != '0);
  assign push = in_valid_i && in_ready_o;
  assign pop  = out_valid_o && out_ready_i;

  assign out_vec_o      = vec_mem[rd_ptr];
  assign out_input_id_o = id_mem[rd_ptr];
  assign out_table_o    = tbl_mem[rd_ptr];

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count_o <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count_o <= count_o + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      vec_mem[wr_ptr] <= in_vec_i;
      id_mem[wr_ptr]  <= in_input_id_i;
      tbl_mem[wr_ptr] <= in_table_i;
    end
  end
endmodule
