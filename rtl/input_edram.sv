// input_edram: the on-chip input store (2.5 MB eDRAM in the paper). It keeps the
// non-popular micro-batch while the GPUs train on the popular one, so that the
// inputs need not be fetched from host memory a second time.
//
// How it works: DEPTH records of 160 bytes (13 dense fp32 values, 26 sparse
// 32-bit indices and a 32-bit label); 16K records = 2.5 MiB, the paper's size and
// largest mini-batch. One write port and one read port. It is written here as a
// plain synchronous memory array; eDRAM refresh and the macro's own interface
// are not modelled.
//
// Timing: a write (we_i) is stored at the clock edge; a read (re_i) returns
// rdata_o in the next cycle, which then holds until the next read.
module input_edram
  import hotline_pkg::*;
#(
  parameter int unsigned DEPTH = MB_MAX
) (
  input  logic                     clk,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] waddr_i,
  input  input_rec_t               wdata_i,
  input  logic                     re_i,
  input  logic [$clog2(DEPTH)-1:0] raddr_i,
  output input_rec_t               rdata_o
);
  input_rec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end
endmodule
