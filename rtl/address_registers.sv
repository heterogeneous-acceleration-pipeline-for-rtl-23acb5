// address_registers: the Address Registers of the data dispatcher. They hold the
// base address of every embedding table in CPU memory and in GPU memory, written
// by the driver with the s_wr(reg idx, base addr) instruction.
//
// Register map (this design's choice; the paper gives the instruction and the
// registers' purpose): index t in 0..TABLES-1 is the CPU base of table t, index
// TABLES+t the GPU base of table t's hot-embedding copy. Out-of-range indices
// are ignored. All registers reset to zero.
//
// Timing: a write is visible on the outputs the cycle after wr_valid_i.
module address_registers
  import hotline_pkg::*;
#(
  parameter int unsigned TABLES = NUM_SPARSE
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                wr_valid_i,
  input  logic [7:0]                          wr_idx_i,
  input  logic [ADDR_W-1:0]                   wr_addr_i,
  output logic [TABLES-1:0][ADDR_W-1:0]       cpu_base_o,
  output logic [TABLES-1:0][ADDR_W-1:0]       gpu_base_o
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cpu_base_o <= '0;
      gpu_base_o <= '0;
    end else if (wr_valid_i) begin
      if (int'(wr_idx_i) < TABLES)
        cpu_base_o[wr_idx_i] <= wr_addr_i;
      else if (int'(wr_idx_i) < 2 * TABLES)
        gpu_base_o[int'(wr_idx_i) - TABLES] <= wr_addr_i;
    end
  end
endmodule
