// reducer: pools the embedding rows gathered for a non-popular input into one
// vector per embedding table (sparse-length sum), using an array of LANES fp32
// ALUs (default 16, the paper's count).
//
// How it works: rows arrive as beats of LANES elements, beat b holding elements
// b*LANES .. b*LANES+LANES-1 of the row (one beat per row at the default 16-wide
// rows). The first row of a bag is loaded into the accumulator; every further
// row is combined with it element-wise by the tag's operation, v_add (sum
// pooling) or v_mul (element-wise product), both instructions of the paper's
// instruction set. After the last beat of the last row of a bag the pooled
// vector is handed to the embedding vector buffer with the input and table it
// belongs to. The rows of one bag must arrive together, not interleaved with
// another bag's rows (this design's assumption: the gather path returns
// responses in request order).
//
// Interface: rsp_* is the valid/ready stream of row beats; out_* the valid/ready
// stream of pooled vectors. Timing: one beat per cycle; the pooled vector is
// valid the cycle after its last beat and holds the input until taken.
module reducer
  import hotline_pkg::*;
#(
  parameter int unsigned LANES = RED_LANES,
  parameter int unsigned DIM   = EMB_DIM
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rsp_valid_i,
  output logic                rsp_ready_o,
  input  gtag_t               rsp_tag_i,
  input  logic [7:0]          rsp_beat_i,
  input  logic [LANES-1:0][DATA_W-1:0] rsp_data_i,
  output logic                out_valid_o,
  input  logic                out_ready_i,
  output logic [IN_ID_W-1:0]  out_input_id_o,
  output logic [TABLE_W-1:0]  out_table_o,
  output logic [DIM-1:0][DATA_W-1:0] out_vec_o
);
  localparam int unsigned BEATS = DIM / LANES;

  logic [DIM-1:0][DATA_W-1:0]   acc;
  logic [LANES-1:0][DATA_W-1:0] cur, res;
  logic [DIM-1:0][DATA_W-1:0]   acc_next;
  int unsigned                  base;

  assign base = (int'(rsp_beat_i) < BEATS) ? int'(rsp_beat_i) * LANES : 0;

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) cur[l] = acc[base + l];
  end

  for (genvar l = 0; l < LANES; l++) begin : g_alu
    logic [DATA_W-1:0] y;
    fp32_alu u_alu (
      .mul_i(rsp_tag_i.red_op == OP_V_MUL),
      .a_i  (cur[l]),
      .b_i  (rsp_data_i[l]),
      .y_o  (y)
    );
    assign res[l] = rsp_tag_i.first ? rsp_data_i[l] : y;
  end

  always_comb begin
    acc_next = acc;
    for (int unsigned l = 0; l < LANES; l++) acc_next[base + l] = res[l];
  end

  assign rsp_ready_o = !out_valid_o || out_ready_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid_o <= 1'b0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (rsp_valid_i && rsp_ready_o) begin
        acc <= acc_next;
        if (rsp_tag_i.last && int'(rsp_beat_i) == BEATS - 1) begin
          out_valid_o    <= 1'b1;
          out_vec_o      <= acc_next;
          out_input_id_o <= rsp_tag_i.input_id;
          out_table_o    <= rsp_tag_i.table_no;
        end
      end
    end
  end

  initial assert (DIM % LANES == 0) else $error("reducer: DIM must be a multiple of LANES");
endmodule
