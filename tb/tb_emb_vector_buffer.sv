// tb_emb_vector_buffer: pushes tagged vectors into the embedding vector buffer
// (default size: 8 vectors of 16 fp32 values = 0.5 kB) with random stalls on both
// sides, checks first-in first-out order, that it accepts exactly 8 vectors
// when nobody reads, and the occupancy count.
module tb_emb_vector_buffer;
  import hotline_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [IN_ID_W-1:0] in_id, out_id;
  logic [TABLE_W-1:0] in_tbl, out_tbl;
  emb_vec_t in_vec, out_vec;
  logic [3:0] count;
  int checks = 0, failures = 0;

  emb_vector_buffer dut (
    .clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_input_id_i(in_id), .in_table_i(in_tbl), .in_vec_i(in_vec),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_input_id_o(out_id),
    .out_table_o(out_tbl), .out_vec_o(out_vec), .count_o(count));

  typedef struct packed {logic [IN_ID_W-1:0] id; logic [TABLE_W-1:0] t; emb_vec_t v;} item_t;
  item_t q[$];
  int n_sent = 0, n_got = 0;
  bit accepted = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic new_item();
    in_id = IN_ID_W'($urandom()); in_tbl = TABLE_W'($urandom());
    for (int i = 0; i < EMB_DIM; i++) in_vec[i] = $urandom();
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      item_t e;
      checks++;
      e = q.pop_front();
      if (out_id !== e.id || out_tbl !== e.t || out_vec !== e.v) begin
        failures++; $display("order mismatch at %0d", n_got);
      end
      n_got++;
    end
    if (in_valid && in_ready) begin
      q.push_back('{in_id, in_tbl, in_vec});
      n_sent++;
      accepted = 1;
    end
  end

  initial begin
    int acc;
    in_valid = 0; out_ready = 0;
    new_item();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill with no reader: exactly EVB_DEPTH must be taken
    acc = 0;
    for (int c = 0; c < 20; c++) begin
      @(negedge clk);
      if (accepted) begin accepted = 0; new_item(); end
      in_valid = 1;
      if (in_ready) acc++;
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (acc != EVB_DEPTH || int'(count) != EVB_DEPTH || EVB_DEPTH != 8) begin
      failures++; $display("took %0d, count %0d, expected 8", acc, count);
    end
    // random traffic; a valid vector is held until taken
    accepted = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 1);
      if (accepted) begin
        accepted = 0;
        new_item();
        in_valid = 0;
      end
      if (!in_valid) in_valid = $urandom_range(0, 1);
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (n_got != n_sent || count != 0) begin failures++; $display("lost vectors %0d/%0d", n_got, n_sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
