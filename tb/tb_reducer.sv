// tb_reducer: feeds bags of 1 to 5 embedding rows (32 elements, so two 16-lane
// beats per row) with random fp32 values, pooled either by sum (v_add) or by
// element-wise product (v_mul), under random output back-pressure. The expected
// vector is computed with the simulator's own floating point, one rounding to
// single precision after every operation, and must match bit for bit. It also
// checks that each vector appears one cycle after its last beat when the output
// is free.
module tb_reducer;
  import hotline_pkg::*;

  localparam int LANES = 16, DIM = 32, BEATS = DIM / LANES;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rsp_valid, rsp_ready, out_valid, out_ready;
  gtag_t tag;
  logic [7:0] beat;
  logic [LANES-1:0][31:0] data;
  logic [IN_ID_W-1:0] out_id;
  logic [TABLE_W-1:0] out_tbl;
  logic [DIM-1:0][31:0] out_vec;
  int checks = 0, failures = 0;

  reducer #(.LANES(LANES), .DIM(DIM)) dut (
    .clk(clk), .rst_n(rst_n), .rsp_valid_i(rsp_valid), .rsp_ready_o(rsp_ready),
    .rsp_tag_i(tag), .rsp_beat_i(beat), .rsp_data_i(data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_input_id_o(out_id),
    .out_table_o(out_tbl), .out_vec_o(out_vec));

  typedef struct {int id; int t; logic [31:0] v[DIM];} exp_t;
  exp_t q[$];

  function automatic logic [31:0] rnd_f();
    // sign random, exponent 120..134, so no overflow or subnormal can arise
    return {1'($urandom()), 8'($urandom_range(120, 134)), 23'($urandom())};
  endfunction

  // single <-> double conversion done on the bit patterns (normal numbers only)
  function automatic real f2r(logic [31:0] f);
    if (f[30:23] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [24:0] m;
    int e;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    // round to nearest, ties to even, on the 29 dropped bits
    if (d[28] && (d[27:0] != 0 || d[29])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] f_op(logic [31:0] a, logic [31:0] b, bit mul);
    return r2f(mul ? f2r(a) * f2r(b) : f2r(a) + f2r(b));
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  int n_got = 0, lat_checks = 0;
  bit stress = 1;
  always @(posedge clk) out_ready <= stress ? ($urandom_range(0, 3) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    exp_t e;
    bit ok;
    e = q.pop_front();
    ok = (int'(out_id) == e.id) && (int'(out_tbl) == e.t);
    for (int i = 0; i < DIM; i++) if (out_vec[i] !== e.v[i]) ok = 0;
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("bag %0d mismatch: elem0 %h expected %h", n_got, out_vec[0], e.v[0]);
    end
    n_got++;
  end

  initial begin
    exp_t e;
    int nrows;
    bit mul;
    logic [31:0] row[DIM];
    rsp_valid = 0; tag = '0; beat = 0; data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int bag = 0; bag < 300; bag++) begin
      nrows = $urandom_range(1, 5);
      mul = (bag % 4 == 3);
      e.id = $urandom_range(0, 1000); e.t = $urandom_range(0, 25);
      for (int r = 0; r < nrows; r++) begin
        for (int i = 0; i < DIM; i++) begin
          row[i] = rnd_f();
          e.v[i] = (r == 0) ? row[i] : f_op(e.v[i], row[i], mul);
        end
        for (int b = 0; b < BEATS; b++) begin
          @(negedge clk);
          stress = (bag < 200);
          rsp_valid = 1;
          tag.input_id = IN_ID_W'(e.id); tag.table_no = TABLE_W'(e.t);
          tag.red_op = mul ? OP_V_MUL : OP_V_ADD;
          tag.first = (r == 0); tag.last = (r == nrows - 1);
          beat = 8'(b);
          for (int l = 0; l < LANES; l++) data[l] = row[b * LANES + l];
          if (r == nrows - 1 && b == BEATS - 1) q.push_back(e);
          while (!rsp_ready) @(negedge clk);
          @(posedge clk);
        end
      end
      if (bag >= 200) begin
        // output always free: the vector must be valid right after the last beat
        @(negedge clk);
        rsp_valid = 0;
        checks++; lat_checks++;
        if (!out_valid) begin failures++; $display("bag %0d: vector late", bag); end
      end
    end
    @(negedge clk);
    rsp_valid = 0; stress = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_got != 300) begin failures++; $display("got %0d of 300 vectors", n_got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
