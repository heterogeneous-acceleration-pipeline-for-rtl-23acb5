// tb_input_edram: writes random 160-byte input records to a 64-record input store,
// with reads of other addresses in the same cycles, and checks that every read
// returns the last record written to that address exactly one cycle later and
// holds it until the next read.
module tb_input_edram;
  import hotline_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [5:0] waddr, raddr;
  input_rec_t wdata, rdata;
  input_rec_t model[DEPTH];
  bit written[DEPTH];
  int checks = 0, failures = 0;

  input_edram #(.DEPTH(DEPTH)) dut (.clk(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
                                    .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  function automatic input_rec_t rnd_rec();
    input_rec_t r;
    for (int i = 0; i < $bits(input_rec_t) / 32; i++) r[i*32 +: 32] = $urandom();
    return r;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  initial begin
    input_rec_t exp_q;
    bit pend;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    foreach (written[i]) written[i] = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = rnd_rec();
      model[i] = wdata; written[i] = 1;
    end
    pend = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp_q) begin failures++; $display("read mismatch at step %0d", n); end
      end
      we = $urandom_range(0, 1); waddr = 6'($urandom()); wdata = rnd_rec();
      re = $urandom_range(0, 1); raddr = 6'($urandom());
      while (re && we && raddr == waddr) raddr = 6'($urandom());
      if (re) begin exp_q = model[raddr]; pend = 1; end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
