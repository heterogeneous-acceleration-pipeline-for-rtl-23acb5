// scheduler: sequences the work on one mini-batch, the pipeline of the paper:
// split the mini-batch, let the GPUs run the popular micro-batch at once, and
// meanwhile gather the embedding rows of the non-popular micro-batch.
//
// How it works. On start_i it clears the classifier's counters and enters the
// classify step: the host streams the mini-batch's batch_n_i inputs through
// the lookup engines; popular inputs leave for the GPUs as they are found,
// non-popular ones are parked in the input eDRAM. When all are classified it
// enters the gather step: it reads the non-popular inputs back from the eDRAM
// in order, as a stream with one record of look-ahead, and feeds them to the
// lookup engines again; the data dispatcher requests their rows and the reducer
// pools them. The mini-batch is done when the GPUs have taken one pooled vector
// per table of every non-popular input.
// Learning phase: while learn_phase_i is high, one mini-batch in SAMPLE_EVERY
// (default 20, i.e. the paper's 5% sample) is classified in learning mode, in
// which every lookup also updates the EAL; n_learned_o counts them.
// The step order follows the paper; the counters and the completion rule are
// this design's.
//
// Interface: start_i/batch_n_i/learn_phase_i start a mini-batch while busy_o is
// low; done_o pulses at its end. Timing: classify_cycles_o and gather_cycles_o
// give how long the last mini-batch spent in each step.
module scheduler
  import hotline_pkg::*;
#(
  parameter int unsigned SAMPLE_EVERY = 20,
  parameter int unsigned TABLES       = NUM_SPARSE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start_i,
  input  logic [IN_ID_W:0]    batch_n_i,
  input  logic                learn_phase_i,
  output logic                busy_o,
  output logic                done_o,
  output logic                mode_o,     // 0 classify, 1 gather
  output logic                classify_o, // host inputs are being taken
  output logic                clear_o,
  output logic                learn_o,    // lookups of this step update the EAL
  // classifier progress
  input  logic [IN_ID_W:0]    n_popular_i,
  input  logic [IN_ID_W:0]    n_nonpop_i,
  // eDRAM read port
  output logic                ed_re_o,
  output logic [IN_ID_W-1:0]  ed_raddr_o,
  input  input_rec_t          ed_rdata_i,
  // non-popular inputs to the dispatcher
  output logic                sch_valid_o,
  input  logic                sch_ready_i,
  output input_rec_t          sch_rec_o,
  output logic [IN_ID_W-1:0]  sch_id_o,
  // a pooled vector was taken by the GPUs
  input  logic                vec_sent_i,
  // statistics
  output logic [31:0]         n_learned_o,
  output logic [31:0]         classify_cycles_o,
  output logic [31:0]         gather_cycles_o
);
  typedef enum logic [1:0] {S_IDLE, S_CLASSIFY, S_GATHER, S_DONE} state_e;
  state_e state;

  localparam int unsigned S_W = (SAMPLE_EVERY > 1) ? $clog2(SAMPLE_EVERY) : 1;

  logic [IN_ID_W:0] batch_n, rd_ptr;
  logic [IN_ID_W-1:0] hold_id;
  logic             hold_valid, learn_q;
  logic [S_W-1:0]   sample_cnt;
  logic [31:0]      vec_cnt, vec_need, cyc;

  assign busy_o      = (state != S_IDLE);
  assign mode_o      = (state == S_GATHER);
  assign classify_o  = (state == S_CLASSIFY);
  assign clear_o     = (state == S_IDLE) && start_i;
  assign learn_o     = (state == S_CLASSIFY) && learn_q;
  assign sch_valid_o = (state == S_GATHER) && hold_valid;
  assign sch_rec_o   = ed_rdata_i;
  assign sch_id_o    = hold_id;
  assign ed_raddr_o  = rd_ptr[IN_ID_W-1:0];
  assign ed_re_o     = (state == S_GATHER) && (rd_ptr < n_nonpop_i) &&
                       (!hold_valid || sch_ready_i);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state             <= S_IDLE;
      done_o            <= 1'b0;
      learn_q           <= 1'b0;
      hold_valid        <= 1'b0;
      sample_cnt        <= '0;
      n_learned_o       <= '0;
      classify_cycles_o <= '0;
      gather_cycles_o   <= '0;
      rd_ptr            <= '0;
      vec_cnt           <= '0;
      cyc               <= '0;
    end else begin
      done_o  <= 1'b0;
      cyc     <= cyc + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start_i) begin
            state   <= S_CLASSIFY;
            batch_n <= batch_n_i;
            cyc     <= '0;
            learn_q <= learn_phase_i && (sample_cnt == '0);
            if (learn_phase_i) begin
              sample_cnt <= (int'(sample_cnt) == SAMPLE_EVERY - 1) ? '0 : sample_cnt + 1'b1;
              if (sample_cnt == '0) n_learned_o <= n_learned_o + 1'b1;
            end
          end
        end
        S_CLASSIFY: begin
          if (n_popular_i + n_nonpop_i == batch_n) begin
            classify_cycles_o <= cyc;
            cyc        <= '0;
            rd_ptr     <= '0;
            hold_valid <= 1'b0;
            vec_cnt    <= '0;
            vec_need   <= 32'(n_nonpop_i) * TABLES;
            state      <= (n_nonpop_i == '0) ? S_DONE : S_GATHER;
            if (n_nonpop_i == '0) gather_cycles_o <= '0;
          end
        end
        S_GATHER: begin
          if (ed_re_o) begin
            rd_ptr     <= rd_ptr + 1'b1;
            hold_id    <= rd_ptr[IN_ID_W-1:0];
            hold_valid <= 1'b1;
          end else if (sch_valid_o && sch_ready_i) begin
            hold_valid <= 1'b0;
          end
          if (vec_sent_i) vec_cnt <= vec_cnt + 1'b1;
          if (vec_cnt + (vec_sent_i ? 32'd1 : 32'd0) == vec_need) begin
            state           <= S_DONE;
            gather_cycles_o <= cyc;
          end
        end
        S_DONE: begin
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
