// pinball_pipeline -- the nine-stage Pinball predecoding pipeline.
//
// Stages, in order: M (time-like), B(1)-B(4) (bulk space-like), ST(1)-ST(2)
// (single-qubit spacetime-like), H (hook) and E (edge space-like). Each stage
// is a set of conflict-free primitives; a register follows each of the first
// eight, so a round travels through the pipeline in nine clock edges and every
// primitive sees the syndromes already cleared by earlier stages. What is left
// of S_i after stage E is written into the S_{i-1} register and becomes the
// previous round of the next round; after the last round of a block that
// register is cleared instead. complex_detect ORs the residual syndromes.
//
// Because round i+1 needs the residual of round i, one round is in flight at a
// time: in_ready is high only while the pipeline is empty, giving one round
// every nine cycles (the paper's "nine clock cycles" per round: 90 ns at
// 100 MHz, 720 ns at 12.5 MHz).
//
// Interface: in_valid/in_ready/in_syn deliver one round of syndromes
// (detection events, vertex numbering of pinball_pkg). Nine cycles after it is
// accepted, out_valid pulses for one cycle with out_corr (the round's data
// qubit corrections), out_complex, out_round (index of the round in its block)
// and out_last. Rounds are counted modulo ROUNDS = d, the paper's block length.
// Registers reset to zero (reset is active-low, synchronous); this, the
// handshake and the way corrections of several stages are merged (XOR, since
// two Z corrections on one qubit cancel) are this design's choices.
module pinball_pipeline import pinball_pkg::*; #(
  parameter  int D      = 21,
  parameter  int ROUNDS = D,
  localparam int N      = num_nodes(D),
  localparam int Q      = num_data(D),
  localparam int RW     = cnt_bits(ROUNDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N-1:0]  in_syn,
  output logic          out_valid,
  output logic          out_complex,
  output logic          out_last,
  output logic [RW-1:0] out_round,
  output logic [Q-1:0]  out_corr
);

  typedef struct packed {
    logic          valid;
    logic          last;
    logic [RW-1:0] round;
    logic [N-1:0]  s_prev;
    logic [N-1:0]  s_cur;
    logic [Q-1:0]  corr;
  } slot_t;

  // stage inputs / outputs: index k is stage k (0 = M .. 8 = E)
  logic [N-1:0] sp_i [NUM_STAGES];
  logic [N-1:0] sc_i [NUM_STAGES];
  logic [Q-1:0] co_i [NUM_STAGES];
  logic [N-1:0] sp_o [NUM_STAGES];
  logic [N-1:0] sc_o [NUM_STAGES];
  logic [Q-1:0] co_o [NUM_STAGES];

  slot_t         pipe_q [NUM_STAGES-1];  // register after stage k
  logic [N-1:0]  sprev_q;                // S_{i-1}
  logic [RW-1:0] round_q;
  logic          accept;
  logic          complex_w;

  // ---------------------------------------------------------------- stages
  stage_m  #(.D(D))             u_m   (.s_prev_i(sp_i[0]), .s_cur_i(sc_i[0]), .corr_i(co_i[0]),
                                       .s_prev_o(sp_o[0]), .s_cur_o(sc_o[0]), .corr_o(co_o[0]));
  stage_b  #(.D(D), .GROUP(1))  u_b1  (.s_prev_i(sp_i[1]), .s_cur_i(sc_i[1]), .corr_i(co_i[1]),
                                       .s_prev_o(sp_o[1]), .s_cur_o(sc_o[1]), .corr_o(co_o[1]));
  stage_b  #(.D(D), .GROUP(2))  u_b2  (.s_prev_i(sp_i[2]), .s_cur_i(sc_i[2]), .corr_i(co_i[2]),
                                       .s_prev_o(sp_o[2]), .s_cur_o(sc_o[2]), .corr_o(co_o[2]));
  stage_b  #(.D(D), .GROUP(3))  u_b3  (.s_prev_i(sp_i[3]), .s_cur_i(sc_i[3]), .corr_i(co_i[3]),
                                       .s_prev_o(sp_o[3]), .s_cur_o(sc_o[3]), .corr_o(co_o[3]));
  stage_b  #(.D(D), .GROUP(4))  u_b4  (.s_prev_i(sp_i[4]), .s_cur_i(sc_i[4]), .corr_i(co_i[4]),
                                       .s_prev_o(sp_o[4]), .s_cur_o(sc_o[4]), .corr_o(co_o[4]));
  stage_st #(.D(D), .GROUP(1))  u_st1 (.s_prev_i(sp_i[5]), .s_cur_i(sc_i[5]), .corr_i(co_i[5]),
                                       .s_prev_o(sp_o[5]), .s_cur_o(sc_o[5]), .corr_o(co_o[5]));
  stage_st #(.D(D), .GROUP(2))  u_st2 (.s_prev_i(sp_i[6]), .s_cur_i(sc_i[6]), .corr_i(co_i[6]),
                                       .s_prev_o(sp_o[6]), .s_cur_o(sc_o[6]), .corr_o(co_o[6]));
  stage_h  #(.D(D))             u_h   (.s_prev_i(sp_i[7]), .s_cur_i(sc_i[7]), .corr_i(co_i[7]),
                                       .s_prev_o(sp_o[7]), .s_cur_o(sc_o[7]), .corr_o(co_o[7]));
  stage_e  #(.D(D))             u_e   (.s_prev_i(sp_i[8]), .s_cur_i(sc_i[8]), .corr_i(co_i[8]),
                                       .s_prev_o(sp_o[8]), .s_cur_o(sc_o[8]), .corr_o(co_o[8]));

  // stage 0 reads the input and the S_{i-1} register, stage k>0 its register
  always_comb begin
    sp_i[0] = sprev_q;
    sc_i[0] = in_syn;
    co_i[0] = '0;
    for (int k = 1; k < NUM_STAGES; k++) begin
      sp_i[k] = pipe_q[k-1].s_prev;
      sc_i[k] = pipe_q[k-1].s_cur;
      co_i[k] = pipe_q[k-1].corr;
    end
  end

  complex_detect #(.N(N)) u_cplx (
    .s_prev_res(sp_o[NUM_STAGES-1]),
    .s_cur_res (sc_o[NUM_STAGES-1]),
    .last_round(pipe_q[NUM_STAGES-2].last),
    .complex_o (complex_w)
  );

  // ------------------------------------------------------------- control
  always_comb begin
    in_ready = 1'b1;
    for (int k = 0; k < NUM_STAGES - 1; k++) if (pipe_q[k].valid) in_ready = 1'b0;
  end
  assign accept = in_valid & in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_STAGES - 1; k++) pipe_q[k] <= '0;
      sprev_q     <= '0;
      round_q     <= '0;
      out_valid   <= 1'b0;
      out_complex <= 1'b0;
      out_last    <= 1'b0;
      out_round   <= '0;
      out_corr    <= '0;
    end else begin
      // register after stage M
      pipe_q[0].valid  <= accept;
      pipe_q[0].last   <= (round_q == RW'(ROUNDS - 1));
      pipe_q[0].round  <= round_q;
      pipe_q[0].s_prev <= sp_o[0];
      pipe_q[0].s_cur  <= sc_o[0];
      pipe_q[0].corr   <= co_o[0];
      if (accept) round_q <= (round_q == RW'(ROUNDS - 1)) ? '0 : round_q + 1'b1;
      // registers after stages B(1) .. H
      for (int k = 1; k < NUM_STAGES - 1; k++) begin
        pipe_q[k].valid  <= pipe_q[k-1].valid;
        pipe_q[k].last   <= pipe_q[k-1].last;
        pipe_q[k].round  <= pipe_q[k-1].round;
        pipe_q[k].s_prev <= sp_o[k];
        pipe_q[k].s_cur  <= sc_o[k];
        pipe_q[k].corr   <= co_o[k];
      end
      // after stage E: results and the S_{i-1} feedback
      out_valid <= pipe_q[NUM_STAGES-2].valid;
      if (pipe_q[NUM_STAGES-2].valid) begin
        out_complex <= complex_w;
        out_last    <= pipe_q[NUM_STAGES-2].last;
        out_round   <= pipe_q[NUM_STAGES-2].round;
        out_corr    <= co_o[NUM_STAGES-1];
        sprev_q     <= pipe_q[NUM_STAGES-2].last ? '0 : sc_o[NUM_STAGES-1];
      end
    end
  end

  // one round in flight: a new round is never accepted while one is inside
  a_one_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
                                    accept |=> !in_ready [*8]);

endmodule
