// dvfs_controller -- workload-aware performance scaling state machine.
//
// Only the last (d-th) round of a block is on the latency-critical path, so
// the first d-1 rounds run in low-power (LP) mode and only the last one in
// high-performance (HP) mode. When the pipeline finishes the penultimate round
// the controller switches the supply multiplexer and the body-bias
// multiplexers to their HP inputs, waits SETTLE_CYCLES for the supply to
// settle (the paper allows 200 ns; three cycles of the 80 ns LP clock), and
// then selects the fast clock. When the last round is done it drops the clock
// first and, one cycle later, the supply and body bias, returning to LP.
// From the cycle a switch is decided until it is complete `hold` is high and
// no new round may enter the pipeline (this interlock is this design's
// choice; the paper only budgets the 200 ns inside the round period).
// Inputs: round_done (one-cycle pulse per finished round), round_idx (index
// of that round in its block). Outputs: vdd_sel, bb_sel, clk_sel, each
// MODE_LP or MODE_HP, decoded from the state register and reset to MODE_LP;
// hold, which is also raised combinationally in the cycle a switch is
// decided so that no round slips in under the old operating point.
module dvfs_controller import pinball_pkg::*; #(
  parameter  int ROUNDS        = 21,
  parameter  int SETTLE_CYCLES = 3,
  localparam int RW            = cnt_bits(ROUNDS),
  localparam int CW            = cnt_bits(SETTLE_CYCLES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          round_done,
  input  logic [RW-1:0] round_idx,
  output pmode_t        vdd_sel,
  output pmode_t        bb_sel,
  output pmode_t        clk_sel,
  output logic          hold
);

  typedef enum logic [1:0] {
    S_LP       = 2'd0,   // rounds 0 .. d-2
    S_RAISE    = 2'd1,   // HP supply selected, waiting for it to settle
    S_HP       = 2'd2,   // round d-1
    S_LOWER    = 2'd3    // slow clock selected, supply about to drop
  } state_t;

  state_t        state_q;
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_LP;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_LP: if (round_done && round_idx == RW'(ROUNDS - 2)) begin
          state_q <= S_RAISE;
          cnt_q   <= '0;
        end
        S_RAISE: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(SETTLE_CYCLES - 1)) state_q <= S_HP;
        end
        S_HP:    if (round_done && round_idx == RW'(ROUNDS - 1)) state_q <= S_LOWER;
        S_LOWER: state_q <= S_LP;
        default: state_q <= S_LP;
      endcase
    end
  end

  always_comb begin
    vdd_sel = (state_q == S_LP) ? MODE_LP : MODE_HP;
    bb_sel  = vdd_sel;
    clk_sel = (state_q == S_HP) ? MODE_HP : MODE_LP;
    // also in the cycle the switch is decided, so the next round cannot slip in
    hold    = (state_q == S_RAISE) || (state_q == S_LOWER) ||
              (state_q == S_LP && round_done && round_idx == RW'(ROUNDS - 2)) ||
              (state_q == S_HP && round_done && round_idx == RW'(ROUNDS - 1));
  end

  // the fast clock is never selected without the high supply
  a_clk_needs_vdd: assert property (@(posedge clk) disable iff (!rst_n)
                                    clk_sel == MODE_HP |-> vdd_sel == MODE_HP);

endmodule
