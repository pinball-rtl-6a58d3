// syndrome_buffer -- raw syndrome store and offload to the full decoder.
//
// When any round of a block is complex, the paper sends the original,
// unmodified syndromes of all d rounds of the block to the room-temperature
// decoder. This buffer keeps them. It has two banks of d rounds each: rounds
// of a block are written into one bank while the other bank waits for the
// pipeline's verdict on the previous block or is being streamed out. On
// blk_done the oldest waiting bank is freed (blk_complex = 0) or queued for
// offload (blk_complex = 1); a queued bank is sent round by round on the
// off_valid/off_ready stream, off_round giving the round index and off_last
// marking the block's final round. wr_ready is low only if the bank to be
// written next is still waiting or sending (the write is then to be held).
// Two banks, the handshake and the stream format are this design's choices;
// the paper gives only the function.
module syndrome_buffer import pinball_pkg::*; #(
  parameter  int D  = 21,
  localparam int N  = num_nodes(D),
  localparam int RW = cnt_bits(D)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [N-1:0]  wr_syn,
  output logic          wr_ready,
  input  logic          blk_done,
  input  logic          blk_complex,
  output logic          off_valid,
  input  logic          off_ready,
  output logic [N-1:0]  off_syn,
  output logic [RW-1:0] off_round,
  output logic          off_last
);

  typedef enum logic [1:0] {
    BANK_FREE = 2'd0,   // empty or being filled
    BANK_WAIT = 2'd1,   // full, verdict pending
    BANK_SEND = 2'd2    // complex block, to be / being offloaded
  } bank_state_t;

  logic [N-1:0]  mem [2][D];
  bank_state_t   state_q [2];
  logic          wr_bank_q, dec_bank_q, off_bank_q, off_active_q;
  logic [RW-1:0] wr_round_q, off_round_q;

  assign wr_ready  = (state_q[wr_bank_q] == BANK_FREE);
  assign off_valid = off_active_q;
  assign off_syn   = mem[off_bank_q][off_round_q];
  assign off_round = off_round_q;
  assign off_last  = (off_round_q == RW'(D - 1));

  always_ff @(posedge clk) begin
    if (wr_en && wr_ready) mem[wr_bank_q][wr_round_q] <= wr_syn;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q[0]   <= BANK_FREE;
      state_q[1]   <= BANK_FREE;
      wr_bank_q    <= 1'b0;
      dec_bank_q   <= 1'b0;
      off_bank_q   <= 1'b0;
      off_active_q <= 1'b0;
      wr_round_q   <= '0;
      off_round_q  <= '0;
    end else begin
      // fill
      if (wr_en && wr_ready) begin
        if (wr_round_q == RW'(D - 1)) begin
          wr_round_q         <= '0;
          state_q[wr_bank_q] <= BANK_WAIT;
          wr_bank_q          <= ~wr_bank_q;
        end else begin
          wr_round_q <= wr_round_q + 1'b1;
        end
      end
      // verdict on the oldest full bank
      if (blk_done) begin
        state_q[dec_bank_q] <= blk_complex ? BANK_SEND : BANK_FREE;
        dec_bank_q          <= ~dec_bank_q;
      end
      // offload
      if (off_active_q) begin
        if (off_ready) begin
          if (off_round_q == RW'(D - 1)) begin
            off_active_q        <= 1'b0;
            off_round_q         <= '0;
            state_q[off_bank_q] <= BANK_FREE;
          end else begin
            off_round_q <= off_round_q + 1'b1;
          end
        end
      end else if (state_q[~off_bank_q] == BANK_SEND) begin
        off_active_q <= 1'b1;
        off_bank_q   <= ~off_bank_q;
      end else if (state_q[off_bank_q] == BANK_SEND) begin
        off_active_q <= 1'b1;
      end
    end
  end

  // a verdict only ever arrives for a full bank
  a_verdict_on_full: assert property (@(posedge clk) disable iff (!rst_n)
                                      blk_done |-> state_q[dec_bank_q] == BANK_WAIT);

endmodule
