// correction_buffer -- the d x d correction buffer of one logical qubit.
//
// Corrections are applied once per block of d rounds, so the per-round
// correction vectors of the pipeline are accumulated here, one bit per data
// qubit, and handed out together at the end of the block. Accumulation is by
// XOR (two Z corrections on the same qubit cancel); the block's complex flag
// is the OR of its rounds' flags. When blk_complex is set the corrections are
// not to be used: the full decoder at room temperature decodes the block from
// its raw syndromes instead.
// Timing: round_valid/round_last/round_complex/round_corr come from the
// pipeline; one cycle after the last round's round_valid, blk_valid pulses for
// one cycle and blk_corr/blk_complex hold the block result until the next one.
// The paper names the buffer and its size; accumulation rule and interface are
// this design's choices.
module correction_buffer #(
  parameter  int D = 21,
  localparam int Q = D * D
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         round_valid,
  input  logic         round_last,
  input  logic         round_complex,
  input  logic [Q-1:0] round_corr,
  output logic         blk_valid,
  output logic         blk_complex,
  output logic [Q-1:0] blk_corr
);

  logic [Q-1:0] acc_q;
  logic         cplx_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q       <= '0;
      cplx_q      <= 1'b0;
      blk_valid   <= 1'b0;
      blk_complex <= 1'b0;
      blk_corr    <= '0;
    end else begin
      blk_valid <= 1'b0;
      if (round_valid) begin
        if (round_last) begin
          blk_valid   <= 1'b1;
          blk_corr    <= acc_q ^ round_corr;
          blk_complex <= cplx_q | round_complex;
          acc_q       <= '0;
          cplx_q      <= 1'b0;
        end else begin
          acc_q  <= acc_q ^ round_corr;
          cplx_q <= cplx_q | round_complex;
        end
      end
    end
  end

endmodule
