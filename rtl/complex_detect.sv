// complex_detect -- OR-reduction that raises the `complex` flag.
//
// After all nine stages, any syndrome still active in S_{i-1} can no longer be
// paired with anything, so the round needs the full decoder. In the last round
// of a d-round block the residual S_i is checked as well, since no later round
// will come to pair with it. Combinational.
module complex_detect #(
  parameter int N = 220
) (
  input  logic [N-1:0] s_prev_res,
  input  logic [N-1:0] s_cur_res,
  input  logic         last_round,
  output logic         complex_o
);

  assign complex_o = (|s_prev_res) | (last_round & (|s_cur_res));

endmodule
