// stage_m -- pipeline stage M: time-like (measurement) errors.
//
// One primitive per vertex n pairs S_i[n] (center) with S_{i-1}[n] (neighbor):
// the same ancilla active in two consecutive rounds is a measurement error.
// Both syndromes are cleared and, as in the paper, no data-qubit correction is
// assigned (the error sat on an ancilla that is reset every round). No two
// primitives share a vertex, so all run in parallel. Combinational; the
// pipeline register after the stage lives in pinball_pipeline.
// Interface shared by all stages: residual syndromes of the previous round
// (s_prev) and current round (s_cur) in and out, and the round's running
// correction vector (corr), which this stage passes through unchanged.
module stage_m import pinball_pkg::*; #(
  parameter  int D = 21,
  localparam int N = num_nodes(D),
  localparam int Q = num_data(D)
) (
  input  logic [N-1:0] s_prev_i,
  input  logic [N-1:0] s_cur_i,
  input  logic [Q-1:0] corr_i,
  output logic [N-1:0] s_prev_o,
  output logic [N-1:0] s_cur_o,
  output logic [Q-1:0] corr_o
);

  for (genvar n = 0; n < N; n++) begin : g_prim
    predecode_primitive u_prim (
      .center_in   (s_cur_i[n]),
      .neighbor_in (s_prev_i[n]),
      .center_out  (s_cur_o[n]),
      .neighbor_out(s_prev_o[n]),
      .correction  ()
    );
  end

  assign corr_o = corr_i;

endmodule
